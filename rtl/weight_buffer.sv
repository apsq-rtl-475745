// weight_buffer: on-chip weight buffer.
//
// A synchronous SRAM with one write and one read port. One word is one weight
// tile T_w of Pci x Pco INT8 values, laid out [ci][co], so one read loads the
// whole PE array. Reads have one cycle of latency and the read data holds
// while rd_en is low. The 128 KB capacity is the paper's evaluated
// configuration; the word organisation and timing are this design's choice.
module weight_buffer
  import apsq_pkg::*;
#(
  parameter int unsigned PCI   = 8,
  parameter int unsigned PCO   = 8,
  parameter int unsigned DEPTH = 2048,    // 128 KB / (8*8 bytes)
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                                   clk,
  input  logic                                   wr_en,
  input  logic [AW-1:0]                          wr_addr,
  input  logic [PCI-1:0][PCO-1:0][DATA_W-1:0]    wr_data,
  input  logic                                   rd_en,
  input  logic [AW-1:0]                          rd_addr,
  output logic [PCI-1:0][PCO-1:0][DATA_W-1:0]    rd_data
);
  logic [PCI*PCO*DATA_W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule

// ifmap_buffer: on-chip input feature map buffer.
//
// A single-port-read, single-port-write synchronous SRAM. One word is one
// ifmap tile T_i of Po x Pci INT8 values, so one read feeds the whole PE
// array for a cycle. The write port is filled from off-chip memory; the read
// port serves the PE array with one cycle of latency, and the read data holds
// while rd_en is low (the pipeline relies on this when it stalls).
// The 256 KB capacity is the paper's evaluated configuration; the word
// organisation and the port timing are this design's choice.
module ifmap_buffer
  import apsq_pkg::*;
#(
  parameter int unsigned PO    = 16,
  parameter int unsigned PCI   = 8,
  parameter int unsigned DEPTH = 2048,    // 256 KB / (16*8 bytes)
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                                   clk,
  input  logic                                   wr_en,
  input  logic [AW-1:0]                          wr_addr,
  input  logic [PO-1:0][PCI-1:0][DATA_W-1:0]     wr_data,
  input  logic                                   rd_en,
  input  logic [AW-1:0]                          rd_addr,
  output logic [PO-1:0][PCI-1:0][DATA_W-1:0]     rd_data
);
  logic [PO*PCI*DATA_W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule

// psum_buffer: the PSUM buffer of the APSQ engine, four SRAM banks of INT8 PSUMs.
//
// Each bank holds DEPTH words; a word is one PSUM tile position: LANES INT8
// values (Po x Pco). All four banks are read at the same address in the same
// cycle, which is what lets an APSQ step fetch up to four earlier PSUM tiles
// at once. One bank at a time is written, chosen by wr_bank (the engine's
// write demultiplexer). Reads are synchronous with one cycle of latency; a
// read and a write of the same word in one cycle return the old value. The
// read data holds its value while rd_en is low.
// Four banks follow the paper. Their size is this design's assumption: the
// four banks together form the 256 KB output buffer of the evaluated
// configuration, 64 KB per bank, which is 512 words of 128 bytes.
module psum_buffer
  import apsq_pkg::*;
#(
  parameter int unsigned LANES = 128,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                                      clk,
  input  logic                                      rd_en,
  input  logic [AW-1:0]                             rd_addr,
  output logic [NBANKS-1:0][LANES-1:0][DATA_W-1:0]  rd_data,
  input  logic                                      wr_en,
  input  logic [1:0]                                wr_bank,
  input  logic [AW-1:0]                             wr_addr,
  input  logic [LANES-1:0][DATA_W-1:0]              wr_data
);
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    logic [LANES*DATA_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (rd_en) rd_data[b] <= mem[rd_addr];
      if (wr_en && wr_bank == 2'(b)) mem[wr_addr] <= wr_data;
    end
  end
endmodule

// tb_psum_buffer: random writes to the four banks and reads of all banks at
// one address, checked against a shadow copy; also checks the one-cycle read
// latency, that read data holds while rd_en is low, and that a same-cycle
// read and write of a word returns the old value.
module tb_psum_buffer;
  import apsq_pkg::*;
  localparam int L = 4, D = 16;
  logic clk = 0;
  logic rd_en, wr_en;
  logic [3:0] rd_addr, wr_addr;
  logic [1:0] wr_bank;
  logic [NBANKS-1:0][L-1:0][DATA_W-1:0] rd_data;
  logic [L-1:0][DATA_W-1:0] wr_data;
  logic [L*DATA_W-1:0] shadow [NBANKS][D];
  logic [NBANKS-1:0][L-1:0][DATA_W-1:0] expd;
  int checks = 0, failures = 0;

  psum_buffer #(.LANES(L), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; wr_en = 0; rd_addr = 0; wr_addr = 0; wr_bank = 0; wr_data = '0;
    for (int b = 0; b < NBANKS; b++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = 2'(b); wr_addr = 4'(a); wr_data = {$urandom()};
        shadow[b][a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 4'($urandom_range(0, D - 1));
      wr_en = $urandom_range(0, 1); wr_bank = 2'($urandom_range(0, 3));
      wr_addr = ($urandom_range(0, 3) == 0) ? rd_addr : 4'($urandom_range(0, D - 1));
      wr_data = {$urandom()};
      for (int b = 0; b < NBANKS; b++) expd[b] = shadow[b][rd_addr];   // old value
      if (wr_en) shadow[wr_bank][wr_addr] = wr_data;
      @(posedge clk); #1;
      checks++;
      if (rd_data != expd) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h exp %h", rd_addr, rd_data, expd);
      end
      // hold while rd_en is low
      @(negedge clk); rd_en = 0; wr_en = 0; rd_addr = rd_addr + 1;
      @(posedge clk); #1;
      checks++; if (rd_data != expd) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

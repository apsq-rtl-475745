// tb_weight_buffer: fills the weight buffer with random tiles, then reads random
// words while writing others, and checks the data, the one-cycle read
// latency and that the read data holds while rd_en is low.
module tb_weight_buffer;
  import apsq_pkg::*;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [4:0] wr_addr, rd_addr;
  logic [2:0][1:0][DATA_W-1:0] wr_data, rd_data, expd;
  logic [2:0][1:0][DATA_W-1:0] shadow [32];
  int checks = 0, failures = 0;

  weight_buffer #(.PCI(3), .PCO(2), .DEPTH(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    for (int a = 0; a < 32; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 5'(a); wr_data = {$urandom(), $urandom()};
      shadow[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      rd_en = 1; rd_addr = 5'($urandom_range(0, 31));
      wr_en = $urandom_range(0, 1); wr_addr = 5'($urandom_range(0, 31)); wr_data = {$urandom(), $urandom()};
      expd = shadow[rd_addr];
      if (wr_en) shadow[wr_addr] = wr_data;
      @(posedge clk); #1;
      checks++;
      if (rd_data != expd) begin
        failures++;
        if (failures < 10) $display("addr %0d: got %h exp %h", rd_addr, rd_data, expd);
      end
      @(negedge clk); rd_en = 0; wr_en = 0; rd_addr = rd_addr + 1;
      @(posedge clk); #1;
      checks++; if (rd_data != expd) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

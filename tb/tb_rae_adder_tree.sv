// tb_rae_adder_tree: drives random bank words every cycle with random s0/s1
// and checks each sum, and that it appears exactly two cycles later.
module tb_rae_adder_tree;
  import apsq_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  logic [NBANKS-1:0][L-1:0][PSUM_W-1:0] d;
  logic [1:0] s0;
  logic s1;
  logic out_valid;
  logic [L-1:0][PSUM_W-1:0] sum;
  int checks = 0, failures = 0, cyc = 0;
  logic [L-1:0][PSUM_W-1:0] expq[$];
  int   tq[$];

  rae_adder_tree #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; d = '0; s0 = 0; s1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      s0 = 2'($urandom_range(0, 2));
      s1 = 1'($urandom_range(0, 1));
      for (int b = 0; b < NBANKS; b++)
        for (int l = 0; l < L; l++) d[b][l] = PSUM_W'(int'($urandom_range(0, 200000)) - 100000);
      if (in_valid) begin
        logic [L-1:0][PSUM_W-1:0] e;
        for (int l = 0; l < L; l++) begin
          int v;
          v = int'(signed'(d[0][l]));
          if (s0 != 2'b00) v += int'(signed'(d[1][l]));
          if (s0 == 2'b10) v += int'(signed'(d[2][l])) + (s1 ? int'(signed'(d[3][l])) : 0);
          e[l] = PSUM_W'(v);
        end
        expq.push_back(e);
        tq.push_back(cyc + 2);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      checks++;
      if (expq.size() == 0) failures++;
      else begin
        logic [L-1:0][PSUM_W-1:0] e;
        int t;
        e = expq.pop_front();
        t = tq.pop_front();
        if (sum != e || cyc != t) begin
          failures++;
          if (failures < 10) $display("cyc %0d (exp %0d): sum %h exp %h", cyc, t, sum, e);
        end
      end
    end
  end
endmodule

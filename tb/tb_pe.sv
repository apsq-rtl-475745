// tb_pe: random signed INT8 vectors, including the extreme values, checked
// against a dot product computed with integers.
module tb_pe;
  import apsq_pkg::*;
  localparam int K = 8;
  logic [K-1:0][DATA_W-1:0] x, w;
  logic [PSUM_W-1:0] p;
  int checks = 0, failures = 0;

  pe #(.PCI(K)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int e;
      e = 0;
      for (int k = 0; k < K; k++) begin
        x[k] = (it < 2) ? 8'h80 : DATA_W'($urandom());
        w[k] = (it == 0) ? 8'h80 : (it == 1) ? 8'h7f : DATA_W'($urandom());
        e += int'(signed'(x[k])) * int'(signed'(w[k]));
      end
      #1;
      checks++;
      if (int'(signed'(p)) != e) begin
        failures++;
        if (failures < 10) $display("p=%0d exp=%0d", signed'(p), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

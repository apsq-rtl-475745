// tb_dequantizer: checks INT8 -> 32-bit dequantization (multiply by 2^e)
// and the zeroing enable, for random values and exponents.
module tb_dequantizer;
  import apsq_pkg::*;
  import apsq_tb_pkg::*;
  localparam int L = 8;
  logic [L-1:0][DATA_W-1:0] q;
  logic [SHIFT_W-1:0]       shift;
  logic                     en;
  logic [L-1:0][PSUM_W-1:0] x;
  int checks = 0, failures = 0;

  dequantizer #(.LANES(L)) dut (.q, .shift, .en, .x);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 1000; it++) begin
      shift = SHIFT_W'($urandom_range(0, 24));
      en    = ($urandom_range(0, 3) != 0);
      for (int l = 0; l < L; l++) q[l] = DATA_W'($urandom());
      #1;
      for (int l = 0; l < L; l++) begin
        longint e;
        e = en ? ref_deq(int'(signed'(q[l])), int'(shift)) : 0;
        checks++;
        if (longint'(signed'(x[l])) != e) begin
          failures++;
          if (failures < 10) $display("q=%0d e=%0d en=%0b x=%0d exp=%0d", signed'(q[l]), shift, en, signed'(x[l]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

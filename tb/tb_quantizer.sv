// tb_quantizer: checks the shift-based INT8 quantizer against a
// floor-division reference, for random PSUMs and shifts, including values
// that must be clipped and exact halves that must round up.
module tb_quantizer;
  import apsq_pkg::*;
  import apsq_tb_pkg::*;
  localparam int L = 8;
  logic [L-1:0][PSUM_W-1:0] x;
  logic [SHIFT_W-1:0]       shift;
  logic [L-1:0][DATA_W-1:0] q;
  logic [L-1:0]             sat;
  int checks = 0, failures = 0, nsat = 0;

  quantizer #(.LANES(L)) dut (.x, .shift, .q, .sat);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      shift = SHIFT_W'($urandom_range(0, 20));
      for (int l = 0; l < L; l++) begin
        int sel;
        sel = $urandom_range(0, 3);
        unique case (sel)
          0: x[l] = $urandom();                                   // any 32-bit value
          1: x[l] = PSUM_W'(int'($urandom_range(0, 4000)) - 2000);  // small
          2: x[l] = PSUM_W'((int'($urandom_range(0, 300)) - 150) << shift);
          default: x[l] = PSUM_W'(((int'($urandom_range(0, 60)) - 30) << shift) + ((shift > 0) ? (1 << (shift - 1)) : 0));
        endcase
      end
      #1;
      for (int l = 0; l < L; l++) begin
        int exp_q;
        longint xv;
        bit exp_sat;
        xv = longint'(signed'(x[l]));
        exp_q = ref_quant(xv, int'(shift));
        exp_sat = (exp_q == 127 || exp_q == -128) &&
                  ((xv + ((shift > 0) ? (longint'(1) << (shift - 1)) : 0)) >= (longint'(128) << shift) ||
                   (xv + ((shift > 0) ? (longint'(1) << (shift - 1)) : 0)) <  -(longint'(128) << shift));
        checks++;
        if (int'(signed'(q[l])) != exp_q || sat[l] != exp_sat) begin
          failures++;
          if (failures < 10) $display("lane %0d x=%0d e=%0d q=%0d exp=%0d sat=%0b/%0b", l, xv, shift, signed'(q[l]), exp_q, sat[l], exp_sat);
        end
        if (exp_sat) nsat++;
      end
    end
    // exact halves round up: 3/2 -> 2, -3/2 -> -1
    x = '0; shift = 1; x[0] = 32'd3; x[1] = -32'sd3; x[2] = 32'd1; x[3] = -32'sd1;
    #1;
    checks++; if (signed'(q[0]) != 8'sd2 || signed'(q[1]) != -8'sd1 || signed'(q[2]) != 8'sd1 || signed'(q[3]) != 8'sd0) failures++;
    checks++; if (nsat == 0) failures++;   // clipping was exercised
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// quantizer: shifter-based PSUM quantizer of the APSQ engine (the ">>" box).
//
// Each of LANES full-precision PSUMs is divided by its power-of-two scale
// alpha_i = 2^shift by an arithmetic right shift, rounded to nearest (halves
// round up) and clipped to the signed INT8 range [-128, 127]. One shift
// amount serves the whole tile, because a scale belongs to a PSUM tile index.
// The paper gives the shift-based quantizer and the INT8 range; the rounding
// rule (round-half-up) is this design's choice. sat[] flags lanes that were
// clipped, for monitoring. Purely combinational.
module quantizer
  import apsq_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic [LANES-1:0][PSUM_W-1:0]  x,      // signed PSUMs
  input  logic [SHIFT_W-1:0]            shift,  // exponent of alpha_i
  output logic [LANES-1:0][DATA_W-1:0]  q,      // signed INT8 results
  output logic [LANES-1:0]              sat     // lane was clipped
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [PSUM_W:0] xe, rnd, sh;
    always_comb begin
      q[l]   = quant8(signed'(x[l]), shift);
      xe     = {x[l][PSUM_W-1], x[l]};
      rnd    = (shift == '0) ? '0 : ((PSUM_W+1)'(1) <<< (shift - 1'b1));
      sh     = (xe + rnd) >>> shift;
      sat[l] = (sh > (PSUM_W+1)'(signed'(127))) || (sh < -(PSUM_W+1)'(signed'(128)));
    end
  end
endmodule

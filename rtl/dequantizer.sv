// dequantizer: shifter-based PSUM dequantizer of the APSQ engine (a "<<" box).
//
// Takes a word of LANES stored INT8 PSUMs read from one PSUM bank and returns
// alpha * q = q << shift, sign-extended to the PSUM width, so that stored
// values can be added to a new full-precision PSUM tile. An enable of 0 gives
// zeros: it masks a bank that holds nothing of the current group (the start of
// an output, or a final group shorter than gs). The shift-based dequantizer is
// the paper's; the masking input is this design's way of treating
// AP_{i<0} = 0 and the short final group of the grouping algorithm.
// Shifts above 24 overflow the 32-bit result and are not used. Combinational.
module dequantizer
  import apsq_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic [LANES-1:0][DATA_W-1:0]  q,      // signed INT8 values from a bank
  input  logic [SHIFT_W-1:0]            shift,  // exponent of the stored tile's alpha
  input  logic                          en,     // 0: output zeros
  output logic [LANES-1:0][PSUM_W-1:0]  x       // signed dequantized values
);
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb x[l] = en ? dequant8(signed'(q[l]), shift) : '0;
  end
endmodule

// apsq_pkg: sizes, types and shared arithmetic for the APSQ accelerator.
//
// The accelerator computes INT8 x INT8 tiled matrix products (W8A8) and keeps
// its partial sums (PSUMs) as INT8 values with power-of-two scales. A scale is
// stored as its base-2 exponent e (alpha = 2^e), so quantizing is an
// arithmetic right shift by e with rounding and clipping, and dequantizing is a
// left shift by e. The group-size configuration table (gs -> s0, s1) is the
// one printed in the engine's figure; the encodings of the dataflow mode and
// of gs on the wires are this design's own choice.
// A lint of a module that imports this package but not every constant (the
// quantizer has no use for NBANKS) reports that constant as unused; that is
// expected for a shared package and left as it is.
package apsq_pkg;

  localparam int unsigned DATA_W  = 8;   // INT8 weights, activations and stored PSUMs
  localparam int unsigned PSUM_W  = 32;  // full-precision PSUM leaving the PE array
  localparam int unsigned SHIFT_W = 5;   // exponent of a power-of-two scale, 0..31
  localparam int unsigned NBANKS  = 4;   // PSUM banks, so gs = 1..4
  localparam int unsigned GS_W    = 3;   // gs is carried as its plain value 1..4

  // Dataflow of the tile loop nest run by the top controller.
  typedef enum logic {
    DF_WS = 1'b0,   // weight stationary: one weight tile reused over all ifmap tiles
    DF_IS = 1'b1    // input stationary: one ifmap tile reused over all weight tiles
  } dataflow_e;

  // Static multiplexer encodings of the engine.
  typedef struct packed {
    logic [1:0] s0;  // 00: bank0 only, 01: bank0+bank1, 10: three- or four-bank sum
    logic       s1;  // 0: bank2 joins the sum, 1: bank2+bank3 join the sum
  } rae_cfg_t;

  // Configuration table of the engine figure: gs 1 2 3 4 / s0 00 01 10 10 /
  // s1 x x 0 1. The "don't care" entries are driven as 0.
  function automatic rae_cfg_t rae_cfg_lookup(input logic [GS_W-1:0] gs);
    rae_cfg_t c;
    unique case (gs)
      3'd1:    c = '{s0: 2'b00, s1: 1'b0};
      3'd2:    c = '{s0: 2'b01, s1: 1'b0};
      3'd3:    c = '{s0: 2'b10, s1: 1'b0};
      default: c = '{s0: 2'b10, s1: 1'b1};
    endcase
    return c;
  endfunction

  // Q_8(x / 2^e): arithmetic shift right with round-half-up, then clip to
  // [-128, 127].
  function automatic logic signed [DATA_W-1:0] quant8(input logic signed [PSUM_W-1:0] x,
                                                      input logic [SHIFT_W-1:0] e);
    logic signed [PSUM_W:0] xe, rnd, sh;
    xe  = {x[PSUM_W-1], x};
    rnd = (e == '0) ? '0 : ((PSUM_W+1)'(1) <<< (e - 1'b1));
    sh  = (xe + rnd) >>> e;
    if (sh > (PSUM_W+1)'(signed'(127)))       return DATA_W'(127);
    else if (sh < -(PSUM_W+1)'(signed'(128))) return DATA_W'(-128);
    else                                      return sh[DATA_W-1:0];
  endfunction

  // alpha * q with alpha = 2^e: sign-extend and shift left.
  function automatic logic signed [PSUM_W-1:0] dequant8(input logic signed [DATA_W-1:0] q,
                                                        input logic [SHIFT_W-1:0] e);
    return PSUM_W'(q) <<< e;
  endfunction

endpackage

// rae_ctrl: controller of the Reconfigurable APSQ Engine (RAE CTRL).
//
// It turns the group size gs into the engine's three select signals and keeps
// the state of the grouping algorithm across PSUM tiles:
//  * s0, s1 come from the static configuration table (see apsq_pkg).
//  * A group counter cnt counts 0..gs-1 and wraps, as in the figure's
//    counter (+1, compare with gs-1, wrap to 0). It starts at gs-1. The
//    dynamic encoding s2 = (cnt == gs-1) selects APSQ (1) or plain PSUM
//    quantization (0). cnt also names the bank the tile is written to, so an
//    APSQ result lands in bank gs-1 (bank3 for gs=4, bank0 for gs=1) and the
//    gs-1 quantized PSUMs of a group land in banks 0..gs-2.
//  * The tile of index np-1 is the output tile: it always performs APSQ
//    (s2 forced to 1), is not written back (final=1) and ends the output;
//    the state then returns to its start for the next output.
//  * A valid bit per bank says whether the bank holds a member of the
//    current group; invalid banks are masked to zero, which gives
//    AP_{-1} = 0 for the first tile and a short final group.
//  * The register list of scale exponents alpha_i (one per tile index,
//    written by the host) supplies the quantizer shift of the current tile
//    and, through the tile index recorded per bank, each bank's dequantizer
//    shift.
// The state advances when the last word of a tile is accepted (adv &&
// tile_last); all outputs are valid for every word of the current tile.
// The paper gives the counter, s0/s1/s2 and the bank order for gs=1 and
// gs=4; the per-bank valid bits, the forced final APSQ and the per-bank tile
// index are this design's way of carrying out Algorithm 1 exactly.
// Lint note: rst_n also disables the range assertions, which lint reports
// as a sync/async mix on the reset net; all flops reset asynchronously.
module rae_ctrl
  import apsq_pkg::*;
#(
  parameter int unsigned MAX_NP = 2048,  // longest accumulation in tiles, a power of two
  localparam int unsigned NP_W  = $clog2(MAX_NP + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [GS_W-1:0]           cfg_gs,       // 1..4, static during an operation
  input  logic [NP_W-1:0]           cfg_np,       // tiles per output, 1..MAX_NP
  input  logic                      restart,      // return to the start state
  // register list of scale exponents
  input  logic                      alpha_we,
  input  logic [NP_W-2:0]           alpha_idx,
  input  logic [SHIFT_W-1:0]        alpha_val,
  // progress
  input  logic                      adv,          // a word of the current tile is accepted
  input  logic                      tile_last,    // ... and it is the tile's last word
  // selects and scales for the current tile
  output logic [1:0]                s0,
  output logic                      s1,
  output logic                      s2,
  output logic [1:0]                wr_bank,
  output logic                      final_tile,
  output logic [NP_W-2:0]           tile_idx,
  output logic [SHIFT_W-1:0]        q_shift,
  output logic [NBANKS-1:0][SHIFT_W-1:0] dq_shift,
  output logic [NBANKS-1:0]         bank_en
);
  logic [SHIFT_W-1:0]    alpha [MAX_NP];
  logic [1:0]            cnt;
  logic [NP_W-2:0]       idx;
  logic [NBANKS-1:0]     bvalid;
  logic [NBANKS-1:0][NP_W-2:0] btile;
  logic [1:0]            gsm1;
  rae_cfg_t              cfg;

  assign gsm1       = 2'(cfg_gs - 1'b1);
  assign cfg        = rae_cfg_lookup(cfg_gs);
  assign s0         = cfg.s0;
  assign s1         = cfg.s1;
  assign final_tile = (NP_W'(idx) == cfg_np - 1'b1);
  assign s2         = (cnt == gsm1) || final_tile;
  assign wr_bank    = cnt;
  assign tile_idx   = idx;
  assign q_shift    = alpha[idx];
  assign bank_en    = bvalid;
  for (genvar b = 0; b < NBANKS; b++) begin : g_dq
    assign dq_shift[b] = alpha[btile[b]];
  end

  always_ff @(posedge clk) begin
    if (alpha_we) alpha[alpha_idx] <= alpha_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= 2'd3;
      idx    <= '0;
      bvalid <= '0;
      btile  <= '0;
    end else if (restart) begin
      cnt    <= gsm1;
      idx    <= '0;
      bvalid <= '0;
    end else if (adv && tile_last) begin
      if (final_tile) begin
        cnt    <= gsm1;
        idx    <= '0;
        bvalid <= '0;
      end else begin
        cnt <= (cnt == gsm1) ? 2'd0 : cnt + 2'd1;
        idx <= idx + 1'b1;
        btile[cnt] <= idx;
        // An APSQ tile consumes the whole group and leaves only its own result.
        bvalid <= s2 ? (NBANKS'(1) << cnt) : (bvalid | (NBANKS'(1) << cnt));
      end
    end
  end

  a_gs_range: assert property (@(posedge clk) disable iff (!rst_n)
    adv |-> (cfg_gs >= 3'd1 && cfg_gs <= 3'd4));
  a_np_range: assert property (@(posedge clk) disable iff (!rst_n)
    adv |-> (cfg_np >= 1 && 32'(cfg_np) <= MAX_NP));
endmodule

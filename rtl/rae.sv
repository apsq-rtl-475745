// rae: Reconfigurable APSQ Engine.
//
// The engine receives the PE array's full-precision PSUM tiles, one word
// (LANES = Po*Pco lanes of 32 bits) per cycle, and stores every intermediate
// result as INT8 in its PSUM buffer instead of as INT32. For each word it
//  1. reads the same address of all four PSUM banks,
//  2. dequantizes each bank (<< its tile's alpha), masking banks that hold no
//     member of the current group,
//  3. sums the banks of the group in the two-stage adder pipeline; s0/s1 pick
//     1, 2, 3 or 4 banks for gs = 1..4,
//  4. adds that sum to the incoming PSUM if s2 = 1 (APSQ), or adds 0 if
//     s2 = 0 (plain PSUM quantization),
//  5. quantizes (>> alpha_i, round, clip to INT8) and writes the result to
//     bank wr_bank, or, for the last tile of an accumulation, sends it out as
//     the INT8 output tile with its scale exponent.
// This is Algorithm 1 of the grouping strategy: with group size gs, one APSQ
// step per gs tiles and plain quantization in between.
//
// Interface: in_valid/in_ready handshake with in_addr (bank word address),
// in_tag (carried unchanged to the output), in_last (last word of the tile).
// Timing: a word is accepted per cycle; its result is written three cycles
// later (bank read, adder stage 1, adder stage 2 with the final
// add/quantize in the same cycle as the write). For the last tile the
// result goes to the o_* output registers instead, so o_valid rises four
// cycles after the word was accepted. A word whose address is still
// in flight in the pipeline is held off (in_ready = 0) until the earlier
// write has landed; this read-after-write stall only occurs when a tile has
// fewer than four words. The datapath is the one in the engine figure; the
// pipeline placement, the handshake and the stall are this design's choice.
// Lint notes: the controller's tile_idx debug output is left unconnected
// here, since the engine needs only the per-bank exponents derived from it;
// rst_n also disables the assertions, which lint reports as a sync/async
// mix on the reset net.
module rae
  import apsq_pkg::*;
#(
  parameter int unsigned LANES  = 128,
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned MAX_NP = 2048,
  parameter int unsigned TAG_W  = 16,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned NP_W  = $clog2(MAX_NP + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // static configuration
  input  logic [GS_W-1:0]                   cfg_gs,
  input  logic [NP_W-1:0]                   cfg_np,
  input  logic                              restart,
  input  logic                              alpha_we,
  input  logic [NP_W-2:0]                   alpha_idx,
  input  logic [SHIFT_W-1:0]                alpha_val,
  // PSUM words from the PE array
  input  logic                              in_valid,
  output logic                              in_ready,
  input  logic [LANES-1:0][PSUM_W-1:0]      in_psum,
  input  logic [AW-1:0]                     in_addr,
  input  logic [TAG_W-1:0]                  in_tag,
  input  logic                              in_last,
  // final INT8 output words
  output logic                              o_valid,
  output logic [LANES-1:0][DATA_W-1:0]      o_data,
  output logic [SHIFT_W-1:0]                o_shift,
  output logic [TAG_W-1:0]                  o_tag,
  // activity, one pulse per word when it is quantized
  output logic                              ev_apsq,
  output logic                              ev_psq,
  output logic                              ev_sat,    // some lane was clipped
  output logic                              idle
);
  typedef struct packed {
    logic                          s2;
    logic                          fin;
    logic [1:0]                    bank;
    logic [SHIFT_W-1:0]            qsh;
    logic [AW-1:0]                 addr;
    logic [TAG_W-1:0]              tag;
  } ctl_t;

  logic                              acc;
  logic [1:0]                        s0;
  logic                              s1, s2, fin;
  logic [1:0]                        wr_bank;
  logic [SHIFT_W-1:0]                q_shift;
  logic [NBANKS-1:0][SHIFT_W-1:0]    dq_shift;
  logic [NBANKS-1:0]                 bank_en;

  logic                              v1, v2, v3;
  ctl_t                              c1, c2, c3;
  logic [LANES-1:0][PSUM_W-1:0]      p1, p2, p3;
  logic [NBANKS-1:0][SHIFT_W-1:0]    dqs1;
  logic [NBANKS-1:0]                 ben1;
  logic [1:0]                        s0_1;
  logic                              s1_1;

  logic [NBANKS-1:0][LANES-1:0][DATA_W-1:0] bank_q;
  logic [NBANKS-1:0][LANES-1:0][PSUM_W-1:0] bank_x;
  logic [LANES-1:0][PSUM_W-1:0]      grp_sum, total;
  logic                              grp_v;
  logic [LANES-1:0][DATA_W-1:0]      qv;
  logic [LANES-1:0]                  qsat;

  // Read-after-write hazard on the bank address.
  assign in_ready = !((v1 && c1.addr == in_addr) ||
                      (v2 && c2.addr == in_addr) ||
                      (v3 && c3.addr == in_addr));
  assign acc = in_valid && in_ready;

  rae_ctrl #(.MAX_NP(MAX_NP)) u_ctrl (
    .clk, .rst_n, .cfg_gs, .cfg_np, .restart,
    .alpha_we, .alpha_idx, .alpha_val,
    .adv(acc), .tile_last(in_last),
    .s0, .s1, .s2, .wr_bank, .final_tile(fin), .tile_idx(),
    .q_shift, .dq_shift, .bank_en
  );

  // S0 -> S1
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
    end else begin
      v1 <= acc; v2 <= v1; v3 <= v2;
    end
  end
  always_ff @(posedge clk) begin
    if (acc) begin
      c1   <= '{s2: s2, fin: fin, bank: wr_bank, qsh: q_shift, addr: in_addr, tag: in_tag};
      p1   <= in_psum;
      dqs1 <= dq_shift;
      ben1 <= bank_en;
      s0_1 <= s0;
      s1_1 <= s1;
    end
    if (v1) begin c2 <= c1; p2 <= p1; end
    if (v2) begin c3 <= c2; p3 <= p2; end
  end

  psum_buffer #(.LANES(LANES), .DEPTH(DEPTH)) u_buf (
    .clk,
    .rd_en(acc), .rd_addr(in_addr), .rd_data(bank_q),
    .wr_en(v3 && !c3.fin), .wr_bank(c3.bank), .wr_addr(c3.addr), .wr_data(qv)
  );

  // S1: dequantize every bank
  for (genvar b = 0; b < NBANKS; b++) begin : g_dq
    dequantizer #(.LANES(LANES)) u_dq (
      .q(bank_q[b]), .shift(dqs1[b]), .en(ben1[b]), .x(bank_x[b])
    );
  end

  // S1..S3: two-stage adder pipeline
  rae_adder_tree #(.LANES(LANES)) u_tree (
    .clk, .rst_n, .in_valid(v1), .d(bank_x), .s0(s0_1), .s1(s1_1),
    .out_valid(grp_v), .sum(grp_sum)
  );

  // S3: s2 multiplexer, add the incoming PSUM, quantize
  always_comb begin
    for (int l = 0; l < LANES; l++)
      total[l] = p3[l] + (c3.s2 ? grp_sum[l] : '0);
  end
  quantizer #(.LANES(LANES)) u_q (.x(total), .shift(c3.qsh), .q(qv), .sat(qsat));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) o_valid <= 1'b0;
    else        o_valid <= v3 && c3.fin;
  end
  always_ff @(posedge clk) begin
    if (v3 && c3.fin) begin
      o_data  <= qv;
      o_shift <= c3.qsh;
      o_tag   <= c3.tag;
    end
  end

  assign ev_apsq = v3 && c3.s2;
  assign ev_psq  = v3 && !c3.s2;
  assign ev_sat  = v3 && (|qsat);
  assign idle    = !(v1 || v2 || v3);

  a_tree_aligned: assert property (@(posedge clk) disable iff (!rst_n) v3 == grp_v);
  a_in_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !in_ready) |=> (in_valid && $stable(in_addr) && $stable(in_last)));
endmodule

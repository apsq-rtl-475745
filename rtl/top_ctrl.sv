// top_ctrl: top controller of the accelerator.
//
// It latches one layer's configuration from the host and runs the tile loop
// nest of the chosen dataflow, one PSUM tile word per cycle:
//   WS: for co-tile { for ci-tile { for m-tile   { issue } } }  bank address m
//   IS: for m-tile  { for ci-tile { for co-tile  { issue } } }  bank address co
// An "issue" reads ifmap tile (m, ci) at word m*np+ci and weight tile
// (co, ci) at word co*np+ci, and one cycle later fires the PE array with the
// stationary operand (weights in WS, ifmap in IS) loaded only on the first
// word after the ci index changes. The ci loop is always outside the bank
// address loop, so every word of PSUM tile i reaches the APSQ engine before
// any word of tile i+1, as the grouping algorithm requires; the last word of
// each ci step is flagged as the end of the tile.
// The pipeline is issue -> buffer read -> PE array -> engine. When the engine
// holds off a word (in_ready = 0) the whole pipeline stalls: no issue, the
// buffers' read data and the PE array's registers hold. done pulses once the
// last output word has left the engine.
// The paper names this controller and says it manages the configuration;
// the loop orders follow the paper's IS/WS descriptions, and everything
// else here (ports, encodings, the stall) is this design's choice.
// Lint notes: the x_load/w_load fields of the last pipeline stage are not
// read, because the PE array has already used them one stage earlier; the
// whole beat is kept as one struct for clarity. rst_n is both the
// asynchronous reset of the flops and the disable condition of the
// configuration assertion, which lint reports as a sync/async mix.
module top_ctrl
  import apsq_pkg::*;
#(
  parameter int unsigned MAX_NP = 2048,
  parameter int unsigned IDX_W  = 12,     // width of an m-tile or co-tile index
  parameter int unsigned IF_AW  = 11,     // ifmap buffer word address
  parameter int unsigned WT_AW  = 11,     // weight buffer word address
  parameter int unsigned RAE_AW = 9,      // PSUM bank word address
  localparam int unsigned NP_W  = $clog2(MAX_NP + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host configuration
  input  logic                  start,
  input  dataflow_e             cfg_mode,
  input  logic [GS_W-1:0]       cfg_gs,
  input  logic [NP_W-1:0]       cfg_np,    // ci-tiles per output, ceil(Ci/Pci)
  input  logic [IDX_W-1:0]      cfg_nco,   // co-tiles, ceil(Co/Pco)
  input  logic [IDX_W-1:0]      cfg_nm,    // output-pixel tiles, ceil(Ho*Wo/Po)
  output logic                  busy,
  output logic                  done,
  // configuration held for the engine
  output logic [GS_W-1:0]       gs_q,
  output logic [NP_W-1:0]       np_q,
  output logic                  rae_restart,
  // buffer reads
  output logic                  buf_rd_en,
  output logic [IF_AW-1:0]      if_rd_addr,
  output logic [WT_AW-1:0]      wt_rd_addr,
  // PE array control
  output logic                  pe_hold,
  output logic                  pe_fire,
  output logic                  pe_x_load,
  output logic                  pe_w_load,
  input  logic                  pe_valid,
  // engine side band, aligned with the PE array output
  input  logic                  rae_ready,
  input  logic                  rae_idle,
  output logic [RAE_AW-1:0]     rae_addr,
  output logic [2*IDX_W-1:0]    rae_tag,   // {co, m}
  output logic                  rae_last,
  output logic                  stall
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_DONE} state_e;
  typedef struct packed {
    logic                 x_load;
    logic                 w_load;
    logic [RAE_AW-1:0]    addr;
    logic [2*IDX_W-1:0]   tag;
    logic                 last;
  } beat_t;

  state_e            state;
  dataflow_e         mode_q;
  logic [IDX_W-1:0]  nco_q, nm_q;
  logic [IDX_W-1:0]  o_cnt, k_cnt;         // outer and inner loop counters
  logic [NP_W-1:0]   ci_cnt;
  logic [IDX_W-1:0]  n_o, n_k, co_i, m_i;
  logic              issue, last_issue;
  beat_t             b0, b1, b2;
  logic              v1;

  assign n_o  = (mode_q == DF_WS) ? nco_q : nm_q;
  assign n_k  = (mode_q == DF_WS) ? nm_q  : nco_q;
  assign co_i = (mode_q == DF_WS) ? o_cnt : k_cnt;
  assign m_i  = (mode_q == DF_WS) ? k_cnt : o_cnt;

  assign stall      = pe_valid && !rae_ready;
  assign issue      = (state == S_RUN) && !stall;
  assign last_issue = (o_cnt == n_o - 1'b1) && (ci_cnt == np_q - 1'b1) && (k_cnt == n_k - 1'b1);

  always_comb begin
    b0.x_load = (mode_q == DF_WS) || (k_cnt == '0);
    b0.w_load = (mode_q == DF_IS) || (k_cnt == '0);
    b0.addr   = RAE_AW'(k_cnt);
    b0.tag    = {co_i, m_i};
    b0.last   = (k_cnt == n_k - 1'b1);
  end

  assign buf_rd_en  = issue;
  assign if_rd_addr = IF_AW'(m_i  * np_q + ci_cnt);
  assign wt_rd_addr = WT_AW'(co_i * np_q + ci_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      mode_q <= DF_WS;
      gs_q   <= 3'd1;
      np_q   <= NP_W'(1);
      nco_q  <= IDX_W'(1);
      nm_q   <= IDX_W'(1);
      o_cnt  <= '0;
      k_cnt  <= '0;
      ci_cnt <= '0;
      v1     <= 1'b0;
      rae_restart <= 1'b0;
    end else begin
      if (!stall) v1 <= issue;
      // One cycle after start, so that the engine sees the new gs and np.
      rae_restart <= (state == S_IDLE) && start;
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_RUN;
          mode_q <= cfg_mode;
          gs_q   <= cfg_gs;
          np_q   <= cfg_np;
          nco_q  <= cfg_nco;
          nm_q   <= cfg_nm;
          o_cnt  <= '0;
          k_cnt  <= '0;
          ci_cnt <= '0;
        end
        S_RUN: if (issue) begin
          if (last_issue) state <= S_DRAIN;
          if (k_cnt != n_k - 1'b1) k_cnt <= k_cnt + 1'b1;
          else begin
            k_cnt <= '0;
            if (ci_cnt != np_q - 1'b1) ci_cnt <= ci_cnt + 1'b1;
            else begin
              ci_cnt <= '0;
              o_cnt  <= o_cnt + 1'b1;
            end
          end
        end
        S_DRAIN: if (!v1 && !pe_valid && rae_idle) state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!stall) begin
      b1 <= b0;
      b2 <= b1;
    end
  end

  assign busy        = (state != S_IDLE);
  assign done        = (state == S_DONE);
  assign pe_hold     = stall;
  assign pe_fire     = v1 && !stall;
  assign pe_x_load   = b1.x_load;
  assign pe_w_load   = b1.w_load;
  assign rae_addr    = b2.addr;
  assign rae_tag     = b2.tag;
  assign rae_last    = b2.last;

  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (cfg_np != '0 && cfg_nco != '0 && cfg_nm != '0));
endmodule

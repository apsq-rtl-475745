// apsq_accel: DNN accelerator with the Reconfigurable APSQ Engine.
//
// A tiled INT8 matrix-product engine (pointwise convolution / linear layer)
// whose partial sums are never stored wider than INT8. It joins:
//   top_ctrl       loop nest for weight-stationary (WS) or input-stationary
//                  (IS) dataflow,
//   ifmap_buffer   256 KB, one Po x Pci INT8 ifmap tile per word,
//   weight_buffer  128 KB, one Pci x Pco INT8 weight tile per word,
//   pe_array       Po lines of Pco PEs, each a Pci-wide INT8 dot product;
//                  one Po x Pco 32-bit PSUM tile per cycle,
//   rae            Reconfigurable APSQ Engine: additive PSUM quantization
//                  with group size gs = 1..4 over four INT8 PSUM banks.
// The host and the off-chip DRAM are outside: the host drives the
// configuration ports and the scale-exponent list, and DRAM traffic enters
// through the buffers' write ports and leaves as the INT8 output words.
//
// Data layout: ifmap word m*np + ci holds rows m*Po.. of input channels
// ci*Pci..; weight word co*np + ci holds input channels ci*Pci.. by output
// channels co*Pco... An output word carries Po x Pco INT8 values, lane
// po*Pco + c, with the scale exponent of the last PSUM tile; its value is
// o_data * 2^o_shift in the integer units of the PE array's PSUMs.
// Timing: after start, one PSUM tile word per cycle enters the engine unless
// it stalls; the engine writes a word's result three cycles after the word
// enters and presents an output word one cycle later (o_valid four cycles
// after the last tile's word enters); done pulses
// when the last output word has left.
// Parallelism and buffer sizes default to the paper's evaluated
// configuration (Po = 16, Pci = Pco = 8; 256 KB ifmap, 128 KB weight and
// 256 KB output/PSUM buffers).
// Lint note: rst_n is reported as both synchronous and asynchronous because
// the submodules' assertions use it as their disable condition; all flops
// reset asynchronously.
module apsq_accel
  import apsq_pkg::*;
#(
  parameter int unsigned PO        = 16,
  parameter int unsigned PCI       = 8,
  parameter int unsigned PCO       = 8,
  parameter int unsigned IF_DEPTH  = 2048,
  parameter int unsigned WT_DEPTH  = 2048,
  parameter int unsigned PB_DEPTH  = 512,
  parameter int unsigned MAX_NP    = 2048,
  parameter int unsigned IDX_W     = 12,
  localparam int unsigned LANES    = PO * PCO,
  localparam int unsigned IF_AW    = $clog2(IF_DEPTH),
  localparam int unsigned WT_AW    = $clog2(WT_DEPTH),
  localparam int unsigned PB_AW    = $clog2(PB_DEPTH),
  localparam int unsigned NP_W     = $clog2(MAX_NP + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  // host: layer configuration
  input  logic                                  start,
  input  dataflow_e                             cfg_mode,
  input  logic [GS_W-1:0]                       cfg_gs,
  input  logic [NP_W-1:0]                       cfg_np,
  input  logic [IDX_W-1:0]                      cfg_nco,
  input  logic [IDX_W-1:0]                      cfg_nm,
  output logic                                  busy,
  output logic                                  done,
  // host: PSUM scale exponents alpha_i = 2^alpha_val, one per ci-tile index
  input  logic                                  alpha_we,
  input  logic [NP_W-2:0]                       alpha_idx,
  input  logic [SHIFT_W-1:0]                    alpha_val,
  // DRAM side: buffer fill
  input  logic                                  if_wr_en,
  input  logic [IF_AW-1:0]                      if_wr_addr,
  input  logic [PO-1:0][PCI-1:0][DATA_W-1:0]    if_wr_data,
  input  logic                                  wt_wr_en,
  input  logic [WT_AW-1:0]                      wt_wr_addr,
  input  logic [PCI-1:0][PCO-1:0][DATA_W-1:0]   wt_wr_data,
  // DRAM side: INT8 output tiles
  output logic                                  o_valid,
  output logic [PO-1:0][PCO-1:0][DATA_W-1:0]    o_data,
  output logic [SHIFT_W-1:0]                    o_shift,
  output logic [IDX_W-1:0]                      o_co,
  output logic [IDX_W-1:0]                      o_m,
  // activity
  output logic                                  ev_stall,
  output logic                                  ev_apsq,
  output logic                                  ev_psq,
  output logic                                  ev_sat
);
  logic [GS_W-1:0]                   gs_q;
  logic [NP_W-1:0]                   np_q;
  logic                              rae_restart, buf_rd_en;
  logic [IF_AW-1:0]                  if_rd_addr;
  logic [WT_AW-1:0]                  wt_rd_addr;
  logic [PO-1:0][PCI-1:0][DATA_W-1:0]  if_rd_data;
  logic [PCI-1:0][PCO-1:0][DATA_W-1:0] wt_rd_data;
  logic                              pe_hold, pe_fire, pe_x_load, pe_w_load, pe_valid;
  logic [PO-1:0][PCO-1:0][PSUM_W-1:0] psum;
  logic                              rae_ready, rae_idle, rae_last;
  logic [PB_AW-1:0]                  rae_addr;
  logic [2*IDX_W-1:0]                rae_tag, o_tag;

  top_ctrl #(
    .MAX_NP(MAX_NP), .IDX_W(IDX_W), .IF_AW(IF_AW), .WT_AW(WT_AW), .RAE_AW(PB_AW)
  ) u_ctrl (
    .clk, .rst_n, .start, .cfg_mode, .cfg_gs, .cfg_np, .cfg_nco, .cfg_nm, .busy, .done,
    .gs_q, .np_q, .rae_restart, .buf_rd_en, .if_rd_addr, .wt_rd_addr,
    .pe_hold, .pe_fire, .pe_x_load, .pe_w_load, .pe_valid,
    .rae_ready, .rae_idle, .rae_addr, .rae_tag, .rae_last, .stall(ev_stall)
  );

  ifmap_buffer #(.PO(PO), .PCI(PCI), .DEPTH(IF_DEPTH)) u_ifbuf (
    .clk, .wr_en(if_wr_en), .wr_addr(if_wr_addr), .wr_data(if_wr_data),
    .rd_en(buf_rd_en), .rd_addr(if_rd_addr), .rd_data(if_rd_data)
  );

  weight_buffer #(.PCI(PCI), .PCO(PCO), .DEPTH(WT_DEPTH)) u_wtbuf (
    .clk, .wr_en(wt_wr_en), .wr_addr(wt_wr_addr), .wr_data(wt_wr_data),
    .rd_en(buf_rd_en), .rd_addr(wt_rd_addr), .rd_data(wt_rd_data)
  );

  pe_array #(.PO(PO), .PCI(PCI), .PCO(PCO)) u_pe (
    .clk, .rst_n, .hold(pe_hold), .fire(pe_fire),
    .x_load(pe_x_load), .x_in(if_rd_data), .w_load(pe_w_load), .w_in(wt_rd_data),
    .out_valid(pe_valid), .psum
  );

  rae #(.LANES(LANES), .DEPTH(PB_DEPTH), .MAX_NP(MAX_NP), .TAG_W(2*IDX_W)) u_rae (
    .clk, .rst_n, .cfg_gs(gs_q), .cfg_np(np_q), .restart(rae_restart),
    .alpha_we, .alpha_idx, .alpha_val,
    .in_valid(pe_valid), .in_ready(rae_ready), .in_psum(psum), .in_addr(rae_addr),
    .in_tag(rae_tag), .in_last(rae_last),
    .o_valid, .o_data, .o_shift, .o_tag,
    .ev_apsq, .ev_psq, .ev_sat, .idle(rae_idle)
  );

  assign o_co = o_tag[2*IDX_W-1:IDX_W];
  assign o_m  = o_tag[IDX_W-1:0];
endmodule

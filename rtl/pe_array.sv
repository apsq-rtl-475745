// pe_array: the MAC array, PO lines of PCO processing elements.
//
// In one cycle it multiplies an ifmap tile T_i (PO x PCI INT8) by a weight
// tile T_w (PCI x PCO INT8) and produces one PSUM tile T_p (PO x PCO,
// 32-bit), as in the paper's pointwise tile example. PE (po, co) takes row po
// of T_i and column co of T_w. Both operand tiles have a stationary register:
// x_load / w_load replace it with the incoming tile, and the incoming tile is
// also used in the same cycle, so the stationary operand (weights under WS,
// inputs under IS) is loaded once and reused while the other operand streams.
// fire computes and registers a PSUM tile; out_valid follows one cycle later.
// hold freezes the output register and the operand registers (back-pressure).
// PO, PCI and PCO default to the paper's 16, 8, 8. The operand registers and
// the one-cycle latency are this design's choice.
module pe_array
  import apsq_pkg::*;
#(
  parameter int unsigned PO  = 16,
  parameter int unsigned PCI = 8,
  parameter int unsigned PCO = 8
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  hold,
  input  logic                                  fire,
  input  logic                                  x_load,
  input  logic [PO-1:0][PCI-1:0][DATA_W-1:0]    x_in,
  input  logic                                  w_load,
  input  logic [PCI-1:0][PCO-1:0][DATA_W-1:0]   w_in,
  output logic                                  out_valid,
  output logic [PO-1:0][PCO-1:0][PSUM_W-1:0]    psum
);
  logic [PO-1:0][PCI-1:0][DATA_W-1:0]  x_reg, x_eff;
  logic [PCI-1:0][PCO-1:0][DATA_W-1:0] w_reg, w_eff;
  logic [PO-1:0][PCO-1:0][PSUM_W-1:0]  p_comb;

  assign x_eff = x_load ? x_in : x_reg;
  assign w_eff = w_load ? w_in : w_reg;

  for (genvar po = 0; po < PO; po++) begin : g_line
    for (genvar co = 0; co < PCO; co++) begin : g_pe
      logic [PCI-1:0][DATA_W-1:0] wcol;
      for (genvar k = 0; k < PCI; k++) begin : g_col
        assign wcol[k] = w_eff[k][co];
      end
      pe #(.PCI(PCI)) u_pe (.x(x_eff[po]), .w(wcol), .p(p_comb[po][co]));
    end
  end

  always_ff @(posedge clk) begin
    if (!hold && fire && x_load) x_reg <= x_in;
    if (!hold && fire && w_load) w_reg <= w_in;
    if (!hold && fire)           psum  <= p_comb;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     out_valid <= 1'b0;
    else if (!hold) out_valid <= fire;
  end
endmodule

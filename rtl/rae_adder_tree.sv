// rae_adder_tree: the two-stage adder pipeline of the APSQ engine.
//
// It sums the dequantized contents of the PSUM banks that make up one group,
// following the engine figure. Stage 1 forms bank0+bank1 and, through the s1
// multiplexer, either bank2 (s1=0) or bank2+bank3 (s1=1). Stage 2 adds the two
// stage-1 results. The s0 multiplexer then picks bank0 alone (00, gs=1),
// bank0+bank1 (01, gs=2) or the full stage-2 sum (10, gs=3 and gs=4).
// Whichever input s0 picks, the result leaves after the same two cycles, so
// downstream timing does not depend on gs. Latency 2 cycles, one word per
// cycle, no back-pressure. Sums wrap at PSUM_W bits like the PE-array PSUMs.
// Topology and encodings follow the figure; placing the pipeline registers
// after each adder stage is this design's choice.
module rae_adder_tree
  import apsq_pkg::*;
#(
  parameter int unsigned LANES = 128
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      in_valid,
  input  logic [NBANKS-1:0][LANES-1:0][PSUM_W-1:0]  d,      // dequantized banks 0..3
  input  logic [1:0]                                s0,
  input  logic                                      s1,
  output logic                                      out_valid,
  output logic [LANES-1:0][PSUM_W-1:0]              sum
);
  logic [LANES-1:0][PSUM_W-1:0] r_b0, r_a01, r_m23;
  logic [1:0] r_s0;
  logic       r_v1;

  // Stage 1
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_v1 <= 1'b0;
    else        r_v1 <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (in_valid) begin
      r_s0 <= s0;
      for (int l = 0; l < LANES; l++) begin
        r_b0[l]  <= d[0][l];
        r_a01[l] <= d[0][l] + d[1][l];
        r_m23[l] <= s1 ? d[2][l] + d[3][l] : d[2][l];
      end
    end
  end

  // Stage 2 and the s0 multiplexer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= r_v1;
  end
  always_ff @(posedge clk) begin
    if (r_v1) begin
      for (int l = 0; l < LANES; l++) begin
        unique case (r_s0)
          2'b00:   sum[l] <= r_b0[l];
          2'b01:   sum[l] <= r_a01[l];
          default: sum[l] <= r_a01[l] + r_m23[l];
        endcase
      end
    end
  end
endmodule

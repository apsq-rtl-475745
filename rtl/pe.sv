// pe: one processing element of the PE array.
//
// A PE multiplies PCI signed INT8 activations with PCI signed INT8 weights of
// one output channel and adds the products, giving one full-precision PSUM
// contribution (INT16 products summed into PSUM_W = 32 bits). PCI is the
// input-channel parallelism Pci drawn inside each PE of the figure.
// Combinational; the PE array registers the result.
module pe
  import apsq_pkg::*;
#(
  parameter int unsigned PCI = 8
) (
  input  logic [PCI-1:0][DATA_W-1:0]  x,   // activations, signed
  input  logic [PCI-1:0][DATA_W-1:0]  w,   // weights, signed
  output logic [PSUM_W-1:0]           p    // signed dot product
);
  always_comb begin
    logic signed [PSUM_W-1:0] acc;
    acc = '0;
    for (int k = 0; k < PCI; k++)
      acc += PSUM_W'(signed'(x[k]) * signed'(w[k]));
    p = acc;
  end
endmodule

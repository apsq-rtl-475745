// tb_pe_array: streams random tiles through a small PE array, loading the
// weight tile only now and then (weight stationary) or the ifmap tile only
// now and then (input stationary), and checks every PSUM tile against a
// matrix product of the operands in force, its one-cycle latency, and that
// hold freezes the output.
module tb_pe_array;
  import apsq_pkg::*;
  localparam int PO = 3, PCI = 4, PCO = 2;
  logic clk = 0, rst_n = 0;
  logic hold, fire, x_load, w_load, out_valid;
  logic [PO-1:0][PCI-1:0][DATA_W-1:0] x_in, xs;
  logic [PCI-1:0][PCO-1:0][DATA_W-1:0] w_in, ws;
  logic [PO-1:0][PCO-1:0][PSUM_W-1:0] psum, expd;
  int checks = 0, failures = 0;

  pe_array #(.PO(PO), .PCI(PCI), .PCO(PCO)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hold = 0; fire = 0; x_load = 0; w_load = 0; x_in = '0; w_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      for (int a = 0; a < PO; a++) for (int k = 0; k < PCI; k++) x_in[a][k] = DATA_W'($urandom());
      for (int k = 0; k < PCI; k++) for (int c = 0; c < PCO; c++) w_in[k][c] = DATA_W'($urandom());
      fire = 1; hold = 0;
      x_load = (it == 0) || (it % 2 == 0) || ($urandom_range(0, 3) == 0);
      w_load = (it == 0) || (it % 2 == 1) || ($urandom_range(0, 3) == 0);
      if (x_load) xs = x_in;
      if (w_load) ws = w_in;
      for (int a = 0; a < PO; a++)
        for (int c = 0; c < PCO; c++) begin
          int s; s = 0;
          for (int k = 0; k < PCI; k++) s += int'(signed'(xs[a][k])) * int'(signed'(ws[k][c]));
          expd[a][c] = PSUM_W'(s);
        end
      @(posedge clk); #1;
      checks++;
      if (!out_valid || psum != expd) begin
        failures++;
        if (failures < 10) $display("it %0d: psum %h exp %h", it, psum, expd);
      end
      // a held cycle with new operands must change nothing
      @(negedge clk); hold = 1; x_load = 1; w_load = 1; x_in = ~x_in;
      @(posedge clk); #1;
      checks++; if (!out_valid || psum != expd) failures++;
      @(negedge clk); hold = 0; fire = 0;
      @(posedge clk); #1;
      checks++; if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_workload_layers: runs single layers of the evaluated models, at their real
// input-channel depth, on the accelerator at its default sizes (Po = 16,
// Pci = Pco = 8), with random INT8 data and a reference model. Every run
// is one complete accumulation over all input channels, with a slice of the
// output channels and output pixels chosen to keep the run short:
//   BERT-Base FFN down-projection: Ci = 3072 (np = 384), 80 of 128 tokens
//     (the first of the two m-halves the ifmap buffer needs), WS, gs = 4;
//   BERT-Base attention projection: Ci = 768 (np = 96), 128 tokens, IS, gs = 3;
//   Segformer-B0 decoder fuse layer: Ci = 1024 (np = 128), 256 pixels, WS, gs = 2;
//   EfficientViT-B1 stage-4 FFN projection: Ci = 1024 (np = 128), 256 pixels, IS, gs = 2;
//   LLaMA2-7B q projection in decode: Ci = 4096 (np = 512), one token, WS, gs = 4;
//   LLaMA2-7B FFN down-projection in decode: Ci = 11008 (np = 1376), one token,
//     one output-channel tile (the weight buffer holds 1376 of its 2048 words).
// Layer sizes are those of the public model definitions. Outputs are
// checked lane by lane.
module tb_workload_layers;
  import apsq_pkg::*;
  import apsq_tb_pkg::*;
  localparam int PO = 16, PCI = 8, PCO = 8, IW = 12, NPW = 12;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  dataflow_e cfg_mode;
  logic [GS_W-1:0] cfg_gs;
  logic [NPW-1:0] cfg_np;
  logic [IW-1:0] cfg_nco, cfg_nm;
  logic alpha_we;
  logic [NPW-2:0] alpha_idx;
  logic [SHIFT_W-1:0] alpha_val;
  logic if_wr_en, wt_wr_en;
  logic [10:0] if_wr_addr, wt_wr_addr;
  logic [PO-1:0][PCI-1:0][DATA_W-1:0] if_wr_data;
  logic [PCI-1:0][PCO-1:0][DATA_W-1:0] wt_wr_data;
  logic o_valid;
  logic [PO-1:0][PCO-1:0][DATA_W-1:0] o_data;
  logic [SHIFT_W-1:0] o_shift;
  logic [IW-1:0] o_co, o_m;
  logic ev_stall, ev_apsq, ev_psq, ev_sat;

  int checks = 0, failures = 0, cyc = 0, n_out = 0;
  byte xm[2048][PO][PCI];
  byte wm[2048][PCI][PCO];
  int  alph[2048];
  int  expd[2][16][PO*PCO];
  int  got[2][16];
  int  cur_np;

  apsq_accel dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", s, cyc); end
  endtask

  always @(posedge clk) begin
    cyc++;
    #1;
    if (o_valid) begin
      int co, m;
      co = int'(o_co); m = int'(o_m);
      n_out++;
      chk(co < 2 && m < 16 && got[co][m] == 0, "output word once");
      if (co < 2 && m < 16) begin
        got[co][m] = 1;
        chk(int'(o_shift) == alph[cur_np - 1], "output exponent");
        for (int p = 0; p < PO; p++)
          for (int c = 0; c < PCO; c++) begin
            logic signed [DATA_W-1:0] v;
            v = o_data[p][c];
            chk(int'(v) == expd[co][m][p*PCO+c], "output value");
          end
      end
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(string name, dataflow_e md, int gs, int np, int nco, int nm, int rows);
    int t0;
    longint t[];
    int a[];
    for (int w = 0; w < nm * np; w++) begin
      @(negedge clk);
      for (int p = 0; p < PO; p++) for (int k = 0; k < PCI; k++) begin
        // rows beyond the valid tokens of the last m-tile are zero padding
        xm[w][p][k] = ((w / np) * PO + p < rows) ? byte'($urandom_range(0, 255)) : 8'sd0;
        if_wr_data[p][k] = xm[w][p][k];
      end
      if_wr_en = 1; if_wr_addr = 11'(w);
    end
    @(negedge clk); if_wr_en = 0;
    for (int w = 0; w < nco * np; w++) begin
      @(negedge clk);
      for (int k = 0; k < PCI; k++) for (int c = 0; c < PCO; c++) begin
        wm[w][k][c] = byte'($urandom_range(0, 255));
        wt_wr_data[k][c] = wm[w][k][c];
      end
      wt_wr_en = 1; wt_wr_addr = 11'(w);
    end
    @(negedge clk); wt_wr_en = 0;
    for (int i = 0; i < np; i++) begin
      @(negedge clk);
      // scales grow with the accumulation depth, as a trained scale would
      alph[i] = 8 + ((i * 6) / np);
      alpha_we = 1; alpha_idx = 11'(i); alpha_val = SHIFT_W'(alph[i]);
    end
    @(negedge clk); alpha_we = 0;
    t = new[np]; a = new[np];
    for (int i = 0; i < np; i++) a[i] = alph[i];
    for (int co = 0; co < nco; co++)
      for (int m = 0; m < nm; m++) begin
        got[co][m] = 0;
        for (int p = 0; p < PO; p++)
          for (int c = 0; c < PCO; c++) begin
            int na, nq;
            for (int i = 0; i < np; i++) begin
              t[i] = 0;
              for (int k = 0; k < PCI; k++) t[i] += longint'(int'(xm[m*np+i][p][k]) * int'(wm[co*np+i][k][c]));
            end
            expd[co][m][p*PCO+c] = ref_apsq(t, a, np, gs, na, nq);
          end
      end
    cur_np = np;
    @(negedge clk);
    cfg_mode = md; cfg_gs = GS_W'(gs); cfg_np = NPW'(np); cfg_nco = IW'(nco); cfg_nm = IW'(nm);
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done && cyc - t0 < 100000) @(negedge clk);
    chk(done, "layer finished");
    @(negedge clk);
    for (int co = 0; co < nco; co++) for (int m = 0; m < nm; m++) chk(got[co][m] == 1, "all output words");
    $display("%s: %0d words in %0d cycles", name, nco * np * nm, cyc - t0);
  endtask

  initial begin
    start = 0; cfg_mode = DF_WS; cfg_gs = 1; cfg_np = 1; cfg_nco = 1; cfg_nm = 1;
    alpha_we = 0; alpha_idx = 0; alpha_val = 0;
    if_wr_en = 0; wt_wr_en = 0; if_wr_addr = 0; wt_wr_addr = 0; if_wr_data = '0; wt_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run("BERT-Base FFN down, Ci=3072",        DF_WS, 4, 384, 2, 5, 80);
    run("BERT-Base attention proj, Ci=768",   DF_IS, 3,  96, 2, 8, 128);
    run("Segformer-B0 decoder fuse, Ci=1024", DF_WS, 2, 128, 2, 16, 256);
    run("EfficientViT-B1 stage-4 FFN, Ci=1024", DF_IS, 2, 128, 2, 16, 256);
    run("LLaMA2-7B q_proj decode, Ci=4096",   DF_WS, 4, 512, 2, 1, 1);
    run("LLaMA2-7B down_proj decode, Ci=11008", DF_WS, 4, 1376, 1, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_apsq_accel: end-to-end test of the accelerator at its default sizes
// (Po = 16, Pci = Pco = 8, full-size buffers). Each run fills the ifmap and
// weight buffers with random INT8 tiles, loads random PSUM scale exponents,
// starts one layer and checks every INT8 output word against a reference
// that forms each PSUM tile as an integer matrix product and applies the
// grouping algorithm lane by lane. Runs cover both dataflows (WS, IS), all
// group sizes 1..4, accumulation lengths that leave a short final group,
// engine stalls (fewer than four words per tile), clipping, APSQ and plain
// quantization steps; each mechanism is counted and must occur. Runs without
// stalls must finish within the word count plus a fixed pipeline latency:
// one PSUM tile word per cycle.
module tb_apsq_accel;
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

  int checks = 0, failures = 0, cyc = 0;
  int n_stall = 0, n_apsq = 0, n_psq = 0, n_sat = 0, n_ws = 0, n_is = 0, n_short = 0;
  int n_gs[5];
  int xm[64][PO][PCI];     // ifmap words
  int wm[64][PCI][PCO];    // weight words
  int alph[16];
  int expd[8][8][PO*PCO];  // [co][m][lane]
  int got[8][8];
  int cur_np;

  apsq_accel dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", s, cyc); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n && ev_stall) n_stall++;
    if (rst_n && ev_apsq)  n_apsq++;
    if (rst_n && ev_psq)   n_psq++;
    if (rst_n && ev_sat)   n_sat++;
  end
  always @(posedge clk) begin
    #1;
    if (o_valid) begin
      int co, m;
      co = int'(o_co); m = int'(o_m);
      chk(co < 8 && m < 8 && got[co][m] == 0, "output word once");
      if (co < 8 && m < 8) begin
        got[co][m] = 1;
        chk(int'(o_shift) == alph[cur_np - 1], "output exponent");
        for (int p = 0; p < PO; p++)
          for (int c = 0; c < PCO; c++) begin
            logic signed [DATA_W-1:0] v;
            v = o_data[p][c];
            if (int'(v) != expd[co][m][p*PCO+c]) begin
              chk(0, "output value");
              if (failures < 5) $display("co %0d m %0d po %0d c %0d got %0d exp %0d", co, m, p, c, v, expd[co][m][p*PCO+c]);
            end
          end
        checks++;
      end
    end
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(dataflow_e md, int gs, int np, int nco, int nm);
    int words, t0, st0;
    longint t[];
    int a[];
    // buffers
    for (int w = 0; w < nm * np; w++) begin
      @(negedge clk);
      for (int p = 0; p < PO; p++) for (int k = 0; k < PCI; k++) begin
        xm[w][p][k] = int'($urandom_range(0, 255)) - 128;
        if_wr_data[p][k] = DATA_W'(xm[w][p][k]);
      end
      if_wr_en = 1; if_wr_addr = 11'(w);
    end
    @(negedge clk); if_wr_en = 0;
    for (int w = 0; w < nco * np; w++) begin
      @(negedge clk);
      for (int k = 0; k < PCI; k++) for (int c = 0; c < PCO; c++) begin
        wm[w][k][c] = int'($urandom_range(0, 255)) - 128;
        wt_wr_data[k][c] = DATA_W'(wm[w][k][c]);
      end
      wt_wr_en = 1; wt_wr_addr = 11'(w);
    end
    @(negedge clk); wt_wr_en = 0;
    for (int i = 0; i < np; i++) begin
      @(negedge clk);
      alph[i] = $urandom_range(6, 11);
      alpha_we = 1; alpha_idx = 11'(i); alpha_val = SHIFT_W'(alph[i]);
    end
    @(negedge clk); alpha_we = 0;
    // reference
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
              for (int k = 0; k < PCI; k++) t[i] += longint'(xm[m*np+i][p][k] * wm[co*np+i][k][c]);
            end
            expd[co][m][p*PCO+c] = ref_apsq(t, a, np, gs, na, nq);
          end
      end
    // run
    cur_np = np;
    @(negedge clk);
    cfg_mode = md; cfg_gs = GS_W'(gs); cfg_np = NPW'(np); cfg_nco = IW'(nco); cfg_nm = IW'(nm);
    start = 1; t0 = cyc; st0 = n_stall;
    @(negedge clk); start = 0;
    while (!done && cyc - t0 < 20000) @(negedge clk);
    chk(done, "layer finished");
    words = nco * np * nm;
    if (n_stall == st0) chk(cyc - t0 <= words + 10, "one PSUM word per cycle");
    @(negedge clk);
    for (int co = 0; co < nco; co++) for (int m = 0; m < nm; m++) chk(got[co][m] == 1, "all output words");
    if (md == DF_WS) n_ws++; else n_is++;
    n_gs[gs]++;
    if ((np - 1) % gs != 0) n_short++;
  endtask

  initial begin
    start = 0; cfg_mode = DF_WS; cfg_gs = 1; cfg_np = 1; cfg_nco = 1; cfg_nm = 1;
    alpha_we = 0; alpha_idx = 0; alpha_val = 0;
    if_wr_en = 0; wt_wr_en = 0; if_wr_addr = 0; wt_wr_addr = 0; if_wr_data = '0; wt_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int gs = 1; gs <= 4; gs++) begin
      run(DF_WS, gs, gs + 2, 2, 5);                         // no stall, short final group for gs>1
      run(DF_IS, gs, 2 * gs + 1, 2, 3);                     // IS, nco<4: stalls
      run(DF_WS, gs, $urandom_range(1, 8), $urandom_range(1, 3), $urandom_range(1, 6));
      run(DF_IS, gs, $urandom_range(1, 8), $urandom_range(1, 6), $urandom_range(1, 3));
    end
    chk(n_ws > 0 && n_is > 0, "both dataflows ran");
    for (int g = 1; g <= 4; g++) chk(n_gs[g] > 0, "every group size ran");
    chk(n_stall > 0, "stall happened");
    chk(n_apsq > 0 && n_psq > 0, "APSQ and plain quantization happened");
    chk(n_sat > 0, "clipping happened");
    chk(n_short > 0, "short final group happened");
    $display("ws=%0d is=%0d stall=%0d apsq=%0d psq=%0d sat=%0d short=%0d", n_ws, n_is, n_stall, n_apsq, n_psq, n_sat, n_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_llm_decode: runs LLaMA2-7B decode-phase layers on the accelerator built
// with the parallelism the paper uses for one-token generation: Po = 1,
// Pci = 32, Pco = 32. That setting keeps 1024 MACs per cycle, as the default
// 16 x 8 x 8 array has. One token means a single output row, so each output
// word is one token by 32 output channels. The layers run at their real
// input-channel depth, with a slice of the output channels:
//   q projection,    Ci = 4096  (np = 128), WS, gs = 4, 4 output tiles;
//   q projection,    Ci = 4096  (np = 128), IS, gs = 3, 4 output tiles;
//   gate projection, Ci = 4096  (np = 128), WS, gs = 2, 4 output tiles;
//   down projection, Ci = 11008 (np = 344), WS, gs = 1, 1 output tile;
//   down projection, Ci = 11008 (np = 344), IS, gs = 4, 1 output tile.
// Layer sizes are those of the public LLaMA2-7B definition. The buffer
// depths are this testbench's choice, because no buffer sizes are given for
// this setting: 512 weight words of 1 KB each hold four output tiles of a
// 4096-deep layer. The PSUM banks keep 512 words, now 32 bytes wide. Inputs
// are random INT8, the scale exponents rise with the accumulation depth,
// and every output lane is compared with the list-based grouping reference.
// The step counts of the engine are checked too. Timing to expect: in WS
// with one token every tile of an output word writes the same PSUM address,
// so the read-after-write stall holds the engine to one tile per 4 cycles;
// in IS the address rotates over the output tiles and one tile per cycle is
// kept once there are 4 or more of them.
module tb_llm_decode;
  import apsq_pkg::*;
  import apsq_tb_pkg::*;
  localparam int PO = 1, PCI = 32, PCO = 32, IW = 12, NPW = 12;
  localparam int IFD = 512, WTD = 512;
  localparam int NCO_MAX = 4;
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
  logic [8:0] if_wr_addr, wt_wr_addr;
  logic [PO-1:0][PCI-1:0][DATA_W-1:0] if_wr_data;
  logic [PCI-1:0][PCO-1:0][DATA_W-1:0] wt_wr_data;
  logic o_valid;
  logic [PO-1:0][PCO-1:0][DATA_W-1:0] o_data;
  logic [SHIFT_W-1:0] o_shift;
  logic [IW-1:0] o_co, o_m;
  logic ev_stall, ev_apsq, ev_psq, ev_sat;

  int checks = 0, failures = 0, cyc = 0;
  int n_apsq = 0, n_psq = 0;
  byte xm[IFD][PCI];
  byte wm[WTD][PCI][PCO];
  int  alph[2048];
  int  expd[NCO_MAX][PCO];
  int  got[NCO_MAX];
  int  cur_np;

  apsq_accel #(.PO(PO), .PCI(PCI), .PCO(PCO), .IF_DEPTH(IFD), .WT_DEPTH(WTD),
               .PB_DEPTH(512), .MAX_NP(2048), .IDX_W(IW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", s, cyc); end
  endtask

  always @(posedge clk) begin
    cyc++;
    #1;
    if (rst_n && ev_apsq) n_apsq++;
    if (rst_n && ev_psq) n_psq++;
    if (o_valid) begin
      int co;
      co = int'(o_co);
      chk(co < NCO_MAX && o_m == 0 && got[co] == 0, "output word once");
      if (co < NCO_MAX) begin
        got[co] = 1;
        chk(int'(o_shift) == alph[cur_np - 1], "output exponent");
        for (int c = 0; c < PCO; c++) begin
          logic signed [DATA_W-1:0] v;
          v = o_data[0][c];
          chk(int'(v) == expd[co][c], "output value");
        end
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(string name, dataflow_e md, int gs, int np, int nco);
    int t0, a0, q0, na, nq, want_a, want_q;
    longint t[];
    int a[];
    for (int w = 0; w < np; w++) begin
      @(negedge clk);
      for (int k = 0; k < PCI; k++) begin
        xm[w][k] = byte'($urandom_range(0, 255));
        if_wr_data[0][k] = xm[w][k];
      end
      if_wr_en = 1; if_wr_addr = 9'(w);
    end
    @(negedge clk); if_wr_en = 0;
    for (int w = 0; w < nco * np; w++) begin
      @(negedge clk);
      for (int k = 0; k < PCI; k++) for (int c = 0; c < PCO; c++) begin
        wm[w][k][c] = byte'($urandom_range(0, 255));
        wt_wr_data[k][c] = wm[w][k][c];
      end
      wt_wr_en = 1; wt_wr_addr = 9'(w);
    end
    @(negedge clk); wt_wr_en = 0;
    for (int i = 0; i < np; i++) begin
      @(negedge clk);
      alph[i] = 9 + ((i * 6) / np);
      alpha_we = 1; alpha_idx = 11'(i); alpha_val = SHIFT_W'(alph[i]);
    end
    @(negedge clk); alpha_we = 0;
    t = new[np]; a = new[np];
    for (int i = 0; i < np; i++) a[i] = alph[i];
    want_a = 0; want_q = 0;
    for (int co = 0; co < nco; co++) begin
      got[co] = 0;
      for (int c = 0; c < PCO; c++) begin
        for (int i = 0; i < np; i++) begin
          t[i] = 0;
          for (int k = 0; k < PCI; k++) t[i] += longint'(int'(xm[i][k]) * int'(wm[co*np+i][k][c]));
        end
        expd[co][c] = ref_apsq(t, a, np, gs, na, nq);
      end
      // all lanes of a tile take the same path, so one lane's counts are the tile's
      want_a += na; want_q += nq;
    end
    cur_np = np;
    a0 = n_apsq; q0 = n_psq;
    @(negedge clk);
    cfg_mode = md; cfg_gs = GS_W'(gs); cfg_np = NPW'(np); cfg_nco = IW'(nco); cfg_nm = 1;
    start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done && cyc - t0 < 20000) @(negedge clk);
    chk(done, "layer finished");
    @(negedge clk);
    for (int co = 0; co < nco; co++) chk(got[co] == 1, "all output words");
    // one engine step per tile and output word, split as the grouping rule says
    chk(n_apsq - a0 == want_a, "APSQ step count");
    chk(n_psq - q0 == want_q, "plain quantization step count");
    $display("%s: %0d tiles in %0d cycles, %0d APSQ and %0d plain steps",
             name, nco * np, cyc - t0, n_apsq - a0, n_psq - q0);
  endtask

  initial begin
    start = 0; cfg_mode = DF_WS; cfg_gs = 1; cfg_np = 1; cfg_nco = 1; cfg_nm = 1;
    alpha_we = 0; alpha_idx = 0; alpha_val = 0;
    if_wr_en = 0; wt_wr_en = 0; if_wr_addr = 0; wt_wr_addr = 0; if_wr_data = '0; wt_wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run("LLaMA2-7B q_proj, WS, gs=4",    DF_WS, 4, 128, 4);
    run("LLaMA2-7B q_proj, IS, gs=3",    DF_IS, 3, 128, 4);
    run("LLaMA2-7B gate_proj, WS, gs=2", DF_WS, 2, 128, 4);
    run("LLaMA2-7B down_proj, WS, gs=1", DF_WS, 1, 344, 1);
    run("LLaMA2-7B down_proj, IS, gs=4", DF_IS, 4, 344, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

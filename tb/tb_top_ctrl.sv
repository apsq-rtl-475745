// tb_top_ctrl: runs the controller through WS and IS loop nests of several
// sizes against a simple model of the PE array (one-cycle latency, frozen by
// hold) and an engine whose ready is random. It checks, in order, every
// buffer read address, every stationary-operand load flag, every word handed
// to the engine (bank address, {co, m} tag, last-word flag), that no word is
// lost or repeated under stalls, and that done follows the last word.
module tb_top_ctrl;
  import apsq_pkg::*;
  localparam int NPW = 10, IW = 6;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  dataflow_e cfg_mode;
  logic [GS_W-1:0] cfg_gs, gs_q;
  logic [NPW-1:0] cfg_np, np_q;
  logic [IW-1:0] cfg_nco, cfg_nm;
  logic rae_restart, buf_rd_en, pe_hold, pe_fire, pe_x_load, pe_w_load, pe_valid;
  logic [10:0] if_rd_addr, wt_rd_addr;
  logic rae_ready, rae_idle, rae_last, stall;
  logic [8:0] rae_addr;
  logic [2*IW-1:0] rae_tag;
  int checks = 0, failures = 0, nstall = 0, cyc = 0;

  typedef struct { int ifa; int wta; bit xl; bit wl; int addr; int co; int m; bit last; } beat_s;
  beat_s rdq[$], ldq[$], acq[$];

  top_ctrl #(.MAX_NP(512), .IDX_W(IW), .IF_AW(11), .WT_AW(11), .RAE_AW(9)) dut (.*);
  always #5 clk = ~clk;

  // PE array model
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pe_valid <= 0;
    else if (!pe_hold) pe_valid <= pe_fire;
  always @(negedge clk) rae_ready = ($urandom_range(0, 2) != 0);
  assign rae_idle = 1'b1;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d", s, cyc); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (stall) nstall++;
    if (buf_rd_en) begin
      beat_s e; e = rdq.pop_front();
      chk(int'(if_rd_addr) == e.ifa && int'(wt_rd_addr) == e.wta, "buffer address");
    end
    if (pe_fire) begin
      beat_s e; e = ldq.pop_front();
      chk(pe_x_load == e.xl && pe_w_load == e.wl, "operand load flags");
    end
    if (pe_valid && rae_ready) begin
      beat_s e; e = acq.pop_front();
      chk(int'(rae_addr) == e.addr && int'(rae_tag) == ((e.co << IW) | e.m) && rae_last == e.last, "engine word");
    end
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; cfg_mode = DF_WS; cfg_gs = 1; cfg_np = 1; cfg_nco = 1; cfg_nm = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int np, nco, nm, no, nk, cnt;
      dataflow_e md;
      md = (t % 2) ? DF_IS : DF_WS;
      np = $urandom_range(1, 5); nco = $urandom_range(1, 4); nm = $urandom_range(1, 5);
      no = (md == DF_WS) ? nco : nm; nk = (md == DF_WS) ? nm : nco;
      for (int o = 0; o < no; o++)
        for (int ci = 0; ci < np; ci++)
          for (int k = 0; k < nk; k++) begin
            beat_s b;
            b.co = (md == DF_WS) ? o : k; b.m = (md == DF_WS) ? k : o;
            b.ifa = b.m * np + ci; b.wta = b.co * np + ci;
            b.xl = (md == DF_WS) || (k == 0); b.wl = (md == DF_IS) || (k == 0);
            b.addr = k; b.last = (k == nk - 1);
            rdq.push_back(b); ldq.push_back(b); acq.push_back(b);
          end
      @(negedge clk);
      cfg_mode = md; cfg_gs = GS_W'($urandom_range(1, 4)); cfg_np = NPW'(np);
      cfg_nco = IW'(nco); cfg_nm = IW'(nm); start = 1;
      @(negedge clk); start = 0;
      chk(busy && np_q == NPW'(np) && gs_q == cfg_gs, "configuration latched");
      chk(rae_restart, "engine restarted after the new configuration is held");
      @(negedge clk);
      chk(!rae_restart, "restart is one pulse");
      cnt = 0;
      while (!done && cnt < 10000) begin @(negedge clk); cnt++; end
      chk(done, "done");
      chk(rdq.size() == 0 && ldq.size() == 0 && acq.size() == 0, "all words issued and delivered");
      @(negedge clk);
      chk(!busy, "idle after done");
    end
    chk(nstall > 0, "stall exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

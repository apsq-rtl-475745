// tb_rae: end-to-end test of the Reconfigurable APSQ Engine on its own.
// For every group size 1..4 it runs accumulations of 1..9 PSUM tiles of
// 1..6 words each, with random PSUMs, random scale exponents and random
// gaps in the input, and checks every INT8 output word against the grouping
// algorithm computed per lane by the reference package, the number of APSQ
// and plain quantization steps, the output exponent, and that each output
// word appears four cycles after its last input word was accepted.
// Tiles of fewer than four words make the read-after-write stall happen.
module tb_rae;
  import apsq_pkg::*;
  import apsq_tb_pkg::*;
  localparam int L = 4, D = 16, MAXNP = 16, TW = 8;
  localparam int NPW = $clog2(MAXNP + 1);
  logic clk = 0, rst_n = 0;
  logic [GS_W-1:0] cfg_gs;
  logic [NPW-1:0] cfg_np;
  logic restart, alpha_we;
  logic [NPW-2:0] alpha_idx;
  logic [SHIFT_W-1:0] alpha_val;
  logic in_valid, in_ready, in_last;
  logic [L-1:0][PSUM_W-1:0] in_psum;
  logic [3:0] in_addr;
  logic [TW-1:0] in_tag, o_tag;
  logic o_valid;
  logic [L-1:0][DATA_W-1:0] o_data;
  logic [SHIFT_W-1:0] o_shift;
  logic ev_apsq, ev_psq, ev_sat, idle;
  int checks = 0, failures = 0, cyc = 0;
  int n_stall = 0, n_apsq = 0, n_psq = 0, n_sat = 0, n_out = 0;
  int exp_out[D][L];
  int out_cyc[D];
  int got[D];
  int alph[MAXNP];

  rae #(.LANES(L), .DEPTH(D), .MAX_NP(MAXNP), .TAG_W(TW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0d gs=%0d np=%0d", s, cyc, cfg_gs, cfg_np); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (in_valid && !in_ready) n_stall++;
    if (rst_n && ev_apsq) n_apsq++;
    if (rst_n && ev_psq)  n_psq++;
    if (rst_n && ev_sat)  n_sat++;
  end
  always @(posedge clk) begin
    #1;
    if (o_valid) begin
      int a;
      a = int'(o_tag);
      n_out++;
      chk(a < D && got[a] == 0, "output word once");
      if (a < D) begin
        got[a] = 1;
        chk(cyc == out_cyc[a] + 4, "output latency 4 cycles");
        chk(int'(o_shift) == alph[cfg_np - 1], "output exponent");
        for (int l = 0; l < L; l++) chk(int'(signed'(o_data[l])) == exp_out[a][l], "output value");
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tot_apsq, tot_psq;
    restart = 0; alpha_we = 0; alpha_idx = 0; alpha_val = 0;
    in_valid = 0; in_last = 0; in_psum = '0; in_addr = 0; in_tag = 0;
    cfg_gs = 1; cfg_np = 1;
    tot_apsq = 0; tot_psq = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int gs = 1; gs <= 4; gs++)
      for (int rep = 0; rep < 6; rep++) begin
        int np, nw;
        longint t[D][L][];
        np = (rep == 0) ? 1 : $urandom_range(2, 9);
        nw = (rep < 3) ? $urandom_range(1, 3) : $urandom_range(4, 6);
        for (int i = 0; i < MAXNP; i++) begin
          @(negedge clk);
          alph[i] = $urandom_range(2, 7);
          alpha_we = 1; alpha_idx = NPW'(i); alpha_val = SHIFT_W'(alph[i]);
        end
        @(negedge clk); alpha_we = 0;
        cfg_gs = GS_W'(gs); cfg_np = NPW'(np); restart = 1;
        @(negedge clk); restart = 0;
        for (int a = 0; a < nw; a++) begin
          got[a] = 0;
          for (int l = 0; l < L; l++) t[a][l] = new[np];
        end
        for (int i = 0; i < np; i++)
          for (int a = 0; a < nw; a++)
            for (int l = 0; l < L; l++)
              t[a][l][i] = longint'(int'($urandom_range(0, 8000)) - 4000);
        for (int a = 0; a < nw; a++)
          for (int l = 0; l < L; l++) begin
            int na, nq;
            int ai[];
            ai = new[np];
            for (int i = 0; i < np; i++) ai[i] = alph[i];
            exp_out[a][l] = ref_apsq(t[a][l], ai, np, gs, na, nq);
            if (l == 0) begin tot_apsq += na; tot_psq += nq; end
          end
        for (int i = 0; i < np; i++)
          for (int a = 0; a < nw; a++) begin
            for (int l = 0; l < L; l++) begin
              in_psum[l] = PSUM_W'(t[a][l][i]);
            end
            in_valid = 1; in_addr = 4'(a); in_tag = TW'(a); in_last = (a == nw - 1);
            #1;
            while (!in_ready) begin @(negedge clk); #1; end
            if (i == np - 1) out_cyc[a] = cyc;
            @(negedge clk);
            in_valid = 0;
            if ($urandom_range(0, 3) == 0) @(negedge clk);
          end
        repeat (8) @(negedge clk);
        for (int a = 0; a < nw; a++) chk(got[a] == 1, "every output word seen");
      end
    chk(n_apsq == tot_apsq && n_psq == tot_psq, "APSQ / quantization step counts");
    chk(n_stall > 0, "read-after-write stall happened");
    chk(n_sat > 0, "clipping happened");
    $display("stalls=%0d apsq=%0d/%0d psq=%0d/%0d sat=%0d outputs=%0d", n_stall, n_apsq, tot_apsq, n_psq, tot_psq, n_sat, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

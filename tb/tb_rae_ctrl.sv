// tb_rae_ctrl: steps the engine controller through whole accumulations for
// every group size 1..4 and several tile counts, and checks s0/s1 against the
// configuration table and s2, the write bank, the final-tile flag, the bank
// valid mask and the quantizer / dequantizer exponents against the grouping
// algorithm, tile by tile.
module tb_rae_ctrl;
  import apsq_pkg::*;
  localparam int MAXNP = 32;
  localparam int NPW = $clog2(MAXNP + 1);
  logic clk = 0, rst_n = 0;
  logic [GS_W-1:0] cfg_gs;
  logic [NPW-1:0]  cfg_np;
  logic restart, alpha_we, adv, tile_last;
  logic [NPW-2:0] alpha_idx;
  logic [SHIFT_W-1:0] alpha_val;
  logic [1:0] s0, wr_bank;
  logic s1, s2, final_tile;
  logic [NPW-2:0] tile_idx;
  logic [SHIFT_W-1:0] q_shift;
  logic [NBANKS-1:0][SHIFT_W-1:0] dq_shift;
  logic [NBANKS-1:0] bank_en;
  int checks = 0, failures = 0;
  int alph[MAXNP];

  rae_ctrl #(.MAX_NP(MAXNP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s gs=%0d np=%0d tile=%0d s2=%0b bank=%0d en=%b", what, cfg_gs, cfg_np, tile_idx, s2, wr_bank, bank_en);
    end
  endtask

  initial begin
    restart = 0; alpha_we = 0; adv = 0; tile_last = 0; alpha_idx = 0; alpha_val = 0;
    cfg_gs = 1; cfg_np = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < MAXNP; i++) begin
      @(negedge clk);
      alph[i] = $urandom_range(0, 31);
      alpha_we = 1; alpha_idx = NPW'(i); alpha_val = SHIFT_W'(alph[i]);
    end
    @(negedge clk); alpha_we = 0;
    for (int gs = 1; gs <= 4; gs++) begin
      for (int np = 1; np <= 11; np++) begin
        int  mem_tile[4];      // tile index held per bank, -1 = none of this group
        int  cnt_words;
        cfg_gs = GS_W'(gs); cfg_np = NPW'(np);
        @(negedge clk); restart = 1; @(negedge clk); restart = 0;
        for (int b = 0; b < 4; b++) mem_tile[b] = -1;
        for (int i = 0; i < np; i++) begin
          bit apsq; int bank; bit fin;
          fin  = (i == np - 1);
          apsq = ((i % gs) == 0) || fin;
          bank = (i % gs == 0) ? gs - 1 : (i % gs) - 1;
          cnt_words = $urandom_range(1, 3);
          for (int w = 0; w < cnt_words; w++) begin
            #1;
            chk(s0 == ((gs == 1) ? 2'b00 : (gs == 2) ? 2'b01 : 2'b10), "s0");
            chk(gs < 3 || s1 == (gs == 4), "s1");
            chk(s2 == apsq, "s2");
            chk(final_tile == fin, "final");
            chk(fin || int'(wr_bank) == bank, "bank");
            chk(int'(q_shift) == alph[i], "qshift");
            for (int b = 0; b < 4; b++) begin
              chk(bank_en[b] == (mem_tile[b] >= 0), "bank_en");
              if (mem_tile[b] >= 0) chk(int'(dq_shift[b]) == alph[mem_tile[b]], "dqshift");
            end
            adv = 1; tile_last = (w == cnt_words - 1);
            @(negedge clk);
            adv = 0; tile_last = 0;
            if ($urandom_range(0, 1)) @(negedge clk);   // idle cycle: nothing may change
          end
          if (apsq) for (int b = 0; b < 4; b++) mem_tile[b] = -1;
          if (!fin) mem_tile[bank] = i;
        end
        #1; chk(tile_idx == '0, "wrap to tile 0");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

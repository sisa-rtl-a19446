// tb_sisa_scheduler: self-checking testbench of the tiling scheduler.
//
// A small instance (4 slabs of 2 rows x 4 columns, K tiles of 4) is given a
// series of GEMM shapes that exercise every regime: independent slabs, fused
// pairs and quads, a monolithic main tile with residual rows, partial last
// iterations (power gating) and several K tiles. An independent model of the
// tiling rules predicts the sequence of steps; at every compute start the
// testbench checks the power and bypass masks, the clear flag, the K-tile
// length, the reported configuration and the start delays, and it checks
// that the drain begins exactly klen + COLS + G*SLAB_H cycles after start.
// Every (row block, N tile) output tile must be reported exactly once by a
// write-back descriptor, and loads must overlap compute at least once.
module tb_sisa_scheduler;
  import sisa_pkg::*;

  localparam int unsigned S = 4, H = 2, C = 4, KT = 4, DW = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done, load_overlap;
  logic [DW-1:0] dim_m, dim_n, dim_k;
  slab_cfg_e cfg;
  logic act_rd_en [S], wgt_rd_en [S];
  logic [13:0] act_rd_addr [S];
  logic [10:0] wgt_rd_addr [S];
  logic [1:0] act_sel [S], wgt_sel [S];
  logic pwr_on [S], bypass [S], act_wr_en [S], wgt_wr_en [S];
  logic wr_half, rd_half;
  logic [1:0] wr_addr;
  logic slab_start [S], slab_clear [S], slab_drain [S], ob_wr_en [S], wb_valid [S];
  logic [2:0] klen;
  logic [9:0] act_delay [S];
  logic [8:0] ob_wr_addr [S], wb_addr [S];
  logic [DW-1:0] wb_row0 [S], wb_col0 [S];
  int checks = 0, failures = 0;
  int overlaps = 0;

  sisa_scheduler #(.NUM_SLABS(S), .SLAB_H(H), .COLS(C), .KT(KT), .ACT_WORDS(16384),
                   .WGT_WORDS(2048), .OUT_WORDS(512), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  always @(posedge clk) if (load_overlap) overlaps++;

  task automatic run_gemm(int m, int n, int k);
    int rb_tot = (m + H - 1) / H, nt = (n + C - 1) / C, nk = (k + KT - 1) / KT;
    int mrb = 0;
    int seen [int];
    int nsteps = 0;
    dim_m = DW'(m); dim_n = DW'(n); dim_k = DW'(k);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (mrb < rb_tot) begin
      int rem = rb_tot - mrb;
      int g = 1;
      int rows, ng, nit;
      while (g < rem && g < S) g *= 2;
      rows = (rem < g) ? rem : g;
      ng = S / g;
      nit = (nt + ng - 1) / ng;
      for (int it = 0; it < nit; it++) begin
        for (int kt = 0; kt < nk; kt++) begin
          int kl = (kt == nk - 1) ? k - kt * KT : KT;
          int act_mask = 0, byp_mask = 0, got_act = 0, got_byp = 0, got_clr = 0;
          int t = 0;
          for (int s = 0; s < S; s++) begin
            int j = it * ng + s / g;
            int p = s % g;
            if (j < nt && p < rows) begin
              act_mask |= 1 << s;
              if (p != 0) byp_mask |= 1 << s;
            end
          end
          // wait for the step's start
          while (!(slab_start[0] | slab_start[1] | slab_start[2] | slab_start[3])) begin
            @(negedge clk);
            t++;
            if (t > 1000) break;
          end
          for (int s = 0; s < S; s++) begin
            got_act |= int'(slab_start[s]) << s;
            got_byp |= int'(bypass[s] & pwr_on[s]) << s;
            got_clr |= int'(slab_clear[s]) << s;
            if (pwr_on[s]) chk("act_delay", int'(act_delay[s]), H * (s % g));
          end
          chk($sformatf("m%0d active mask", m), got_act, act_mask);
          chk("power mask", got_act, int'({pwr_on[3], pwr_on[2], pwr_on[1], pwr_on[0]}));
          chk("bypass mask", got_byp, byp_mask);
          chk("clear", got_clr, (kt == 0) ? act_mask : 0);
          chk("klen", int'(klen), kl);
          chk("cfg", int'(cfg), (g == 1) ? 0 : ((g == S) ? 2 : 1));
          nsteps++;
          if (kt == nk - 1) begin
            // drain must follow after exactly kl + C + g*H cycles
            t = 0;
            do begin
              @(negedge clk);
              t++;
            end while (!(slab_drain[0] | slab_drain[1] | slab_drain[2] | slab_drain[3]) && t < 1000);
            chk("start to drain", t, kl + C + g * H);
            repeat (H) begin
              for (int s = 0; s < S; s++) if (wb_valid[s]) seen[int'(wb_row0[s]) * 1000 + int'(wb_col0[s])]++;
              @(negedge clk);
            end
            for (int s = 0; s < S; s++) if (wb_valid[s]) seen[int'(wb_row0[s]) * 1000 + int'(wb_col0[s])]++;
          end else begin
            @(negedge clk);
          end
        end
      end
      mrb += rows;
    end
    while (!done) @(negedge clk);
    @(negedge clk);
    chk("not busy", int'(busy), 0);
    // every output tile exactly once
    for (int rb = 0; rb < rb_tot; rb++)
      for (int j = 0; j < nt; j++) begin
        int key = rb * H * 1000 + j * C;
        chk($sformatf("tile rb%0d j%0d", rb, j), seen.exists(key) ? seen[key] : 0, 1);
      end
    chk("descriptor count", seen.size(), rb_tot * nt);
  endtask

  initial begin
    start = 1'b0; dim_m = '0; dim_n = '0; dim_k = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_gemm(2, 16, 4);    // independent, all slabs busy
    run_gemm(1, 10, 9);    // independent, last iteration gated, 3 K tiles
    run_gemm(3, 12, 5);    // fused pairs
    run_gemm(5, 8, 4);     // fused quad = monolithic (S = 4), one slab gated
    run_gemm(8, 4, 4);     // monolithic
    run_gemm(11, 20, 6);   // monolithic main tile + residual of 2 fused rows... and residual 1
    run_gemm(9, 9, 3);     // monolithic + independent residual
    chk("loads overlapped compute", int'(overlaps > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

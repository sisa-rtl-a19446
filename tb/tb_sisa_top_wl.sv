// tb_sisa_top_wl: the workload shapes of the evaluation on a wider instance.
//
// Eight slabs of 16 rows and K tiles of 128, as at the default size, but
// 16 columns per slab instead of 128, so that the model stays small enough to
// simulate. The token counts M = 1, 16, 33, 64, 100, 128 and 150 span the range
// the design is evaluated over (single-token decode up to a batch larger
// than the array); N and K are reduced to 3 column tiles and 2 K tiles.
// For each GEMM the testbench fills the global buffer in the scheduler's
// layout, runs the accelerator, reads every reported output tile and
// compares it with sequential binary32 accumulation of BF16 products. It
// also checks the single-tile latency, and that M = 33 runs as two 64-row
// groups with one slab of each gated, and counts every mechanism as the
// reduced end-to-end testbench does. The mechanism list and checking are
// this testbench's own; the slab count, slab height and K-tile depth are the
// design's defaults.
module tb_sisa_top_wl;
  import sisa_pkg::*;
  import sisa_ref_pkg::*;

  localparam int unsigned S = 8, H = 16, C = 16, KT = 128, AWD = 512, WWD = 256, OWD = 256, DW = 20;
  localparam int unsigned BW = $clog2(S);

  logic clk = 1'b0, rst_n = 1'b0;
  logic act_host_wr_en, wgt_host_wr_en, start, busy, done, load_overlap, ob_rd_en;
  logic [BW-1:0] act_host_wr_bank, wgt_host_wr_bank, ob_rd_bank;
  logic [$clog2(AWD)-1:0] act_host_wr_addr;
  logic [$clog2(WWD)-1:0] wgt_host_wr_addr;
  logic [$clog2(OWD)-1:0] ob_rd_addr;
  bf16_t act_host_wr_data [H];
  bf16_t wgt_host_wr_data [C];
  logic [DW-1:0] dim_m, dim_n, dim_k;
  slab_cfg_e cfg;
  logic slab_pwr_on [S], wb_valid [S];
  logic [$clog2(OWD)-1:0] wb_addr [S];
  logic [DW-1:0] wb_row0 [S], wb_col0 [S];
  fp32_t ob_rd_data [C];

  sisa_top #(.NUM_SLABS(S), .SLAB_H(H), .COLS(C), .KT(KT), .ACT_WORDS(AWD),
             .WGT_WORDS(WWD), .OUT_WORDS(OWD), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_indep = 0, n_fused = 0, n_mono = 0, n_resid = 0, n_ktile = 0, n_gated = 0;
  int n_overlap = 0, n_bcast = 0, n_reconfig = 0, n_pat33 = 0;
  logic started_q [S];

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observe mechanisms
  logic [S-1:0] pwr_prev = '0;
  always @(posedge clk) if (rst_n) begin
    logic [S-1:0] pw;
    int writers;
    for (int s = 0; s < S; s++) pw[s] = slab_pwr_on[s];
    if (busy && dut.slab_start[0]) begin
      if (cfg == CFG_INDEPENDENT) n_indep++;
      if (cfg == CFG_FUSED) n_fused++;
      if (cfg == CFG_MONOLITHIC) n_mono++;
      if (pw != '0 && pw != '1) n_gated++;
      if (!dut.slab_clear[0]) n_ktile++;
    end
    if (busy && dut.slab_start[0] && pw == 8'b0111_0111) n_pat33++;
    if (load_overlap) n_overlap++;
    if (busy && pw != pwr_prev && pwr_prev != '0) n_reconfig++;
    pwr_prev <= pw;
    // one activation bank read feeding several slab buffers
    writers = 0;
    for (int s = 0; s < S; s++) if (dut.act_wr_en[s] && dut.u_gbuf.act_sel_q[s] == dut.u_gbuf.act_sel_q[0]) writers++;
    if (writers > 1) n_bcast++;
  end

  bf16_t A [][];
  bf16_t B [][];
  fp32_t R [][];

  task automatic chk(string what, fp32_t got, fp32_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic gemm(int m, int n, int k, output int cycles);
    int rbt = (m + H - 1) / H, nt = (n + C - 1) / C;
    int rows0 [$], cols0 [$], banks [$], addrs [$];
    bit mono_seen = 0;
    A = new[rbt * H];
    foreach (A[i]) begin A[i] = new[k]; foreach (A[i][kk]) A[i][kk] = (i < m) ? rand_bf16(2) : 16'd0; end
    B = new[k];
    foreach (B[kk]) begin B[kk] = new[nt * C]; foreach (B[kk][c]) B[kk][c] = (c < n) ? rand_bf16(2) : 16'd0; end
    R = new[m];
    foreach (R[i]) begin
      R[i] = new[n];
      foreach (R[i][c]) begin
        fp32_t acc = 32'd0;
        for (int kk = 0; kk < k; kk++) acc = add_ref(acc, mul_ref(A[i][kk], B[kk][c]));
        R[i][c] = acc;
      end
    end
    // fill the global buffer
    for (int rb = 0; rb < rbt; rb++)
      for (int kk = 0; kk < k; kk++) begin
        act_host_wr_en = 1'b1; act_host_wr_bank = BW'(rb % S);
        act_host_wr_addr = $bits(act_host_wr_addr)'((rb / S) * k + kk);
        for (int i = 0; i < H; i++) act_host_wr_data[i] = A[rb * H + i][kk];
        @(negedge clk);
      end
    act_host_wr_en = 1'b0;
    for (int j = 0; j < nt; j++)
      for (int kk = 0; kk < k; kk++) begin
        wgt_host_wr_en = 1'b1; wgt_host_wr_bank = BW'(j % S);
        wgt_host_wr_addr = $bits(wgt_host_wr_addr)'((j / S) * k + kk);
        for (int c = 0; c < C; c++) wgt_host_wr_data[c] = B[kk][j * C + c];
        @(negedge clk);
      end
    wgt_host_wr_en = 1'b0;
    // run
    dim_m = DW'(m); dim_n = DW'(n); dim_k = DW'(k);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cycles = 1;
    while (!done) begin
      for (int s = 0; s < S; s++) if (wb_valid[s]) begin
        rows0.push_back(int'(wb_row0[s])); cols0.push_back(int'(wb_col0[s]));
        banks.push_back(s); addrs.push_back(int'(wb_addr[s]));
      end
      if (cfg == CFG_MONOLITHIC) mono_seen = 1;
      else if (mono_seen && dut.slab_start[0]) begin n_resid++; mono_seen = 0; end
      @(negedge clk);
      cycles++;
    end
    // read back every reported tile
    for (int t = 0; t < rows0.size(); t++)
      for (int r = 0; r < H; r++) begin
        ob_rd_en = 1'b1; ob_rd_bank = BW'(banks[t]); ob_rd_addr = $bits(ob_rd_addr)'(addrs[t] + r);
        @(negedge clk);
        for (int c = 0; c < C; c++)
          if (rows0[t] + r < m && cols0[t] + c < n)
            chk($sformatf("m%0d n%0d k%0d C[%0d][%0d]", m, n, k, rows0[t] + r, cols0[t] + c),
                ob_rd_data[c], R[rows0[t] + r][cols0[t] + c]);
      end
    ob_rd_en = 1'b0;
    checks++;
    if (rows0.size() != rbt * nt) begin
      failures++;
      $display("FAIL m%0d n%0d: %0d tiles reported, expected %0d", m, n, rows0.size(), rbt * nt);
    end
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end
  endtask

  int wl_m [7] = '{1, 16, 33, 64, 100, 128, 150};

  initial begin
    int cyc;
    act_host_wr_en = 1'b0; wgt_host_wr_en = 1'b0; start = 1'b0; ob_rd_en = 1'b0;
    act_host_wr_bank = '0; wgt_host_wr_bank = '0; act_host_wr_addr = '0; wgt_host_wr_addr = '0;
    ob_rd_bank = '0; ob_rd_addr = '0; dim_m = '0; dim_n = '0; dim_k = '0;
    foreach (act_host_wr_data[i]) act_host_wr_data[i] = '0;
    foreach (wgt_host_wr_data[c]) wgt_host_wr_data[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // single tile: load K + compute + drain latency
    gemm(3, C, 5, cyc);
    checks++;
    // start edge, wait, K reads, push, issue, K + C + H - 1 compute edges,
    // last-MAC edge, H drain cycles, done
    if (cyc != 1 + 1 + 5 + 1 + 1 + (5 + C + H - 1) + 1 + H + 1) begin
      failures++;
      $display("FAIL single-tile latency %0d cycles", cyc);
    end
    foreach (wl_m[i]) begin
      gemm(wl_m[i], 3 * C, 2 * KT - 3, cyc);
      $display("workload M=%0d N=%0d K=%0d: %0d cycles", wl_m[i], 3 * C, 2 * KT - 3, cyc);
      if (wl_m[i] == 33) begin
        checks++;
        if (n_pat33 == 0) begin
          failures++;
          $display("FAIL M=33 did not run as two 64-row groups with one slab each gated");
        end
      end
    end
    need("independent slabs", n_indep);
    need("fused slab groups", n_fused);
    need("monolithic array", n_mono);
    need("residual tiles after full tile", n_resid);
    need("K tiling (accumulate)", n_ktile);
    need("slab power gating", n_gated);
    need("load overlapping compute", n_overlap);
    need("activation broadcast", n_bcast);
    need("reconfiguration", n_reconfig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

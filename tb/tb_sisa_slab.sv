// tb_sisa_slab: self-checking testbench of a slab and of slab fusion.
//
// Two small slabs (4 x 8 PEs, 16-deep local buffers) are chained as in the
// array: slab 1's b_from_above is slab 0's b_to_below. Scenarios:
//  1. independent: both slabs run their own GEMM tile at the same time;
//  2. K tiling: a second K tile accumulates on top of the first (no clear);
//  3. fused: slab 1 bypasses its weight buffer and, delayed by SLAB_H cycles,
//     computes rows 4..7 of an 8-row tile with the weights of slab 0;
//  4. power gating: slab 1 is gated and must produce zeros.
// Results are drained klen + COLS + G*SLAB_H - 1 clock edges after the edge
// that samples start (the documented compute latency), checked against sequential binary32
// accumulation of BF16 products, and one cycle less is shown to be too early.
module tb_sisa_slab;
  import sisa_pkg::*;
  import sisa_ref_pkg::*;

  localparam int unsigned H  = 4;
  localparam int unsigned C  = 8;
  localparam int unsigned KT = 16;
  localparam int unsigned AW = $clog2(KT);

  logic clk = 1'b0, rst_n = 1'b0;
  logic pwr_on [2], bypass [2], act_wr_en [2], wgt_wr_en [2], start [2], clear [2], drain [2], busy [2];
  logic wr_half, rd_half;
  logic [AW-1:0] wr_addr;
  logic [AW:0] klen;
  logic [9:0] act_delay [2];
  bf16_t act_wr_data [2][H];
  bf16_t wgt_wr_data [2][C];
  bf16_t b_chain [3][C];
  logic  bv_chain [3][C];
  fp32_t out_row [2][C];

  bf16_t A [2*H][KT*2];
  bf16_t B [2][KT*2][C];
  fp32_t R [2*H][C];
  int checks = 0, failures = 0;

  for (genvar s = 0; s < 2; s++) begin : g_slab
    sisa_slab #(.SLAB_H(H), .COLS(C), .KT(KT)) dut (
      .clk, .rst_n, .pwr_on(pwr_on[s]), .bypass(bypass[s]),
      .act_wr_en(act_wr_en[s]), .act_wr_half(wr_half), .act_wr_addr(wr_addr), .act_wr_data(act_wr_data[s]),
      .wgt_wr_en(wgt_wr_en[s]), .wgt_wr_half(wr_half), .wgt_wr_addr(wr_addr), .wgt_wr_data(wgt_wr_data[s]),
      .start(start[s]), .rd_half, .klen, .act_delay(act_delay[s]), .clear(clear[s]), .drain(drain[s]),
      .b_from_above(b_chain[s]), .b_vld_from_above(bv_chain[s]),
      .b_to_below(b_chain[s+1]), .b_vld_to_below(bv_chain[s+1]),
      .out_row(out_row[s]), .busy(busy[s])
    );
  end
  initial foreach (b_chain[0][c]) begin b_chain[0][c] = '0; bv_chain[0][c] = 1'b0; end

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, fp32_t got, fp32_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // write K tile kt (klen elements) into half h of both slabs
  task automatic fill(input int kt, input int kl, input logic h, input bit fused);
    for (int k = 0; k < kl; k++) begin
      wr_half = h; wr_addr = AW'(k);
      for (int s = 0; s < 2; s++) begin
        act_wr_en[s] = 1'b1;
        wgt_wr_en[s] = 1'b1;
        for (int i = 0; i < H; i++) act_wr_data[s][i] = A[(fused ? s*H : 0) + i][kt*KT + k];
        for (int c = 0; c < C; c++) wgt_wr_data[s][c] = B[s][kt*KT + k][c];
      end
      @(negedge clk);
    end
    for (int s = 0; s < 2; s++) begin act_wr_en[s] = 1'b0; wgt_wr_en[s] = 1'b0; end
  endtask

  // start both slabs, wait the compute latency, optionally peek one cycle early
  task automatic run(input logic h, input int kl, input int g, input bit clr);
    if (clr) begin
      clear[0] = 1'b1; clear[1] = 1'b1; @(negedge clk); clear[0] = 1'b0; clear[1] = 1'b0;
    end
    rd_half = h; klen = (AW+1)'(kl);
    start[0] = 1'b1; start[1] = 1'b1;
    @(negedge clk);
    start[0] = 1'b0; start[1] = 1'b0;
    repeat (kl + C + g*H - 2) @(negedge clk);
  endtask

  task automatic drain_check(input bit fused, input int slabs, input string tag);
    drain[0] = 1'b1; drain[1] = 1'b1;
    for (int d = 0; d < H; d++) begin
      for (int s = 0; s < slabs; s++)
        for (int c = 0; c < C; c++)
          chk($sformatf("%s s%0d r%0d c%0d", tag, s, H-1-d, c), out_row[s][c],
              fused ? R[s*H + H-1-d][c] : (s == 0 ? R[H-1-d][c] : R[H + H-1-d][c]));
      @(negedge clk);
    end
    drain[0] = 1'b0; drain[1] = 1'b0;
  endtask

  // reference: rows 0..H-1 use B[0], rows H..2H-1 use B[1] (independent) or B[0] (fused)
  task automatic ref_tile(input int k0, input int kl, input bit fused, input bit clr);
    for (int i = 0; i < 2*H; i++)
      for (int c = 0; c < C; c++) begin
        fp32_t acc = clr ? 32'd0 : R[i][c];
        for (int k = k0; k < k0 + kl; k++)
          acc = add_ref(acc, mul_ref(A[fused ? i : i % H][k], B[fused ? 0 : i / H][k][c]));
        R[i][c] = acc;
      end
  endtask

  initial begin
    for (int s = 0; s < 2; s++) begin
      pwr_on[s] = 1'b1; bypass[s] = 1'b0; act_wr_en[s] = 1'b0; wgt_wr_en[s] = 1'b0;
      start[s] = 1'b0; clear[s] = 1'b0; drain[s] = 1'b0; act_delay[s] = '0;
    end
    wr_half = 1'b0; rd_half = 1'b0; wr_addr = '0; klen = '0;
    foreach (A[i, k]) A[i][k] = rand_bf16(3);
    foreach (B[s, k, c]) B[s][k][c] = rand_bf16(3);
    foreach (act_wr_data[s, i]) act_wr_data[s][i] = '0;
    foreach (wgt_wr_data[s, c]) wgt_wr_data[s][c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // 1 + 2: independent slabs, two K tiles, second one loaded during the first
    fill(0, KT, 1'b0, 1'b0);
    ref_tile(0, KT, 1'b0, 1'b1);
    run(1'b0, KT, 1, 1'b1);
    fill(1, 11, 1'b1, 1'b0);  // double buffering: other half is written after the run
    ref_tile(KT, 11, 1'b0, 1'b0);
    run(1'b1, 11, 1, 1'b0);
    // one cycle before the documented latency the last PE has not finished
    checks++;
    if (out_row[0][C-1] == R[H-1][C-1]) begin
      failures++;
      $display("FAIL result visible one cycle early");
    end
    @(negedge clk);
    drain_check(1'b0, 2, "indep");

    // 3: fused 8 x 8 array, slab 1 takes weights from slab 0
    bypass[1] = 1'b1; act_delay[1] = 10'(H);
    fill(0, 13, 1'b0, 1'b1);
    ref_tile(0, 13, 1'b1, 1'b1);
    run(1'b0, 13, 2, 1'b1);
    @(negedge clk);
    drain_check(1'b1, 2, "fused");

    // 4: slab 1 power gated: no output, and slab 0 unaffected
    bypass[1] = 1'b0; act_delay[1] = '0; pwr_on[1] = 1'b0;
    fill(0, 5, 1'b1, 1'b0);
    ref_tile(0, 5, 1'b0, 1'b1);
    run(1'b1, 5, 1, 1'b1);
    @(negedge clk);
    for (int c = 0; c < C; c++) begin
      chk("gated out", out_row[1][c], 32'd0);
      chk("gated chain", {16'd0, b_chain[2][c]}, 32'd0);
    end
    drain_check(1'b0, 1, "gate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

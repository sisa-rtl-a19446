// sisa_top: scale-in systolic array GEMM accelerator.
//
// A ROWS x COLS array of BF16 output-stationary PEs (128 x 128) is cut into
// NUM_SLABS horizontal slabs (8 slabs of 16 x 128). Each slab has its own
// activation and weight local buffers and can run a GEMM tile on its own, or
// take its weights from the slab above through a bypass multiplexer so that
// 2, 4 or all 8 slabs act as one taller array. Slabs without work are power
// gated. A banked global buffer (8 MB) feeds the slab-local buffers, a banked
// output buffer (2 MB) collects the rows each slab drains, and the scheduler
// tiles C[M,N] = A[M,K] x B[K,N] over the slabs.
//
// Host interface: write A and B into the global buffer (layout described in
// sisa_scheduler), pulse start with M, N and K, and collect write-back
// descriptors: wb_valid[s] says slab s has finished an output tile, and word
// wb_addr[s] + r of output bank s holds row wb_row0[s] + r, columns
// wb_col0[s] .. wb_col0[s] + COLS - 1 of C, for r = 0 .. SLAB_H - 1. Rows are
// read through the output buffer port (one-cycle latency); done pulses when
// the whole GEMM has been drained.
// slab_pwr_on is the per-slab power enable for the supply switches, which are
// outside this RTL.
// The weights leaving the bottom of the last slab have no consumer, which lint
// reports as an unused signal; it is the natural end of the chain.
module sisa_top
  import sisa_pkg::*;
#(
  parameter int unsigned NUM_SLABS = sisa_pkg::SISA_NUM_SLABS,
  parameter int unsigned SLAB_H    = sisa_pkg::SISA_SLAB_H,
  parameter int unsigned COLS      = sisa_pkg::SISA_COLS,
  parameter int unsigned KT        = sisa_pkg::SISA_KT,
  parameter int unsigned ACT_WORDS = 16384,
  parameter int unsigned WGT_WORDS = 2048,
  parameter int unsigned OUT_WORDS = 512,
  parameter int unsigned DW        = 20,
  localparam int unsigned LS  = $clog2(NUM_SLABS),
  localparam int unsigned BW  = (LS > 0) ? LS : 1,
  localparam int unsigned LAW = $clog2(KT),
  localparam int unsigned AAW = $clog2(ACT_WORDS),
  localparam int unsigned WAW = $clog2(WGT_WORDS),
  localparam int unsigned OAW = $clog2(OUT_WORDS)
) (
  input  logic           clk,
  input  logic           rst_n,
  // global buffer fill
  input  logic           act_host_wr_en,
  input  logic [BW-1:0]  act_host_wr_bank,
  input  logic [AAW-1:0] act_host_wr_addr,
  input  bf16_t          act_host_wr_data [SLAB_H],
  input  logic           wgt_host_wr_en,
  input  logic [BW-1:0]  wgt_host_wr_bank,
  input  logic [WAW-1:0] wgt_host_wr_addr,
  input  bf16_t          wgt_host_wr_data [COLS],
  // GEMM command
  input  logic           start,
  input  logic [DW-1:0]  dim_m,
  input  logic [DW-1:0]  dim_n,
  input  logic [DW-1:0]  dim_k,
  output logic           busy,
  output logic           done,
  output slab_cfg_e      cfg,
  output logic           load_overlap,
  output logic           slab_pwr_on [NUM_SLABS],
  // write-back
  output logic           wb_valid [NUM_SLABS],
  output logic [OAW-1:0] wb_addr  [NUM_SLABS],
  output logic [DW-1:0]  wb_row0  [NUM_SLABS],
  output logic [DW-1:0]  wb_col0  [NUM_SLABS],
  input  logic           ob_rd_en,
  input  logic [BW-1:0]  ob_rd_bank,
  input  logic [OAW-1:0] ob_rd_addr,
  output fp32_t          ob_rd_data [COLS]
);

  logic           act_rd_en   [NUM_SLABS];
  logic [AAW-1:0] act_rd_addr [NUM_SLABS];
  logic           wgt_rd_en   [NUM_SLABS];
  logic [WAW-1:0] wgt_rd_addr [NUM_SLABS];
  logic [BW-1:0]  act_sel     [NUM_SLABS];
  logic [BW-1:0]  wgt_sel     [NUM_SLABS];
  bf16_t          act_data    [NUM_SLABS][SLAB_H];
  bf16_t          wgt_data    [NUM_SLABS][COLS];
  logic           pwr_on      [NUM_SLABS];
  logic           bypass      [NUM_SLABS];
  logic           act_wr_en   [NUM_SLABS];
  logic           wgt_wr_en   [NUM_SLABS];
  logic           wr_half, rd_half;
  logic [LAW-1:0] wr_addr;
  logic [LAW:0]   klen;
  logic           slab_start  [NUM_SLABS];
  logic           slab_clear  [NUM_SLABS];
  logic           slab_drain  [NUM_SLABS];
  logic [9:0]     act_delay   [NUM_SLABS];
  logic           ob_wr_en    [NUM_SLABS];
  logic [OAW-1:0] ob_wr_addr  [NUM_SLABS];
  fp32_t          out_row     [NUM_SLABS][COLS];
  logic           slab_busy   [NUM_SLABS];

  sisa_scheduler #(
    .NUM_SLABS(NUM_SLABS), .SLAB_H(SLAB_H), .COLS(COLS), .KT(KT),
    .ACT_WORDS(ACT_WORDS), .WGT_WORDS(WGT_WORDS), .OUT_WORDS(OUT_WORDS), .DW(DW)
  ) u_sched (
    .clk, .rst_n, .start, .dim_m, .dim_n, .dim_k, .busy, .done, .cfg, .load_overlap,
    .act_rd_en, .act_rd_addr, .wgt_rd_en, .wgt_rd_addr, .act_sel, .wgt_sel,
    .pwr_on, .bypass, .act_wr_en, .wgt_wr_en, .wr_half, .wr_addr,
    .slab_start, .slab_clear, .rd_half, .klen, .act_delay, .slab_drain,
    .ob_wr_en, .ob_wr_addr, .wb_valid, .wb_addr, .wb_row0, .wb_col0
  );

  global_buffer #(
    .NUM_SLABS(NUM_SLABS), .SLAB_H(SLAB_H), .COLS(COLS),
    .ACT_WORDS(ACT_WORDS), .WGT_WORDS(WGT_WORDS)
  ) u_gbuf (
    .clk,
    .act_host_wr_en, .act_host_wr_bank, .act_host_wr_addr, .act_host_wr_data,
    .wgt_host_wr_en, .wgt_host_wr_bank, .wgt_host_wr_addr, .wgt_host_wr_data,
    .act_rd_en, .act_rd_addr, .wgt_rd_en, .wgt_rd_addr, .act_sel, .wgt_sel,
    .act_data, .wgt_data
  );

  for (genvar s = 0; s < NUM_SLABS; s++) begin : g_slab
    // weights leaving this slab, and those arriving from the slab above
    bf16_t b_down  [COLS];
    logic  bv_down [COLS];
    bf16_t b_up    [COLS];
    logic  bv_up   [COLS];
    for (genvar c = 0; c < COLS; c++) begin : g_chain
      if (s == 0) begin : g_first
        assign b_up[c]  = '0;  // the top slab has nothing above it
        assign bv_up[c] = 1'b0;
      end else begin : g_next
        assign b_up[c]  = g_slab[s-1].b_down[c];
        assign bv_up[c] = g_slab[s-1].bv_down[c];
      end
    end
    sisa_slab #(.SLAB_H(SLAB_H), .COLS(COLS), .KT(KT)) u_slab (
      .clk, .rst_n, .pwr_on(pwr_on[s]), .bypass(bypass[s]),
      .act_wr_en(act_wr_en[s]), .act_wr_half(wr_half), .act_wr_addr(wr_addr), .act_wr_data(act_data[s]),
      .wgt_wr_en(wgt_wr_en[s]), .wgt_wr_half(wr_half), .wgt_wr_addr(wr_addr), .wgt_wr_data(wgt_data[s]),
      .start(slab_start[s]), .rd_half, .klen, .act_delay(act_delay[s]),
      .clear(slab_clear[s]), .drain(slab_drain[s]),
      .b_from_above(b_up), .b_vld_from_above(bv_up),
      .b_to_below(b_down), .b_vld_to_below(bv_down),
      .out_row(out_row[s]), .busy(slab_busy[s])
    );
    assign slab_pwr_on[s] = pwr_on[s];
  end

  output_buffer #(.NUM_SLABS(NUM_SLABS), .COLS(COLS), .WORDS(OUT_WORDS)) u_obuf (
    .clk, .wr_en(ob_wr_en), .wr_addr(ob_wr_addr), .wr_data(out_row),
    .rd_en(ob_rd_en), .rd_bank(ob_rd_bank), .rd_addr(ob_rd_addr), .rd_data(ob_rd_data)
  );

  // a slab's local buffers have finished streaming by the time it drains
  for (genvar s = 0; s < NUM_SLABS; s++) begin : g_chk
    a_drain_after_stream: assert property (@(posedge clk) disable iff (!rst_n)
      slab_drain[s] |-> !slab_busy[s]);
  end

endmodule

// sisa_slab: one slab of the scale-in systolic array.
//
// A slab is SLAB_H rows x COLS columns of output-stationary PEs (16 x 128 in
// the reference configuration) with its own activation local buffer on the
// left edge (one lane per row) and weight local buffer on the top edge (one
// lane per column). Activations move right and weights move down one PE per
// cycle; every PE accumulates one element of the output tile.
//
// Fusion: when bypass is set, the top row takes its weights from the bottom
// row of the slab above (b_from_above) instead of from its own weight buffer,
// which is then disabled. A fused group of G slabs therefore behaves as one
// (G*SLAB_H) x COLS array: weights enter at the top slab only, and each lower
// slab starts its activation stream act_delay = position*SLAB_H cycles later
// so that its rows meet the weights that arrive through the slabs above.
//
// Drain: while drain is high the accumulators shift one row down per cycle and
// out_row shows the bottom row, so cycle d of the drain presents output row
// SLAB_H-1-d; each slab drains straight into its own output buffer bank and
// is cleared by the zeros shifted in at the top.
//
// Power gating: pwr_on = 0 holds every PE and both buffers' stream state at
// zero and isolates all outputs (the supply switch itself is not modelled).
//
// Timing: compute is started with start (one cycle). The last multiply-add of
// a group of G slabs happens at the (klen + COLS + G*SLAB_H - 1)-th clock edge
// after the edge that samples start; a clear pulse zeroes all accumulators
// (first K tile of an output tile), otherwise accumulation continues.
// Slab shape, bypass multiplexer, local buffers, direct drain to the output
// buffer and power gating follow the reference design; the drain-by-shifting
// and the start-delay scheme are choices of this design.
module sisa_slab
  import sisa_pkg::*;
#(
  parameter int unsigned SLAB_H = sisa_pkg::SISA_SLAB_H,
  parameter int unsigned COLS   = sisa_pkg::SISA_COLS,
  parameter int unsigned KT     = sisa_pkg::SISA_KT,
  localparam int unsigned AW    = $clog2(KT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          pwr_on,
  input  logic          bypass,
  // activation local buffer fill (one K-slice of SLAB_H rows per cycle)
  input  logic          act_wr_en,
  input  logic          act_wr_half,
  input  logic [AW-1:0] act_wr_addr,
  input  bf16_t         act_wr_data [SLAB_H],
  // weight local buffer fill (one K-slice of COLS columns per cycle)
  input  logic          wgt_wr_en,
  input  logic          wgt_wr_half,
  input  logic [AW-1:0] wgt_wr_addr,
  input  bf16_t         wgt_wr_data [COLS],
  // compute control
  input  logic          start,
  input  logic          rd_half,
  input  logic [AW:0]   klen,
  input  logic [9:0]    act_delay,
  input  logic          clear,
  input  logic          drain,
  // fusion chain
  input  bf16_t         b_from_above     [COLS],
  input  logic          b_vld_from_above [COLS],
  output bf16_t         b_to_below       [COLS],
  output logic          b_vld_to_below   [COLS],
  // results
  output fp32_t         out_row [COLS],
  output logic          busy
);

  bf16_t act_lane [SLAB_H];
  logic  act_vld  [SLAB_H];
  bf16_t wgt_lane [COLS];
  logic  wgt_vld  [COLS];
  logic  act_busy, wgt_busy;
  logic  wgt_en;

  assign wgt_en = pwr_on & ~bypass;
  assign busy   = act_busy | wgt_busy;

  slab_local_buffer #(.LANES(SLAB_H), .DEPTH(KT)) u_act_buf (
    .clk, .rst_n, .en(pwr_on),
    .wr_en(act_wr_en), .wr_half(act_wr_half), .wr_addr(act_wr_addr), .wr_data(act_wr_data),
    .rd_start(start), .rd_half, .rd_len(klen), .rd_delay(act_delay),
    .lane_data(act_lane), .lane_vld(act_vld), .busy(act_busy)
  );

  slab_local_buffer #(.LANES(COLS), .DEPTH(KT)) u_wgt_buf (
    .clk, .rst_n, .en(wgt_en),
    .wr_en(wgt_wr_en), .wr_half(wgt_wr_half), .wr_addr(wgt_wr_addr), .wr_data(wgt_wr_data),
    .rd_start(start), .rd_half, .rd_len(klen), .rd_delay(10'd0),
    .lane_data(wgt_lane), .lane_vld(wgt_vld), .busy(wgt_busy)
  );

  // PE grid wiring: a_h[i][c] enters PE(i,c) from the left, b_v[i][c] from the top
  bf16_t a_h   [SLAB_H][COLS+1];
  logic  a_hv  [SLAB_H][COLS+1];
  bf16_t b_v   [SLAB_H+1][COLS];
  logic  b_vv  [SLAB_H+1][COLS];
  fp32_t acc   [SLAB_H][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_top
    // slab fusion multiplexer: own weight buffer or the slab above
    assign b_v[0][c]  = bypass ? b_from_above[c]     : wgt_lane[c];
    assign b_vv[0][c] = bypass ? b_vld_from_above[c] : wgt_vld[c];
    assign b_to_below[c]     = b_v[SLAB_H][c];
    assign b_vld_to_below[c] = b_vv[SLAB_H][c];
    assign out_row[c]        = acc[SLAB_H-1][c];
  end

  for (genvar i = 0; i < SLAB_H; i++) begin : g_row
    assign a_h[i][0]  = act_lane[i];
    assign a_hv[i][0] = act_vld[i];
    for (genvar c = 0; c < COLS; c++) begin : g_col
      fp32_t psum_above;
      if (i == 0) begin : g_first
        assign psum_above = '0;
      end else begin : g_next
        assign psum_above = acc[i-1][c];
      end
      sisa_pe u_pe (
        .clk, .rst_n, .pwr_on, .clear, .drain,
        .a_in(a_h[i][c]), .a_vld_in(a_hv[i][c]),
        .b_in(b_v[i][c]), .b_vld_in(b_vv[i][c]),
        .psum_in(psum_above),
        .a_out(a_h[i][c+1]), .a_vld_out(a_hv[i][c+1]),
        .b_out(b_v[i+1][c]), .b_vld_out(b_vv[i+1][c]),
        .acc_out(acc[i][c])
      );
    end
  end

endmodule

// global_buffer: banked on-chip activation and weight memory.
//
// NUM_SLABS activation banks and NUM_SLABS weight banks. An activation word
// is one K-slice of a 16-row block of A (SLAB_H elements); a weight word is one
// K-row of a 128-column tile of B (COLS elements), so one read fills a whole
// slab-local buffer lane set in one cycle. Default sizes split the 8 MB budget
// evenly: 8 x 16384 x 32 B of activations plus 8 x 2048 x 256 B of weights.
//
// Host side: one write port per kind (bank, address, word). Array side: each
// bank has one read port driven by the scheduler (rd_en, rd_addr); reads take
// one cycle. Each slab picks the bank it listens to (act_sel / wgt_sel, given
// together with the read and registered alongside it), so one bank read can be
// broadcast to several slab-local buffers in the same cycle, as when all
// independent slabs share the same rows of A.
// The banking and the multi-element port follow the reference design; the
// word shapes, the even split and the select crossbar are choices of this
// design.
module global_buffer
  import sisa_pkg::*;
#(
  parameter int unsigned NUM_SLABS = sisa_pkg::SISA_NUM_SLABS,
  parameter int unsigned SLAB_H    = sisa_pkg::SISA_SLAB_H,
  parameter int unsigned COLS      = sisa_pkg::SISA_COLS,
  parameter int unsigned ACT_WORDS = 16384,
  parameter int unsigned WGT_WORDS = 2048,
  localparam int unsigned BW  = $clog2(NUM_SLABS),
  localparam int unsigned AAW = $clog2(ACT_WORDS),
  localparam int unsigned WAW = $clog2(WGT_WORDS)
) (
  input  logic           clk,
  // host fill
  input  logic           act_host_wr_en,
  input  logic [BW-1:0]  act_host_wr_bank,
  input  logic [AAW-1:0] act_host_wr_addr,
  input  bf16_t          act_host_wr_data [SLAB_H],
  input  logic           wgt_host_wr_en,
  input  logic [BW-1:0]  wgt_host_wr_bank,
  input  logic [WAW-1:0] wgt_host_wr_addr,
  input  bf16_t          wgt_host_wr_data [COLS],
  // array side, per bank
  input  logic           act_rd_en   [NUM_SLABS],
  input  logic [AAW-1:0] act_rd_addr [NUM_SLABS],
  input  logic           wgt_rd_en   [NUM_SLABS],
  input  logic [WAW-1:0] wgt_rd_addr [NUM_SLABS],
  // per slab source bank
  input  logic [BW-1:0]  act_sel [NUM_SLABS],
  input  logic [BW-1:0]  wgt_sel [NUM_SLABS],
  output bf16_t          act_data [NUM_SLABS][SLAB_H],
  output bf16_t          wgt_data [NUM_SLABS][COLS]
);

  typedef logic [SLAB_H*16-1:0] act_word_t;
  typedef logic [COLS*16-1:0]   wgt_word_t;

  act_word_t act_q [NUM_SLABS];
  wgt_word_t wgt_q [NUM_SLABS];
  logic [BW-1:0] act_sel_q [NUM_SLABS];
  logic [BW-1:0] wgt_sel_q [NUM_SLABS];
  act_word_t act_host_word;
  wgt_word_t wgt_host_word;

  always_comb begin
    for (int i = 0; i < SLAB_H; i++) act_host_word[i*16 +: 16] = act_host_wr_data[i];
    for (int c = 0; c < COLS; c++)   wgt_host_word[c*16 +: 16] = wgt_host_wr_data[c];
  end

  for (genvar b = 0; b < NUM_SLABS; b++) begin : g_bank
    act_word_t act_mem [ACT_WORDS];
    wgt_word_t wgt_mem [WGT_WORDS];

    always_ff @(posedge clk) begin
      if (act_host_wr_en && act_host_wr_bank == BW'(b)) act_mem[act_host_wr_addr] <= act_host_word;
      if (act_rd_en[b]) act_q[b] <= act_mem[act_rd_addr[b]];
    end

    always_ff @(posedge clk) begin
      if (wgt_host_wr_en && wgt_host_wr_bank == BW'(b)) wgt_mem[wgt_host_wr_addr] <= wgt_host_word;
      if (wgt_rd_en[b]) wgt_q[b] <= wgt_mem[wgt_rd_addr[b]];
    end
  end

  // per-slab crossbar, select registered with the read
  for (genvar s = 0; s < NUM_SLABS; s++) begin : g_slab
    always_ff @(posedge clk) begin
      act_sel_q[s] <= act_sel[s];
      wgt_sel_q[s] <= wgt_sel[s];
    end
    for (genvar i = 0; i < SLAB_H; i++) begin : g_a
      assign act_data[s][i] = act_q[act_sel_q[s]][i*16 +: 16];
    end
    for (genvar c = 0; c < COLS; c++) begin : g_w
      assign wgt_data[s][c] = wgt_q[wgt_sel_q[s]][c*16 +: 16];
    end
  end

endmodule

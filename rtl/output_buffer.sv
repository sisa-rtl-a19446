// output_buffer: multi-banked result memory between the slabs and write-back.
//
// One bank per slab, each WORDS words of one output row (COLS binary32
// values). During drain a slab writes one row per cycle into its own bank, so
// independent slabs and fused groups never compete for a port; the host (or a
// write-back engine) reads any bank through a separate read port in the same
// cycles, which lets results leave while the next tiles are being drained.
// Reads take one cycle. Default size: 8 banks x 512 words x 512 B = 2 MB.
// The 2 MB size and the banking follow the reference design; one bank per
// slab and the separate host read port are choices of this design.
module output_buffer
  import sisa_pkg::*;
#(
  parameter int unsigned NUM_SLABS = sisa_pkg::SISA_NUM_SLABS,
  parameter int unsigned COLS      = sisa_pkg::SISA_COLS,
  parameter int unsigned WORDS     = 512,
  localparam int unsigned BW = $clog2(NUM_SLABS),
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  // slab drain side
  input  logic          wr_en   [NUM_SLABS],
  input  logic [AW-1:0] wr_addr [NUM_SLABS],
  input  fp32_t         wr_data [NUM_SLABS][COLS],
  // host read side
  input  logic          rd_en,
  input  logic [BW-1:0] rd_bank,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data [COLS]
);

  typedef logic [COLS*32-1:0] row_t;

  row_t bank_q [NUM_SLABS];
  logic [BW-1:0] bank_sel_q;

  for (genvar b = 0; b < NUM_SLABS; b++) begin : g_bank
    row_t mem [WORDS];
    row_t wr_word;
    always_comb begin
      for (int c = 0; c < COLS; c++) wr_word[c*32 +: 32] = wr_data[b][c];
    end
    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[wr_addr[b]] <= wr_word;
      if (rd_en && rd_bank == BW'(b)) bank_q[b] <= mem[rd_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) bank_sel_q <= rd_bank;
  end

  for (genvar c = 0; c < COLS; c++) begin : g_col
    assign rd_data[c] = bank_q[bank_sel_q][c*32 +: 32];
  end

endmodule

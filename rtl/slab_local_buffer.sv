// slab_local_buffer: double-buffered local buffer on one edge of a slab.
//
// One instance feeds the activation edge (LANES = 16 rows) and one the weight
// edge (LANES = 128 columns) of a slab. Every lane owns a dedicated pair of
// banks (the two halves of the double buffer), DEPTH entries each. The global
// buffer writes one K-slice, one element per lane, per cycle into the half
// that is not being read, while the other half streams into the array.
// Streaming starts with rd_start: in stream cycle t lane l reads entry
// t - rd_delay - l, so successive lanes are skewed by one cycle as a systolic
// array needs, and rd_delay adds the offset of a slab that sits lower in a
// fused group. Reads are registered: the entry for cycle t is on lane_data
// in cycle t+1 with lane_vld set; outside 0..rd_len-1 a lane outputs zero
// with lane_vld low. busy stays high until the last lane has finished.
// en = 0 disables the buffer (a bypassed weight buffer in a fused slab, or a
// gated slab): no writes, no streaming, zero outputs.
// The bank pair per boundary PE, double buffering and the 8 KB / 64 KB sizes
// follow the reference design; the depth split (2 x 128 entries) and the
// address-offset skew are choices of this design.
module slab_local_buffer
  import sisa_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  // fill side
  input  logic          wr_en,
  input  logic          wr_half,
  input  logic [AW-1:0] wr_addr,
  input  bf16_t         wr_data [LANES],
  // stream side
  input  logic          rd_start,
  input  logic          rd_half,
  input  logic [AW:0]   rd_len,
  input  logic [CW-1:0] rd_delay,
  output bf16_t         lane_data [LANES],
  output logic          lane_vld  [LANES],
  output logic          busy
);

  bf16_t         mem [LANES][2][DEPTH];
  logic          active, half_q;
  logic [CW-1:0] t, last_t;
  logic [AW:0]   len_q;
  logic [CW-1:0] delay_q;

  assign last_t = delay_q + CW'(LANES - 1) + CW'(len_q);
  assign busy   = active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      half_q  <= 1'b0;
      t       <= '0;
      len_q   <= '0;
      delay_q <= '0;
    end else if (!en) begin
      active <= 1'b0;
    end else if (rd_start) begin
      active  <= 1'b1;
      half_q  <= rd_half;
      t       <= '0;
      len_q   <= rd_len;
      delay_q <= rd_delay;
    end else if (active) begin
      t <= t + 1'b1;
      if (t == last_t) active <= 1'b0;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [CW-1:0] idx;
    logic          in_range;
    assign idx      = t - delay_q - CW'(l);
    assign in_range = (t >= delay_q + CW'(l)) && (idx < CW'(len_q));

    always_ff @(posedge clk) begin
      if (en && wr_en) mem[l][wr_half][wr_addr] <= wr_data[l];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        lane_data[l] <= '0;
        lane_vld[l]  <= 1'b0;
      end else if (en && active && in_range) begin
        lane_data[l] <= mem[l][half_q][idx[AW-1:0]];
        lane_vld[l]  <= 1'b1;
      end else begin
        lane_data[l] <= '0;
        lane_vld[l]  <= 1'b0;
      end
    end
  end

  // Double buffering rule: the half being streamed is never written.
  property p_no_write_to_streamed_half;
    @(posedge clk) disable iff (!rst_n) (en && wr_en && active) |-> (wr_half != half_q);
  endproperty
  a_no_write_to_streamed_half: assert property (p_no_write_to_streamed_half);

endmodule

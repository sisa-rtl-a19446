// sisa_pe: output-stationary BF16 multiply-accumulate processing element.
//
// Each PE owns one element of the output tile. Activations enter from the left
// and leave to the right, weights enter from the top and leave downwards, each
// through one register, so a wavefront crosses one PE per cycle. When both
// incoming operands are valid the PE adds a*b to its binary32 accumulator.
// Partial sums never move between PEs during computation; only during drain
// does the accumulator shift one PE down per cycle (psum_in from the PE above,
// zero entering at the top of a slab), which also leaves the array cleared.
// pwr_on = 0 models the slab being power gated: every register is held at zero
// (state is lost) and the outputs are isolated to zero.
// Timing: operands seen on a_in/b_in in cycle t appear on a_out/b_out and are
// accumulated in cycle t+1. clear has priority over drain, drain over MAC.
// The dataflow (output stationary, operands streamed, BF16) follows the
// reference design; the accumulator format and the shift-out drain are choices
// of this design.
module sisa_pe
  import sisa_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  pwr_on,
  input  logic  clear,
  input  logic  drain,
  input  bf16_t a_in,
  input  logic  a_vld_in,
  input  bf16_t b_in,
  input  logic  b_vld_in,
  input  fp32_t psum_in,
  output bf16_t a_out,
  output logic  a_vld_out,
  output bf16_t b_out,
  output logic  b_vld_out,
  output fp32_t acc_out
);

  fp32_t prod, sum, acc;
  bf16_t a_q, b_q;
  logic  a_vq, b_vq;

  bf16_mul u_mul (.a(a_in), .b(b_in), .y(prod));
  fp32_add u_add (.a(acc), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; a_q <= '0; b_q <= '0; a_vq <= 1'b0; b_vq <= 1'b0;
    end else if (!pwr_on) begin
      acc <= '0; a_q <= '0; b_q <= '0; a_vq <= 1'b0; b_vq <= 1'b0;
    end else begin
      a_q  <= a_in;
      a_vq <= a_vld_in;
      b_q  <= b_in;
      b_vq <= b_vld_in;
      if (clear)                      acc <= '0;
      else if (drain)                 acc <= psum_in;
      else if (a_vld_in && b_vld_in)  acc <= sum;
    end
  end

  assign a_out     = pwr_on ? a_q : '0;
  assign a_vld_out = pwr_on & a_vq;
  assign b_out     = pwr_on ? b_q : '0;
  assign b_vld_out = pwr_on & b_vq;
  assign acc_out   = pwr_on ? acc : '0;

endmodule

// tb_sisa_pe: self-checking testbench of the BF16 output-stationary PE.
//
// Streams random operand pairs (narrow and wide exponent ranges, so that both
// cancellation and far-apart alignment occur) and compares the accumulator
// after every cycle with the reference binary32 arithmetic of sisa_ref_pkg.
// Also checks the one-cycle forwarding of operands and valid bits, that
// invalid operands are not accumulated, clear, the drain shift from psum_in,
// special values (inf, NaN), and that power gating zeroes state and outputs.
module tb_sisa_pe;
  import sisa_pkg::*;
  import sisa_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pwr_on, clear, drain, a_vld_in, b_vld_in, a_vld_out, b_vld_out;
  bf16_t a_in, b_in, a_out, b_out;
  fp32_t psum_in, acc_out;
  int checks = 0, failures = 0;

  sisa_pe dut (.*);

  always #5 clk = ~clk;

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t ref_acc, p;
    bf16_t x, y;
    logic  v;
    pwr_on = 1'b1; clear = 1'b0; drain = 1'b0;
    a_in = '0; b_in = '0; a_vld_in = 1'b0; b_vld_in = 1'b0; psum_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("reset acc", acc_out, 32'd0);
    for (int run = 0; run < 60; run++) begin
      int spread;
      spread = (run % 3 == 0) ? 40 : ((run % 3 == 1) ? 4 : 1);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      check("clear", acc_out, 32'd0);
      ref_acc = 32'd0;
      for (int k = 0; k < 64; k++) begin
        x = rand_bf16(spread);
        y = rand_bf16(spread);
        v = ($urandom_range(7, 0) != 0);
        a_in = x; b_in = y; a_vld_in = v; b_vld_in = v | 1'($urandom);
        if (v) ref_acc = add_ref(ref_acc, mul_ref(x, y));
        @(negedge clk);
        check("acc", acc_out, ref_acc);
        check("a fwd", {15'd0, a_vld_out, a_out}, {15'd0, v, x});
        check("b fwd", {16'd0, b_out}, {16'd0, y});
      end
      a_vld_in = 1'b0; b_vld_in = 1'b0;
    end
    // special values: inf accumulates to inf, then inf * 0 gives NaN
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    a_in = 16'h7f80; b_in = 16'h3f80; a_vld_in = 1'b1; b_vld_in = 1'b1;
    @(negedge clk);
    check("inf", acc_out, 32'h7f80_0000);
    a_in = 16'hff80;
    @(negedge clk);
    check("inf-inf", acc_out, 32'h7fc0_0000);
    a_vld_in = 1'b0; b_vld_in = 1'b0;
    // exact cancellation gives +0
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    a_in = 16'h4040; b_in = 16'h4000; a_vld_in = 1'b1; b_vld_in = 1'b1;
    @(negedge clk);
    check("6.0", acc_out, 32'h40c0_0000);
    a_in = 16'hc040;
    @(negedge clk);
    check("cancel", acc_out, 32'h0000_0000);
    // drain: the accumulator takes psum_in, a PE above would provide it
    a_in = 16'h3f80; b_in = 16'h3f80;
    @(negedge clk);
    check("1.0", acc_out, 32'h3f80_0000);
    a_vld_in = 1'b0; b_vld_in = 1'b0;
    drain = 1'b1; psum_in = 32'h4149_0fdb;
    @(negedge clk);
    check("drain", acc_out, 32'h4149_0fdb);
    drain = 1'b0;
    // power gating loses state and isolates outputs
    a_in = 16'h4000; a_vld_in = 1'b1; b_vld_in = 1'b1;
    pwr_on = 1'b0;
    @(negedge clk);
    check("gated acc", acc_out, 32'd0);
    check("gated a", {15'd0, a_vld_out, a_out}, 32'd0);
    pwr_on = 1'b1; a_vld_in = 1'b0; b_vld_in = 1'b0;
    @(negedge clk);
    check("after gate", acc_out, 32'd0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

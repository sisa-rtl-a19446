// tb_slab_local_buffer: self-checking testbench of the double-buffered slab
// local buffer. Fills half 0, then streams it with a random length and start
// delay while filling half 1 with other data (double buffering), then streams
// half 1. Every cycle every lane is compared with the entry expected from the
// skew rule (lane l shows entry t - delay - l one cycle later), and the
// stream length (busy) is checked against delay + LANES + len cycles. A
// disabled buffer must output nothing.
module tb_slab_local_buffer;
  import sisa_pkg::*;

  localparam int unsigned LANES = 8;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0, rst_n = 1'b0;
  logic en, wr_en, wr_half, rd_start, rd_half, busy;
  logic [AW-1:0] wr_addr;
  logic [AW:0] rd_len;
  logic [9:0] rd_delay;
  bf16_t wr_data [LANES];
  bf16_t lane_data [LANES];
  logic  lane_vld [LANES];
  bf16_t model [2][LANES][DEPTH];
  int checks = 0, failures = 0;

  slab_local_buffer #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream half h with len and delay, writing the other half meanwhile
  task automatic stream(input logic h, input int len, input int dly, input bit fill_other);
    int t = 0;
    int cyc = 0;
    rd_start = 1'b1; rd_half = h; rd_len = (AW+1)'(len); rd_delay = 10'(dly);
    @(negedge clk);
    rd_start = 1'b0;
    while (busy || t < dly + LANES + len + 1) begin
      if (fill_other && t < DEPTH) begin
        wr_en = 1'b1; wr_half = ~h; wr_addr = AW'(t);
        foreach (wr_data[l]) begin
          wr_data[l] = 16'($urandom);
          model[~h][l][t] = wr_data[l];
        end
      end else wr_en = 1'b0;
      @(negedge clk);
      if (busy) cyc++;
      // output now reflects stream cycle t
      foreach (lane_data[l]) begin
        int idx = t - dly - l;
        checks++;
        if (idx >= 0 && idx < len) begin
          if (!(lane_vld[l] && lane_data[l] == model[h][l][idx])) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d t %0d: %h/%0d expected %h", l, t, lane_data[l], lane_vld[l], model[h][l][idx]);
          end
        end else if (lane_vld[l] || lane_data[l] != 16'd0) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d t %0d: unexpected valid", l, t);
        end
      end
      t++;
    end
    wr_en = 1'b0;
    checks++;
    if (cyc != dly + LANES + len - 1) begin
      failures++;
      $display("FAIL stream length %0d expected %0d", cyc, dly + LANES + len - 1);
    end
  endtask

  initial begin
    en = 1'b1; wr_en = 1'b0; wr_half = 1'b0; wr_addr = '0; rd_start = 1'b0; rd_half = 1'b0;
    rd_len = '0; rd_delay = '0;
    foreach (wr_data[l]) wr_data[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // fill half 0
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1'b1; wr_half = 1'b0; wr_addr = AW'(a);
      foreach (wr_data[l]) begin
        wr_data[l] = 16'($urandom);
        model[0][l][a] = wr_data[l];
      end
      @(negedge clk);
    end
    wr_en = 1'b0;
    for (int r = 0; r < 12; r++) begin
      stream(1'(r), 1 + int'($urandom_range(DEPTH - 1, 0)), (r % 3 == 0) ? 0 : int'($urandom_range(40, 0)), 1'b1);
      repeat (2) @(negedge clk);
    end
    // disabled buffer streams nothing
    en = 1'b0;
    rd_start = 1'b1; rd_half = 1'b0; rd_len = (AW+1)'(DEPTH);
    @(negedge clk);
    rd_start = 1'b0;
    repeat (5) begin
      @(negedge clk);
      foreach (lane_vld[l]) begin
        checks++;
        if (lane_vld[l] || busy) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

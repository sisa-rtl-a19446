// tb_output_buffer: self-checking testbench of the multi-banked output buffer.
// All banks are written in the same cycles (as slabs drain together) while the
// host reads other rows; every row is then read back and compared.
module tb_output_buffer;
  import sisa_pkg::*;

  localparam int unsigned S = 4, C = 3, W = 16;

  logic clk = 1'b0;
  logic wr_en [S];
  logic [3:0] wr_addr [S];
  fp32_t wr_data [S][C];
  logic rd_en;
  logic [1:0] rd_bank;
  logic [3:0] rd_addr;
  fp32_t rd_data [C];
  fp32_t m [S][W][C];
  int checks = 0, failures = 0;

  output_buffer #(.NUM_SLABS(S), .COLS(C), .WORDS(W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd_en = 0; rd_bank = '0; rd_addr = '0;
    for (int a = 0; a < W; a++) begin
      for (int s = 0; s < S; s++) begin
        wr_en[s] = 1; wr_addr[s] = 4'(a);
        for (int c = 0; c < C; c++) begin wr_data[s][c] = $urandom; m[s][a][c] = wr_data[s][c]; end
      end
      // concurrent host read of an already written row
      if (a > 0) begin
        int rb, ra;
        rb = $urandom_range(S-1, 0);
        ra = $urandom_range(a-1, 0);
        rd_en = 1; rd_bank = 2'(rb); rd_addr = 4'(ra);
        @(negedge clk);
        for (int c = 0; c < C; c++) begin checks++; if (rd_data[c] != m[rb][ra][c]) failures++; end
      end else @(negedge clk);
    end
    for (int s = 0; s < S; s++) wr_en[s] = 0;
    for (int s = 0; s < S; s++)
      for (int a = 0; a < W; a++) begin
        rd_en = 1; rd_bank = 2'(s); rd_addr = 4'(a);
        @(negedge clk);
        for (int c = 0; c < C; c++) begin checks++; if (rd_data[c] != m[s][a][c]) failures++; end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

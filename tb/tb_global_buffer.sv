// tb_global_buffer: self-checking testbench of the banked global buffer.
// Fills every activation and weight bank with random words through the host
// ports, then reads with random per-bank addresses and random per-slab bank
// selects, including several slabs listening to one bank (broadcast), and
// checks each slab's data one cycle after the read against a model.
module tb_global_buffer;
  import sisa_pkg::*;

  localparam int unsigned S = 4, H = 2, C = 4, AWD = 16, WWD = 8;
  localparam int unsigned BW = $clog2(S);

  logic clk = 1'b0;
  logic act_host_wr_en, wgt_host_wr_en;
  logic [BW-1:0] act_host_wr_bank, wgt_host_wr_bank;
  logic [$clog2(AWD)-1:0] act_host_wr_addr;
  logic [$clog2(WWD)-1:0] wgt_host_wr_addr;
  bf16_t act_host_wr_data [H];
  bf16_t wgt_host_wr_data [C];
  logic act_rd_en [S], wgt_rd_en [S];
  logic [$clog2(AWD)-1:0] act_rd_addr [S];
  logic [$clog2(WWD)-1:0] wgt_rd_addr [S];
  logic [BW-1:0] act_sel [S], wgt_sel [S];
  bf16_t act_data [S][H];
  bf16_t wgt_data [S][C];
  bf16_t am [S][AWD][H];
  bf16_t wm [S][WWD][C];
  int checks = 0, failures = 0;

  global_buffer #(.NUM_SLABS(S), .SLAB_H(H), .COLS(C), .ACT_WORDS(AWD), .WGT_WORDS(WWD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea [S], ew [S];
    act_host_wr_en = 0; wgt_host_wr_en = 0;
    foreach (act_rd_en[b]) begin act_rd_en[b] = 0; wgt_rd_en[b] = 0; act_rd_addr[b] = '0; wgt_rd_addr[b] = '0; act_sel[b] = '0; wgt_sel[b] = '0; end
    for (int b = 0; b < S; b++)
      for (int a = 0; a < AWD; a++) begin
        act_host_wr_en = 1; act_host_wr_bank = BW'(b); act_host_wr_addr = 4'(a);
        foreach (act_host_wr_data[i]) begin act_host_wr_data[i] = 16'($urandom); am[b][a][i] = act_host_wr_data[i]; end
        wgt_host_wr_en = (a < WWD); wgt_host_wr_bank = BW'(b); wgt_host_wr_addr = 3'(a);
        foreach (wgt_host_wr_data[c]) begin wgt_host_wr_data[c] = 16'($urandom); if (a < WWD) wm[b][a][c] = wgt_host_wr_data[c]; end
        @(negedge clk);
      end
    act_host_wr_en = 0; wgt_host_wr_en = 0;
    for (int r = 0; r < 200; r++) begin
      int aa [S], wa [S];
      for (int b = 0; b < S; b++) begin
        act_rd_en[b] = 1; aa[b] = $urandom_range(AWD-1, 0); act_rd_addr[b] = 4'(aa[b]);
        wgt_rd_en[b] = 1; wa[b] = $urandom_range(WWD-1, 0); wgt_rd_addr[b] = 3'(wa[b]);
      end
      for (int s = 0; s < S; s++) begin
        // every other round all slabs listen to bank 0 (broadcast)
        ea[s] = (r % 2) ? 0 : $urandom_range(S-1, 0);
        ew[s] = $urandom_range(S-1, 0);
        act_sel[s] = BW'(ea[s]); wgt_sel[s] = BW'(ew[s]);
      end
      @(negedge clk);
      for (int s = 0; s < S; s++) begin
        for (int i = 0; i < H; i++) begin
          checks++;
          if (act_data[s][i] != am[ea[s]][aa[ea[s]]][i]) failures++;
        end
        for (int c = 0; c < C; c++) begin
          checks++;
          if (wgt_data[s][c] != wm[ew[s]][wa[ew[s]]][c]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

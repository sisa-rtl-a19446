// sisa_scheduler: tiling, slab configuration and sequencing for one GEMM.
//
// For C[M,N] = A[M,K] x B[K,N] the scheduler walks M in row blocks of SLAB_H
// rows. For the rows that remain it picks the slab group size G, the smallest
// power of two that covers them, capped at NUM_SLABS:
//   M rows left <= SLAB_H          -> G = 1, slabs run independently (Fig. 4a)
//   SLAB_H < rows left <= ROWS     -> G = 2, 4 or 8, slabs fused (Fig. 4b)
//   rows left > ROWS               -> G = 8 for a full-height main tile, then
//                                     the residual rows repeat the choice (4c)
// The NUM_SLABS/G groups then take consecutive COLS-wide N tiles, one per
// group per iteration; a slab with no N tile, or below the last row block of
// its group, is power gated (Fig. 4d). K is cut into tiles of at most KT
// elements; K tiles of one output tile run back to back and accumulate in
// the PEs; the last one is followed by the drain.
//
// One step is (M tile, iteration, K tile). A load engine copies the step's
// K tile from the global buffer into the slab-local buffers, one K-slice per
// cycle, into the buffer half the compute engine is not using, while the
// compute engine runs the previous step (double buffering). A step whose
// slab configuration (power and bypass masks) differs from the running one
// waits until the array is idle, since a disabled buffer cannot be filled.
//
// Global buffer layout expected from the host: row block rb of A lives in
// activation bank rb % NUM_SLABS at word (rb / NUM_SLABS) * K + k; N tile j of
// B lives in weight bank j % NUM_SLABS at word (j / NUM_SLABS) * K + k. With
// this layout no two slabs ever need different words of one bank in the same
// cycle; slabs that need the same word share the read (broadcast).
//
// Results: slab s drains its 16 rows into output bank s at a running pointer
// and, when done, reports a descriptor (wb_valid, bank word, first row, first
// column) so the host can write the tile back.
// Timing: start is accepted when idle; done pulses once after the last drain.
// The three regimes, N-tiling over slabs, K-tile accumulation, residual tiles
// and power gating of unused slabs follow the reference design; the power-of-
// two group sizes follow its 33-row example (two groups of 64 x 128). The
// buffer layout, the step pipeline and the descriptors are choices of this
// design.
// Lint notes: the registered M and N are kept for debug visibility although
// only the derived tile counts are used, some step fields are unused by the
// helper functions that read a single field, and rst_n also appears in the
// disable condition of the assertions; none of these is a circuit problem.
module sisa_scheduler
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
  // host command
  input  logic           start,
  input  logic [DW-1:0]  dim_m,
  input  logic [DW-1:0]  dim_n,
  input  logic [DW-1:0]  dim_k,
  output logic           busy,
  output logic           done,
  output slab_cfg_e      cfg,
  output logic           load_overlap,
  // global buffer reads
  output logic           act_rd_en   [NUM_SLABS],
  output logic [AAW-1:0] act_rd_addr [NUM_SLABS],
  output logic           wgt_rd_en   [NUM_SLABS],
  output logic [WAW-1:0] wgt_rd_addr [NUM_SLABS],
  output logic [BW-1:0]  act_sel     [NUM_SLABS],
  output logic [BW-1:0]  wgt_sel     [NUM_SLABS],
  // slab control
  output logic           pwr_on      [NUM_SLABS],
  output logic           bypass      [NUM_SLABS],
  output logic           act_wr_en   [NUM_SLABS],
  output logic           wgt_wr_en   [NUM_SLABS],
  output logic           wr_half,
  output logic [LAW-1:0] wr_addr,
  output logic           slab_start  [NUM_SLABS],
  output logic           slab_clear  [NUM_SLABS],
  output logic           rd_half,
  output logic [LAW:0]   klen,
  output logic [9:0]     act_delay   [NUM_SLABS],
  output logic           slab_drain  [NUM_SLABS],
  // output buffer writes and write-back descriptors
  output logic           ob_wr_en    [NUM_SLABS],
  output logic [OAW-1:0] ob_wr_addr  [NUM_SLABS],
  output logic           wb_valid    [NUM_SLABS],
  output logic [OAW-1:0] wb_addr     [NUM_SLABS],
  output logic [DW-1:0]  wb_row0     [NUM_SLABS],
  output logic [DW-1:0]  wb_col0     [NUM_SLABS]
);

  typedef struct packed {
    logic [DW-1:0]        mrb;      // first row block of the M tile
    logic [BW:0]          glog;     // log2 of the group size G
    logic [BW:0]          rows_rb;  // row blocks used in each group
    logic [DW-1:0]        it;       // N iteration
    logic [DW-1:0]        kt;       // K tile
    logic [LAW:0]         klen;     // elements in this K tile
    logic                 first;
    logic                 last;
    logic                 half;
    logic [NUM_SLABS-1:0] active;
    logic [NUM_SLABS-1:0] byp;
  } step_t;

  typedef enum logic [1:0] {L_IDLE, L_WAIT, L_RUN, L_PUSH} ld_state_e;
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_DRAIN} cp_state_e;

  // problem size
  logic [DW-1:0] m_q, n_q, k_q, rb_tot, nt_tot, kt_tot;
  // step iterator
  logic [DW-1:0] i_mrb, i_it, i_kt;
  logic          i_half, i_end;
  step_t         cur, ld_step, pend, cp;
  logic          pend_valid;
  ld_state_e     ld_state;
  cp_state_e     cp_state;
  logic [LAW:0]  ld_k;
  logic [DW-1:0] cp_cnt;
  logic [NUM_SLABS-1:0] pwr_q, byp_q;
  logic [OAW-1:0] wb_ptr [NUM_SLABS];
  logic          busy_q;

  // ---------------------------------------------------------------- step
  logic [DW-1:0] rem_rb, nit;
  logic [BW:0]   glog_c;
  always_comb begin
    rem_rb = rb_tot - i_mrb;
    glog_c = '0;
    for (int l = LS; l >= 0; l--) begin
      if (rem_rb <= DW'(1 << l)) glog_c = (BW+1)'(l);
    end
    if (rem_rb > DW'(NUM_SLABS)) glog_c = (BW+1)'(LS);
    cur.mrb     = i_mrb;
    cur.glog    = glog_c;
    cur.rows_rb = (rem_rb < DW'(1 << glog_c)) ? (BW+1)'(rem_rb) : (BW+1)'(1 << glog_c);
    cur.it      = i_it;
    cur.kt      = i_kt;
    cur.klen    = (i_kt == kt_tot - 1) ? (LAW+1)'(k_q - i_kt * KT) : (LAW+1)'(KT);
    cur.first   = (i_kt == '0);
    cur.last    = (i_kt == kt_tot - 1);
    cur.half    = i_half;
    // groups = NUM_SLABS >> glog; iterations = ceil(nt / groups)
    nit = (nt_tot + DW'(NUM_SLABS >> glog_c) - 1) >> (LS - 32'(glog_c));
    for (int s = 0; s < NUM_SLABS; s++) begin
      logic [DW-1:0] j;
      logic [DW-1:0] p;
      j = (i_it << (LS - 32'(glog_c))) + DW'(s >> glog_c);
      p = DW'(s & ((1 << glog_c) - 1));
      cur.active[s] = (j < nt_tot) && (p < DW'(cur.rows_rb));
      cur.byp[s]    = cur.active[s] && (p != '0);
    end
  end

  // slab s in a step: its N tile and row block
  function automatic logic [DW-1:0] slab_j(step_t st, int s);
    return (st.it << (LS - 32'(st.glog))) + DW'(s >> st.glog);
  endfunction
  function automatic logic [DW-1:0] slab_rb(step_t st, int s);
    return st.mrb + DW'(s & ((1 << st.glog) - 1));
  endfunction

  // ---------------------------------------------------------------- load engine
  logic can_load, cfg_same;
  assign cfg_same = (cur.active == pwr_q) && (cur.byp == byp_q);
  assign can_load = !pend_valid &&
                    ((cp_state == C_IDLE) || (cfg_same && (cp.half != cur.half)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_state <= L_IDLE;
      m_q <= '0; n_q <= '0; k_q <= '0; rb_tot <= '0; nt_tot <= '0; kt_tot <= '0;
      i_mrb <= '0; i_it <= '0; i_kt <= '0; i_half <= 1'b0; i_end <= 1'b1;
      ld_step <= '0; pend <= '0; pend_valid <= 1'b0; ld_k <= '0;
      pwr_q <= '0; byp_q <= '0;
    end else begin
      if (cp_state == C_IDLE && pend_valid) pend_valid <= 1'b0;
      unique case (ld_state)
        L_IDLE: if (start && !busy_q) begin
          m_q <= dim_m; n_q <= dim_n; k_q <= dim_k;
          rb_tot <= (dim_m + DW'(SLAB_H - 1)) / DW'(SLAB_H);
          nt_tot <= (dim_n + DW'(COLS - 1)) / DW'(COLS);
          kt_tot <= (dim_k + DW'(KT - 1)) / DW'(KT);
          i_mrb <= '0; i_it <= '0; i_kt <= '0; i_half <= 1'b0;
          i_end <= (dim_m == '0) || (dim_n == '0) || (dim_k == '0);
          ld_state <= L_WAIT;
        end
        L_WAIT: begin
          if (i_end) begin
            ld_state <= L_IDLE;
          end else if (can_load) begin
            pwr_q    <= cur.active;
            byp_q    <= cur.byp;
            ld_step  <= cur;
            ld_k     <= '0;
            ld_state <= L_RUN;
          end
        end
        L_RUN: begin
          ld_k <= ld_k + 1'b1;
          if (ld_k == ld_step.klen - 1) ld_state <= L_PUSH;
        end
        L_PUSH: begin
          pend       <= ld_step;
          pend_valid <= 1'b1;
          i_half     <= ~i_half;
          if (i_kt != kt_tot - 1) begin
            i_kt <= i_kt + 1'b1;
          end else begin
            i_kt <= '0;
            if (i_it != nit - 1) begin
              i_it <= i_it + 1'b1;
            end else begin
              i_it  <= '0;
              i_mrb <= i_mrb + DW'(cur.rows_rb);
              if (i_mrb + DW'(cur.rows_rb) >= rb_tot) i_end <= 1'b1;
            end
          end
          ld_state <= L_WAIT;
        end
        default: ld_state <= L_IDLE;
      endcase
    end
  end

  // bank reads of the step being loaded
  always_comb begin
    for (int b = 0; b < NUM_SLABS; b++) begin
      logic [DW-1:0] pb, gb, rb, j;
      pb = DW'((b - int'(ld_step.mrb[BW-1:0])) & (NUM_SLABS - 1));
      rb = ld_step.mrb + pb;
      act_rd_en[b]   = (ld_state == L_RUN) && (pb < DW'(ld_step.rows_rb));
      act_rd_addr[b] = AAW'((32'(rb) >> LS) * k_q + ld_step.kt * KT + DW'(ld_k));
      gb = DW'((b - int'(32'(ld_step.it) << (LS - 32'(ld_step.glog)))) & (NUM_SLABS - 1));
      j  = DW'(32'(ld_step.it) << (LS - 32'(ld_step.glog))) + gb;
      wgt_rd_en[b]   = (ld_state == L_RUN) && (gb < DW'(NUM_SLABS >> ld_step.glog)) && (j < nt_tot);
      wgt_rd_addr[b] = WAW'((32'(j) >> LS) * k_q + ld_step.kt * KT + DW'(ld_k));
    end
    for (int s = 0; s < NUM_SLABS; s++) begin
      act_sel[s] = BW'(slab_rb(ld_step, s));
      wgt_sel[s] = BW'(slab_j(ld_step, s));
    end
  end

  // local buffer writes one cycle after the reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_half <= 1'b0;
      wr_addr <= '0;
      for (int s = 0; s < NUM_SLABS; s++) begin
        act_wr_en[s] <= 1'b0;
        wgt_wr_en[s] <= 1'b0;
      end
    end else begin
      wr_half <= ld_step.half;
      wr_addr <= LAW'(ld_k);
      for (int s = 0; s < NUM_SLABS; s++) begin
        act_wr_en[s] <= (ld_state == L_RUN) && ld_step.active[s];
        wgt_wr_en[s] <= (ld_state == L_RUN) && ld_step.active[s] && !ld_step.byp[s];
      end
    end
  end

  // ---------------------------------------------------------------- compute engine
  logic [DW-1:0] lat;
  assign lat = DW'(pend.klen) + DW'(COLS) + (DW'(SLAB_H) << pend.glog) - 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cp_state <= C_IDLE;
      cp <= '0;
      cp_cnt <= '0;
      rd_half <= 1'b0;
      klen <= '0;
      done <= 1'b0;
      busy_q <= 1'b0;
      for (int s = 0; s < NUM_SLABS; s++) begin
        slab_start[s] <= 1'b0; slab_clear[s] <= 1'b0; slab_drain[s] <= 1'b0;
        act_delay[s] <= '0; wb_ptr[s] <= '0; wb_valid[s] <= 1'b0;
        wb_addr[s] <= '0; wb_row0[s] <= '0; wb_col0[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      for (int s = 0; s < NUM_SLABS; s++) begin
        slab_start[s] <= 1'b0;
        slab_clear[s] <= 1'b0;
        wb_valid[s]   <= 1'b0;
      end
      if (ld_state == L_IDLE && start && !busy_q) busy_q <= 1'b1;
      unique case (cp_state)
        C_IDLE: begin
          if (pend_valid) begin
            cp       <= pend;
            rd_half  <= pend.half;
            klen     <= pend.klen;
            cp_cnt   <= lat;
            cp_state <= C_RUN;
            for (int s = 0; s < NUM_SLABS; s++) begin
              slab_start[s] <= pend.active[s];
              slab_clear[s] <= pend.active[s] && pend.first;
              act_delay[s]  <= 10'(SLAB_H * (s & ((1 << pend.glog) - 1)));
            end
          end else if (busy_q && ld_state == L_IDLE && !start) begin
            busy_q <= 1'b0;
            done   <= 1'b1;
          end
        end
        C_RUN: begin
          if (cp_cnt == '0) begin
            if (cp.last) begin
              cp_state <= C_DRAIN;
              for (int s = 0; s < NUM_SLABS; s++) slab_drain[s] <= cp.active[s];
            end else begin
              cp_state <= C_IDLE;
            end
          end else begin
            cp_cnt <= cp_cnt - 1'b1;
          end
        end
        C_DRAIN: begin
          cp_cnt <= cp_cnt + 1'b1;
          if (cp_cnt == DW'(SLAB_H - 1)) begin
            cp_state <= C_IDLE;
            for (int s = 0; s < NUM_SLABS; s++) begin
              slab_drain[s] <= 1'b0;
              if (cp.active[s]) begin
                wb_valid[s] <= 1'b1;
                wb_addr[s]  <= wb_ptr[s];
                wb_row0[s]  <= slab_rb(cp, s) * DW'(SLAB_H);
                wb_col0[s]  <= slab_j(cp, s) * DW'(COLS);
                wb_ptr[s]   <= wb_ptr[s] + OAW'(SLAB_H);
              end
            end
          end
        end
        default: cp_state <= C_IDLE;
      endcase
    end
  end

  // drain writes: drain cycle d presents row SLAB_H-1-d
  always_comb begin
    for (int s = 0; s < NUM_SLABS; s++) begin
      ob_wr_en[s]   = slab_drain[s];
      ob_wr_addr[s] = wb_ptr[s] + OAW'(SLAB_H - 1) - OAW'(cp_cnt);
      pwr_on[s]     = pwr_q[s];
      bypass[s]     = byp_q[s];
    end
  end

  assign busy = busy_q;
  assign load_overlap = (ld_state == L_RUN) && (cp_state != C_IDLE);
  assign cfg = (cp.glog == '0) ? CFG_INDEPENDENT :
               ((cp.glog == (BW+1)'(LS)) ? CFG_MONOLITHIC : CFG_FUSED);

  // the array is never reconfigured under a running step
  a_cfg_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (cp_state != C_IDLE) |=> ((cp_state == C_IDLE) || ($stable(pwr_q) && $stable(byp_q))));

endmodule

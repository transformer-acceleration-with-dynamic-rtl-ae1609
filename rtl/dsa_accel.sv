// dsa_accel: dynamic sparse attention (DSA) accelerator for one attention head.
//
// The accelerator computes Z = softmax(Q K^T / sqrt(d_k) restricted to a
// predicted mask) V for a sequence X of L tokens, without ever forming the
// L x L score matrix in full precision. A cheap prediction path estimates the
// scores in INT4 and keeps, for every row, the TOPK columns with the largest
// estimates; the expensive high-precision work is then done on those columns
// only.
//
// Structure (decoupled design: a small low-precision array produces the
// sparsity information, a high-precision array consumes it):
//   linear_unit   Q, K, V = X W_Q, X W_K, X W_V                (FX16)
//   pred_proj     Q~, K~  = quant(quant(X P) W~_Q / W~_K)       (INT4)
//   lp_array      S~ = Q~ K~^T row by row, top-k per row -> mask M
//   reorder_sched per-step column schedule with compute reordering
//   hp_pe x NPE   SDDMM, sparse softmax, SpMM, one attention row each
// plus on-chip buffers for X, Q, K, V, Q~, K~ and Z (register-file arrays,
// combinational read, synchronous write).
//
// Operation after start:
//   PROJ   for every token row r: linear_unit produces one column of Q/K/V
//          per cycle (DK cycles) while pred_proj produces Q~/K~ (2K cycles);
//          the row takes 2K + 2 cycles.
//   then for every group of NPE consecutive rows:
//   PRED   lp_array streams all L rows of K~ and selects the masks (L + 2
//          cycles from its start to the cycle its done is seen)
//   LOAD   the NPE index lists are loaded into the scheduler (TOPK cycles);
//          in the last LOAD cycle lp_array is restarted on the next group, so
//          the prediction of group g+1 runs while group g is in SDDMM..WB
//   SDDMM  TOPK scheduler steps; each step fetches fetch_count K rows
//   SMAX   sparse softmax in every PE (TOPK + 2 cycles)
//   SPMM   TOPK steps replaying each PE's own SDDMM order, fetching V rows
//   WB     the NPE Z rows are written back (1 cycle)
// done pulses when the last group is written back; busy is high in between.
// With A = 3*TOPK + 5 (SDDMM..WB), a run takes
//   L*(2K+3) + (L+3) + TOPK + (L/NPE - 1)*(A + max(1, L+2-A) + TOPK) + A
// cycles: the two arrays work as a two-stage pipeline and the slower stage
// (prediction, for the default sizes) sets the rate.
//
// Host interface: wr_* writes one element of X or of a weight matrix (see
// dsa_pkg::mem_sel_e for the row/column meaning per target); z_rd_* reads one
// element of Z combinationally. shift_xp / shift_qk set the two INT4
// quantisation shifts; reorder_en selects compute reordering (1) or plain
// left-to-right row-parallel order (0). The stat_* counters (cleared by start)
// report cycles, K-column and V-row fetches of the sparse phases and the number
// of steps in which PEs shared a fetch.
//
// Follows the paper: the DSA data flow (approximate prediction path, top-k
// mask, SDDMM -> sparse softmax -> SpMM), equal number of selected weights per
// row, row-parallel PEs with compute reordering, decoupled low/high precision
// arrays working as a pipeline. This design's own choices: fixed-point formats,
// buffer organisation, the pipeline granularity (one row group), the
// projection phase running ahead of all prediction, and the host interface.
module dsa_accel
  import dsa_pkg::*;
#(
  parameter int L           = 2000,  // sequence length
  parameter int D           = 256,   // model dimension
  parameter int DK          = 64,    // head dimension (256 / 4 heads)
  parameter int K           = 64,    // reduced dimension, sigma = K/D = 0.25
  parameter int LP_BITS     = 4,     // prediction precision
  parameter int NPE         = 4,     // rows processed in parallel
  parameter int TOPK        = 200,   // kept columns per row (DSA-90%)
  parameter int SCALE_SHIFT = 3      // log2(sqrt(DK))
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // host write port
  input  logic                      wr_en,
  input  mem_sel_e                  wr_sel,
  input  logic [15:0]               wr_row,
  input  logic [15:0]               wr_col,
  input  logic [FX_W-1:0]           wr_data,
  // configuration
  input  logic [4:0]                shift_xp,
  input  logic [4:0]                shift_qk,
  input  logic                      reorder_en,
  // control
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // result read port
  input  logic [15:0]               z_rd_row,
  input  logic [15:0]               z_rd_col,
  output logic [FX_W-1:0]           z_rd_data,
  // statistics
  output logic [31:0]               stat_cycles,
  output logic [31:0]               stat_k_fetch,
  output logic [31:0]               stat_v_fetch,
  output logic [31:0]               stat_shared
);

  localparam int IDX_W = $clog2(L);
  localparam int NG    = L / NPE;
  localparam int TW    = $clog2(TOPK + 1);
  localparam int CW    = $clog2(NPE + 1);

  // ---------------------------------------------------------------- buffers
  logic [D-1:0][FX_W-1:0]     x_buf  [L];
  logic [DK-1:0][FX_W-1:0]    q_buf  [L];
  logic [DK-1:0][FX_W-1:0]    k_buf  [L];
  logic [DK-1:0][FX_W-1:0]    v_buf  [L];
  logic [K-1:0][LP_BITS-1:0]  qt_buf [L];
  logic [K-1:0][LP_BITS-1:0]  kt_buf [L];
  logic [DK-1:0][FX_W-1:0]    z_buf  [L];

  always_ff @(posedge clk)
    if (wr_en && wr_sel == MEM_X) x_buf[IDX_W'(wr_row)][$clog2(D)'(wr_col)] <= wr_data;

  assign z_rd_data = z_buf[IDX_W'(z_rd_row)][$clog2(DK)'(z_rd_col)];

  // ---------------------------------------------------------------- control
  typedef enum logic [3:0] {
    S_IDLE, S_PROJ, S_PRED, S_PRED_WAIT, S_LOAD, S_SDDMM, S_SMAX, S_SMAX_WAIT,
    S_SPMM, S_WB
  } state_e;
  state_e state;

  logic [IDX_W-1:0]        row;      // token row in PROJ
  logic [$clog2(NG)-1:0]   grp;      // row group in the sparse phases
  logic [$clog2(NG)-1:0]   pgrp;     // row group being predicted
  logic                    lp_fin;   // prediction of pgrp finished, not yet loaded
  logic [$clog2(DK)-1:0]   lcol;     // next linear column to issue
  logic                    row_act;  // current PROJ row has been started
  logic                    lin_issue, lin_fin, pp_fin;
  logic [TW-1:0]           t;        // LOAD / SPMM step counter

  // ---------------------------------------------------------------- linear
  logic                    lin_ovalid;
  logic [$clog2(DK)-1:0]   lin_ocol;
  logic signed [FX_W-1:0]  lin_q, lin_k, lin_v;

  linear_unit #(.D(D), .DK(DK)) u_linear (
    .clk      (clk),
    .rst_n    (rst_n),
    .wr_en    (wr_en && (wr_sel inside {MEM_WQ, MEM_WK, MEM_WV})),
    .wr_mat   (wr_sel == MEM_WQ ? 2'd0 : (wr_sel == MEM_WK ? 2'd1 : 2'd2)),
    .wr_row   ($clog2(D)'(wr_row)),
    .wr_col   ($clog2(DK)'(wr_col)),
    .wr_data  (wr_data),
    .in_valid (lin_issue),
    .col      (lcol),
    .x_row    (x_buf[row]),
    .out_valid(lin_ovalid),
    .out_col  (lin_ocol),
    .q        (lin_q),
    .k        (lin_k),
    .v        (lin_v)
  );

  // ---------------------------------------------------------------- prediction transforms
  logic                       pp_start, pp_busy, pp_done;
  logic [K-1:0][LP_BITS-1:0]  pp_qt, pp_kt;

  pred_proj #(.D(D), .K(K), .LP_BITS(LP_BITS)) u_pred_proj (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (wr_en && (wr_sel inside {MEM_P, MEM_WQT, MEM_WKT})),
    .wr_mat  (wr_sel == MEM_P ? 2'd0 : (wr_sel == MEM_WQT ? 2'd1 : 2'd2)),
    .wr_row  ($clog2(D)'(wr_row)),
    .wr_col  ($clog2(K)'(wr_col)),
    .wr_data (LP_BITS'(wr_data)),
    .shift_xp(shift_xp),
    .shift_qk(shift_qk),
    .start   (pp_start),
    .x_row   (x_buf[row]),
    .busy    (pp_busy),
    .done    (pp_done),
    .qt_row  (pp_qt),
    .kt_row  (pp_kt)
  );

  // ---------------------------------------------------------------- low-precision array
  logic                                   lp_start, lp_busy, lp_done;
  logic [NPE-1:0][K-1:0][LP_BITS-1:0]     lp_qt_rows;
  logic [IDX_W-1:0]                       lp_kt_raddr;
  logic [IDX_W-1:0]                       lp_idx [NPE][TOPK];

  always_comb
    for (int p = 0; p < NPE; p++) lp_qt_rows[p] = qt_buf[IDX_W'(pgrp * NPE + p)];

  lp_array #(.L(L), .K(K), .LP_BITS(LP_BITS), .NPE(NPE), .TOPK(TOPK)) u_lp_array (
    .clk     (clk),
    .rst_n   (rst_n),
    .start   (lp_start),
    .qt_rows (lp_qt_rows),
    .kt_raddr(lp_kt_raddr),
    .kt_rdata(kt_buf[lp_kt_raddr]),
    .busy    (lp_busy),
    .done    (lp_done),
    .idx_list(lp_idx)
  );

  // ---------------------------------------------------------------- scheduler
  logic                  sc_clear, sc_load, sc_step, sc_shared, sc_empty;
  logic [IDX_W-1:0]      sc_load_idx [NPE];
  logic [IDX_W-1:0]      sc_col      [NPE];
  logic [NPE-1:0]        sc_valid;
  logic [CW-1:0]         sc_fetch;

  always_comb
    for (int p = 0; p < NPE; p++) sc_load_idx[p] = lp_idx[p][t];

  reorder_sched #(.L(L), .NPE(NPE)) u_sched (
    .clk        (clk),
    .rst_n      (rst_n),
    .clear      (sc_clear),
    .load_valid (sc_load),
    .load_idx   (sc_load_idx),
    .reorder_en (reorder_en),
    .step       (sc_step),
    .col        (sc_col),
    .col_valid  (sc_valid),
    .fetch_count(sc_fetch),
    .shared     (sc_shared),
    .empty      (sc_empty)
  );

  // ---------------------------------------------------------------- high-precision PEs
  logic                     pe_clear, pe_sm_start, pe_spmm;
  logic [NPE-1:0]           pe_sm_ready;
  logic [IDX_W-1:0]         pe_spmm_col [NPE];
  logic [DK-1:0][FX_W-1:0]  pe_z [NPE];
  logic [CW-1:0]            v_fetch;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    logic [TW-1:0] nsel;
    hp_pe #(.DK(DK), .TOPK(TOPK), .L(L), .SCALE_SHIFT(SCALE_SHIFT)) u_pe (
      .clk        (clk),
      .rst_n      (rst_n),
      .clear      (pe_clear),
      .sddmm_valid(sc_step && sc_valid[p]),
      .sddmm_col  (sc_col[p]),
      .q_row      (q_buf[IDX_W'(grp * NPE + p)]),
      .k_row      (k_buf[sc_col[p]]),
      .sm_start   (pe_sm_start),
      .sm_ready   (pe_sm_ready[p]),
      .spmm_col   (pe_spmm_col[p]),
      .spmm_valid (pe_spmm),
      .v_row      (v_buf[pe_spmm_col[p]]),
      .z_row      (pe_z[p]),
      .nsel       (nsel)
    );
  end

  // distinct V rows read in one SpMM step
  always_comb begin
    v_fetch = '0;
    for (int p = 0; p < NPE; p++) begin
      logic dup;
      dup = 1'b0;
      for (int q = 0; q < p; q++)
        if (pe_spmm_col[q] == pe_spmm_col[p]) dup = 1'b1;
      if (!dup) v_fetch += 1'b1;
    end
  end

  // buffer writes (no reset: contents are defined by the PROJ / WB phases)
  always_ff @(posedge clk) begin
    if (lin_ovalid) begin
      q_buf[row][lin_ocol] <= lin_q;
      k_buf[row][lin_ocol] <= lin_k;
      v_buf[row][lin_ocol] <= lin_v;
    end
    if (pp_done) begin
      qt_buf[row] <= pp_qt;
      kt_buf[row] <= pp_kt;
    end
    if (state == S_WB)
      for (int p = 0; p < NPE; p++) z_buf[IDX_W'(grp * NPE + p)] <= pe_z[p];
  end

  // ---------------------------------------------------------------- sequencer
  assign pp_start    = (state == S_PROJ) && !row_act;
  assign lin_issue   = (state == S_PROJ) && row_act && !lin_fin;
  // the prediction of the next group starts as soon as the current group's
  // mask has been copied into the scheduler (last LOAD cycle)
  assign lp_start    = (state == S_PRED) ||
                       (state == S_LOAD && t == TW'(TOPK - 1) && grp != $clog2(NG)'(NG - 1));
  assign sc_clear    = (state == S_PRED) || (state == S_WB);
  assign pe_clear    = (state == S_PRED) || (state == S_WB);
  assign sc_load     = (state == S_LOAD);
  assign sc_step     = (state == S_SDDMM) && !sc_empty;
  assign pe_sm_start = (state == S_SMAX);
  assign pe_spmm     = (state == S_SPMM);
  assign busy        = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      row          <= '0;
      grp          <= '0;
      pgrp         <= '0;
      lp_fin       <= 1'b0;
      lcol         <= '0;
      lin_fin      <= 1'b0;
      pp_fin       <= 1'b0;
      row_act      <= 1'b0;
      t            <= '0;
      done         <= 1'b0;
      stat_cycles  <= '0;
      stat_k_fetch <= '0;
      stat_v_fetch <= '0;
      stat_shared  <= '0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) stat_cycles <= stat_cycles + 1;
      if (lp_done && state != S_PRED_WAIT) lp_fin <= 1'b1;


      unique case (state)
        S_IDLE: if (start) begin
          state        <= S_PROJ;
          row          <= '0;
          grp          <= '0;
          pgrp         <= '0;
          lp_fin       <= 1'b0;
          lcol         <= '0;
          lin_fin      <= 1'b0;
          pp_fin       <= 1'b0;
          stat_cycles  <= '0;
          stat_k_fetch <= '0;
          stat_v_fetch <= '0;
          stat_shared  <= '0;
        end

        S_PROJ: begin
          if (lin_issue) begin
            lcol <= lcol + 1'b1;
            if (lcol == $clog2(DK)'(DK - 1)) lin_fin <= 1'b1;
          end
          if (pp_start) row_act <= 1'b1;
          if (pp_done)  pp_fin  <= 1'b1;
          // row complete: prediction transforms done, last linear column written
          if (pp_fin && lin_fin && !lin_ovalid) begin
            row_act <= 1'b0;
            lin_fin <= 1'b0;
            pp_fin  <= 1'b0;
            lcol    <= '0;
            if (row == IDX_W'(L - 1)) begin
              state <= S_PRED;
            end else begin
              row <= row + 1'b1;
            end
          end
        end

        S_PRED: state <= S_PRED_WAIT;

        // wait for the mask of group grp (may already be there)
        S_PRED_WAIT: if (lp_done || lp_fin) begin
          state  <= S_LOAD;
          lp_fin <= 1'b0;
          t      <= '0;
        end

        S_LOAD: begin
          t <= t + 1'b1;
          if (t == TW'(TOPK - 1)) begin
            state <= S_SDDMM;
            if (lp_start) pgrp <= pgrp + 1'b1;
          end
        end

        S_SDDMM: begin
          if (sc_empty) begin
            state <= S_SMAX;
          end else begin
            stat_k_fetch <= stat_k_fetch + 32'(sc_fetch);
            if (sc_shared) stat_shared <= stat_shared + 1;
          end
        end

        S_SMAX: state <= S_SMAX_WAIT;

        S_SMAX_WAIT: if (&pe_sm_ready) begin
          state <= S_SPMM;
          t     <= '0;
        end

        S_SPMM: begin
          stat_v_fetch <= stat_v_fetch + 32'(v_fetch);
          t <= t + 1'b1;
          if (t == TW'(TOPK - 1)) state <= S_WB;
        end

        S_WB: begin
          if (grp == $clog2(NG)'(NG - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            grp   <= grp + 1'b1;
            state <= S_PRED_WAIT;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- checks
  initial begin
    assert (L % NPE == 0) else $error("L must be a multiple of NPE");
    assert (TOPK <= L)    else $error("TOPK must not exceed L");
  end

  // every row group must hand exactly TOPK columns to each PE
  property p_balanced;
    @(posedge clk) disable iff (!rst_n)
      (state == S_SMAX) |-> (g_pe[0].nsel == TW'(TOPK));
  endproperty
  a_balanced: assert property (p_balanced);

endmodule

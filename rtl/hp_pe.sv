// hp_pe: high-precision processing element owning one attention row.
//
// A row is processed in three passes over only its selected columns:
//  1. SDDMM  - for each column j handed to it, s_j = (q_i . k_j) >>> (FRAC +
//              SCALE_SHIFT), saturated to 16 bits (the >>> SCALE_SHIFT is the
//              1/sqrt(d_k) scaling, exact for d_k = 64). The column index is
//              stored with the score, in the order the columns arrived.
//  2. Sparse softmax over the stored scores (sparse_softmax).
//  3. SpMM   - the stored columns are replayed in the same order; for each,
//              the PE asks for row j of V (spmm_col) and accumulates
//              z += a_j * v_j over all DK features in parallel.
// Because the replay order equals the SDDMM order, whatever order the
// scheduler chose, the probabilities never have to be reshuffled and the Z row
// comes out in normal feature order.
//
// Interface and timing: clear starts a row. sddmm_valid consumes q_row, k_row
// and sddmm_col in one cycle. sm_start begins the softmax; sm_ready rises
// count+1 cycles later. Each spmm_valid consumes v_row = V[spmm_col] and moves
// to the next stored column. z_row is the Q8.8 result (acc >>> 15, saturated).
//
// Follows the paper: SDDMM with the mask as output sparsity, SpMM with the
// mask as input sparsity, one PE per attention row. Own choices: fixed point
// formats, the per-pass sequencing and storage of scores in the PE.
module hp_pe
  import dsa_pkg::*;
#(
  parameter int DK          = 64,    // head dimension
  parameter int TOPK        = 200,   // selected columns per row
  parameter int L           = 2000,  // sequence length (index width)
  parameter int SCALE_SHIFT = 3      // log2(sqrt(DK))
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  // SDDMM
  input  logic                       sddmm_valid,
  input  logic [$clog2(L)-1:0]       sddmm_col,
  input  logic [DK-1:0][FX_W-1:0]    q_row,
  input  logic [DK-1:0][FX_W-1:0]    k_row,
  // softmax
  input  logic                       sm_start,
  output logic                       sm_ready,
  // SpMM
  output logic [$clog2(L)-1:0]       spmm_col,
  input  logic                       spmm_valid,
  input  logic [DK-1:0][FX_W-1:0]    v_row,
  output logic [DK-1:0][FX_W-1:0]    z_row,
  output logic [$clog2(TOPK+1)-1:0]  nsel
);

  localparam int IDX_W = $clog2(L);
  localparam int CW    = $clog2(TOPK + 1);
  localparam int ACC_W = 48;

  logic [IDX_W-1:0]        col_buf [TOPK];
  logic [CW-1:0]           rd;
  logic signed [ACC_W-1:0] z_acc [DK];
  logic signed [FX_W-1:0]  s_new;
  logic [15:0]             a_cur;
  logic                    sm_busy;

  always_comb begin
    longint acc;
    acc = 0;
    for (int c = 0; c < DK; c++)
      acc += longint'($signed(q_row[c])) * longint'($signed(k_row[c]));
    s_new = FX_W'(sat_shift(acc, FRAC + SCALE_SHIFT, FX_W));
  end

  sparse_softmax #(.N(TOPK)) u_softmax (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (clear),
    .s_valid(sddmm_valid),
    .s_in   (s_new),
    .start  (sm_start),
    .busy   (sm_busy),
    .ready  (sm_ready),
    .a_next (spmm_valid),
    .a_out  (a_cur),
    .count  (nsel)
  );

  assign spmm_col = col_buf[rd];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd <= '0;
      for (int i = 0; i < TOPK; i++) col_buf[i] <= '0;
      for (int c = 0; c < DK; c++)   z_acc[c]   <= '0;
    end else if (clear) begin
      rd <= '0;
      for (int c = 0; c < DK; c++) z_acc[c] <= '0;
    end else begin
      if (sddmm_valid && nsel != CW'(TOPK)) col_buf[nsel] <= sddmm_col;
      if (spmm_valid) begin
        rd <= rd + 1'b1;
        for (int c = 0; c < DK; c++)
          z_acc[c] <= z_acc[c] + ACC_W'($signed({1'b0, a_cur}) * $signed(v_row[c]));
      end
    end
  end

  always_comb begin
    for (int c = 0; c < DK; c++)
      z_row[c] = FX_W'(sat_shift(longint'(z_acc[c]), PROB_FRAC, FX_W));
  end

endmodule

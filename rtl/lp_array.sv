// lp_array: the low-precision PE array of the prediction path.
//
// NPE lanes each own one query row of the current row group. Every cycle the
// array reads one row k~_j of the approximate key buffer, broadcasts it to all
// lanes, and each lane forms the approximate score s~_ij = q~_i . k~_j with
// K LP_BITS-bit multiplies and feeds it, with j, to its own topk_select unit.
// After L cycles each lane holds the TOPK columns with the largest predicted
// scores: the sparse mask M of its row, as a list of column indices.
//
// Interface and timing: pulse start with qt_rows stable. kt_raddr walks
// 0..L-1, one address per cycle; kt_rdata must return that row in the same
// cycle (register-file read). done pulses one cycle after the last score,
// when idx_list is valid; it stays valid until the next start.
// Latency: L + 1 cycles from start to done.
//
// Follows the paper: a separate small low-precision array computes
// S~ = Q~ K~^T and derives the mask by top-k (decoupled design, INT4).
// Own choices: the lane count, the key broadcast and the per-lane streaming
// top-k unit.
module lp_array #(
  parameter int L       = 2000,  // sequence length
  parameter int K       = 64,    // reduced dimension
  parameter int LP_BITS = 4,     // prediction precision
  parameter int NPE     = 4,     // rows processed in parallel
  parameter int TOPK    = 200    // selected columns per row
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             start,
  input  logic [NPE-1:0][K-1:0][LP_BITS-1:0] qt_rows,
  output logic [$clog2(L)-1:0]             kt_raddr,
  input  logic [K-1:0][LP_BITS-1:0]        kt_rdata,
  output logic                             busy,
  output logic                             done,
  output logic [$clog2(L)-1:0]             idx_list [NPE][TOPK]
);

  localparam int IDX_W = $clog2(L);
  localparam int SC_W  = 2 * LP_BITS + $clog2(K) + 1;

  logic                  running;
  logic [IDX_W-1:0]      j;
  logic                  last_d;

  assign kt_raddr = j;
  assign busy     = running || last_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      j       <= '0;
      last_d  <= 1'b0;
      done    <= 1'b0;
    end else begin
      last_d <= running && (j == IDX_W'(L - 1));
      done   <= last_d;
      if (start) begin
        running <= 1'b1;
        j       <= '0;
      end else if (running) begin
        if (j == IDX_W'(L - 1)) running <= 1'b0;
        else                    j <= j + 1'b1;
      end
    end
  end

  for (genvar p = 0; p < NPE; p++) begin : g_lane
    logic signed [SC_W-1:0] score;
    logic signed [SC_W-1:0] ent_score [TOPK];
    logic [$clog2(TOPK+1)-1:0] cnt;

    always_comb begin
      score = '0;
      for (int m = 0; m < K; m++)
        score += SC_W'($signed(qt_rows[p][m]) * $signed(kt_rdata[m]));
    end

    topk_select #(.N(TOPK), .SC_W(SC_W), .IDX_W(IDX_W)) u_topk (
      .clk        (clk),
      .rst_n      (rst_n),
      .clear      (start),
      .in_valid   (running && !start),
      .in_score   (score),
      .in_idx     (j),
      .entry_score(ent_score),
      .entry_idx  (idx_list[p]),
      .count      (cnt)
    );
  end

endmodule

// linear_unit: high-precision linear projections of one attention head.
//
// Computes, one output column per cycle, q = x W_Q, k = x W_K and v = x W_V for
// the token row x presented on x_row (the three blue W boxes of the DSA data
// flow). Each column is a D-long signed fixed-point dot product; the three
// products run side by side. The weight matrices live in this unit, stored
// column-major (one D-wide word per output column) so a whole column is read
// per cycle, and are written one element at a time by the host.
//
// Interface and timing: assert in_valid with column index col and the token
// row; one cycle later out_valid carries out_col and the three results.
// A new column may be issued every cycle. Results are (sum x*w) >>> FRAC,
// saturated to 16 bits.
//
// Follows the paper: Q,K,V = X W_Q, X W_K, X W_V (Eq. 1).
// Own choices: FX16 Q8.8 format, floor rounding, column-per-cycle throughput.
module linear_unit
  import dsa_pkg::*;
#(
  parameter int D  = 256,  // model (hidden) dimension
  parameter int DK = 64    // head dimension
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight write port
  input  logic                         wr_en,
  input  logic [1:0]                   wr_mat,   // 0 = W_Q, 1 = W_K, 2 = W_V
  input  logic [$clog2(D)-1:0]         wr_row,
  input  logic [$clog2(DK)-1:0]        wr_col,
  input  logic signed [FX_W-1:0]       wr_data,
  // compute
  input  logic                         in_valid,
  input  logic [$clog2(DK)-1:0]        col,
  input  logic [D-1:0][FX_W-1:0]       x_row,
  output logic                         out_valid,
  output logic [$clog2(DK)-1:0]        out_col,
  output logic signed [FX_W-1:0]       q,
  output logic signed [FX_W-1:0]       k,
  output logic signed [FX_W-1:0]       v
);

  logic [D-1:0][FX_W-1:0] wq [DK];
  logic [D-1:0][FX_W-1:0] wk [DK];
  logic [D-1:0][FX_W-1:0] wv [DK];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_mat)
        2'd0:    wq[wr_col][wr_row] <= wr_data;
        2'd1:    wk[wr_col][wr_row] <= wr_data;
        default: wv[wr_col][wr_row] <= wr_data;
      endcase
    end
  end

  function automatic longint dot(input logic [D-1:0][FX_W-1:0] a,
                                 input logic [D-1:0][FX_W-1:0] b);
    longint acc = 0;
    for (int i = 0; i < D; i++)
      acc += longint'($signed(a[i])) * longint'($signed(b[i]));
    return acc;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_col   <= '0;
      q <= '0; k <= '0; v <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_col <= col;
        q <= FX_W'(sat_shift(dot(x_row, wq[col]), FRAC, FX_W));
        k <= FX_W'(sat_shift(dot(x_row, wk[col]), FRAC, FX_W));
        v <= FX_W'(sat_shift(dot(x_row, wv[col]), FRAC, FX_W));
      end
    end
  end

endmodule

// pred_proj: the prediction path's approximate query/key transforms.
//
// For one token row x it computes
//     xq  = quant(x P,        shift_xp)        (K values, LP_BITS each)
//     q~  = quant(xq W~_Q,    shift_qk)
//     k~  = quant(xq W~_K,    shift_qk)
// where P is the D x K sparse random projection with entries in {-1,0,+1}
// and W~_Q, W~_K are the K x K trained approximation weights. The product
// with P needs no multiplier: each entry only adds, subtracts or skips an
// input feature. The constant sqrt(3/k) scale of P is folded into the
// quantisation shift shift_xp. quant(v, s) is an arithmetic right shift by s
// followed by saturation to LP_BITS bits.
//
// Timing: pulse start with x_row valid (x_row must stay stable while busy).
// Phase 1 takes K cycles (one column of P per cycle), phase 2 takes K cycles
// (one column of W~_Q and of W~_K per cycle); done pulses 2K cycles after start,
// and qt_row/kt_row then hold the result until the next start.
//
// Follows the paper: Q~,K~ = X P W~_Q, X P W~_K with ternary P, low-precision
// (INT4) prediction. Own choices: the ternary code (see dsa_pkg::tern_e), where
// quantisation happens (after XP and after each W~ product), and the
// column-serial schedule.
module pred_proj
  import dsa_pkg::*;
#(
  parameter int D       = 256,  // model dimension
  parameter int K       = 64,   // reduced dimension k = sigma * d (sigma = 0.25)
  parameter int LP_BITS = 4     // prediction precision (INT4)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // parameter write port
  input  logic                          wr_en,
  input  logic [1:0]                    wr_mat,   // 0 = P, 1 = W~_Q, 2 = W~_K
  input  logic [$clog2(D)-1:0]          wr_row,
  input  logic [$clog2(K)-1:0]          wr_col,
  input  logic [LP_BITS-1:0]            wr_data,  // P uses the low two bits
  // runtime quantisation shifts
  input  logic [4:0]                    shift_xp,
  input  logic [4:0]                    shift_qk,
  // compute
  input  logic                          start,
  input  logic [D-1:0][FX_W-1:0]        x_row,
  output logic                          busy,
  output logic                          done,
  output logic [K-1:0][LP_BITS-1:0]     qt_row,
  output logic [K-1:0][LP_BITS-1:0]     kt_row
);

  localparam int KW = $clog2(K);

  logic [D-1:0][1:0]         p_col   [K];
  logic [K-1:0][LP_BITS-1:0] wqt_col [K];
  logic [K-1:0][LP_BITS-1:0] wkt_col [K];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_mat)
        2'd0:    p_col[wr_col][wr_row]            <= wr_data[1:0];
        2'd1:    wqt_col[wr_col][wr_row[KW-1:0]]  <= wr_data;
        default: wkt_col[wr_col][wr_row[KW-1:0]]  <= wr_data;
      endcase
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_PROJ, S_APPROX} state_e;
  state_e               state;
  logic [KW-1:0]        j;
  logic [K-1:0][LP_BITS-1:0] xq;

  // Ternary projection of column j: add, subtract or skip each feature.
  function automatic longint tern_dot(input logic [D-1:0][FX_W-1:0] x,
                                      input logic [D-1:0][1:0] p);
    longint acc = 0;
    for (int i = 0; i < D; i++) begin
      unique case (tern_e'(p[i]))
        TERN_POS: acc += longint'($signed(x[i]));
        TERN_NEG: acc -= longint'($signed(x[i]));
        default:  ;
      endcase
    end
    return acc;
  endfunction

  function automatic longint lp_dot(input logic [K-1:0][LP_BITS-1:0] a,
                                    input logic [K-1:0][LP_BITS-1:0] b);
    longint acc = 0;
    for (int i = 0; i < K; i++)
      acc += longint'($signed(a[i])) * longint'($signed(b[i]));
    return acc;
  endfunction

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      j      <= '0;
      done   <= 1'b0;
      xq     <= '0;
      qt_row <= '0;
      kt_row <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PROJ;
          j     <= '0;
        end
        S_PROJ: begin
          xq[j] <= LP_BITS'(sat_shift(tern_dot(x_row, p_col[j]), int'(shift_xp), LP_BITS));
          j     <= j + 1'b1;
          if (j == KW'(K - 1)) state <= S_APPROX;
        end
        S_APPROX: begin
          qt_row[j] <= LP_BITS'(sat_shift(lp_dot(xq, wqt_col[j]), int'(shift_qk), LP_BITS));
          kt_row[j] <= LP_BITS'(sat_shift(lp_dot(xq, wkt_col[j]), int'(shift_qk), LP_BITS));
          j         <= j + 1'b1;
          if (j == KW'(K - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

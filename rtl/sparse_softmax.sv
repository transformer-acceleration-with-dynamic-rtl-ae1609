// sparse_softmax: softmax over the selected scores of one attention row.
//
// Only the TOPK scores that the predicted mask keeps are ever stored, so the
// unit's work and storage scale with TOPK instead of with the sequence length.
// Masked positions are simply absent (their weight is exactly zero).
//
// Arithmetic (all integer):
//   m    = max of the stored scores (tracked while scores arrive)
//   e_j  = exp(s_j - m)  as Q0.15, via 2^(y) with y = (s_j - m) * log2(e):
//          y is formed as (m - s_j) * 369 >> 8 (369/256 ~ 1.4414), its integer
//          part n gives a right shift and its top 4 fraction bits f index a
//          16-entry table EXP2_LUT[f] = round(32768 * 2^(-f/16));
//   sum  = sum of e_j;   r = floor(2^30 / sum)   (one division per row)
//   a_j  = (e_j * r) >> 15                        (Q0.15 probability)
//
// Interface and timing: clear empties the row. s_valid appends s_in (Q8.8).
// start runs the exponent pass, one entry per cycle (count cycles), then one
// cycle for the reciprocal; ready then rises and stays high. a_out is the
// probability of the entry at the read pointer (entries in arrival order);
// a_next advances the pointer.
//
// Follows the paper: softmax restricted to the predicted positions (sparse
// softmax). Own choices: the base-2 exponent with a 16-entry table, Q0.15
// probabilities, normalisation by one reciprocal.
module sparse_softmax
  import dsa_pkg::*;
#(
  parameter int N = 200  // maximum selected entries per row
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        s_valid,
  input  logic signed [FX_W-1:0]      s_in,
  input  logic                        start,
  output logic                        busy,
  output logic                        ready,
  input  logic                        a_next,
  output logic [15:0]                 a_out,
  output logic [$clog2(N+1)-1:0]      count
);

  localparam int CW = $clog2(N + 1);

  localparam logic [15:0] EXP2_LUT [16] = '{
    16'd32768, 16'd31379, 16'd30048, 16'd28774, 16'd27554, 16'd26386, 16'd25268, 16'd24196,
    16'd23170, 16'd22188, 16'd21247, 16'd20347, 16'd19484, 16'd18658, 16'd17867, 16'd17109};

  logic signed [FX_W-1:0] s_buf [N];
  logic [15:0]            e_buf [N];
  logic signed [FX_W-1:0] s_max;
  logic [CW-1:0]          ptr;        // exponent pass / read pointer
  logic [31:0]            sum;
  logic [15:0]            recip;

  typedef enum logic [1:0] {S_FILL, S_EXP, S_RECIP, S_READY} state_e;
  state_e state;

  // exp(s - m) for s <= m, Q0.15
  function automatic logic [15:0] exp_neg(input logic signed [FX_W-1:0] s,
                                          input logic signed [FX_W-1:0] m);
    logic [16:0] diff;   // m - s >= 0, Q8.8
    logic [26:0] y;      // Q.8 of log2 units
    logic [18:0] n;
    diff = 17'(m - s);
    y    = (27'(diff) * 27'd369) >> 8;
    n    = y[26:8];
    if (n >= 19'd16) return 16'd0;
    return EXP2_LUT[y[7:4]] >> n[3:0];
  endfunction

  assign busy  = (state == S_EXP) || (state == S_RECIP);
  assign ready = (state == S_READY);
  assign a_out = 16'((32'(e_buf[ptr]) * 32'(recip)) >> PROB_FRAC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_FILL;
      count <= '0;
      ptr   <= '0;
      sum   <= '0;
      recip <= '0;
      s_max <= '0;
      for (int i = 0; i < N; i++) begin
        s_buf[i] <= '0;
        e_buf[i] <= '0;
      end
    end else if (clear) begin
      state <= S_FILL;
      count <= '0;
      ptr   <= '0;
      sum   <= '0;
    end else begin
      unique case (state)
        S_FILL: begin
          if (s_valid && count != CW'(N)) begin
            s_buf[count] <= s_in;
            count        <= count + 1'b1;
            if (count == '0 || s_in > s_max) s_max <= s_in;
          end
          if (start) begin
            ptr   <= '0;
            sum   <= '0;
            state <= (count == '0) ? S_READY : S_EXP;
          end
        end
        S_EXP: begin
          e_buf[ptr] <= exp_neg(s_buf[ptr], s_max);
          sum        <= sum + 32'(exp_neg(s_buf[ptr], s_max));
          if (ptr == count - 1'b1) begin
            ptr   <= '0;
            state <= S_RECIP;
          end else begin
            ptr <= ptr + 1'b1;
          end
        end
        S_RECIP: begin
          recip <= 16'((32'd1 << 30) / sum);
          state <= S_READY;
        end
        S_READY: if (a_next && ptr != count) ptr <= ptr + 1'b1;
        default: state <= S_FILL;
      endcase
    end
  end

endmodule

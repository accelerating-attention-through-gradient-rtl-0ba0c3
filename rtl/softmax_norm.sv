// softmax_norm: normalisation stage of the softmax.
// The V-PU accumulates, for one query row, acc_j = sum_i e_i * v_ij and
// esum = sum_i e_i with unnormalised exponentials e_i. This unit turns that
// into the attention output out_j = acc_j / esum, i.e. sum_i p_i * v_ij with
// p_i = e_i / esum the softmax probabilities. It first forms the reciprocal
// recip = floor(2^64 / esum) with a restoring divider (one quotient bit per
// cycle, 65 cycles), then multiplies the 64 accumulators by it one per cycle
// and keeps the top bits, saturated to 16 bits. The result row is handed out
// over a valid/ready port. A row with no surviving score (esum = 0) gives 0.
// Deferring the division to the end of the row is this design's choice: the
// paper only states that the softmax is LUT-based and produces probabilities.
// Interface: start (when ready_in) takes acc and esum; out_valid/out_ready
// deliver the 64 x 16-bit row. Latency about 130 cycles per row.
module softmax_norm
  import leopard_pkg::*;
#(
  parameter int ACCV_W = 58,
  parameter int ESUM_W = 40
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     ready_in,
  input  logic signed [ACCV_W-1:0] acc [D],
  input  logic [ESUM_W-1:0]        esum,
  output logic                     out_valid,
  input  logic                     out_ready,
  output v_vec_t                   out_row
);
  localparam int R = 64;
  typedef enum logic [1:0] {N_IDLE, N_DIV, N_MUL, N_OUT} nstate_t;
  nstate_t st;

  logic signed [ACCV_W-1:0] acc_q [D];
  logic [ESUM_W-1:0]        div_q;
  logic [R:0]               rem, quo;     // restoring division of 2^R
  logic [7:0]               cnt;
  logic [R:0]               recip;

  assign ready_in  = (st == N_IDLE);
  assign out_valid = (st == N_OUT);

  // one element per cycle: acc * recip / 2^R, floor, saturated
  logic signed [ACCV_W+R+1:0] prod;
  logic signed [ACCV_W+1:0]   q_el;
  logic [5:0]                 eidx;          // element in work: cnt - 1
  assign eidx = cnt[5:0] - 6'd1;
  assign prod = (ACCV_W+R+2)'(acc_q[eidx]) * $signed({1'b0, recip});
  assign q_el = (ACCV_W+2)'(prod >>> R);

  logic [R:0] rem_sh;
  assign rem_sh = {rem[R-1:0], (cnt == 8'd0)};   // dividend 2^R: one 1 then zeros

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= N_IDLE; cnt <= '0; rem <= '0; quo <= '0; recip <= '0; div_q <= '0;
      out_row <= '0;
      for (int j = 0; j < D; j++) acc_q[j] <= '0;
    end else begin
      case (st)
        N_IDLE: if (start) begin
          for (int j = 0; j < D; j++) acc_q[j] <= acc[j];
          div_q <= esum;
          rem <= '0; quo <= '0; cnt <= '0;
          st  <= N_DIV;
        end
        N_DIV: begin
          // R+1 steps: quotient bits of 2^R / esum, MSB first
          if (rem_sh >= (R+1)'(div_q)) begin
            rem <= rem_sh - (R+1)'(div_q);
            quo <= {quo[R-1:0], 1'b1};
          end else begin
            rem <= rem_sh;
            quo <= {quo[R-1:0], 1'b0};
          end
          if (cnt == 8'(R)) begin
            cnt <= '0;
            st  <= N_MUL;
          end else cnt <= cnt + 1'b1;
        end
        N_MUL: begin
          if (cnt == 8'd0) recip <= (div_q == '0) ? '0 : quo;
          else begin
            if (q_el > (ACCV_W+2)'(32767))       out_row[eidx] <= 16'sd32767;
            else if (q_el < -(ACCV_W+2)'(32768)) out_row[eidx] <= -16'sd32768;
            else                                 out_row[eidx] <= V_W'(q_el);
          end
          if (cnt == 8'(D)) st <= N_OUT;
          cnt <= cnt + 1'b1;
        end
        N_OUT: if (out_ready) begin
          st <= N_IDLE;
          cnt <= '0;
        end
        default: st <= N_IDLE;
      endcase
    end
  end
endmodule

// bs_dpe: Bit-Serial Dot-Product Engine of a QK-DPU.
// Computes Score = sum_i q_i * k_i over D = 64 elements, taking the full
// 12-bit q_i (two's complement, held in the DPU's query register) and B = 2
// bits of every k_i per cycle, most significant first. K is sign-magnitude:
// the first digit of an element is {sign, magnitude bit 10}, the five later
// digits are magnitude bits [9:8] ... [1:0]. Each cycle the 64 small MACs
// form sum_i (+/-q_i) * digit_i (about 20 bits, as the paper states), a
// shifter weights it by 2^(10-2s) for digit s, and the result is added to
// the partial-sum register. The MAC chain, shifter and accumulator follow
// the paper's figure of the engine; the sign-magnitude digit order and the
// 30-bit accumulator (exact for d = 64) are this design's choices.
// Interface: when en is high the digit vector kdig for digit number slice is
// consumed; first = (slice == 0) clears the old sum. psum_next is the sum
// including this cycle's digit (combinational), psum the registered sum.
// ksign gives the sign bit of every k element: taken from kdig during
// digit 0 and from the register that stores it afterwards.
module bs_dpe
  import leopard_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic [$clog2(SLICES)-1:0]  slice,
  input  q_vec_t                     q,
  input  logic [KBUF_W-1:0]          kdig,
  output logic [D-1:0]               ksign,
  output logic signed [ACC_W-1:0]    psum_next,
  output logic signed [ACC_W-1:0]    psum
);
  localparam int PROD_W = Q_W + 3;                 // (+/-q) * {0..3}
  localparam int DOT_W  = PROD_W + $clog2(D);      // 21-bit per-cycle sum

  logic [D-1:0] ksign_q;
  logic         first;
  logic signed [DOT_W-1:0] dot;
  logic signed [ACC_W-1:0] shifted;
  logic [4:0]              weight;

  assign first = (slice == '0);

  always_comb begin
    for (int i = 0; i < D; i++)
      ksign[i] = first ? kdig[2*i+1] : ksign_q[i];
  end

  // 64 MACs: one 12-bit x 2-bit product each, summed down the chain.
  always_comb begin
    dot = '0;
    for (int i = 0; i < D; i++) begin
      logic signed [PROD_W-1:0] qs;
      logic [1:0]               dg;
      qs = ksign[i] ? -PROD_W'(q[i]) : PROD_W'(q[i]);
      dg = first ? {1'b0, kdig[2*i]} : kdig[2*i +: 2];
      dot = dot + DOT_W'(qs * $signed({1'b0, dg}));
    end
  end

  // Shifter: digit s has weight 2^(10 - 2s) (digit 0 is magnitude bit 10).
  assign weight  = 5'(K_W - 2 - B * int'(slice));
  assign shifted = ACC_W'(dot) <<< weight;
  assign psum_next = (first ? '0 : psum) + shifted;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum    <= '0;
      ksign_q <= '0;
    end else if (en) begin
      psum <= psum_next;
      if (first) ksign_q <= ksign;
    end
  end
endmodule

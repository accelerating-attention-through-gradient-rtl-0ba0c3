// margin_calc: dynamic conservative margin of a QK-DPU.
// The margin M bounds from above how much the key digits not yet processed
// can still add to the partial score. Only element pairs whose signs agree
// (q sign XOR k sign = 0) can add a positive amount, so during digit 0 the
// unit sums |q_i| over those pairs into the Sum Register (18 bits, as in the
// paper) and scales it by the all-ones value of the remaining magnitude bits
// (0111..., here 2^10 - 1) into the 30-bit Margin Register. At every later
// digit s the margin shrinks by Sum * 3 * 2^(10-2s), which a shift register
// and a shift-add form (the paper's "<< +" block), so that after digit s
// M = Sum * (2^(10-2s) - 1) and after the last digit M = 0. Structure and
// widths follow the paper's margin figure; the exact shift schedule follows
// from the sign-magnitude digit order chosen for the key.
// Interface: en/slice as for bs_dpe; ksign is the sign of every k element
// (valid in digit 0). margin_next is the margin after this cycle's digit
// (combinational), margin the registered value.
module margin_calc
  import leopard_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       en,
  input  logic [$clog2(SLICES)-1:0]  slice,
  input  q_vec_t                     q,
  input  logic [D-1:0]               ksign,
  output logic [MARGIN_W-1:0]        margin_next,
  output logic [MARGIN_W-1:0]        margin
);
  localparam int MAG0 = K_W - 2;   // magnitude bits left after digit 0: 10

  logic [SUM_W-1:0]   sum_now, sum_reg;
  logic [4:0]         shamt;        // Shift-Reg: position of the "11" pair
  logic               first;

  assign first = (slice == '0);

  always_comb begin
    sum_now = '0;
    for (int i = 0; i < D; i++) begin
      logic [Q_W-1:0] absq;
      absq = q[i][Q_W-1] ? Q_W'(-q[i]) : Q_W'(q[i]);
      if (!(q[i][Q_W-1] ^ ksign[i])) sum_now = sum_now + SUM_W'(absq);
    end
  end

  always_comb begin
    if (first)
      // Scale: Sum * 0111...1 = (Sum << 10) - Sum
      margin_next = (MARGIN_W'(sum_now) << MAG0) - MARGIN_W'(sum_now);
    else
      // Subtract Sum * 2^(shamt+1) + Sum * 2^shamt
      margin_next = margin - ((MARGIN_W'(sum_reg) << (shamt + 5'd1)) + (MARGIN_W'(sum_reg) << shamt));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_reg <= '0;
      margin  <= '0;
      shamt   <= '0;
    end else if (en) begin
      margin <= margin_next;
      if (first) begin
        sum_reg <= sum_now;
        shamt   <= 5'(MAG0 - B);          // next digit removes bits 9:8
      end else begin
        shamt   <= shamt - 5'(B);
      end
    end
  end
endmodule

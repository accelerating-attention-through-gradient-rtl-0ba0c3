// tb_margin_calc: checks the margin after every digit against
// Sum * (2^(remaining magnitude bits) - 1), where Sum adds |q| over the
// elements whose query and key signs agree. The first case replays the
// paper's worked example (q = 9, -5, 7, -2 with key signs +, -, -, +):
// Sum = 9 + 5 = 14.
module tb_margin_calc;
  import leopard_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [$clog2(SLICES)-1:0] slice = '0;
  q_vec_t q;
  logic [D-1:0] ksign;
  logic [MARGIN_W-1:0] margin_next, margin;
  int checks = 0, failures = 0;

  margin_calc dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qv_t qv; key_t kv;
    q = '0; ksign = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < D; i++) begin
        qv[i] = rand_range(-2048, 2047);
        kv[i] = rand_range(-2047, 2047);
        if (t == 0) begin
          qv[i] = 0; kv[i] = 0;
        end
      end
      if (t == 0) begin
        qv[0] = 9; qv[1] = -5; qv[2] = 7; qv[3] = -2;
        kv[0] = 1; kv[1] = -1; kv[2] = -1; kv[3] = 1;
      end
      if (t == 1) for (int i = 0; i < D; i++) begin qv[i] = -2048; kv[i] = -5; end
      for (int i = 0; i < D; i++) q[i] = Q_W'(qv[i]);
      for (int s = 0; s < SLICES; s++) begin
        @(negedge clk);
        en = 1; slice = 3'(s);
        for (int i = 0; i < D; i++) ksign[i] = (s == 0) ? (kv[i] < 0) : 1'b0;
        #1;
        checks++;
        if (longint'(margin_next) != margin_ref(qv, kv, s)) begin
          failures++;
          $display("case %0d digit %0d: got %0d want %0d", t, s, margin_next, margin_ref(qv, kv, s));
        end
        if (t == 0 && s == 0 && margin_next != 30'(14 * 1023)) begin
          failures++;
          $display("worked example: margin %0d", margin_next);
        end
      end
      @(negedge clk); en = 0;
      checks++;
      if (margin != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

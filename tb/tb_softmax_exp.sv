// tb_softmax_exp: checks mant * 2^ex against 2^((s - Th) / 2^shift / 512)
// computed with real arithmetic, for random scores and shifts, including
// the saturation above 2^(E_MAX+1) and a score exactly at the threshold.
module tb_softmax_exp;
  import leopard_pkg::*;
  score_t score, thr;
  logic [4:0] shift;
  logic [15:0] mant;
  logic [3:0] ex;
  int checks = 0, failures = 0;
  logic clk = 0;

  softmax_exp dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      longint d;
      int x, xi, xf, want_m, want_e;
      thr   = score_t'($signed(24'($urandom)) >>> 4);
      d     = (t == 0) ? 0 : longint'($urandom % (1 << 18));
      shift = (t < 1000) ? 5'd0 : 5'($urandom % 6);
      score = score_t'(longint'(thr) + d);
      if (longint'(thr) + d > 8388607) begin score = 24'sd8388607; d = 8388607 - longint'(thr); end
      #1;
      x  = int'(d >> shift);
      xi = x >> 9; xf = x & 511;
      if (xi > 15) begin want_e = 15; want_m = $rtoi(2.0 ** (511.0 / 512.0) * 32768.0 + 0.5); end
      else begin want_e = xi; want_m = $rtoi(2.0 ** (real'(xf) / 512.0) * 32768.0 + 0.5); end
      checks++;
      if (int'(mant) != want_m || int'(ex) != want_e) begin
        failures++;
        if (failures < 10) $display("d=%0d shift=%0d: mant %0d ex %0d want %0d %0d", d, shift, mant, ex, want_m, want_e);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

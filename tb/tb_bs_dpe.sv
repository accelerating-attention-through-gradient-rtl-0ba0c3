// tb_bs_dpe: feeds random query/key pairs digit by digit into the bit-serial
// engine and checks the partial sum after every digit against an integer
// model, and the final sum against the full dot product. Includes extreme
// values (-2048 queries, +/-2047 keys).
module tb_bs_dpe;
  import leopard_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  logic [$clog2(SLICES)-1:0] slice = '0;
  q_vec_t q;
  logic [KBUF_W-1:0] kdig;
  logic [D-1:0] ksign;
  logic signed [ACC_W-1:0] psum_next, psum;
  int checks = 0, failures = 0;

  bs_dpe dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qv_t qv; key_t kv;
    q = '0; kdig = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < D; i++) begin
        qv[i] = (t == 0) ? -2048 : rand_range(-2048, 2047);
        kv[i] = (t == 0) ? ((i % 2) ? -2047 : 2047) : rand_range(-2047, 2047);
        q[i]  = Q_W'(qv[i]);
      end
      for (int s = 0; s < SLICES; s++) begin
        @(negedge clk);
        en = 1; slice = 3'(s); kdig = key_word(kv, s);
        #1;
        checks++;
        if (longint'(psum_next) != partial(qv, kv, s)) begin
          failures++;
          $display("key %0d digit %0d: got %0d want %0d", t, s, psum_next, partial(qv, kv, s));
        end
        if (s == 0) begin
          for (int i = 0; i < D; i++) if (ksign[i] != (kv[i] < 0)) failures++;
          checks++;
        end
      end
      @(negedge clk); en = 0;
      checks++;
      if (longint'(psum) != dot(qv, kv)) begin
        failures++;
        $display("key %0d final: got %0d want %0d", t, psum, dot(qv, kv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_softmax_norm: random accumulator rows and exponent sums; each output
// element must be within one LSB of acc / esum (rounded down), and a row
// with esum = 0 must give zeros. Also checks the row latency (about 130
// cycles: 65 divider steps plus 64 multiplies) and valid/ready hold.
module tb_softmax_norm;
  import leopard_pkg::*;
  localparam int AW = 58, EW = 40;
  logic clk = 0, rst_n = 0, start = 0, ready_in, out_valid, out_ready = 0;
  logic signed [AW-1:0] acc [D];
  logic [EW-1:0] esum;
  v_vec_t out_row;
  int checks = 0, failures = 0;

  softmax_norm #(.ACCV_W(AW), .ESUM_W(EW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint a [D];
    longint es;
    for (int j = 0; j < D; j++) acc[j] = '0;
    esum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int lat;
      // esum = sum of n weights in [2^15, 2^(15+k)); acc_j = sum e_i v_ij
      es = 0;
      for (int j = 0; j < D; j++) a[j] = 0;
      if (t != 1) begin
        automatic int n = 1 + int'($urandom % 40);
        for (int i = 0; i < n; i++) begin
          automatic longint e = longint'(32768 + ($urandom % 32768)) << ($urandom % 16);
          es += e;
          for (int j = 0; j < D; j++) a[j] += e * longint'($signed(16'($urandom)));
        end
      end
      @(negedge clk);
      for (int j = 0; j < D; j++) acc[j] = AW'(a[j]);
      esum = EW'(es); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat < 120 || lat > 140) begin failures++; $display("latency %0d", lat); end
      repeat (3) @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("valid dropped without ready"); end
      for (int j = 0; j < D; j++) begin
        automatic longint want = (es == 0) ? 0 : ((a[j] >= 0) ? a[j] / es : -((-a[j] + es - 1) / es));
        automatic longint diff = longint'(out_row[j]) - want;
        checks++;
        if (diff < -1 || diff > 1) begin
          failures++;
          if (failures < 10) $display("row %0d elem %0d: %0d want %0d", t, j, out_row[j], want);
        end
      end
      out_ready = 1;
      @(negedge clk); out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, the full and empty flags and the count, and fills the FIFO to full.
module tb_sync_fifo;
  localparam int W = 24, N = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(N+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  sync_fifo #(.WIDTH(W), .DEPTH(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen_full = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == N) || count != ($bits(count))'(model.size())) begin
        failures++;
        $display("cycle %0d: flags empty=%0d full=%0d count=%0d model=%0d", c, empty, full, count, model.size());
      end
      if (!empty) begin
        checks++;
        if (dout != model[0]) begin failures++; $display("data %h want %h", dout, model[0]); end
      end
      if (full) seen_full++;
      // bias towards filling in the first half, draining in the second
      push = !full && (($urandom % 100) < ((c % 1000) < 500 ? 70 : 30));
      pop  = !empty && (($urandom % 100) < ((c % 1000) < 500 ? 30 : 70));
      din  = W'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    checks++;
    if (seen_full == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

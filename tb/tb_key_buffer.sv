// tb_key_buffer: fills the 512 x 128-bit bank with a pattern, reads every
// word back (one-cycle read latency), checks that rdata holds while re is
// low and that a write blocks a read in the same cycle.
module tb_key_buffer;
  localparam int DEPTH = 512, W = 128;
  logic clk = 0, we = 0, re = 0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;

  key_buffer #(.DEPTH(DEPTH), .WIDTH(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] pat(input int a);
    return {4{32'(a * 32'h9E3779B1 + 32'h1234)}} ^ {96'd0, 32'(a)};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 9'(a); wdata = pat(a);
    end
    @(negedge clk); we = 0;
    for (int a = DEPTH - 1; a >= 0; a--) begin
      @(negedge clk); re = 1; raddr = 9'(a);
      @(negedge clk); re = 0;
      checks++;
      if (rdata != pat(a)) begin failures++; $display("addr %0d: %h", a, rdata); end
      @(negedge clk);
      checks++;
      if (rdata != pat(a)) begin failures++; $display("addr %0d not held", a); end
    end
    // write and read in one cycle: the write wins, rdata keeps its value
    @(negedge clk); re = 1; raddr = 9'd7;
    @(negedge clk); we = 1; waddr = 9'd9; wdata = '1; raddr = 9'd3;
    @(negedge clk); we = 0; re = 0;
    checks++;
    if (rdata != pat(7)) begin failures++; $display("read during write changed rdata"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

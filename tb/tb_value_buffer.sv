// tb_value_buffer: writes V rows bank by bank, reads rows back by index and
// checks every 16-bit element lands at its place in the 64-element row.
module tb_value_buffer;
  import leopard_pkg::*;
  localparam int DEPTH = 512;
  logic clk = 0, we = 0, re = 0;
  logic [2:0] wbank = '0;
  logic [8:0] waddr = '0, raddr = '0;
  logic [VBANK_W-1:0] wdata = '0;
  v_vec_t rdata;
  int checks = 0, failures = 0;

  value_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [15:0] val(input int r, input int e);
    return 16'(r * 97 + e * 13 + (e << 9));
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < DEPTH; r++)
      for (int b = 0; b < VBANKS; b++) begin
        @(negedge clk);
        we = 1; wbank = 3'(b); waddr = 9'(r);
        for (int e = 0; e < 8; e++) wdata[16*e +: 16] = val(r, 8*b + e);
      end
    @(negedge clk); we = 0;
    for (int t = 0; t < 600; t++) begin
      automatic int r = (t < DEPTH) ? (DEPTH - 1 - t) : int'($urandom % DEPTH);
      @(negedge clk); re = 1; raddr = 9'(r);
      @(negedge clk); re = 0;
      for (int e = 0; e < D; e++) begin
        checks++;
        if (rdata[e] != val(r, e)) begin
          failures++;
          if (failures < 10) $display("row %0d elem %0d: %h want %h", r, e, rdata[e], val(r, e));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

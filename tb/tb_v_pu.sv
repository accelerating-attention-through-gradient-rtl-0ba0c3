// tb_v_pu: loads random V rows, then feeds rows of (score, index) entries
// and end-of-row markers through a FIFO model with random gaps, and checks
// each output row against sum_i e_i v_i / sum_i e_i computed from the
// integer reference (within one LSB). Also checks one entry is consumed
// per cycle when the FIFO stays full, an empty row gives zeros, and that
// the number of MAC operations equals 64 per surviving score.
module tb_v_pu;
  import leopard_pkg::*;
  import tb_util_pkg::*;
  localparam int NV = 128;
  logic clk = 0, rst_n = 0;
  logic vb_we = 0; logic [2:0] vb_wbank = '0; logic [8:0] vb_waddr = '0; logic [127:0] vb_wdata = '0;
  score_t thr = -24'sd1000; logic [4:0] sm_shift = 5'd6;
  logic fifo_empty; score_entry_t fifo_entry; logic fifo_pop;
  logic out_valid, out_pop = 0, row_done; v_vec_t out_row; logic [31:0] st_macs;
  int checks = 0, failures = 0;
  int vmat [NV][D];
  score_entry_t q [$];
  logic gap = 0;

  v_pu #(.VB_DEPTH(512)) dut (.*);
  always #5 clk = ~clk;

  assign fifo_empty = (q.size() == 0) || gap;
  assign fifo_entry = (q.size() == 0) ? '0 : q[0];
  always @(posedge clk) begin
    if (fifo_pop && !fifo_empty) void'(q.pop_front());
    gap <= ($urandom % 5) == 0;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint acc [D]; longint es; int nsc; int rows = 12; longint want_macs = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < NV; r++) for (int b = 0; b < 8; b++) begin
      @(negedge clk); vb_we = 1; vb_wbank = 3'(b); vb_waddr = 9'(r);
      for (int e = 0; e < 8; e++) begin
        vmat[r][8*b+e] = rand_range(-32768, 32767);
        vb_wdata[16*e +: 16] = 16'(vmat[r][8*b+e]);
      end
    end
    @(negedge clk); vb_we = 0;
    for (int r = 0; r < rows; r++) begin
      es = 0; for (int j = 0; j < D; j++) acc[j] = 0;
      nsc = (r == 3) ? 0 : 1 + int'($urandom % 40);
      for (int i = 0; i < nsc; i++) begin
        automatic score_entry_t e;
        automatic longint s = longint'(thr) + longint'($urandom % 600000);
        automatic longint w;
        e.eor = 0; e.idx = idx_t'($urandom % NV); e.score = score_t'(s);
        w = exp_weight(s, thr, 6);
        es += w;
        for (int j = 0; j < D; j++) acc[j] += w * longint'(vmat[e.idx][j]);
        q.push_back(e);
      end
      want_macs += 64 * nsc;
      begin automatic score_entry_t m = '0; m.eor = 1; q.push_back(m); end
      while (!out_valid) @(negedge clk);
      for (int j = 0; j < D; j++) begin
        automatic longint d = longint'(out_row[j]) - floordiv(acc[j], es);
        checks++;
        if (d < -1 || d > 1) begin
          failures++;
          if (failures < 10) $display("row %0d elem %0d: %0d want %0d", r, j, out_row[j], floordiv(acc[j], es));
        end
      end
      @(negedge clk); out_pop = 1;
      @(negedge clk); out_pop = 0;
    end
    checks++;
    if (longint'(st_macs) != want_macs) begin failures++; $display("macs %0d want %0d", st_macs, want_macs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_qk_pu: the front end alone, with a Score/IDX FIFO model and a model
// back end that reports a finished row only some cycles after it read the
// row's end marker. Checks per row that the set of emitted (index, score)
// pairs is exactly the set of keys at or above the threshold, that each row
// ends with one marker, and that the front end stalls behind the back end
// (no more than one finished row outstanding).
module tb_qk_pu;
  import leopard_pkg::*;
  import tb_util_pkg::*;
  localparam int N_QK = 6, NKEYS = 75, ROWS = 6;
  logic clk = 0, rst_n = 0;
  logic kb_we = 0; logic [2:0] kb_sel = '0; logic [8:0] kb_waddr = '0; logic [KBUF_W-1:0] kb_wdata = '0;
  logic thr_we = 0; score_t thr_in = '0; logic [IDX_W:0] seq_len = (IDX_W+1)'(NKEYS);
  logic q_push = 0; q_vec_t q_in = '0; logic q_full;
  logic fifo_push; score_entry_t fifo_entry; logic fifo_full = 0;
  logic row_done_be = 0, idle;
  logic [31:0] st_rows, st_kept, st_early_stops, st_full_pruned, st_digits, st_be_stall_cycles, st_dpu_stall_cycles;
  int checks = 0, failures = 0;
  score_entry_t sink [$];
  int outstanding = 0, max_outstanding = 0;

  qk_pu #(.N_QK(N_QK), .KB_DEPTH(512)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (fifo_push) sink.push_back(fifo_entry);
    if (fifo_push && fifo_entry.eor) outstanding++;
    if (row_done_be) outstanding--;
    if (outstanding > max_outstanding) max_outstanding = outstanding;
    fifo_full <= ($urandom % 3) == 0;
  end

  key_t keys [NKEYS];
  qv_t  qs [ROWS];
  longint th = 2000000;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int i = 0; i < D; i++) qs[r][i] = rand_range(-2048, 2047);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NKEYS; j++) begin
      for (int i = 0; i < D; i++) keys[j][i] = rand_range(-2047, 2047);
      for (int s = 0; s < SLICES; s++) begin
        @(negedge clk); kb_we = 1; kb_sel = 3'(j % N_QK); kb_waddr = 9'((j / N_QK) * SLICES + s);
        kb_wdata = key_word(keys[j], s);
      end
    end
    @(negedge clk); kb_we = 0; thr_we = 1; thr_in = score_t'(th);
    @(negedge clk); thr_we = 0;
    for (int r = 0; r < ROWS; r++) begin
      while (q_full) @(negedge clk);
      q_push = 1; for (int i = 0; i < D; i++) q_in[i] = Q_W'(qs[r][i]);
      @(negedge clk); q_push = 0;
    end
    // model back end: consume one row at a time, slowly
    for (int r = 0; r < ROWS; r++) begin
      automatic longint want [int];
      automatic int got = 0;
      for (int k = 0; k < NKEYS; k++)
        if (ref_stop(qs[r], keys[k], th) == SLICES) begin
          automatic longint sc = dot(qs[r], keys[k]);
          want[k] = (sc > 8388607) ? 8388607 : sc;
        end
      forever begin
        while (sink.size() == 0) @(negedge clk);
        if (sink[0].eor) begin void'(sink.pop_front()); break; end
        checks++;
        if (!want.exists(int'(sink[0].idx)) || want[int'(sink[0].idx)] != longint'(sink[0].score)) begin
          failures++;
          $display("row %0d: unexpected idx %0d score %0d", r, sink[0].idx, sink[0].score);
        end
        got++;
        void'(sink.pop_front());
      end
      checks++;
      if (got != want.size()) begin failures++; $display("row %0d: %0d scores, want %0d", r, got, want.size()); end
      repeat (300) @(negedge clk);
      row_done_be = 1; @(negedge clk); row_done_be = 0;
    end
    checks += 3;
    if (max_outstanding > 2) begin failures++; $display("%0d rows outstanding", max_outstanding); end
    if (st_be_stall_cycles == 0) begin failures++; $display("no back-end stall"); end
    if (st_early_stops == 0) begin failures++; $display("no early stop"); end
    $display("be_stalls %0d early_stops %0d kept %0d", st_be_stall_cycles, st_early_stops, st_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

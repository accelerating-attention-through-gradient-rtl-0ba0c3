// tb_leopard_tile: end-to-end test of one tile at reduced FIFO depth.
// Loads random K (bit-plane layout) and V, sets a layer threshold, streams
// query rows and checks every 64-element attention output against the
// integer reference: keys whose exact score is >= threshold survive, their
// softmax weights come from the same exponent formula, output =
// floor(sum e_i v_i / sum e_i) within one LSB. It also checks the digit
// count predicted by the early-termination model and requires each
// mechanism to occur at least once: early stop, pruning at the last digit,
// front-end stall behind the back end, DPU stall on a full Score/IDX FIFO.
module tb_leopard_tile;
  import leopard_pkg::*;
  import tb_util_pkg::*;
  localparam int N_QK = 6, NKEYS = 96, ROWS = 10, SFD = 16;
  logic clk = 0, rst_n = 0;
  logic kb_we = 0; logic [2:0] kb_sel = '0; logic [8:0] kb_waddr = '0; logic [KBUF_W-1:0] kb_wdata = '0;
  logic vb_we = 0; logic [2:0] vb_wbank = '0; logic [8:0] vb_waddr = '0; logic [127:0] vb_wdata = '0;
  logic thr_we = 0; score_t thr_in = '0; logic [4:0] sm_shift = 5'd12; logic [IDX_W:0] seq_len = (IDX_W+1)'(NKEYS);
  logic q_push = 0; q_vec_t q_in = '0; logic q_full;
  logic out_valid, out_pop = 0; v_vec_t out_row; logic idle;
  logic [31:0] st_rows, st_kept, st_early_stops, st_full_pruned, st_digits,
               st_be_stall_cycles, st_dpu_stall_cycles, st_fifo_full_cycles, st_macs;
  int checks = 0, failures = 0;

  leopard_tile #(.N_QK(N_QK), .KB_DEPTH(512), .VB_DEPTH(512), .SF_DEPTH(SFD)) dut (.*);
  always #5 clk = ~clk;

  key_t keys [NKEYS];
  int   vmat [NKEYS][D];
  qv_t  qs [ROWS];
  longint th = 8000000;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // query stream
  initial begin
    wait (rst_n && thr_we);
    @(negedge clk); @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      while (q_full) @(negedge clk);
      q_push = 1;
      for (int i = 0; i < D; i++) q_in[i] = Q_W'(qs[r][i]);
      @(negedge clk); q_push = 0;
    end
  end

  initial begin
    longint want_digits = 0, want_kept = 0;
    // odd rows have small queries: almost every key is pruned, the row is
    // quick and the front end runs ahead into the back end
    for (int r = 0; r < ROWS; r++) for (int i = 0; i < D; i++)
      qs[r][i] = (r % 2) ? rand_range(-300, 300) : rand_range(-2048, 2047);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NKEYS; j++) begin
      for (int i = 0; i < D; i++) keys[j][i] = rand_range(-2047, 2047);
      for (int s = 0; s < SLICES; s++) begin
        @(negedge clk); kb_we = 1; kb_sel = 3'(j % N_QK); kb_waddr = 9'((j / N_QK) * SLICES + s);
        kb_wdata = key_word(keys[j], s);
      end
      for (int b = 0; b < 8; b++) begin
        @(negedge clk); kb_we = 0; vb_we = 1; vb_wbank = 3'(b); vb_waddr = 9'(j);
        for (int e = 0; e < 8; e++) begin
          vmat[j][8*b+e] = rand_range(-32768, 32767);
          vb_wdata[16*e +: 16] = 16'(vmat[j][8*b+e]);
        end
      end
    end
    @(negedge clk); vb_we = 0; thr_we = 1; thr_in = score_t'(th);
    @(negedge clk); thr_we = 0;
    for (int r = 0; r < ROWS; r++) begin
      automatic longint acc [D];
      automatic longint es = 0;
      for (int j = 0; j < D; j++) acc[j] = 0;
      for (int k = 0; k < NKEYS; k++) begin
        automatic int st = ref_stop(qs[r], keys[k], th);
        want_digits += (st == SLICES) ? SLICES : st + 1;
        if (st == SLICES) begin
          automatic longint sc = dot(qs[r], keys[k]);
          automatic longint w;
          if (sc > 8388607) sc = 8388607;
          w = exp_weight(sc, th, 12);
          es += w; want_kept++;
          for (int j = 0; j < D; j++) acc[j] += w * longint'(vmat[k][j]);
        end
      end
      // slow consumer: the Output-FIFO and the back end fill up
      while (!out_valid) @(negedge clk);
      repeat (150) @(negedge clk);
      for (int j = 0; j < D; j++) begin
        automatic longint d = longint'(out_row[j]) - floordiv(acc[j], es);
        checks++;
        if (d < -1 || d > 1) begin
          failures++;
          if (failures < 10) $display("row %0d elem %0d: %0d want %0d", r, j, out_row[j], floordiv(acc[j], es));
        end
      end
      out_pop = 1; @(negedge clk); out_pop = 0;
    end
    checks += 2;
    if (longint'(st_digits) != want_digits) begin failures++; $display("digits %0d want %0d", st_digits, want_digits); end
    if (longint'(st_kept) != want_kept) begin failures++; $display("kept %0d want %0d", st_kept, want_kept); end
    $display("rows %0d kept %0d early_stops %0d last_digit_prunes %0d be_stalls %0d dpu_stalls %0d fifo_full %0d",
             st_rows, st_kept, st_early_stops, st_full_pruned, st_be_stall_cycles, st_dpu_stall_cycles, st_fifo_full_cycles);
    checks += 5;
    if (st_early_stops == 0)      begin failures++; $display("no early stop"); end
    if (st_full_pruned == 0)      begin failures++; $display("no last-digit prune"); end
    if (st_be_stall_cycles == 0)  begin failures++; $display("no back-end stall"); end
    if (st_dpu_stall_cycles == 0) begin failures++; $display("no DPU stall"); end
    if (st_fifo_full_cycles == 0) begin failures++; $display("Score-FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

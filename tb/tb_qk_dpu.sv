// tb_qk_dpu: loads random keys into one QK-DPU, runs several query rows
// and checks (1) exactly the keys whose true score is >= threshold come out,
// in order, with their exact (saturated) scores and global indices,
// (2) the digit at which every pruned key stops matches the integer model
// of partial sum + margin, via the number of busy cycles, which must equal
// the digits processed (one digit per cycle, no bubbles) when the output is
// always taken, and (3) nothing is lost when the output is back-pressured.
module tb_qk_dpu;
  import leopard_pkg::*;
  import tb_util_pkg::*;
  localparam int N_QK = 6, ID = 2, NK = 60;
  logic clk = 0, rst_n = 0;
  logic kb_we = 0; logic [8:0] kb_waddr = '0; logic [KBUF_W-1:0] kb_wdata = '0;
  logic thr_we = 0; score_t thr_in = '0;
  logic start = 0; q_vec_t q_in = '0; logic [IDX_W:0] n_keys = '0;
  logic busy, out_valid, out_ready = 1;
  score_t out_score; idx_t out_idx;
  logic ev_digit, ev_early_stop, ev_pruned, ev_stall;
  int checks = 0, failures = 0;
  int n_es = 0, n_stall = 0;

  qk_dpu #(.N_QK(N_QK), .DPU_ID(ID), .KB_DEPTH(512)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (ev_early_stop) n_es++;
    if (ev_stall) n_stall++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  key_t keys [NK];

  initial begin
    qv_t qv;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NK; j++) begin
      for (int i = 0; i < D; i++) keys[j][i] = rand_range(-2047, 2047);
      for (int s = 0; s < SLICES; s++) begin
        @(negedge clk); kb_we = 1; kb_waddr = 9'(j * SLICES + s); kb_wdata = key_word(keys[j], s);
      end
    end
    @(negedge clk); kb_we = 0;
    for (int r = 0; r < 8; r++) begin
      automatic longint th;
      automatic int exp_idx [$];
      automatic longint exp_score [$];
      automatic int digits = 0, cyc = 0, got = 0;
      th = (r % 4) * 2000000 - 2000000;
      for (int i = 0; i < D; i++) begin qv[i] = rand_range(-2048, 2047); q_in[i] = Q_W'(qv[i]); end
      for (int j = 0; j < NK; j++) begin
        automatic int st = ref_stop(qv, keys[j], th);
        digits += (st == SLICES) ? SLICES : st + 1;
        if (st == SLICES) begin
          automatic longint sc = dot(qv, keys[j]);
          if (sc > 8388607) sc = 8388607;
          exp_idx.push_back(j * N_QK + ID); exp_score.push_back(sc);
        end
      end
      @(negedge clk); thr_we = 1; thr_in = score_t'(th);
      @(negedge clk); thr_we = 0; start = 1; n_keys = (IDX_W+1)'(NK);
      @(negedge clk); start = 0;
      while (busy || out_valid) begin
        if (r >= 4) out_ready = ($urandom % 4) == 0;
        if (out_valid && out_ready) begin
          checks++;
          if (got >= exp_idx.size() || out_idx != idx_t'(exp_idx[got]) || longint'(out_score) != exp_score[got]) begin
            failures++;
            $display("row %0d out %0d: idx %0d score %0d", r, got, out_idx, out_score);
          end
          got++;
        end
        if (busy) cyc++;
        @(negedge clk);
      end
      out_ready = 1;
      checks++;
      if (got != exp_idx.size()) begin failures++; $display("row %0d: %0d outputs, want %0d", r, got, exp_idx.size()); end
      if (r < 4) begin
        checks++;
        // busy for every digit, one cycle per digit
        if (cyc != digits) begin failures++; $display("row %0d: %0d busy cycles, want %0d digits", r, cyc, digits); end
      end
    end
    checks++;
    if (n_es == 0 || n_stall == 0) begin failures++; $display("early stops %0d stalls %0d", n_es, n_stall); end
    $display("early stops %0d, stall cycles %0d", n_es, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

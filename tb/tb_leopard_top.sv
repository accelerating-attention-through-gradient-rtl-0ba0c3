// tb_leopard_top: the whole accelerator at its default size (two tiles, six
// QK-DPUs each, 8KB Key Buffer banks, 64KB Value Buffer, 512-deep FIFOs).
// Each tile gets its own head: 510 keys (the most that six 512-word Key
// Buffer banks hold), its own V, threshold and four query rows, all run at
// the same time. Every output row is checked against the integer reference
// (surviving keys, exponent weights, floor(sum e v / sum e) within one LSB),
// as are the digit and survivor counts. Each mechanism must occur at least
// once per tile: early stop, pruning at the last digit and front-end stall
// behind the back end (a slow consumer of the Output-FIFO holds the back
// end). A DPU stall on a full Score-FIFO cannot happen at this size: the
// 512-deep FIFO always holds a whole row, and the front end runs at most one
// row ahead; tb_leopard_tile covers it with a shallower FIFO.
module tb_leopard_top;
  import leopard_pkg::*;
  import tb_util_pkg::*;
  localparam int NT = 2, N_QK = 6, NKEYS = 510, ROWS = 6;
  logic clk = 0, rst_n = 0;
  logic [NT-1:0] kb_we = '0; logic [2:0] kb_sel [NT]; logic [8:0] kb_waddr [NT]; logic [KBUF_W-1:0] kb_wdata [NT];
  logic [NT-1:0] vb_we = '0; logic [2:0] vb_wbank [NT]; logic [8:0] vb_waddr [NT]; logic [127:0] vb_wdata [NT];
  logic [NT-1:0] thr_we = '0; score_t thr_in [NT]; logic [4:0] sm_shift [NT]; logic [IDX_W:0] seq_len [NT];
  logic [NT-1:0] q_push = '0; q_vec_t q_in [NT]; logic [NT-1:0] q_full;
  logic [NT-1:0] out_valid, out_pop = '0; v_vec_t out_row [NT]; logic [NT-1:0] idle;
  logic [31:0] st_rows [NT], st_kept [NT], st_early_stops [NT], st_full_pruned [NT], st_digits [NT],
               st_be_stall_cycles [NT], st_dpu_stall_cycles [NT], st_fifo_full_cycles [NT], st_macs [NT];
  int checks = 0, failures = 0;

  leopard_top dut (.*);
  always #5 clk = ~clk;

  key_t keys [NT][NKEYS];
  int   vmat [NT][NKEYS][D];
  qv_t  qs [NT][ROWS];
  longint th [NT] = '{6000000, 3000000};
  int done_tiles = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < NT; t++) begin
      kb_sel[t] = '0; kb_waddr[t] = '0; kb_wdata[t] = '0; vb_wbank[t] = '0; vb_waddr[t] = '0;
      vb_wdata[t] = '0; thr_in[t] = '0; sm_shift[t] = 5'd13; seq_len[t] = (IDX_W+1)'(NKEYS); q_in[t] = '0;
      for (int r = 0; r < ROWS; r++) for (int i = 0; i < D; i++)
        qs[t][r][i] = (r % 2) ? rand_range(-300, 300) : rand_range(-2048, 2047);
      for (int j = 0; j < NKEYS; j++) for (int i = 0; i < D; i++) keys[t][j][i] = rand_range(-2047, 2047);
      for (int j = 0; j < NKEYS; j++) for (int i = 0; i < D; i++) vmat[t][j][i] = rand_range(-32768, 32767);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
  end

  for (genvar t = 0; t < NT; t++) begin : g_drv
    initial begin
      automatic longint want_digits = 0, want_kept = 0;
      wait (rst_n);
      for (int j = 0; j < NKEYS; j++) begin
        for (int s = 0; s < SLICES; s++) begin
          @(negedge clk); kb_we[t] = 1; kb_sel[t] = 3'(j % N_QK); kb_waddr[t] = 9'((j / N_QK) * SLICES + s);
          kb_wdata[t] = key_word(keys[t][j], s);
        end
        for (int b = 0; b < 8; b++) begin
          @(negedge clk); kb_we[t] = 0; vb_we[t] = 1; vb_wbank[t] = 3'(b); vb_waddr[t] = 9'(j);
          for (int e = 0; e < 8; e++) vb_wdata[t][16*e +: 16] = 16'(vmat[t][j][8*b+e]);
        end
      end
      @(negedge clk); vb_we[t] = 0; thr_we[t] = 1; thr_in[t] = score_t'(th[t]);
      @(negedge clk); thr_we[t] = 0;
      fork
        for (int r = 0; r < ROWS; r++) begin
          while (q_full[t]) @(negedge clk);
          q_push[t] = 1; for (int i = 0; i < D; i++) q_in[t][i] = Q_W'(qs[t][r][i]);
          @(negedge clk); q_push[t] = 0;
        end
      join_none
      for (int r = 0; r < ROWS; r++) begin
        automatic longint acc [D];
        automatic longint es = 0;
        for (int j = 0; j < D; j++) acc[j] = 0;
        for (int k = 0; k < NKEYS; k++) begin
          automatic int st = ref_stop(qs[t][r], keys[t][k], th[t]);
          want_digits += (st == SLICES) ? SLICES : st + 1;
          if (st == SLICES) begin
            automatic longint sc = dot(qs[t][r], keys[t][k]);
            automatic longint w;
            if (sc > 8388607) sc = 8388607;
            w = exp_weight(sc, th[t], 13);
            es += w; want_kept++;
            for (int j = 0; j < D; j++) acc[j] += w * longint'(vmat[t][k][j]);
          end
        end
        while (!out_valid[t]) @(negedge clk);
        repeat (1500) @(negedge clk);
        for (int j = 0; j < D; j++) begin
          automatic longint d = longint'(out_row[t][j]) - floordiv(acc[j], es);
          checks++;
          if (d < -1 || d > 1) begin
            failures++;
            if (failures < 10) $display("tile %0d row %0d elem %0d: %0d want %0d", t, r, j, out_row[t][j], floordiv(acc[j], es));
          end
        end
        out_pop[t] = 1; @(negedge clk); out_pop[t] = 0;
      end
      checks += 2;
      if (longint'(st_digits[t]) != want_digits) begin failures++; $display("tile %0d digits %0d want %0d", t, st_digits[t], want_digits); end
      if (longint'(st_kept[t]) != want_kept) begin failures++; $display("tile %0d kept %0d want %0d", t, st_kept[t], want_kept); end
      $display("tile %0d: rows %0d kept %0d digits %0d early_stops %0d last_digit_prunes %0d be_stalls %0d dpu_stalls %0d",
               t, st_rows[t], st_kept[t], st_digits[t], st_early_stops[t], st_full_pruned[t], st_be_stall_cycles[t], st_dpu_stall_cycles[t]);
      checks += 3;
      if (st_early_stops[t] == 0)      begin failures++; $display("tile %0d: no early stop", t); end
      if (st_full_pruned[t] == 0)      begin failures++; $display("tile %0d: no last-digit prune", t); end
      if (st_be_stall_cycles[t] == 0)  begin failures++; $display("tile %0d: no back-end stall", t); end
      done_tiles++;
    end
  end

  initial begin
    wait (done_tiles == NT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

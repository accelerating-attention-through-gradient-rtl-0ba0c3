// qk_pu: the front end (Query-Key Processing Unit) of a tile.
// Query vectors arrive from off-chip into the Q-FIFO. When all N_QK QK-DPUs
// are idle, the controller pops one query and broadcasts it to every DPU;
// each DPU then scores the keys in its own Key Buffer (keys interleaved, key
// j lives in DPU j mod N_QK) and prunes those that cannot reach the layer
// threshold. Surviving scores are collected, one per cycle, by a fixed-
// priority arbiter (lowest DPU number first) and pushed into the Score-FIFO
// and IDX-FIFO. When every DPU has finished, an end-of-row marker is pushed
// so that the back end knows the row is complete.
// Stall (from the paper): if the front end has finished a row while the back
// end is still working on the previous one, it waits before taking the next
// query. Here: a new row may start only while at most one finished row is
// still outstanding in the back end (row_done_be counts them off).
// The broadcast, per-DPU key buffers and the stall rule follow the paper; the
// arbiter, the end-of-row marker and the key interleaving are this design's.
// Interface: q_push/q_in/q_full stream queries in. seq_len (0..512) is the
// number of valid keys. fifo_push/fifo_entry/fifo_full write the Score/IDX
// FIFO pair. Statistics outputs count DPU digits, early stops, pruned keys
// and stall cycles.
module qk_pu
  import leopard_pkg::*;
#(
  parameter int N_QK     = 6,
  parameter int KB_DEPTH = 512,
  parameter int Q_DEPTH  = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Key Buffer load
  input  logic                        kb_we,
  input  logic [$clog2(N_QK)-1:0]     kb_sel,
  input  logic [$clog2(KB_DEPTH)-1:0] kb_waddr,
  input  logic [KBUF_W-1:0]           kb_wdata,
  // layer threshold and sequence length
  input  logic                        thr_we,
  input  score_t                      thr_in,
  input  logic [IDX_W:0]              seq_len,
  // Q stream
  input  logic                        q_push,
  input  q_vec_t                      q_in,
  output logic                        q_full,
  // Score/IDX FIFO write side
  output logic                        fifo_push,
  output score_entry_t                fifo_entry,
  input  logic                        fifo_full,
  // back end finished one row
  input  logic                        row_done_be,
  output logic                        idle,
  // statistics
  output logic [31:0]                 st_rows,
  output logic [31:0]                 st_kept,
  output logic [31:0]                 st_early_stops,
  output logic [31:0]                 st_full_pruned,
  output logic [31:0]                 st_digits,
  output logic [31:0]                 st_be_stall_cycles,
  output logic [31:0]                 st_dpu_stall_cycles
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_EOR} state_t;
  state_t state;

  q_vec_t   q_head;
  logic     q_empty, q_pop;
  logic [1:0] rows_out;            // rows finished here, not yet by back end

  logic [N_QK-1:0] dpu_busy, dpu_valid, dpu_ready;
  logic [N_QK-1:0] ev_digit, ev_es, ev_pr, ev_st;
  score_t          dpu_score [N_QK];
  idx_t            dpu_idx   [N_QK];
  logic            start;

  sync_fifo #(.WIDTH($bits(q_vec_t)), .DEPTH(Q_DEPTH)) u_qfifo (
    .clk, .rst_n, .push(q_push), .din(q_in), .full(q_full),
    .pop(q_pop), .dout(q_head), .empty(q_empty), .count()
  );

  assign start = (state == S_IDLE) && !q_empty && (rows_out < 2'd2);
  assign q_pop = start;

  // Keys held by DPU d: ceil((seq_len - d) / N_QK)
  for (genvar d = 0; d < N_QK; d++) begin : g_dpu
    logic [IDX_W:0] nk;
    assign nk = (seq_len > (IDX_W+1)'(d)) ? (IDX_W+1)'((seq_len - (IDX_W+1)'(d) + (IDX_W+1)'(N_QK - 1)) / N_QK) : '0;
    qk_dpu #(.N_QK(N_QK), .DPU_ID(d), .KB_DEPTH(KB_DEPTH)) u_dpu (
      .clk, .rst_n,
      .kb_we(kb_we && kb_sel == ($clog2(N_QK))'(d)), .kb_waddr, .kb_wdata,
      .thr_we, .thr_in,
      .start, .q_in(q_head), .n_keys(nk), .busy(dpu_busy[d]),
      .out_valid(dpu_valid[d]), .out_ready(dpu_ready[d]),
      .out_score(dpu_score[d]), .out_idx(dpu_idx[d]),
      .ev_digit(ev_digit[d]), .ev_early_stop(ev_es[d]), .ev_pruned(ev_pr[d]),
      .ev_stall(ev_st[d])
    );
  end

  // Fixed-priority collection of one surviving score per cycle
  logic             grant_any;
  logic [$clog2(N_QK)-1:0] grant;
  always_comb begin
    grant_any = 1'b0;
    grant     = '0;
    dpu_ready = '0;
    for (int d = N_QK - 1; d >= 0; d--) begin
      if (dpu_valid[d]) begin
        grant_any = 1'b1;
        grant     = ($clog2(N_QK))'(d);
      end
    end
    if (grant_any && !fifo_full && state == S_RUN) dpu_ready[grant] = 1'b1;
  end

  wire all_done = (dpu_busy == '0) && (dpu_valid == '0);

  always_comb begin
    fifo_push  = 1'b0;
    fifo_entry = '0;
    if (state == S_RUN && grant_any && !fifo_full) begin
      fifo_push        = 1'b1;
      fifo_entry.score = dpu_score[grant];
      fifo_entry.idx   = dpu_idx[grant];
    end else if (state == S_EOR && !fifo_full) begin
      fifo_push      = 1'b1;
      fifo_entry.eor = 1'b1;
    end
  end

  function automatic logic [31:0] popc(input logic [N_QK-1:0] v);
    popc = '0;
    for (int i = 0; i < N_QK; i++) popc = popc + 32'(v[i]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      rows_out <= '0;
      st_rows <= '0; st_kept <= '0; st_early_stops <= '0; st_full_pruned <= '0;
      st_digits <= '0; st_be_stall_cycles <= '0; st_dpu_stall_cycles <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) state <= S_RUN;
        S_RUN:  if (all_done) state <= S_EOR;
        S_EOR:  if (!fifo_full) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      rows_out <= rows_out + ((state == S_EOR && !fifo_full) ? 2'd1 : 2'd0)
                           - (row_done_be ? 2'd1 : 2'd0);
      if (state == S_EOR && !fifo_full) st_rows <= st_rows + 1;
      if (fifo_push && !fifo_entry.eor) st_kept <= st_kept + 1;
      st_early_stops <= st_early_stops + popc(ev_es);
      st_full_pruned <= st_full_pruned + popc(ev_pr & ~ev_es);
      st_digits      <= st_digits + popc(ev_digit);
      if (state == S_IDLE && !q_empty && rows_out >= 2'd2)
        st_be_stall_cycles <= st_be_stall_cycles + 1;
      if (ev_st != '0) st_dpu_stall_cycles <= st_dpu_stall_cycles + 1;
    end
  end

  assign idle = (state == S_IDLE) && q_empty;

  a_row_done: assert property (@(posedge clk) disable iff (!rst_n) row_done_be |-> rows_out != 2'd0);
endmodule

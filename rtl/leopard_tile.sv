// leopard_tile: one accelerator tile, processing one attention head.
// Front end (qk_pu, N_QK bit-serial QK-DPUs with their Key Buffers) ->
// Score-FIFO and IDX-FIFO (24-bit x 512 and index x 512) -> back end (v_pu,
// softmax, Value Buffer, 64-way MAC array, Output-FIFO). The two FIFOs are
// written and read together; an extra flag bit in the IDX-FIFO marks the end
// of a query row. Before a head is processed, K is written into the Key
// Buffers and V into the Value Buffer through the load ports, the layer
// threshold is set, and then query rows are streamed in; one 64 x 16-bit
// attention output row comes out of the Output-FIFO per query.
// The block structure follows the paper's tile figure. The IDX-FIFO here
// is 10 bits wide (9-bit key index for 512 keys plus the end-of-row flag);
// the paper lists it as 8 bits.
module leopard_tile
  import leopard_pkg::*;
#(
  parameter int N_QK     = 6,
  parameter int KB_DEPTH = 512,
  parameter int VB_DEPTH = 512,
  parameter int SF_DEPTH = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        kb_we,
  input  logic [$clog2(N_QK)-1:0]     kb_sel,
  input  logic [$clog2(KB_DEPTH)-1:0] kb_waddr,
  input  logic [KBUF_W-1:0]           kb_wdata,
  input  logic                        vb_we,
  input  logic [$clog2(VBANKS)-1:0]   vb_wbank,
  input  logic [$clog2(VB_DEPTH)-1:0] vb_waddr,
  input  logic [VBANK_W-1:0]          vb_wdata,
  input  logic                        thr_we,
  input  score_t                      thr_in,
  input  logic [4:0]                  sm_shift,
  input  logic [IDX_W:0]              seq_len,
  input  logic                        q_push,
  input  q_vec_t                      q_in,
  output logic                        q_full,
  output logic                        out_valid,
  input  logic                        out_pop,
  output v_vec_t                      out_row,
  output logic                        idle,
  output logic [31:0]                 st_rows,
  output logic [31:0]                 st_kept,
  output logic [31:0]                 st_early_stops,
  output logic [31:0]                 st_full_pruned,
  output logic [31:0]                 st_digits,
  output logic [31:0]                 st_be_stall_cycles,
  output logic [31:0]                 st_dpu_stall_cycles,
  output logic [31:0]                 st_fifo_full_cycles,
  output logic [31:0]                 st_macs
);
  score_t       thr_q;
  logic         fe_push, sf_full, if_full, sf_empty, if_empty, be_pop, row_done;
  score_entry_t fe_entry, be_entry;
  logic         fe_idle;
  logic [IDX_W:0] idx_dout;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      thr_q <= '0;
    else if (thr_we) thr_q <= thr_in;
  end

  qk_pu #(.N_QK(N_QK), .KB_DEPTH(KB_DEPTH)) u_qkpu (
    .clk, .rst_n, .kb_we, .kb_sel, .kb_waddr, .kb_wdata,
    .thr_we, .thr_in, .seq_len, .q_push, .q_in, .q_full,
    .fifo_push(fe_push), .fifo_entry(fe_entry), .fifo_full(sf_full || if_full),
    .row_done_be(row_done), .idle(fe_idle),
    .st_rows, .st_kept, .st_early_stops, .st_full_pruned, .st_digits,
    .st_be_stall_cycles, .st_dpu_stall_cycles
  );

  sync_fifo #(.WIDTH(SCORE_W), .DEPTH(SF_DEPTH)) u_score_fifo (
    .clk, .rst_n, .push(fe_push), .din(fe_entry.score), .full(sf_full),
    .pop(be_pop), .dout(be_entry.score), .empty(sf_empty), .count()
  );
  sync_fifo #(.WIDTH(IDX_W + 1), .DEPTH(SF_DEPTH)) u_idx_fifo (
    .clk, .rst_n, .push(fe_push), .din({fe_entry.eor, fe_entry.idx}), .full(if_full),
    .pop(be_pop), .dout(idx_dout), .empty(if_empty), .count()
  );
  assign be_entry.eor = idx_dout[IDX_W];
  assign be_entry.idx = idx_dout[IDX_W-1:0];

  v_pu #(.VB_DEPTH(VB_DEPTH)) u_vpu (
    .clk, .rst_n, .vb_we, .vb_wbank, .vb_waddr, .vb_wdata,
    .thr(thr_q), .sm_shift,
    .fifo_empty(sf_empty || if_empty), .fifo_entry(be_entry), .fifo_pop(be_pop),
    .out_valid, .out_pop, .out_row, .row_done, .st_macs
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st_fifo_full_cycles <= '0;
    else if (sf_full) st_fifo_full_cycles <= st_fifo_full_cycles + 1;
  end

  assign idle = fe_idle && sf_empty;
endmodule

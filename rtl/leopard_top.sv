// leopard_top: the accelerator, N_TILES = 2 independent tiles.
// Attention heads are spread over the tiles; each tile holds the K and V of
// its head in its own buffers and works on its own query stream, with no
// traffic between tiles. Every port of a tile is brought out per tile (an
// array index selects the tile): the off-chip memory that streams queries
// and preloads K and V is outside this design. Two tiles, six QK-DPUs per
// tile (the area-efficient configuration whose layout the paper shows) and
// the buffer sizes follow the paper.
module leopard_top
  import leopard_pkg::*;
#(
  parameter int N_TILES  = 2,
  parameter int N_QK     = 6,
  parameter int KB_DEPTH = 512,
  parameter int VB_DEPTH = 512,
  parameter int SF_DEPTH = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N_TILES-1:0]          kb_we,
  input  logic [$clog2(N_QK)-1:0]     kb_sel   [N_TILES],
  input  logic [$clog2(KB_DEPTH)-1:0] kb_waddr [N_TILES],
  input  logic [KBUF_W-1:0]           kb_wdata [N_TILES],
  input  logic [N_TILES-1:0]          vb_we,
  input  logic [$clog2(VBANKS)-1:0]   vb_wbank [N_TILES],
  input  logic [$clog2(VB_DEPTH)-1:0] vb_waddr [N_TILES],
  input  logic [VBANK_W-1:0]          vb_wdata [N_TILES],
  input  logic [N_TILES-1:0]          thr_we,
  input  score_t                      thr_in   [N_TILES],
  input  logic [4:0]                  sm_shift [N_TILES],
  input  logic [IDX_W:0]              seq_len  [N_TILES],
  input  logic [N_TILES-1:0]          q_push,
  input  q_vec_t                      q_in     [N_TILES],
  output logic [N_TILES-1:0]          q_full,
  output logic [N_TILES-1:0]          out_valid,
  input  logic [N_TILES-1:0]          out_pop,
  output v_vec_t                      out_row  [N_TILES],
  output logic [N_TILES-1:0]          idle,
  output logic [31:0]                 st_rows             [N_TILES],
  output logic [31:0]                 st_kept             [N_TILES],
  output logic [31:0]                 st_early_stops      [N_TILES],
  output logic [31:0]                 st_full_pruned      [N_TILES],
  output logic [31:0]                 st_digits           [N_TILES],
  output logic [31:0]                 st_be_stall_cycles  [N_TILES],
  output logic [31:0]                 st_dpu_stall_cycles [N_TILES],
  output logic [31:0]                 st_fifo_full_cycles [N_TILES],
  output logic [31:0]                 st_macs             [N_TILES]
);
  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    leopard_tile #(.N_QK(N_QK), .KB_DEPTH(KB_DEPTH), .VB_DEPTH(VB_DEPTH), .SF_DEPTH(SF_DEPTH)) u_tile (
      .clk, .rst_n,
      .kb_we(kb_we[t]), .kb_sel(kb_sel[t]), .kb_waddr(kb_waddr[t]), .kb_wdata(kb_wdata[t]),
      .vb_we(vb_we[t]), .vb_wbank(vb_wbank[t]), .vb_waddr(vb_waddr[t]), .vb_wdata(vb_wdata[t]),
      .thr_we(thr_we[t]), .thr_in(thr_in[t]), .sm_shift(sm_shift[t]), .seq_len(seq_len[t]),
      .q_push(q_push[t]), .q_in(q_in[t]), .q_full(q_full[t]),
      .out_valid(out_valid[t]), .out_pop(out_pop[t]), .out_row(out_row[t]), .idle(idle[t]),
      .st_rows(st_rows[t]), .st_kept(st_kept[t]), .st_early_stops(st_early_stops[t]),
      .st_full_pruned(st_full_pruned[t]), .st_digits(st_digits[t]),
      .st_be_stall_cycles(st_be_stall_cycles[t]), .st_dpu_stall_cycles(st_dpu_stall_cycles[t]),
      .st_fifo_full_cycles(st_fifo_full_cycles[t]), .st_macs(st_macs[t])
    );
  end
endmodule

// v_pu: the back end (Value Processing Unit) of a tile.
// Whenever the Score/IDX FIFO pair is not empty the V-PU takes one surviving
// score and its key index per cycle. The score goes through the LUT
// exponential (softmax_exp); in the same cycle the index addresses the Value
// Buffer, so the next cycle has both the weight e_i and the V row of key i.
// A 1-D array of 64 16x16-bit MACs (one per output element) then adds
// e_i * v_ij into the 64 row accumulators, and e_i into the exponent sum.
// Only V rows of unpruned keys are ever read. The weight is broadcast to all
// MACs in the same cycle (the paper's figure passes it along the MAC row
// like a systolic array; with one weight per cycle the sums are the same).
// At the end-of-row marker the accumulators are handed to softmax_norm,
// which divides by the exponent sum and writes the 64 x 16-bit output row
// into the Output-FIFO; the MAC array is then free for the next row and
// row_done tells the front end.
// Paper: consume Score-FIFO when not empty, LUT softmax, index-addressed V
// reads, 64-way 16x16-bit MAC array, Output-FIFO, 64KB Value Buffer.
// This design's: deferred normalisation, accumulator widths (58-bit rows,
// 40-bit exponent sum), Output-FIFO depth 2, one-row pipeline.
module v_pu
  import leopard_pkg::*;
#(
  parameter int VB_DEPTH  = 512,
  parameter int OUT_DEPTH = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Value Buffer load port
  input  logic                        vb_we,
  input  logic [$clog2(VBANKS)-1:0]   vb_wbank,
  input  logic [$clog2(VB_DEPTH)-1:0] vb_waddr,
  input  logic [VBANK_W-1:0]          vb_wdata,
  // softmax settings
  input  score_t                      thr,
  input  logic [4:0]                  sm_shift,
  // Score/IDX FIFO read side
  input  logic                        fifo_empty,
  input  score_entry_t                fifo_entry,
  output logic                        fifo_pop,
  // Output-FIFO read side
  output logic                        out_valid,
  input  logic                        out_pop,
  output v_vec_t                      out_row,
  output logic                        row_done,
  output logic [31:0]                 st_macs
);
  localparam int ACCV_W = 58;
  localparam int ESUM_W = 40;

  logic signed [ACCV_W-1:0] acc [D];
  logic [ESUM_W-1:0]        esum;
  logic                     s1_valid;
  logic [P_W-1:0]           s1_mant, mant;
  logic [3:0]               s1_ex, ex;
  v_vec_t                   vrow;
  logic                     norm_ready, norm_valid, ofifo_full, ofifo_empty;
  v_vec_t                   norm_row;
  logic                     take_score, take_eor;

  softmax_exp u_exp (
    .score(fifo_entry.score), .thr, .shift(sm_shift), .mant, .ex
  );

  assign take_score = !fifo_empty && !fifo_entry.eor;
  assign take_eor   = !fifo_empty && fifo_entry.eor && !s1_valid && norm_ready;
  assign fifo_pop   = take_score || take_eor;
  assign row_done   = take_eor;

  value_buffer #(.DEPTH(VB_DEPTH)) u_vbuf (
    .clk, .we(vb_we), .wbank(vb_wbank), .waddr(vb_waddr), .wdata(vb_wdata),
    .re(take_score), .raddr(($clog2(VB_DEPTH))'(fifo_entry.idx)), .rdata(vrow)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_mant <= '0; s1_ex <= '0;
      esum <= '0; st_macs <= '0;
      for (int j = 0; j < D; j++) acc[j] <= '0;
    end else begin
      s1_valid <= take_score;
      if (take_score) begin
        s1_mant <= mant;
        s1_ex   <= ex;
      end
      if (take_eor) begin
        for (int j = 0; j < D; j++) acc[j] <= '0;
        esum <= '0;
      end else if (s1_valid) begin
        // MAC array: 64 x (16-bit weight * 16-bit V), weight scaled by 2^ex
        for (int j = 0; j < D; j++)
          acc[j] <= acc[j] + ((ACCV_W'($signed({1'b0, s1_mant})) * ACCV_W'(vrow[j])) <<< s1_ex);
        esum    <= esum + (ESUM_W'(s1_mant) << s1_ex);
        st_macs <= st_macs + 32'(D);
      end
    end
  end

  softmax_norm #(.ACCV_W(ACCV_W), .ESUM_W(ESUM_W)) u_norm (
    .clk, .rst_n, .start(take_eor), .ready_in(norm_ready), .acc, .esum,
    .out_valid(norm_valid), .out_ready(!ofifo_full), .out_row(norm_row)
  );

  sync_fifo #(.WIDTH($bits(v_vec_t)), .DEPTH(OUT_DEPTH)) u_ofifo (
    .clk, .rst_n, .push(norm_valid && !ofifo_full), .din(norm_row), .full(ofifo_full),
    .pop(out_pop), .dout(out_row), .empty(ofifo_empty), .count()
  );
  assign out_valid = !ofifo_empty;
endmodule

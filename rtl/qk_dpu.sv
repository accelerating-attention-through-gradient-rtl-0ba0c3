// qk_dpu: one Query-Key dot-product unit of the front end.
// For the query held in its register, the DPU walks through the keys in its
// own Key Buffer and computes each score bit-serially (bs_dpe). After every
// 2-bit digit the thresholding module adds the partial sum P and the margin
// M (margin_calc) and compares with the layer threshold in the Thr Reg: if
// P + M < Th the score can no longer reach the threshold, the key is pruned
// and the DPU moves to the next key at once (early stop). A key that
// survives all six digits has its exact score and index handed out.
// The Bit-serial Cntr counts digits (0..5) and is reset when it reaches its
// end or on early stop; the IDX Cntr then advances to the next key. Both
// counters, the threshold register and the add-and-compare follow the
// paper's figure; the output holding register and the stall are this
// design's way of sharing one Score/IDX FIFO pair among the DPUs.
// Keys are interleaved over the DPUs: local key j of DPU number DPU_ID is
// global key j * N_QK + DPU_ID, which is the index the DPU emits.
// Interface: start (one cycle, DPU idle) latches q and n_keys; busy stays
// high until all keys are consumed. out_valid/out_ready hand out one
// unpruned score (saturated to 24 bits) with its global index; while a
// result waits, the DPU stalls before finishing the next surviving key.
// Timing: one digit per cycle with no bubble between keys, since the next
// Key Buffer address is chosen in the same cycle as the early-stop decision.
// The thresholding adder and comparator, the per-cycle dot product and the
// shifter form one long combinational path by construction.
module qk_dpu
  import leopard_pkg::*;
#(
  parameter int N_QK   = 6,
  parameter int DPU_ID = 0,
  parameter int KB_DEPTH = 512
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // Key Buffer load port
  input  logic                        kb_we,
  input  logic [$clog2(KB_DEPTH)-1:0] kb_waddr,
  input  logic [KBUF_W-1:0]           kb_wdata,
  // layer threshold register
  input  logic                        thr_we,
  input  score_t                      thr_in,
  // one query row
  input  logic                        start,
  input  q_vec_t                      q_in,
  input  logic [IDX_W:0]              n_keys,
  output logic                        busy,
  // surviving score
  output logic                        out_valid,
  input  logic                        out_ready,
  output score_t                      out_score,
  output idx_t                        out_idx,
  // event strobes for statistics
  output logic                        ev_digit,
  output logic                        ev_early_stop,
  output logic                        ev_pruned,
  output logic                        ev_stall
);
  localparam int SW = $clog2(SLICES);
  localparam int AW = $clog2(KB_DEPTH);

  q_vec_t             q_reg;
  score_t             thr_reg;
  logic [IDX_W:0]     n_keys_reg;
  logic [IDX_W:0]     idx_cnt;         // IDX Cntr (local key number)
  logic [SW-1:0]      bit_cnt;         // Bit-serial Cntr (digit number)
  logic [AW-1:0]      key_base;        // Key Buffer address of digit 0
  logic               data_vld;        // rdata holds the digit bit_cnt

  logic [KBUF_W-1:0]        kdig;
  logic [D-1:0]             ksign;
  logic signed [ACC_W-1:0]  psum_next, psum;
  logic [MARGIN_W-1:0]      margin_next, margin;

  // thresholding module
  logic signed [ACC_W+1:0]  bound;
  logic                     below, last_digit, finish_key, keep, stall, advance;

  assign last_digit = (bit_cnt == SW'(SLICES-1));
  assign bound      = (ACC_W+2)'(psum_next) + (ACC_W+2)'($signed({1'b0, margin_next}));
  assign below      = bound < (ACC_W+2)'(thr_reg);
  assign finish_key = data_vld && (below || last_digit);
  assign keep       = data_vld && last_digit && !below;
  assign stall      = keep && out_valid && !out_ready;
  assign advance    = data_vld && !stall;

  bs_dpe u_dpe (
    .clk, .rst_n, .en(advance), .slice(bit_cnt), .q(q_reg), .kdig,
    .ksign, .psum_next, .psum
  );

  margin_calc u_margin (
    .clk, .rst_n, .en(advance), .slice(bit_cnt), .q(q_reg), .ksign,
    .margin_next, .margin
  );

  // Next Key Buffer read: next digit of this key, or digit 0 of the next key
  logic              rd_en;
  logic [AW-1:0]     rd_addr;
  logic [IDX_W:0]    idx_after;
  assign idx_after = idx_cnt + 1'b1;

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = key_base;
    if (start && !busy) begin
      rd_en   = (n_keys != '0);
      rd_addr = '0;
    end else if (advance) begin
      if (finish_key) begin
        rd_en   = (idx_after < n_keys_reg);
        rd_addr = key_base + AW'(SLICES);
      end else begin
        rd_en   = 1'b1;
        rd_addr = key_base + AW'(bit_cnt) + 1'b1;
      end
    end
  end

  key_buffer #(.DEPTH(KB_DEPTH), .WIDTH(KBUF_W)) u_kbuf (
    .clk, .we(kb_we), .waddr(kb_waddr), .wdata(kb_wdata),
    .re(rd_en), .raddr(rd_addr), .rdata(kdig)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_reg      <= '0;
      thr_reg    <= '0;
      n_keys_reg <= '0;
      idx_cnt    <= '0;
      bit_cnt    <= '0;
      key_base   <= '0;
      data_vld   <= 1'b0;
      busy       <= 1'b0;
      out_valid  <= 1'b0;
      out_score  <= '0;
      out_idx    <= '0;
    end else begin
      if (thr_we) thr_reg <= thr_in;
      if (out_valid && out_ready) out_valid <= 1'b0;

      if (start && !busy) begin
        q_reg      <= q_in;
        n_keys_reg <= n_keys;
        idx_cnt    <= '0;
        bit_cnt    <= '0;
        key_base   <= '0;
        busy       <= (n_keys != '0);
        data_vld   <= (n_keys != '0);
      end else if (advance) begin
        if (finish_key) begin
          bit_cnt  <= '0;
          idx_cnt  <= idx_after;
          key_base <= key_base + AW'(SLICES);
          data_vld <= (idx_after < n_keys_reg);
          busy     <= (idx_after < n_keys_reg);
          if (keep) begin
            out_valid <= 1'b1;
            // saturate the 30-bit score to the 24-bit Score-FIFO width
            if (psum_next > ACC_W'(2**(SCORE_W-1) - 1))
              out_score <= score_t'(2**(SCORE_W-1) - 1);
            else if (psum_next < -ACC_W'(2**(SCORE_W-1)))
              out_score <= score_t'(-(2**(SCORE_W-1)));
            else
              out_score <= score_t'(psum_next);
            out_idx <= IDX_W'(idx_cnt * N_QK + DPU_ID);
          end
        end else begin
          bit_cnt <= bit_cnt + 1'b1;
        end
      end
    end
  end

  assign ev_digit      = advance;
  assign ev_early_stop = advance && below && !last_digit;
  assign ev_pruned     = advance && below;
  assign ev_stall      = stall;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule

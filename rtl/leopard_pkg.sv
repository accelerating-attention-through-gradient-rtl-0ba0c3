// leopard_pkg: sizes and shared types of the attention-pruning accelerator.
// The numbers marked "paper" follow the published tile configuration
// (12-bit Q and K, 2-bit serial digits, d = 64, 24-bit scores, 16-bit V and
// probabilities, 128-bit SRAM ports). The rest are this design's own choices.
package leopard_pkg;
  localparam int D        = 64;   // paper: vector dimension d
  localparam int Q_W      = 12;   // paper: Q element width (two's complement)
  localparam int K_W      = 12;   // paper: K element width (sign + 11-bit magnitude)
  localparam int B        = 2;    // paper: bits of K processed per cycle
  localparam int SLICES   = K_W / B;  // paper: 6 cycles per full score
  localparam int ACC_W    = 30;   // partial-sum register width (exact for d = 64)
  localparam int SUM_W    = 18;   // paper Fig. 10(b): sum of |Q| is 18 bits
  localparam int MARGIN_W = 30;   // paper Fig. 10(b): margin register is 30 bits
  localparam int SCORE_W  = 24;   // paper: Score-FIFO is 24 bits wide
  localparam int V_W      = 16;   // paper: V-PU is a 16x16-bit MAC array
  localparam int P_W      = 16;   // paper: softmax output is 16 bits
  localparam int KBUF_W   = D * B;    // 128 bits: one digit of each element
  localparam int VBANKS   = 8;    // paper: value buffer 8 banks
  localparam int VBANK_W  = 128;  // paper: 128-bit port per bank
  localparam int SEQ_MAX  = 512;  // paper: buffers hold up to 512 keys
  localparam int IDX_W    = 9;    // global key index, 0..511

  typedef logic signed [Q_W-1:0]     q_elem_t;
  typedef q_elem_t [D-1:0]           q_vec_t;
  typedef logic signed [V_W-1:0]     v_elem_t;
  typedef v_elem_t [D-1:0]           v_vec_t;
  typedef logic signed [SCORE_W-1:0] score_t;
  typedef logic [IDX_W-1:0]          idx_t;

  // One entry of the Score/IDX FIFO pair. An entry with eor = 1 carries no
  // score; it marks the end of the scores of one query row.
  typedef struct packed {
    logic   eor;
    idx_t   idx;
    score_t score;
  } score_entry_t;
endpackage

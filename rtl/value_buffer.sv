// value_buffer: the V-PU's Value Buffer.
// Eight banks of 512 x 128 bits (8KB each, 64KB in all, as in the paper).
// One V row of 64 x 16-bit elements spans all eight banks at the same
// address: bank b holds elements 8b..8b+7, element i at bits
// [16(i%8)+15 : 16(i%8)] of its bank. Row index = key index, so the V-PU
// reads the V vector of an unpruned score with the index from the IDX-FIFO.
// Loading writes one 128-bit bank word per cycle (bank, addr, wdata).
// Timing: synchronous read, rdata valid after the clock edge that sampled
// re; it holds until the next read. A write blocks a read in the same cycle.
module value_buffer
  import leopard_pkg::*;
#(
  parameter int DEPTH = 512
) (
  input  logic                          clk,
  input  logic                          we,
  input  logic [$clog2(VBANKS)-1:0]     wbank,
  input  logic [$clog2(DEPTH)-1:0]      waddr,
  input  logic [VBANK_W-1:0]            wdata,
  input  logic                          re,
  input  logic [$clog2(DEPTH)-1:0]      raddr,
  output v_vec_t                        rdata
);
  logic [VBANK_W-1:0] bank [VBANKS][DEPTH];

  for (genvar b = 0; b < VBANKS; b++) begin : g_bank
    logic [VBANK_W-1:0] rd;
    always_ff @(posedge clk) begin
      if (we && wbank == b[$clog2(VBANKS)-1:0]) bank[b][waddr] <= wdata;
      else if (re && !we)                         rd <= bank[b][raddr];
    end
    for (genvar e = 0; e < VBANK_W / V_W; e++) begin : g_elem
      assign rdata[b*(VBANK_W/V_W) + e] = rd[e*V_W +: V_W];
    end
  end
endmodule

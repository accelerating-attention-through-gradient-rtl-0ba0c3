// key_buffer: the local Key Buffer bank of one QK-DPU.
// It holds this DPU's share of the K matrix. Each 128-bit word carries one
// 2-bit digit of all 64 elements of one key (element i in bits [2i+1:2i]), so
// that one read feeds one bit-serial cycle of the dot-product engine. A key
// occupies SLICES = 6 consecutive words, most significant digit first; the
// first digit of an element is {sign, magnitude bit 10}.
// The paper gives 8KB per bank with a 128-bit port (512 words); the bit-plane
// layout is this design's reading of how a 2-bit-serial engine is fed.
// Timing: synchronous single-port SRAM; a read issued with re at a clock edge
// returns rdata after that edge and holds it until the next read. A write has
// priority over a read in the same cycle.
module key_buffer #(
  parameter int DEPTH = 512,
  parameter int WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)      mem[waddr] <= wdata;
    else if (re) rdata <= mem[raddr];
  end
endmodule

// dbuf_mem: double-buffered on-chip memory (ping-pong), used for the weight memory,
// the input-activation memory and the output-activation memory.
//
// The memory holds DEPTH words of LANES x LANE_W bits, split into two banks of
// DEPTH/2 words. Bank `sel` belongs to the array side ("core" port); the other bank
// belongs to the DRAM side ("ext" port), so that the next tile can be loaded, or the
// previous results written back, while the array computes. Toggling `sel` swaps the
// banks. Each side can read one word and write one word per cycle; reads return data
// one cycle after the request (synchronous SRAM). The core write port can also
// accumulate: with core_acc high each lane of the stored word is replaced by the lane's
// sum with the written lane (two's complement, wrapping), which lets a GEMM be split
// over several tiles along the reduction dimension.
// The source gives the capacities (512 KB each for input and weight memory, 1 MB for
// output memory) and says a double buffer is used. The split of the capacity into two
// equal banks, the port set and the accumulate-on-write are this design's choices.
// Addresses are bank-local. The contents are not reset.
module dbuf_mem #(
  parameter int unsigned LANES  = 64,
  parameter int unsigned LANE_W = 8,
  parameter int unsigned DEPTH  = 8192,                 // words in both banks together
  parameter int unsigned AW     = $clog2(DEPTH / 2)     // bank-local address width
) (
  input  logic                          clk,
  input  logic                          sel,          // bank used by the core port
  // array side
  input  logic                          core_re,
  input  logic [AW-1:0]                 core_raddr,
  output logic [LANES-1:0][LANE_W-1:0]  core_rdata,
  input  logic                          core_we,
  input  logic                          core_acc,
  input  logic [AW-1:0]                 core_waddr,
  input  logic [LANES-1:0][LANE_W-1:0]  core_wdata,
  // DRAM side
  input  logic                          ext_re,
  input  logic                          ext_we,
  input  logic [AW-1:0]                 ext_addr,
  input  logic [LANES-1:0][LANE_W-1:0]  ext_wdata,
  output logic [LANES-1:0][LANE_W-1:0]  ext_rdata
);

  localparam int unsigned BANK_DEPTH = DEPTH / 2;

  typedef logic [LANES-1:0][LANE_W-1:0] word_t;

  word_t mem [2][BANK_DEPTH];

  function automatic word_t lane_add(word_t a, word_t b);
    word_t s;
    for (int unsigned l = 0; l < LANES; l++) s[l] = a[l] + b[l];
    return s;
  endfunction

  logic csel, esel;
  assign csel = sel;
  assign esel = ~sel;

  always_ff @(posedge clk) begin
    if (core_we) begin
      if (core_acc) mem[csel][core_waddr] <= lane_add(mem[csel][core_waddr], core_wdata);
      else          mem[csel][core_waddr] <= core_wdata;
    end
    if (ext_we) mem[esel][ext_addr] <= ext_wdata;
    if (core_re) core_rdata <= mem[csel][core_raddr];
    if (ext_re)  ext_rdata  <= mem[esel][ext_addr];
  end

endmodule

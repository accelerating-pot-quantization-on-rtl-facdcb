// weight_buffer: on-chip store of packed 4-bit PoT weight codes for one GEMM unit.
//
// Each DEPTH entry is one 32-bit word holding the ROWS (= 8) weight codes of
// one reduction step, code r in bits [4r+3:4r]. Because a shift-term code is 4
// bits instead of an 8-bit integer weight, the same memory holds twice as many
// weights as a buffer of 8-bit weights, which is the saving the paper reports
// for its weight buffer. The buffer depth (8192 steps, 32 KiB per GEMM unit)
// is this design's choice; the paper does not give the buffer size.
//
// Interface: one write port (wr_en, wr_addr, wr_word) fed from the host
// stream and one read port. Timing: synchronous read, wcodes is valid the
// cycle after rd_en. The memory itself is not reset.
module weight_buffer
  import pot_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned ROWS  = 8,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned WW   = ROWS * WCODE_W
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [WW-1:0] wr_word,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output wcode_t        wcodes [ROWS]
);

  logic [WW-1:0] mem [DEPTH];
  logic [WW-1:0] rd_word;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_word;
    if (rd_en) rd_word <= mem[rd_addr];
  end

  // unpack the eight 4-bit codes
  always_comb
    for (int r = 0; r < ROWS; r++) wcodes[r] = rd_word[r*WCODE_W +: WCODE_W];

endmodule

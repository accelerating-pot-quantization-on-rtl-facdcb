// input_buffer: on-chip store of int8 activations, COLS per reduction step.
//
// The host streams activations as 32-bit words of four bytes, byte j holding
// the activation of output column 4*slice + j. The buffer packs WPE = COLS/4
// such words into one entry, so one read returns the COLS (= 8) activations
// that all GEMM units share in a reduction step. wr_addr is a word address:
// entry wr_addr / WPE, slice wr_addr % WPE. The buffer depth (8192 steps) and
// the byte order are this design's choices; the paper does not describe the
// input buffer.
//
// Timing: synchronous read, acts is valid the cycle after rd_en. The memory
// is not reset.
module input_buffer
  import pot_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned COLS  = 8,
  localparam int unsigned WPE  = COLS * ACT_W / STREAM_W,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned SW   = (WPE > 1) ? $clog2(WPE) : 1,
  localparam int unsigned EW   = COLS * ACT_W
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW+SW-1:0]    wr_addr,
  input  logic [STREAM_W-1:0] wr_word,
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_addr,
  output act_t                acts [COLS]
);

  logic [EW-1:0] mem [DEPTH];
  logic [EW-1:0] rd_entry;
  logic [AW-1:0] wr_entry;
  logic [SW-1:0] wr_slice;

  always_comb begin
    wr_entry = AW'(wr_addr / (AW+SW)'(WPE));
    wr_slice = SW'(wr_addr % (AW+SW)'(WPE));
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_entry][wr_slice*STREAM_W +: STREAM_W] <= wr_word;
    if (rd_en) rd_entry <= mem[rd_addr];
  end

  always_comb
    for (int c = 0; c < COLS; c++) acts[c] = act_t'(rd_entry[c*ACT_W +: ACT_W]);

endmodule

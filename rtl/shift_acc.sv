// shift_acc: shift-based accelerator for 4-bit PoT-quantized convolution layers.
//
// A convolution is computed as a matrix product: filters (4-bit PoT weight
// codes) times im2col columns of int8 activations, summed over the reduction
// dimension K = kernel height * width * input channels. The accelerator has
// N_GEMM = 4 GEMM units of 64 MAC units each, as in the paper; the MACs use the
// QKeras shift-PE, which replaces each 8x8-bit multiply by one 3-bit shift plus
// a sign-correcting add. One COMPUTE covers an output tile of N_GEMM*ROWS = 32
// filters by COLS = 8 output pixels: every cycle all four units read one
// reduction step, sharing the same 8 activations and each taking its own 8
// weights, for 256 shift-MACs per cycle.
//
// Each GEMM unit has its own weight buffer of packed 4-bit codes, eight per
// 32-bit word (twice the weights an 8-bit buffer of the same size holds); one
// input buffer holds the activations. The scheduler decodes host commands from
// the input stream, fills the buffers, runs the GEMM units and streams the
// 32-bit accumulators back (command format in scheduler.sv). Bias, zero points
// and requantization to int8 are left to the host in this design.
//
// Ports: clock, synchronous active-low reset, the 32-bit host input stream
// (s_*) and output stream (m_*) that a DMA engine would drive, and idle.
// Timing: loads take one cycle per word; COMPUTE K takes K cycles plus the
// PE latency and 2 cycles before the first of N_GEMM*ROWS*COLS result words.
module shift_acc
  import pot_pkg::*;
#(
  parameter int unsigned N_GEMM     = 4,
  parameter int unsigned ROWS       = 8,
  parameter int unsigned COLS       = 8,
  parameter int unsigned WBUF_DEPTH = 8192,
  parameter int unsigned IBUF_DEPTH = 8192,
  parameter pe_kind_e    PE_KIND    = PE_QKERAS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [STREAM_W-1:0] s_tdata,
  input  logic                s_tvalid,
  output logic                s_tready,
  output logic [STREAM_W-1:0] m_tdata,
  output logic                m_tvalid,
  input  logic                m_tready,
  output logic                m_tlast,
  output logic                idle
);

  localparam int unsigned WPE = COLS * ACT_W / STREAM_W;
  localparam int unsigned WAW = $clog2(WBUF_DEPTH);
  localparam int unsigned IAW = $clog2(IBUF_DEPTH);
  localparam int unsigned ISW = (WPE > 1) ? $clog2(WPE) : 1;
  localparam int unsigned RAW = (WAW > IAW) ? WAW : IAW;
  localparam int unsigned UW  = (N_GEMM > 1) ? $clog2(N_GEMM) : 1;
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW  = (COLS > 1) ? $clog2(COLS) : 1;

  logic [N_GEMM-1:0]   wb_we;
  logic [WAW-1:0]      wb_addr;
  logic [STREAM_W-1:0] wb_wdata;
  logic                ib_we;
  logic [IAW+ISW-1:0]  ib_waddr;
  logic [STREAM_W-1:0] ib_wdata;
  logic                rd_en;
  logic [RAW-1:0]      rd_addr;
  logic                g_valid, g_first, g_busy;
  logic [UW-1:0]       res_unit;
  logic [RW-1:0]       res_row;
  logic [CW-1:0]       res_col;
  acc_t                res_data;

  act_t                acts  [COLS];
  logic [N_GEMM-1:0]   busy;
  acc_t                acc   [N_GEMM][ROWS][COLS];

  scheduler #(
    .N_GEMM(N_GEMM), .ROWS(ROWS), .COLS(COLS),
    .WBUF_DEPTH(WBUF_DEPTH), .IBUF_DEPTH(IBUF_DEPTH)
  ) u_sched (
    .clk, .rst_n,
    .s_tdata, .s_tvalid, .s_tready,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast,
    .wb_we, .wb_addr, .wb_wdata,
    .ib_we, .ib_waddr, .ib_wdata,
    .rd_en, .rd_addr,
    .g_valid, .g_first, .g_busy,
    .res_unit, .res_row, .res_col, .res_data,
    .idle
  );

  input_buffer #(.DEPTH(IBUF_DEPTH), .COLS(COLS)) u_ibuf (
    .clk,
    .wr_en(ib_we), .wr_addr(ib_waddr), .wr_word(ib_wdata),
    .rd_en, .rd_addr(IAW'(rd_addr)), .acts
  );

  for (genvar u = 0; u < N_GEMM; u++) begin : g_unit
    wcode_t wcodes [ROWS];

    weight_buffer #(.DEPTH(WBUF_DEPTH), .ROWS(ROWS)) u_wbuf (
      .clk,
      .wr_en(wb_we[u]), .wr_addr(wb_addr), .wr_word(wb_wdata[ROWS*WCODE_W-1:0]),
      .rd_en, .rd_addr(WAW'(rd_addr)), .wcodes
    );

    gemm_unit #(.ROWS(ROWS), .COLS(COLS), .PE_KIND(PE_KIND)) u_gemm (
      .clk, .rst_n,
      .in_valid(g_valid), .in_first(g_first),
      .wcodes, .acts,
      .busy(busy[u]),
      .acc(acc[u])
    );
  end

  always_comb begin
    g_busy   = |busy;
    res_data = acc[res_unit][res_row][res_col];
  end

endmodule

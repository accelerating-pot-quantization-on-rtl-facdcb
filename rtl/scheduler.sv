// scheduler: command decoder and sequencer of the shift-based accelerator.
//
// The host talks to the accelerator through one 32-bit input stream and one
// 32-bit output stream (valid/ready handshakes, as a DMA engine provides).
// Every command starts with a header word (pot_pkg::cmd_hdr_t):
//   LOAD_WGT K     K*N_GEMM weight words follow, step-major: word i goes to
//                  the weight buffer of GEMM unit i % N_GEMM at step i / N_GEMM
//   LOAD_INP K     K*WPE activation words follow (WPE = COLS/4), written to
//                  consecutive word addresses of the input buffer
//   COMPUTE K, a   run steps 0..K-1 through all GEMM units; a = 0 starts new
//                  sums, a = 1 adds to the sums already held (used when a long
//                  reduction is split into chunks that fit the buffers); then
//                  send N_GEMM*ROWS*COLS accumulator words, unit-major, then
//                  row, then column, with m_tlast on the last one
// Buffers are always loaded from address 0. The paper says only that the
// scheduler and driver were redesigned for packing and loading 4-bit weights;
// this command set and data order are this design's own.
//
// Timing: load words are accepted one per cycle (s_tready high in the header
// and load states). COMPUTE issues one buffer read per cycle for K cycles;
// g_valid/g_first follow one cycle later, aligned with the buffers' read data.
// After the last step the scheduler waits until the GEMM units are idle
// (g_busy low), then presents result index res_unit/res_row/res_col and sends
// res_data, holding it while m_tready is low. s_tready is low during compute
// and result drain, stalling the host.
module scheduler
  import pot_pkg::*;
#(
  parameter int unsigned N_GEMM     = 4,
  parameter int unsigned ROWS       = 8,
  parameter int unsigned COLS       = 8,
  parameter int unsigned WBUF_DEPTH = 8192,
  parameter int unsigned IBUF_DEPTH = 8192,
  localparam int unsigned WPE  = COLS * ACT_W / STREAM_W,
  localparam int unsigned WAW  = $clog2(WBUF_DEPTH),
  localparam int unsigned IAW  = $clog2(IBUF_DEPTH),
  localparam int unsigned ISW  = (WPE > 1) ? $clog2(WPE) : 1,
  localparam int unsigned RAW  = (WAW > IAW) ? WAW : IAW,
  localparam int unsigned UW   = (N_GEMM > 1) ? $clog2(N_GEMM) : 1,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host input stream
  input  logic [STREAM_W-1:0] s_tdata,
  input  logic                s_tvalid,
  output logic                s_tready,
  // host output stream
  output logic [STREAM_W-1:0] m_tdata,
  output logic                m_tvalid,
  input  logic                m_tready,
  output logic                m_tlast,
  // weight buffer write ports (shared address and data, one enable per unit)
  output logic [N_GEMM-1:0]   wb_we,
  output logic [WAW-1:0]      wb_addr,
  output logic [STREAM_W-1:0] wb_wdata,
  // input buffer write port
  output logic                ib_we,
  output logic [IAW+ISW-1:0]  ib_waddr,
  output logic [STREAM_W-1:0] ib_wdata,
  // buffer read (all buffers, same step)
  output logic                rd_en,
  output logic [RAW-1:0]      rd_addr,
  // GEMM unit control
  output logic                g_valid,
  output logic                g_first,
  input  logic                g_busy,
  // result selection
  output logic [UW-1:0]       res_unit,
  output logic [RW-1:0]       res_row,
  output logic [CW-1:0]       res_col,
  input  acc_t                res_data,
  output logic                idle
);

  typedef enum logic [2:0] {S_HDR, S_LWGT, S_LINP, S_RUN, S_DRAIN, S_OUT} state_e;

  state_e      state;
  cmd_hdr_t    hdr;
  logic [15:0] steps, k;
  logic        accumulate;
  logic [UW-1:0]      wunit;
  logic [WAW-1:0]     waddr;
  logic [IAW+ISW-1:0] iaddr;
  logic [31:0]        remaining;
  logic               res_last;

  always_comb hdr = cmd_hdr_t'(s_tdata);

  always_comb begin
    s_tready = (state == S_HDR) || (state == S_LWGT) || (state == S_LINP);
    idle     = (state == S_HDR);
    wb_we    = '0;
    if (state == S_LWGT && s_tvalid) wb_we[wunit] = 1'b1;
    wb_addr  = waddr;
    wb_wdata = s_tdata;
    ib_we    = (state == S_LINP) && s_tvalid;
    ib_waddr = iaddr;
    ib_wdata = s_tdata;
    rd_en    = (state == S_RUN);
    rd_addr  = RAW'(k);
    res_last = (res_unit == UW'(N_GEMM-1)) && (res_row == RW'(ROWS-1)) && (res_col == CW'(COLS-1));
    m_tvalid = (state == S_OUT);
    m_tdata  = STREAM_W'(res_data);
    m_tlast  = (state == S_OUT) && res_last;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_HDR;
      g_valid    <= 1'b0;
      g_first    <= 1'b0;
      steps      <= '0;
      k          <= '0;
      accumulate <= 1'b0;
      wunit      <= '0;
      waddr      <= '0;
      iaddr      <= '0;
      remaining  <= '0;
      res_unit   <= '0;
      res_row    <= '0;
      res_col    <= '0;
    end else begin
      g_valid <= (state == S_RUN);
      g_first <= (state == S_RUN) && (k == 16'd0) && !accumulate;
      unique case (state)
        S_HDR: if (s_tvalid) begin
          steps      <= hdr.steps;
          accumulate <= hdr.accumulate;
          k          <= '0;
          wunit      <= '0;
          waddr      <= '0;
          iaddr      <= '0;
          case (hdr.op)
            OP_LOAD_WGT: begin
              remaining <= 32'(hdr.steps) * N_GEMM;
              if (hdr.steps != 0) state <= S_LWGT;
            end
            OP_LOAD_INP: begin
              remaining <= 32'(hdr.steps) * WPE;
              if (hdr.steps != 0) state <= S_LINP;
            end
            OP_COMPUTE: state <= (hdr.steps != 0) ? S_RUN : S_DRAIN;
            default: ;
          endcase
        end
        S_LWGT: if (s_tvalid) begin
          remaining <= remaining - 1;
          if (wunit == UW'(N_GEMM-1)) begin
            wunit <= '0;
            waddr <= waddr + 1'b1;
          end else begin
            wunit <= wunit + 1'b1;
          end
          if (remaining == 1) state <= S_HDR;
        end
        S_LINP: if (s_tvalid) begin
          remaining <= remaining - 1;
          iaddr     <= iaddr + 1'b1;
          if (remaining == 1) state <= S_HDR;
        end
        S_RUN: begin
          k <= k + 1'b1;
          if (k == steps - 1'b1) state <= S_DRAIN;
        end
        S_DRAIN: if (!g_valid && !g_busy) begin
          res_unit <= '0;
          res_row  <= '0;
          res_col  <= '0;
          state    <= S_OUT;
        end
        S_OUT: if (m_tready) begin
          if (res_last) state <= S_HDR;
          if (res_col == CW'(COLS-1)) begin
            res_col <= '0;
            if (res_row == RW'(ROWS-1)) begin
              res_row  <= '0;
              res_unit <= res_unit + 1'b1;
            end else begin
              res_row <= res_row + 1'b1;
            end
          end else begin
            res_col <= res_col + 1'b1;
          end
        end
        default: state <= S_HDR;
      endcase
    end
  end

  // Output stream rule: once offered, a word stays until it is taken.
  a_m_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tlast));

  // A command may not address beyond the buffers.
  a_steps_fit: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HDR) && s_tvalid && (hdr.op inside {OP_LOAD_WGT, OP_LOAD_INP, OP_COMPUTE})
      |-> (32'(hdr.steps) <= WBUF_DEPTH) && (32'(hdr.steps) <= IBUF_DEPTH));

endmodule

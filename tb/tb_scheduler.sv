// tb_scheduler: self-checking test of the command decoder and sequencer.
//
// The testbench stands in for the buffers and GEMM units: it logs every buffer
// write the scheduler makes, answers result reads with a value made from the
// index, and models g_busy as a 3-cycle pipeline behind g_valid. It sends
// LOAD_WGT, LOAD_INP and COMPUTE commands with random gaps in the input stream
// and random back-pressure on the output stream, and checks:
//   - each weight word goes to unit i % 4 at step i / 4, each activation word
//     to word address i, one write per accepted word;
//   - COMPUTE K issues reads 0..K-1 on K consecutive cycles, g_valid follows
//     one cycle later, g_first only on step 0 and only without accumulate;
//   - s_tready is low from COMPUTE until the last result is taken;
//   - results come out unit-major, then row, then column, one per handshake,
//     with m_tlast only on the 256th, and the first one is not offered
//     before the modelled pipeline is empty.
module tb_scheduler;
  import pot_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int N_GEMM = 4, ROWS = 8, COLS = 8, NRES = N_GEMM * ROWS * COLS;

  logic        clk = 0, rst_n = 0;
  logic [31:0] s_tdata = '0;
  logic        s_tvalid = 0, s_tready;
  logic [31:0] m_tdata;
  logic        m_tvalid, m_tready = 0, m_tlast;
  logic [3:0]  wb_we;
  logic [12:0] wb_addr;
  logic [31:0] wb_wdata;
  logic        ib_we;
  logic [13:0] ib_waddr;
  logic [31:0] ib_wdata;
  logic        rd_en;
  logic [12:0] rd_addr;
  logic        g_valid, g_first, g_busy;
  logic [1:0]  res_unit;
  logic [2:0]  res_row, res_col;
  acc_t        res_data;
  logic        idle;
  int          checks = 0, failures = 0;

  scheduler dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("%t %s", $time, msg);
  endtask

  // model of the GEMM pipeline: busy for 3 cycles after each valid step
  logic [2:0] pipe = '0;
  always @(posedge clk) pipe <= {pipe[1:0], g_valid};
  always_comb g_busy = |pipe;
  always_comb res_data = acc_t'({8'h5a, 6'(res_unit), 3'(res_row), 3'(res_col)}) * 7;

  // logs of what the scheduler does
  logic [31:0] wlog_data [$];
  int          wlog_unit [$], wlog_addr [$];
  logic [31:0] ilog_data [$];
  int          ilog_addr [$];
  int          rd_cycle  [$], rd_log [$];
  int          gv_cycle  [$], gf_log [$];
  int          cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (wb_we != 0) begin
        checks++;
        if (!$onehot(wb_we)) fail("several weight enables");
        for (int u = 0; u < N_GEMM; u++) if (wb_we[u]) begin
          wlog_unit.push_back(u); wlog_addr.push_back(int'(wb_addr)); wlog_data.push_back(wb_wdata);
        end
      end
      if (ib_we) begin
        ilog_addr.push_back(int'(ib_waddr)); ilog_data.push_back(ib_wdata);
      end
      if (rd_en) begin rd_cycle.push_back(cyc); rd_log.push_back(int'(rd_addr)); end
      if (g_valid) begin gv_cycle.push_back(cyc); gf_log.push_back(int'(g_first)); end
      if (m_tvalid && g_busy) fail("result offered while GEMM busy");
    end
  end

  // drive one word; signals change at the falling edge, the handshake is
  // sampled at the rising edge
  task automatic send(logic [31:0] w);
    bit taken;
    while ($urandom_range(0, 3) == 0) @(negedge clk);
    s_tvalid = 1;
    s_tdata  = w;
    do begin
      taken = s_tready;
      @(negedge clk);
    end while (!taken);
    s_tvalid = 0;
  endtask

  function automatic logic [31:0] hdr(opcode_e op, bit accu, int k);
    cmd_hdr_t h;
    h = '{op: op, accumulate: accu, reserved: '0, steps: 16'(k)};
    return 32'(h);
  endfunction

  task automatic load_weights(int K);
    logic [31:0] sent [$];
    wlog_data.delete(); wlog_unit.delete(); wlog_addr.delete();
    send(hdr(OP_LOAD_WGT, 0, K));
    for (int i = 0; i < K * N_GEMM; i++) begin
      logic [31:0] w;
      w = $urandom;
      sent.push_back(w);
      send(w);
    end
    @(posedge clk);
    checks++;
    if (wlog_data.size() != K * N_GEMM) fail($sformatf("%0d weight writes, want %0d", wlog_data.size(), K * N_GEMM));
    else for (int i = 0; i < K * N_GEMM; i++) begin
      checks++;
      if (wlog_unit[i] != i % N_GEMM || wlog_addr[i] != i / N_GEMM || wlog_data[i] != sent[i])
        fail($sformatf("weight word %0d went to unit %0d addr %0d", i, wlog_unit[i], wlog_addr[i]));
    end
  endtask

  task automatic load_inputs(int K);
    logic [31:0] sent [$];
    ilog_data.delete(); ilog_addr.delete();
    send(hdr(OP_LOAD_INP, 0, K));
    for (int i = 0; i < K * 2; i++) begin
      logic [31:0] w;
      w = $urandom;
      sent.push_back(w);
      send(w);
    end
    @(posedge clk);
    checks++;
    if (ilog_data.size() != K * 2) fail($sformatf("%0d input writes, want %0d", ilog_data.size(), K * 2));
    else for (int i = 0; i < K * 2; i++) begin
      checks++;
      if (ilog_addr[i] != i || ilog_data[i] != sent[i]) fail($sformatf("input word %0d at addr %0d", i, ilog_addr[i]));
    end
  endtask

  task automatic compute(int K, bit accu, bit backpressure);
    int n;
    rd_cycle.delete(); rd_log.delete(); gv_cycle.delete(); gf_log.delete();
    send(hdr(OP_COMPUTE, accu, K));
    n = 0;
    while (n < NRES) begin
      m_tready = backpressure ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      checks++;
      if (s_tready) fail("s_tready high during compute");
      if (m_tvalid && m_tready) begin
        logic [31:0] want;
        want = 32'(acc_t'({8'h5a, 6'(n / 64), 3'((n / 8) % 8), 3'(n % 8)}) * 7);
        checks++;
        if (m_tdata != want) fail($sformatf("result %0d = %h, want %h", n, m_tdata, want));
        checks++;
        if (m_tlast != (n == NRES - 1)) fail($sformatf("tlast wrong at result %0d", n));
        n++;
      end
      @(negedge clk);
    end
    m_tready = 0;
    #1;
    checks++;
    if (!s_tready || !idle) fail("not back to idle after results");
    // read and GEMM-control sequence
    checks++;
    if (rd_log.size() != K) fail($sformatf("%0d reads, want %0d", rd_log.size(), K));
    else for (int k = 0; k < K; k++) begin
      checks++;
      if (rd_log[k] != k || rd_cycle[k] != rd_cycle[0] + k) fail($sformatf("read %0d: addr %0d", k, rd_log[k]));
      checks++;
      if (gv_cycle[k] != rd_cycle[k] + 1) fail($sformatf("g_valid %0d not one cycle after read", k));
      checks++;
      if (gf_log[k] != int'((k == 0) && !accu)) fail($sformatf("g_first wrong at step %0d", k));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    checks++;
    if (!idle || !s_tready || m_tvalid) fail("not idle after reset");
    send(hdr(OP_NOP, 0, 0));
    load_weights(5);
    load_inputs(7);
    compute(5, 0, 0);
    load_weights(33);
    load_inputs(33);
    compute(33, 0, 1);
    compute(1, 1, 1);
    compute(17, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

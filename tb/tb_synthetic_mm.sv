// tb_synthetic_mm: the smallest synthetic matrix-multiplication benchmark,
// m = 128, n = 64, k = 256, run on the accelerator built with each shift-PE.
//
// Three accelerators at default size, one per PE kind (QKeras, MSQ, APoT),
// receive the same command stream: C (m x n) = A (m x k, int8 activations)
// times W (k x n, 4-bit PoT weight codes). The host loop keeps a 32-column
// block of W in the weight buffers and streams 8-row blocks of A through it,
// so weights are loaded once per column block and reused 16 times. Each
// accelerator's 8192 results are compared with an integer product using its
// format's quantization levels (QKeras +-2^e; MSQ and APoT in units of 2^-3
// and 2^-4). The number of cycles each accelerator spends computing is
// reported: it is the same for all three, one reduction step per cycle, with
// the PE latency adding 1, 2 or 3 cycles per tile.
module tb_synthetic_mm;
  import pot_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int M = 128, N = 64, K = 256;
  localparam int NF = 32, NP = 8;            // tile: 32 columns of W, 8 rows of A
  localparam int NK = 3;
  localparam int T1_MSQ [4]  = '{0, 4, 2, 1};
  localparam int T1_APOT [4] = '{0, 8, 4, 1};

  logic        clk = 0, rst_n = 0;
  logic [31:0] s_tdata = '0;
  logic        s_tvalid [NK] = '{default: 0};
  logic        s_tready [NK];
  logic [31:0] m_tdata  [NK];
  logic        m_tvalid [NK], m_tready [NK], m_tlast [NK], idle [NK];
  int          checks = 0, failures = 0;

  shift_acc #(.PE_KIND(PE_QKERAS)) u_q (.clk, .rst_n, .s_tdata, .s_tvalid(s_tvalid[0]), .s_tready(s_tready[0]),
    .m_tdata(m_tdata[0]), .m_tvalid(m_tvalid[0]), .m_tready(m_tready[0]), .m_tlast(m_tlast[0]), .idle(idle[0]));
  shift_acc #(.PE_KIND(PE_MSQ)) u_m (.clk, .rst_n, .s_tdata, .s_tvalid(s_tvalid[1]), .s_tready(s_tready[1]),
    .m_tdata(m_tdata[1]), .m_tvalid(m_tvalid[1]), .m_tready(m_tready[1]), .m_tlast(m_tlast[1]), .idle(idle[1]));
  shift_acc #(.PE_KIND(PE_APOT)) u_a (.clk, .rst_n, .s_tdata, .s_tvalid(s_tvalid[2]), .s_tready(s_tready[2]),
    .m_tdata(m_tdata[2]), .m_tvalid(m_tvalid[2]), .m_tready(m_tready[2]), .m_tlast(m_tlast[2]), .idle(idle[2]));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  act_t   A [M][K];
  wcode_t W [K][N];

  function automatic int level(int kind, wcode_t w);
    int mag;
    case (kind)
      0: mag = 1 << int'(w[2:0]);
      1: mag = T1_MSQ[w[2:1]] + (w[0] ? 4 : 0);
      default: mag = T1_APOT[w[2:1]] + (w[0] ? 2 : 0);
    endcase
    return w[3] ? -mag : mag;
  endfunction

  function automatic logic [31:0] hdr(opcode_e op, int k);
    cmd_hdr_t h;
    h = '{op: op, accumulate: 1'b0, reserved: '0, steps: 16'(k)};
    return 32'(h);
  endfunction

  // one word to all three accelerators; each accelerator's valid drops once
  // it has taken the word, and the task returns when all three have
  task automatic send(logic [31:0] w);
    bit pend [NK];
    bit any;
    s_tdata = w;
    for (int d = 0; d < NK; d++) begin pend[d] = 1; s_tvalid[d] = 1; end
    do begin
      for (int d = 0; d < NK; d++) if (pend[d] && s_tready[d]) pend[d] = 0;
      @(negedge clk);
      any = 0;
      for (int d = 0; d < NK; d++) begin s_tvalid[d] = pend[d]; any |= pend[d]; end
    end while (any);
  endtask

  // tiles in issue order: column block, row block
  int tile_f [$], tile_p [$];
  int done [NK] = '{default: 0};
  int busy_cycles [NK] = '{default: 0};

  for (genvar d = 0; d < NK; d++) begin : g_rx
    initial begin
      int n;
      m_tready[d] = 0;
      n = 0;
      forever begin
        @(negedge clk);
        m_tready[d] = 1;
        if (!idle[d] && !s_tready[d]) busy_cycles[d]++;
        if (m_tvalid[d]) begin
          int t, f, p;
          longint want;
          t = done[d];
          f = tile_f[t] * NF + n / NP;
          p = tile_p[t] * NP + n % NP;
          want = 0;
          for (int k = 0; k < K; k++) want += longint'(int'(A[p][k]) * level(d, W[k][f]));
          checks++;
          if (longint'(signed'(m_tdata[d])) != want) begin
            failures++;
            if (failures < 10) $display("PE kind %0d: C[%0d][%0d] = %0d, want %0d", d, p, f, signed'(m_tdata[d]), want);
          end
          n++;
          if (m_tlast[d]) begin
            checks++;
            if (n != NF * NP) begin failures++; $display("tile of %0d words", n); end
            n = 0;
            done[d]++;
          end
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < M; i++) for (int k = 0; k < K; k++) A[i][k] = act_t'($urandom);
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) W[k][j] = wcode_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    for (int fb = 0; fb < N / NF; fb++) begin
      send(hdr(OP_LOAD_WGT, K));
      for (int k = 0; k < K; k++)
        for (int u = 0; u < 4; u++) begin
          logic [31:0] w;
          for (int r = 0; r < 8; r++) w[4*r +: 4] = W[k][fb*NF + u*8 + r];
          send(w);
        end
      for (int pb = 0; pb < M / NP; pb++) begin
        send(hdr(OP_LOAD_INP, K));
        for (int k = 0; k < K; k++)
          for (int s = 0; s < 2; s++)
            send({A[pb*NP+4*s+3][k], A[pb*NP+4*s+2][k], A[pb*NP+4*s+1][k], A[pb*NP+4*s][k]});
        tile_f.push_back(fb);
        tile_p.push_back(pb);
        send(hdr(OP_COMPUTE, K));
      end
    end
    while (done[0] < tile_f.size() || done[1] < tile_f.size() || done[2] < tile_f.size()) @(negedge clk);
    for (int d = 0; d < NK; d++) begin
      checks++;
      if (done[d] != (M / NP) * (N / NF)) begin failures++; $display("PE kind %0d finished %0d tiles", d, done[d]); end
      $display("PE kind %0d: %0d tiles, %0d cycles computing and sending results", d, done[d], busy_cycles[d]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

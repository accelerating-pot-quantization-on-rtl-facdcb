// tb_shift_acc: end-to-end test of the shift-based accelerator at full size.
//
// The testbench plays the host: it makes random PoT-quantized weights as 8-bit
// style integer levels +-2^e (e = 0..7), converts them to 4-bit shift-term
// codes as the weight pre-processing step does, packs them eight per word,
// packs int8 activations four per word, and streams commands to the default
// accelerator (4 GEMM units x 64 MACs, 8192-step buffers). A separate thread
// takes the result words, with random back-pressure. Every result is compared
// with an integer matrix product of the original weight levels and
// activations, computed without shifts.
//
// Tiles run: a short one; a 300-step reduction split into 180 + 120 steps
// with the accumulate flag; one using the full 8192-step buffer depth. It
// checks the compute latency of K + 3 cycles (K steps, 1 cycle PE, 2 cycles of
// hand-over) from command to first result, and counts each mechanism - weight
// load, input load, new sum, accumulated sum, full-depth tile, input-stream
// stall, output back-pressure - failing if any never happened.
module tb_shift_acc;
  import pot_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int N_GEMM = 4, ROWS = 8, COLS = 8, DEPTH = 8192;
  localparam int NF = N_GEMM * ROWS;       // filters per tile
  localparam int LAT = 1;                  // QKeras shift-PE

  logic        clk = 0, rst_n = 0;
  logic [31:0] s_tdata = '0;
  logic        s_tvalid = 0, s_tready;
  logic [31:0] m_tdata;
  logic        m_tvalid, m_tready = 0, m_tlast;
  logic        idle;
  int          checks = 0, failures = 0;

  shift_acc dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_load_wgt = 0, n_load_inp = 0, n_new = 0, n_accum = 0, n_full = 0;
  int n_in_stall = 0, n_out_stall = 0;
  int cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && s_tvalid && !s_tready) n_in_stall++;
    if (rst_n && m_tvalid && !m_tready) n_out_stall++;
  end

  // ---- host-side data ----
  int   wlev [DEPTH][NF];      // weight levels +-2^e
  act_t act  [DEPTH][COLS];
  longint expect_q [$];        // expected results, in output order
  int   hdr_cycle [$];         // cycle a COMPUTE header was accepted
  int   lat_want  [$];

  // weight pre-processing: PoT level +-2^e -> 4-bit code {sign, e}
  function automatic wcode_t to_code(int lev);
    int mag, e;
    mag = lev < 0 ? -lev : lev;
    e = 0;
    while ((1 << e) < mag) e++;
    return {lev < 0, 3'(e)};
  endfunction

  task automatic send(logic [31:0] w);
    bit taken;
    while ($urandom_range(0, 7) == 0) @(negedge clk);
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

  // one tile: K random steps starting at step k0 of the data arrays
  task automatic make_data(int K);
    for (int k = 0; k < K; k++) begin
      for (int f = 0; f < NF; f++) begin
        int e;
        e = $urandom_range(0, 7);
        wlev[k][f] = (($urandom_range(0, 1) == 1) ? -1 : 1) * (1 << e);
      end
      for (int c = 0; c < COLS; c++) act[k][c] = act_t'($urandom);
      if (k % 11 == 5) act[k][3] = act_t'(-128);
    end
  endtask

  task automatic load(int k0, int K);
    send(hdr(OP_LOAD_WGT, 0, K));
    for (int k = k0; k < k0 + K; k++)
      for (int u = 0; u < N_GEMM; u++) begin
        logic [31:0] w;
        for (int r = 0; r < ROWS; r++) w[4*r +: 4] = to_code(wlev[k][u*ROWS + r]);
        send(w);
      end
    n_load_wgt++;
    send(hdr(OP_LOAD_INP, 0, K));
    for (int k = k0; k < k0 + K; k++)
      for (int s = 0; s < COLS / 4; s++)
        send({act[k][4*s+3], act[k][4*s+2], act[k][4*s+1], act[k][4*s]});
    n_load_inp++;
  endtask

  // expected results of steps 0..Ktot-1, queued for the last compute of a tile
  task automatic expect_tile(int Ktot);
    for (int f = 0; f < NF; f++)
      for (int c = 0; c < COLS; c++) begin
        longint sum = 0;
        for (int k = 0; k < Ktot; k++) sum += longint'(wlev[k][f]) * longint'(int'(act[k][c]));
        expect_q.push_back(sum);
      end
  endtask

  task automatic compute(int K, bit accu, bit last_of_tile, int Ktot);
    if (last_of_tile) expect_tile(Ktot);
    else for (int i = 0; i < NF * COLS; i++) expect_q.push_back(longint'(64'h7fff_ffff_ffff));
    lat_want.push_back(K + LAT + 2);
    send(hdr(OP_COMPUTE, accu, K));
    hdr_cycle.push_back(cyc);
    if (accu) n_accum++; else n_new++;
    if (K == DEPTH) n_full++;
  endtask

  // ---- result receiver ----
  int n_results = 0, n_tiles_done = 0;
  bit first_of_burst = 1;

  initial begin
    forever begin
      @(negedge clk);
      m_tready = ($urandom_range(0, 4) != 0);
      if (m_tvalid && first_of_burst) begin
        int hc, lw;
        first_of_burst = 0;
        hc = hdr_cycle.pop_front();
        lw = lat_want.pop_front();
        checks++;
        if (cyc - hc != lw) begin
          failures++;
          $display("compute latency %0d cycles, want %0d", cyc - hc, lw);
        end
      end
      if (m_tvalid && m_tready) begin
        longint want;
        want = expect_q.pop_front();
        if (want != longint'(64'h7fff_ffff_ffff)) begin
          checks++;
          if (longint'(signed'(m_tdata)) != want) begin
            failures++;
            if (failures < 10) $display("result %0d = %0d, want %0d", n_results, signed'(m_tdata), want);
          end
        end
        checks++;
        if (m_tlast != ((n_results % (NF * COLS)) == NF * COLS - 1)) begin
          failures++;
          $display("m_tlast wrong at result %0d", n_results);
        end
        if (m_tlast) begin first_of_burst = 1; n_tiles_done++; end
        n_results++;
      end
    end
  end

  task automatic wait_results(int tiles);
    while (n_tiles_done < tiles) @(negedge clk);
  endtask

  initial begin
    automatic int tiles = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);

    // 1. short tile
    make_data(20);
    load(0, 20);
    compute(20, 0, 1, 20); tiles++;

    // 2. a 300-step reduction in two chunks; the loads of chunk 2 queue up
    //    behind the first compute and stall the input stream
    make_data(300);
    load(0, 180);
    compute(180, 0, 0, 0); tiles++;
    load(180, 120);
    compute(120, 1, 1, 300); tiles++;
    wait_results(tiles);

    // 3. full buffer depth
    make_data(DEPTH);
    load(0, DEPTH);
    compute(DEPTH, 0, 1, DEPTH); tiles++;
    wait_results(tiles);
    repeat (5) @(negedge clk);

    checks++;
    if (n_results != tiles * NF * COLS) begin
      failures++;
      $display("%0d results, want %0d", n_results, tiles * NF * COLS);
    end
    $display("mechanisms: weight loads %0d, input loads %0d, new sums %0d, accumulated sums %0d, full-depth tiles %0d, input stalls %0d, output stalls %0d",
             n_load_wgt, n_load_inp, n_new, n_accum, n_full, n_in_stall, n_out_stall);
    checks += 7;
    if (n_load_wgt == 0) begin failures++; $display("no weight load"); end
    if (n_load_inp == 0) begin failures++; $display("no input load"); end
    if (n_new == 0)      begin failures++; $display("no new sum"); end
    if (n_accum == 0)    begin failures++; $display("no accumulated sum"); end
    if (n_full == 0)     begin failures++; $display("no full-depth tile"); end
    if (n_in_stall == 0) begin failures++; $display("no input stall"); end
    if (n_out_stall == 0) begin failures++; $display("no output stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

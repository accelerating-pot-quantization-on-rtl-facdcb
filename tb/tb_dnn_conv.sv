// tb_dnn_conv: whole convolution layers of the three evaluated networks,
// run on the full-size accelerator with the QKeras shift-PE.
//
// Layers (shapes from the standard network definitions):
//   ResNet18     conv5_x  3x3, 512 -> 512 channels, 7x7 output    K = 4608
//   InceptionV1  3a 3x3   3x3,  96 -> 128 channels, 28x28 output  K = 864
//   MobileNetV2  expand   1x1,  96 -> 576 channels, 14x14 output  K = 96
// The testbench acts as the driver: it draws random PoT weights (+-2^e) and
// int8 activations, converts weights to 4-bit codes, builds im2col columns
// (zero padding, stride 1), and for each block of 32 filters loads the
// weights once and streams every block of 8 output pixels through them; the
// last pixel block of a layer may be partly empty. The outputs are collected
// into an output tensor and compared, element by element, with a direct
// convolution computed from the weight levels. It also reports the cycles
// spent per layer, against the ideal of one reduction step per cycle.
module tb_dnn_conv;
  import pot_pkg::*;
  timeunit 1ns; timeprecision 1ps;

  localparam int NF = 32, NP = 8;

  logic        clk = 0, rst_n = 0;
  logic [31:0] s_tdata = '0;
  logic        s_tvalid = 0, s_tready;
  logic [31:0] m_tdata;
  logic        m_tvalid, m_tready = 1, m_tlast;
  logic        idle;
  int          checks = 0, failures = 0;

  shift_acc dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc++;

  // current layer
  int   H, W, CI, CO, KS, PAD, KK;
  act_t x [];          // input  [H][W][CI], flattened
  int   wl [];         // weight levels [CO][KS][KS][CI], flattened
  int   y [];          // accelerator output [H][W][CO]

  function automatic int xi(int h, int w, int c); return (h * W + w) * CI + c; endfunction
  function automatic int wi(int o, int i, int j, int c); return ((o * KS + i) * KS + j) * CI + c; endfunction

  // activation of reduction step k for output pixel p (im2col, zero padding)
  function automatic act_t col(int p, int k);
    int oh, ow, i, j, c, ih, iw;
    if (p >= H * W) return '0;
    oh = p / W; ow = p % W;
    c = k % CI; j = (k / CI) % KS; i = k / (CI * KS);
    ih = oh + i - PAD; iw = ow + j - PAD;
    if (ih < 0 || ih >= H || iw < 0 || iw >= W) return '0;
    return x[xi(ih, iw, c)];
  endfunction

  function automatic wcode_t to_code(int lev);
    int mag, e;
    mag = lev < 0 ? -lev : lev;
    e = 0;
    while ((1 << e) < mag) e++;
    return {lev < 0, 3'(e)};
  endfunction

  function automatic logic [31:0] hdr(opcode_e op, int k);
    cmd_hdr_t h;
    h = '{op: op, accumulate: 1'b0, reserved: '0, steps: 16'(k)};
    return 32'(h);
  endfunction

  task automatic send(logic [31:0] w);
    bit taken;
    s_tvalid = 1;
    s_tdata  = w;
    do begin
      taken = s_tready;
      @(negedge clk);
    end while (!taken);
    s_tvalid = 0;
  endtask

  // result receiver: tile queue gives filter block and pixel block
  int tq_f [$], tq_p [$];
  int rx_n = 0, tiles_done = 0;

  initial forever begin
    @(negedge clk);
    if (m_tvalid && m_tready) begin
      int f, p;
      f = tq_f[0] * NF + rx_n / NP;
      p = tq_p[0] * NP + rx_n % NP;
      if (p < H * W) y[p * CO + f] = int'(signed'(m_tdata));
      rx_n++;
      if (m_tlast) begin
        void'(tq_f.pop_front());
        void'(tq_p.pop_front());
        rx_n = 0;
        tiles_done++;
      end
    end
  end

  task automatic run_layer(string name, int h, int w, int ci, int co, int ks);
    int npb, nfb, t0, ntiles, bad;
    H = h; W = w; CI = ci; CO = co; KS = ks; PAD = ks / 2; KK = ks * ks * ci;
    x  = new[H * W * CI];
    wl = new[CO * KS * KS * CI];
    y  = new[H * W * CO];
    foreach (x[i])  x[i] = act_t'($urandom);
    foreach (wl[i]) wl[i] = (($urandom_range(0, 1) == 1) ? -1 : 1) * (1 << $urandom_range(0, 7));
    npb = (H * W + NP - 1) / NP;
    nfb = CO / NF;
    ntiles = npb * nfb;
    tiles_done = 0;
    t0 = cyc;
    for (int fb = 0; fb < nfb; fb++) begin
      send(hdr(OP_LOAD_WGT, KK));
      for (int k = 0; k < KK; k++) begin
        int c, j, i;
        c = k % CI; j = (k / CI) % KS; i = k / (CI * KS);
        for (int u = 0; u < 4; u++) begin
          logic [31:0] wd;
          for (int r = 0; r < 8; r++) wd[4*r +: 4] = to_code(wl[wi(fb * NF + u * 8 + r, i, j, c)]);
          send(wd);
        end
      end
      for (int pb = 0; pb < npb; pb++) begin
        send(hdr(OP_LOAD_INP, KK));
        for (int k = 0; k < KK; k++)
          for (int s = 0; s < 2; s++)
            send({col(pb*NP+4*s+3, k), col(pb*NP+4*s+2, k), col(pb*NP+4*s+1, k), col(pb*NP+4*s, k)});
        tq_f.push_back(fb);
        tq_p.push_back(pb);
        send(hdr(OP_COMPUTE, KK));
      end
    end
    while (tiles_done < ntiles) @(negedge clk);
    // direct convolution reference
    bad = 0;
    for (int oh = 0; oh < H; oh++)
      for (int ow = 0; ow < W; ow++)
        for (int o = 0; o < CO; o++) begin
          longint s = 0;
          for (int i = 0; i < KS; i++)
            for (int j = 0; j < KS; j++) begin
              int ih, iw;
              ih = oh + i - PAD; iw = ow + j - PAD;
              if (ih >= 0 && ih < H && iw >= 0 && iw < W)
                for (int c = 0; c < CI; c++) s += longint'(int'(x[xi(ih, iw, c)]) * wl[wi(o, i, j, c)]);
            end
          checks++;
          if (longint'(y[(oh * W + ow) * CO + o]) != s) begin
            failures++; bad++;
            if (bad < 5) $display("%s: y[%0d][%0d][%0d] = %0d, want %0d", name, oh, ow, o, y[(oh * W + ow) * CO + o], s);
          end
        end
    $display("%s: K=%0d, %0d tiles, %0d cycles; %0d outputs checked, %0d wrong; compute-only ideal %0d cycles",
             name, KK, ntiles, cyc - t0, H * W * CO, bad, ntiles * KK);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(negedge clk);
    run_layer("ResNet18 conv5_x", 7, 7, 512, 512, 3);
    run_layer("InceptionV1 3a 3x3", 28, 28, 96, 128, 3);
    run_layer("MobileNetV2 expand 1x1", 14, 14, 96, 576, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

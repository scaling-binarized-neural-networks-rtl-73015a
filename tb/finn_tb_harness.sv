// finn_tb_harness: end-to-end test bench body for finn_cnn_top.
//
// Generates a random network (weights from a hash of layer, neuron and
// element; each neuron's threshold is the median of its own pre-activations
// over all pixels and frames, so that activations stay mixed), loads it through the configuration port, streams
// NFRAMES random 8-bit images through the accelerator and compares every
// label and every class score with a reference model computed here: -1
// padded 3x3 convolutions, OR pooling, fully connected layers, arg-max.
// The reference packs binary vectors into 64-bit words and uses XNOR and
// popcount on them, independently of the RTL's folding.
//
// It also counts how often each mechanism of the design occurred: padding
// words written in each convolution layer, PE pipeline stalls, label
// back-pressure and frames overlapping in the pipeline; one that never
// happened counts as a failure. Finally it checks the steady-state frame
// interval against the largest per-layer folding product (the initiation
// interval, at least 9 per vector for a convolution): one frame per II cycles, with 25% allowed for the row-level
// waits of the sliding window units at frame boundaries.
//
// FULL = 1 instantiates finn_cnn_top with its own defaults (no parameter
// override); the size parameters of this harness must then equal them.
module finn_tb_harness
  import bnn_pkg::*;
#(
  parameter bit FULL     = 1'b1,
  parameter int NFRAMES  = 2,
  parameter int WATCHDOG = 4000000,
  parameter int IMG_DIM  = 32,
  parameter int IN_CH    = 3,
  parameter int IN_BITS  = 8,
  parameter int C1       = 128,
  parameter int C2       = 256,
  parameter int C3       = 512,
  parameter int FC       = 1024,
  parameter int CLASSES  = 10,
  parameter int P0 = 16, parameter int S0 = 27,
  parameter int P1 = 64, parameter int S1 = 288,
  parameter int P2 = 64, parameter int S2 = 144,
  parameter int P3 = 64, parameter int S3 = 288,
  parameter int P4 = 64, parameter int S4 = 144,
  parameter int P5 = 64, parameter int S5 = 288,
  parameter int P6 = 16, parameter int S6 = 64,
  parameter int P7 = 4,  parameter int S7 = 32,
  parameter int P8 = 1,  parameter int S8 = 8
) ();
  localparam int NL = 9;
  localparam int D0 = IMG_DIM, D1 = D0 / 2, D2 = D1 / 2, D3 = D2 / 2;
  localparam int Y6 = D3 * D3 * C3;
  localparam int T0 = acc_w(IN_BITS, 9 * IN_CH);
  localparam int T1 = acc_w(1, 9 * C1);
  localparam int T2 = acc_w(1, 9 * C1);
  localparam int T3 = acc_w(1, 9 * C2);
  localparam int T4 = acc_w(1, 9 * C2);
  localparam int T5 = acc_w(1, 9 * C3);
  localparam int T6 = acc_w(1, Y6);
  localparam int T7 = acc_w(1, FC);
  localparam int T8 = acc_w(1, FC);
  localparam int CFG_W = imax(imax(imax(imax(S0, S1), imax(S2, S3)), imax(imax(S4, S5), imax(S6, S7))),
                              imax(S8, imax(imax(imax(T0, T1), imax(T2, T3)), imax(imax(T4, T5), imax(T6, T7)))));
  localparam int LW = idx_w(CLASSES);

  // per-layer geometry
  localparam int LY [NL] = '{9*IN_CH, 9*C1, 9*C1, 9*C2, 9*C2, 9*C3, Y6, FC, FC};
  localparam int LX [NL] = '{C1, C1, C2, C2, C3, C3, FC, FC, CLASSES};
  localparam int LP [NL] = '{P0, P1, P2, P3, P4, P5, P6, P7, P8};
  localparam int LS [NL] = '{S0, S1, S2, S3, S4, S5, S6, S7, S8};
  localparam int LM [NL] = '{D0*D0, D0*D0, D1*D1, D1*D1, D2*D2, D2*D2, 1, 1, 1};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  logic                     img_valid, img_ready;
  logic [IN_CH*IN_BITS-1:0] img_data;
  logic                     cls_valid, cls_ready;
  logic [LW-1:0]            cls_label;
  logic [CLASSES*T8-1:0]    cls_scores;
  logic                     cfg_we, cfg_thresh;
  logic [3:0]               cfg_layer;
  logic [7:0]               cfg_pe;
  logic [15:0]              cfg_addr;
  logic [CFG_W-1:0]         cfg_data;
  logic [5:0]               pad_write;
  logic [8:0]               stall;

  if (FULL) begin : g_full
    finn_cnn_top dut (.*);
  end else begin : g_small
    finn_cnn_top #(
      .IMG_DIM(IMG_DIM), .IN_CH(IN_CH), .IN_BITS(IN_BITS), .C1(C1), .C2(C2), .C3(C3), .FC(FC),
      .CLASSES(CLASSES),
      .P0(P0), .S0(S0), .P1(P1), .S1(S1), .P2(P2), .S2(S2), .P3(P3), .S3(S3), .P4(P4), .S4(S4),
      .P5(P5), .S5(S5), .P6(P6), .S6(S6), .P7(P7), .S7(S7), .P8(P8), .S8(S8)
    ) dut (.*);
  end

  // ------------------------------------------------------------ random network
  function automatic int unsigned hash3(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ b * 32'h85EBCA77 ^ c * 32'hC2B2AE3D ^ 32'h27D4EB2F;
    h = h ^ (h >> 15); h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12); h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  longint unsigned W [NL][];     // neuron n, element e at word n*nw(l) + e/64, bit e%64
  int              TH [NL][];
  byte             img [];       // frame f, pixel (y,x), channel c

  function automatic int nw(int l);
    return (LY[l] + 63) / 64;
  endfunction

  function automatic bit wbit(int l, int n, int e);
    return W[l][n*nw(l) + e/64][e%64];
  endfunction

  task automatic make_network();
    for (int l = 0; l < NL; l++) begin
      W[l]  = new[LX[l] * nw(l)];
      TH[l] = new[LX[l]];
      for (int i = 0; i < LX[l] * nw(l); i++)
        W[l][i] = {hash3(l, i, 1), hash3(l, i, 2)};
      // clear the unused bits of each neuron's last word
      if (LY[l] % 64 != 0)
        for (int n = 0; n < LX[l]; n++)
          W[l][n*nw(l) + nw(l) - 1] &= (64'd1 << (LY[l] % 64)) - 64'd1;
    end
  endtask

  // ------------------------------------------------------------ reference model
  // binary feature maps: pixel p (raster), channel c at fm[p*C + c]
  function automatic void conv_pre(input int l, input int d, input int cin,
                                   ref bit fin [], ref int pre []);
    int x = LX[l], nwl = nw(l);
    longint unsigned v [];
    v = new[nwl];
    pre = new[d * d * x];
    for (int oy = 0; oy < d; oy++)
      for (int ox = 0; ox < d; ox++) begin
        for (int i = 0; i < nwl; i++) v[i] = 0;
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++) begin
            int py, px;
            py = oy + ky - 1; px = ox + kx - 1;
            if (py >= 0 && py < d && px >= 0 && px < d)     // padding stays bit 0 = -1
              for (int c = 0; c < cin; c++) begin
                int e;
                e = (ky * 3 + kx) * cin + c;
                v[e/64][e%64] = fin[(py * d + px) * cin + c];
              end
          end
        for (int n = 0; n < x; n++) begin
          int pc;
          pc = 0;
          for (int i = 0; i < nwl; i++) begin
            longint unsigned m;
            m = (i == nwl - 1 && LY[l] % 64 != 0) ? (64'd1 << (LY[l] % 64)) - 64'd1 : '1;
            pc += $countones(~(W[l][n*nwl + i] ^ v[i]) & m);
          end
          pre[(oy * d + ox) * x + n] = pc;
        end
      end
  endfunction

  function automatic void pool(input int d, input int c, ref bit fin [], ref bit fout []);
    int h = d / 2;
    fout = new[h * h * c];
    for (int y = 0; y < h; y++)
      for (int x = 0; x < h; x++)
        for (int k = 0; k < c; k++)
          fout[(y * h + x) * c + k] = fin[((2*y) * d + 2*x) * c + k] | fin[((2*y) * d + 2*x + 1) * c + k] |
                                      fin[((2*y+1) * d + 2*x) * c + k] | fin[((2*y+1) * d + 2*x + 1) * c + k];
  endfunction

  // fully connected: returns popcounts
  function automatic void fc(input int l, ref bit fin [], ref int pcs []);
    int nwl = nw(l);
    longint unsigned v [];
    v = new[nwl];
    pcs = new[LX[l]];
    for (int i = 0; i < nwl; i++) v[i] = 0;
    for (int e = 0; e < LY[l]; e++) v[e/64][e%64] = fin[e];
    for (int n = 0; n < LX[l]; n++) begin
      int pc;
      pc = 0;
      for (int i = 0; i < nwl; i++) begin
        longint unsigned m;
        m = (i == nwl - 1 && LY[l] % 64 != 0) ? (64'd1 << (LY[l] % 64)) - 64'd1 : '1;
        pc += $countones(~(W[l][n*nwl + i] ^ v[i]) & m);
      end
      pcs[n] = pc;
    end
  endfunction

  int ref_scores [][];
  int ref_label [];

  // Pre-activations of every frame are kept per layer, so that each
  // neuron's threshold can be set to the median of its own values over all
  // pixels and frames. Random weights with fixed thresholds drive deep layers
  // to constant outputs; median thresholds keep every layer near half ones,
  // so labels and scores depend on the image and on every layer.
  int pre_all [NFRAMES][];
  bit act     [NFRAMES][];

  function automatic void layer0_pre(input int f, ref int pre []);
    pre = new[D0 * D0 * C1];
    for (int oy = 0; oy < D0; oy++)
      for (int ox = 0; ox < D0; ox++)
        for (int n = 0; n < C1; n++) begin
          int s;
          s = 0;
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              for (int c = 0; c < IN_CH; c++) begin
                int py, px, xv;
                py = oy + ky - 1; px = ox + kx - 1;
                xv = (py < 0 || py >= D0 || px < 0 || px >= D0) ? -1
                     : int'(img[((f * D0 + py) * D0 + px) * IN_CH + c]);
                s += wbit(0, n, (ky * 3 + kx) * IN_CH + c) ? xv : -xv;
              end
          pre[(oy * D0 + ox) * C1 + n] = s;
        end
  endfunction

  function automatic void calibrate(input int l, input int npx);
    int q [$];
    for (int n = 0; n < LX[l]; n++) begin
      q.delete();
      for (int f = 0; f < NFRAMES; f++)
        for (int p = 0; p < npx; p++) q.push_back(pre_all[f][p * LX[l] + n]);
      q.sort();
      TH[l][n] = q[q.size() / 2];
    end
    for (int f = 0; f < NFRAMES; f++) begin
      act[f] = new[npx * LX[l]];
      for (int i = 0; i < npx * LX[l]; i++) act[f][i] = (pre_all[f][i] >= TH[l][i % LX[l]]);
    end
  endfunction

  task automatic reference();
    bit a [], b [];
    int pcs [];
    int d [NL];
    d = '{D0, D0, D1, D1, D2, D2, 1, 1, 1};
    for (int f = 0; f < NFRAMES; f++) begin
      layer0_pre(f, pcs);
      pre_all[f] = pcs;
    end
    calibrate(0, D0 * D0);
    for (int l = 1; l < NL; l++) begin
      for (int f = 0; f < NFRAMES; f++) begin
        a = act[f];
        // an OR pooling sits before layers 2, 4 and 6
        if (l == 2 || l == 4 || l == 6) begin
          pool(d[l-1], LX[l-1], a, b);
          a = b;
        end
        if (l < 6) conv_pre(l, d[l], LX[l-1], a, pcs);
        else       fc(l, a, pcs);
        pre_all[f] = pcs;
      end
      if (l < NL - 1) calibrate(l, d[l] * d[l]);
    end
    for (int f = 0; f < NFRAMES; f++) begin
      ref_scores[f] = new[CLASSES];
      ref_label[f] = 0;
      for (int k = 0; k < CLASSES; k++) begin
        ref_scores[f][k] = pre_all[f][k];
        if (pre_all[f][k] > pre_all[f][ref_label[f]]) ref_label[f] = k;
      end
    end
  endtask

  // ------------------------------------------------------------ counters
  int pad_cnt [6];
  int stall_cnt = 0, backpressure = 0, overlap = 0, frames_in = 0, frames_out = 0, pix_in = 0;
  longint t_out [];
  bit load_done = 0;
  longint ii;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d cycles, %0d labels received", WATCHDOG, frames_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  initial begin
    longint t0;
    img_valid = 0; img_data = 0; cls_ready = 0;
    cfg_we = 0; cfg_thresh = 0; cfg_layer = 0; cfg_pe = 0; cfg_addr = 0; cfg_data = 0;
    foreach (pad_cnt[i]) pad_cnt[i] = 0;
    ii = 0;
    // a convolution's SWU delivers one window pixel per cycle, 9 per vector
    for (int l = 0; l < NL; l++) begin
      longint fold;
      fold = longint'(LY[l] / LS[l]) * (LX[l] / LP[l]);
      if (l < 6 && fold < 9) fold = 9;
      if (fold * LM[l] > ii) ii = fold * LM[l];
    end
    make_network();
    img = new[NFRAMES * D0 * D0 * IN_CH];
    foreach (img[i]) img[i] = byte'(hash3(99, i, 5));
    ref_scores = new[NFRAMES];
    ref_label  = new[NFRAMES];
    t_out      = new[NFRAMES];
    reference();
    $display("reference model done; initiation interval %0d cycles", ii);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load parameters
    t0 = cycle;
    for (int l = 0; l < NL; l++) begin
      int fs, fnn;
      fs = LY[l] / LS[l]; fnn = LX[l] / LP[l];
      for (int pe = 0; pe < LP[l]; pe++)
        for (int nf = 0; nf < fnn; nf++) begin
          for (int sf = 0; sf < fs; sf++) begin
            @(negedge clk);
            cfg_we = 1; cfg_thresh = 0; cfg_layer = 4'(l); cfg_pe = 8'(pe); cfg_addr = 16'(nf * fs + sf);
            cfg_data = '0;
            for (int i = 0; i < LS[l]; i++) cfg_data[i] = wbit(l, nf * LP[l] + pe, sf * LS[l] + i);
          end
          if (l != NL - 1) begin
            @(negedge clk);
            cfg_we = 1; cfg_thresh = 1; cfg_layer = 4'(l); cfg_pe = 8'(pe); cfg_addr = 16'(nf);
            cfg_data = CFG_W'(TH[l][nf * LP[l] + pe]);
          end
        end
    end
    @(negedge clk);
    cfg_we = 0;
    load_done = 1;
    $display("parameters loaded in %0d cycles", cycle - t0);
    // stream the images; short random gaps in the first frame only
    for (int f = 0; f < NFRAMES; f++)
      for (int p = 0; p < D0 * D0; p++) begin
        @(negedge clk);
        while (f == 0 && $urandom_range(0, 7) == 0) begin img_valid = 0; @(negedge clk); end
        img_valid = 1;
        for (int c = 0; c < IN_CH; c++) img_data[c*IN_BITS +: IN_BITS] = img[(f * D0 * D0 + p) * IN_CH + c];
        @(posedge clk); while (!img_ready) @(posedge clk);
        #1 img_valid = 0;
      end
  end

  // labels: held off for a while at the first label, then always ready
  always @(negedge clk) cls_ready <= (frames_out != 0) || (cycle % 200 > 150);

  always @(posedge clk) if (rst_n && load_done) begin
    for (int i = 0; i < 6; i++) if (pad_write[i]) pad_cnt[i]++;
    if (stall != '0) stall_cnt++;
    if (cls_valid && !cls_ready) backpressure++;
    if (img_valid && img_ready) begin
      pix_in++;
      if (pix_in % (D0 * D0) == 1) begin
        frames_in++;
        if (frames_in - frames_out > 1) overlap++;
      end
    end
    if (cls_valid && cls_ready) begin
      checks++;
      if (int'(cls_label) != ref_label[frames_out]) begin
        failures++; $display("frame %0d: label %0d expected %0d", frames_out, cls_label, ref_label[frames_out]);
      end
      for (int k = 0; k < CLASSES; k++) begin
        checks++;
        if (int'(cls_scores[k*T8 +: T8]) != ref_scores[frames_out][k]) begin
          failures++; $display("frame %0d class %0d: score %0d expected %0d", frames_out, k,
                               cls_scores[k*T8 +: T8], ref_scores[frames_out][k]);
        end
      end
      t_out[frames_out] = cycle;
      $display("frame %0d: label %0d at cycle %0d", frames_out, cls_label, cycle);
      frames_out++;
      if (frames_out == NFRAMES) finish_up();
    end
  end

  task automatic finish_up();
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (pad_cnt[i] == 0) begin failures++; $display("layer %0d never wrote padding", i); end
    end
    checks++; if (stall_cnt == 0)    begin failures++; $display("no PE pipeline stall happened"); end
    checks++; if (backpressure == 0) begin failures++; $display("label back-pressure never happened"); end
    checks++; if (overlap == 0)      begin failures++; $display("frames never overlapped in the pipeline"); end
    if (NFRAMES >= 3) begin
      longint dt;
      dt = t_out[NFRAMES-1] - t_out[NFRAMES-2];
      checks++;
      if (dt > ii + ii / 4) begin failures++; $display("frame interval %0d > II %0d + 25%%", dt, ii); end
      $display("steady frame interval %0d cycles, II %0d", dt, ii);
    end
    $display("mechanisms: pad writes %0d %0d %0d %0d %0d %0d, stall cycles %0d, back-pressure %0d, overlapping frames %0d",
             pad_cnt[0], pad_cnt[1], pad_cnt[2], pad_cnt[3], pad_cnt[4], pad_cnt[5], stall_cnt, backpressure, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule

// mvtu: Matrix-Vector-Threshold Unit, the compute engine of every layer.
//
// Computes out = threshold(W * in) for one input vector of Y elements and a
// weight matrix of X rows, using P processing elements (mvtu_pe) with S SIMD
// lanes each. The work is folded as in the paper: each PE handles
// F^n = X/P neurons, each in F^s = Y/S cycles, so one vector takes
// F^s * F^n cycles. Neuron n = nf*P + pe is computed by PE pe in neuron fold
// nf; its weights for elements sf*S .. sf*S+S-1 sit in that PE's weight
// memory at address nf*F^s + sf, its threshold at address nf.
//
// Input vector buffer: two Y-element buffers used in turn. Input beats of
// IN_BEAT_W bits (IN_BEATS per vector, element e at bits e*IN_BITS) fill one
// buffer while the other is read F^n times. Output vector buffer: results
// are collected per neuron fold and the complete vector (X bits, or X
// accumulator values of T bits when THRESH = 0) is emitted as one beat.
// THRESH = 0 removes the thresholding stage, as the paper does for the last
// layer; IN_BITS > 1 uses multiply-add for a non-binary input (first layer).
//
// Timing: a vector starts the cycle after its last input beat arrives; the
// result is valid F^s*F^n + 1 cycles after the vector's first compute cycle.
// If the output register is still occupied when a new result completes, the
// whole PE pipeline stalls until out_ready. Streams use valid/ready: a beat
// moves when both are high; out_data is held while out_valid && !out_ready.
//
// Parameters are loaded through the cfg_* port: a write with cfg_layer equal
// to LAYER_ID goes to PE cfg_pe, weight (S bits) or threshold (T bits, signed)
// memory at cfg_addr. The double input buffer, the stall scheme and the
// configuration port are this design's choices; the paper gives the PE array,
// the folding and the input/output buffers.
module mvtu
  import bnn_pkg::*;
#(
  parameter int IN_BITS    = 1,
  parameter int IN_BEAT_W  = 128,
  parameter int IN_BEATS   = 9,
  parameter int X          = 128,
  parameter int P          = 64,
  parameter int S          = 288,
  parameter bit THRESH     = 1'b1,
  parameter int LAYER_ID   = 0,
  parameter int CFG_W      = 288,
  parameter int CFG_PE_W   = 8,
  parameter int CFG_ADDR_W = 16,
  localparam int Y      = IN_BEAT_W * IN_BEATS / IN_BITS,
  localparam int FS     = Y / S,
  localparam int FN     = X / P,
  localparam int T      = acc_w(IN_BITS, Y),
  localparam int OUT_W  = THRESH ? X : X * T
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // input vector stream
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [IN_BEAT_W-1:0]  in_data,
  // output vector stream
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [OUT_W-1:0]      out_data,
  // parameter writes
  input  logic                  cfg_we,
  input  logic [3:0]            cfg_layer,
  input  cfg_target_e           cfg_target,
  input  logic [CFG_PE_W-1:0]   cfg_pe,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_W-1:0]      cfg_data,
  // status, for observation only
  output logic                  stall_o
);

  localparam int WDEPTH = FS * FN;
  localparam int WA     = idx_w(WDEPTH);
  localparam int TA     = idx_w(FN);
  localparam int BA     = idx_w(IN_BEATS);
  localparam int SA     = idx_w(FS);
  localparam int NA     = idx_w(FN);
  localparam int VW     = Y * IN_BITS;

  initial begin
    assert (Y * IN_BITS == IN_BEAT_W * IN_BEATS) else $error("beat width not a multiple of IN_BITS");
    assert (Y % S == 0) else $error("S must divide Y");
    assert (X % P == 0) else $error("P must divide X");
    assert (CFG_W >= S && CFG_W >= T) else $error("CFG_W too narrow");
    assert (2 ** CFG_ADDR_W >= WDEPTH) else $error("CFG_ADDR_W too narrow");
    assert (2 ** CFG_PE_W >= P) else $error("CFG_PE_W too narrow");
  end

  // ---------------------------------------------------------------- input buffer
  logic [VW-1:0] ibuf [2];
  logic [1:0]    ifull;
  logic          wsel, rsel;
  logic [BA-1:0] beat;

  assign in_ready = !ifull[wsel];

  // ---------------------------------------------------------------- control
  logic [SA-1:0] sf;
  logic [NA-1:0] nf;
  logic          en;
  logic          issue;
  logic          vec_end0;

  // stage-1 control (shared by all PEs)
  logic          s1_valid, s1_first, s1_last, s1_vlast;
  logic [NA-1:0] s1_nf;
  logic [S*IN_BITS-1:0] s1_x;

  logic out_free;
  assign out_free = !out_valid || out_ready;
  assign en       = !(s1_valid && s1_vlast && !out_free);
  assign stall_o  = !en;
  assign issue    = en && ifull[rsel];
  assign vec_end0 = (sf == SA'(FS - 1)) && (nf == NA'(FN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ifull <= '0;
      wsel  <= 1'b0;
      rsel  <= 1'b0;
      beat  <= '0;
      sf    <= '0;
      nf    <= '0;
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_vlast <= 1'b0;
      s1_nf    <= '0;
    end else begin
      // fill
      if (in_valid && in_ready) begin
        if (beat == BA'(IN_BEATS - 1)) begin
          beat        <= '0;
          ifull[wsel] <= 1'b1;
          wsel        <= !wsel;
        end else begin
          beat <= beat + 1'b1;
        end
      end
      // stage 0 -> 1
      if (en) begin
        s1_valid <= issue;
        s1_first <= (sf == '0);
        s1_last  <= (sf == SA'(FS - 1));
        s1_vlast <= vec_end0;
        s1_nf    <= nf;
      end
      if (issue) begin
        if (sf == SA'(FS - 1)) begin
          sf <= '0;
          if (nf == NA'(FN - 1)) begin
            nf          <= '0;
            ifull[rsel] <= 1'b0;
            rsel        <= !rsel;
          end else begin
            nf <= nf + 1'b1;
          end
        end else begin
          sf <= sf + 1'b1;
        end
      end
    end
  end

  // input buffer data and the shared stage-1 input slice
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) ibuf[wsel][beat*IN_BEAT_W +: IN_BEAT_W] <= in_data;
    if (en) s1_x <= ibuf[rsel][sf*S*IN_BITS +: S*IN_BITS];
  end

  // ---------------------------------------------------------------- PE array
  logic [P-1:0]          pe_bit;
  logic signed [T-1:0]   pe_acc [P];
  logic [WA-1:0]         widx;
  logic                  cfg_hit;

  assign widx    = WA'(nf) * WA'(FS) + WA'(sf);
  assign cfg_hit = cfg_we && (cfg_layer == 4'(LAYER_ID));

  for (genvar pe = 0; pe < P; pe++) begin : g_pe
    mvtu_pe #(
      .S(S), .IN_BITS(IN_BITS), .WDEPTH(WDEPTH), .TDEPTH(FN), .T(T)
    ) u_pe (
      .clk        (clk),
      .en_i       (en),
      .rd_i       (issue),
      .widx_i     (widx),
      .tidx_i     (TA'(nf)),
      .s1_valid_i (s1_valid),
      .s1_first_i (s1_first),
      .s1_x_i     (s1_x),
      .acc_o      (pe_acc[pe]),
      .bit_o      (pe_bit[pe]),
      .wr_w_i     (cfg_hit && cfg_target == CFG_WEIGHT && cfg_pe == CFG_PE_W'(pe)),
      .wr_w_addr_i(WA'(cfg_addr)),
      .wr_w_data_i(cfg_data[S-1:0]),
      .wr_t_i     (cfg_hit && cfg_target == CFG_THRESH && cfg_pe == CFG_PE_W'(pe)),
      .wr_t_addr_i(TA'(cfg_addr)),
      .wr_t_data_i(cfg_data[T-1:0])
    );
  end

  // ---------------------------------------------------------------- output buffer
  localparam int RW = THRESH ? 1 : T;   // result bits per neuron
  logic [OUT_W-1:0] obuf, obuf_next;
  logic [P*RW-1:0]  fold_res;

  always_comb begin
    for (int pe = 0; pe < P; pe++) begin
      if (THRESH) fold_res[pe*RW +: RW] = RW'(pe_bit[pe]);
      else        fold_res[pe*RW +: RW] = RW'(pe_acc[pe]);
    end
    obuf_next = obuf;
    obuf_next[s1_nf*P*RW +: P*RW] = fold_res;
  end

  always_ff @(posedge clk) begin
    if (en && s1_valid && s1_last) obuf <= obuf_next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (en && s1_valid && s1_vlast) begin
        out_valid <= 1'b1;
        out_data  <= obuf_next;
      end
    end
  end

  // Stream rule: an offered output beat stays unchanged until taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

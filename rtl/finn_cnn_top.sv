// finn_cnn_top: streaming BNN accelerator for the padded CIFAR-10 network
// cnn(1) (1.23 billion binary operations per frame).
//
// One compute engine per layer, all parameters held on chip, engines linked
// by on-chip streams in which each engine produces data in the order the next
// consumes it, so every engine starts as soon as its predecessor produces:
//
//   image 32x32x3 (8-bit) -> conv0 3->C1 -> conv1 C1->C1 -> pool
//     -> conv2 C1->C2 -> conv3 C2->C2 -> pool
//     -> conv4 C2->C3 -> conv5 C3->C3 -> pool
//     -> fc6 (D3*D3*C3 -> FC) -> fc7 (FC -> FC) -> fc8 (FC -> CLASSES, no threshold)
//     -> label
//
// Every convolution is 3x3 with one pixel of -1 padding on each border,
// produced by the SWU while the feature map streams in, so the datapath stays
// one bit wide. conv0 takes non-binary pixels (multiply-add with +-1 weights),
// fc8 outputs raw scores, label_select picks the largest. A two-entry
// stream_fifo sits behind each engine.
//
// Default sizes: C1/C2/C3 = 128/256/512 filters and FC = 1024 neurons
// (BinaryNet's CIFAR-10 network, scale 1). The per-layer PE counts P* and
// SIMD widths S* are this design's choice: layers 1..8 need 8192 cycles per
// frame (conv: Y/S * X/P * D^2, fc: Y/S * X/P). conv0 folds to 8 cycles per
// vector, but its SWU delivers a 3x3 window in 9 beats, so it takes
// 9 * 32^2 = 9216 cycles: the initiation interval is 9216 cycles, 13.6 kFPS
// at 125 MHz, above the 12 kFPS target of the paper.
//
// Interface: the image enters as one pixel per beat in raster order
// (channel k at bits k*IN_BITS), labels and class scores leave one beat per
// frame; both are valid/ready streams. Weights and thresholds are loaded
// before use through the cfg_* write port: cfg_layer selects the engine
// (0..8), cfg_target weight or threshold memory, cfg_pe the PE, cfg_addr the
// word (see mvtu for the layout). Reset is asynchronous, active low; it does
// not clear the parameter memories.
module finn_cnn_top
  import bnn_pkg::*;
#(
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
  parameter int P8 = 1,  parameter int S8 = 8,
  parameter int FIFO_DEPTH = 2,
  parameter int CFG_PE_W   = 8,
  parameter int CFG_ADDR_W = 16,
  // derived sizes
  localparam int D0 = IMG_DIM,
  localparam int D1 = D0 / 2,
  localparam int D2 = D1 / 2,
  localparam int D3 = D2 / 2,
  localparam int Y6 = D3 * D3 * C3,
  localparam int T0 = acc_w(IN_BITS, 9 * IN_CH),
  localparam int T1 = acc_w(1, 9 * C1),
  localparam int T2 = acc_w(1, 9 * C1),
  localparam int T3 = acc_w(1, 9 * C2),
  localparam int T4 = acc_w(1, 9 * C2),
  localparam int T5 = acc_w(1, 9 * C3),
  localparam int T6 = acc_w(1, Y6),
  localparam int T7 = acc_w(1, FC),
  localparam int T8 = acc_w(1, FC),
  localparam int CFG_W = imax(imax(imax(imax(S0, S1), imax(S2, S3)), imax(imax(S4, S5), imax(S6, S7))),
                              imax(S8, imax(imax(imax(T0, T1), imax(T2, T3)), imax(imax(T4, T5), imax(T6, T7))))),
  localparam int LW = idx_w(CLASSES)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // images
  input  logic                       img_valid,
  output logic                       img_ready,
  input  logic [IN_CH*IN_BITS-1:0]   img_data,
  // classifications
  output logic                       cls_valid,
  input  logic                       cls_ready,
  output logic [LW-1:0]              cls_label,
  output logic [CLASSES*T8-1:0]      cls_scores,
  // parameter loading
  input  logic                       cfg_we,
  input  logic [3:0]                 cfg_layer,
  input  logic                       cfg_thresh,    // 0: weight, 1: threshold
  input  logic [CFG_PE_W-1:0]        cfg_pe,
  input  logic [CFG_ADDR_W-1:0]      cfg_addr,
  input  logic [CFG_W-1:0]           cfg_data,
  // per-layer observation: padding word written (conv) / PE pipeline stalled
  output logic [5:0]                 pad_write,
  output logic [8:0]                 stall
);

  cfg_target_e cfg_target;
  assign cfg_target = cfg_thresh ? CFG_THRESH : CFG_WEIGHT;

  // ------------------------------------------------------------ stream nets
  // a_*: engine output, b_*: FIFO output
  logic a0_v, a0_r, b0_v, b0_r;  logic [C1-1:0] a0_d, b0_d;
  logic a1_v, a1_r, b1_v, b1_r;  logic [C1-1:0] a1_d, b1_d;
  logic q1_v, q1_r, r1_v, r1_r;  logic [C1-1:0] q1_d, r1_d;
  logic a2_v, a2_r, b2_v, b2_r;  logic [C2-1:0] a2_d, b2_d;
  logic a3_v, a3_r, b3_v, b3_r;  logic [C2-1:0] a3_d, b3_d;
  logic q2_v, q2_r, r2_v, r2_r;  logic [C2-1:0] q2_d, r2_d;
  logic a4_v, a4_r, b4_v, b4_r;  logic [C3-1:0] a4_d, b4_d;
  logic a5_v, a5_r, b5_v, b5_r;  logic [C3-1:0] a5_d, b5_d;
  logic q3_v, q3_r, r3_v, r3_r;  logic [C3-1:0] q3_d, r3_d;
  logic a6_v, a6_r, b6_v, b6_r;  logic [FC-1:0] a6_d, b6_d;
  logic a7_v, a7_r, b7_v, b7_r;  logic [FC-1:0] a7_d, b7_d;
  logic a8_v, a8_r;              logic [CLASSES*T8-1:0] a8_d;

  // ------------------------------------------------------------ conv group 1
  conv_layer #(.IFM_DIM(D0), .CIN(IN_CH), .IN_BITS(IN_BITS), .COUT(C1), .P(P0), .S(S0),
               .LAYER_ID(0), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_conv0 (.clk, .rst_n, .in_valid(img_valid), .in_ready(img_ready), .in_data(img_data),
           .out_valid(a0_v), .out_ready(a0_r), .out_data(a0_d),
           .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data,
           .pad_write_o(pad_write[0]), .stall_o(stall[0]));
  stream_fifo #(.W(C1), .DEPTH(FIFO_DEPTH)) u_f0 (.clk, .rst_n,
    .in_valid(a0_v), .in_ready(a0_r), .in_data(a0_d), .out_valid(b0_v), .out_ready(b0_r), .out_data(b0_d));

  conv_layer #(.IFM_DIM(D0), .CIN(C1), .IN_BITS(1), .COUT(C1), .P(P1), .S(S1),
               .LAYER_ID(1), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_conv1 (.clk, .rst_n, .in_valid(b0_v), .in_ready(b0_r), .in_data(b0_d),
           .out_valid(a1_v), .out_ready(a1_r), .out_data(a1_d),
           .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data,
           .pad_write_o(pad_write[1]), .stall_o(stall[1]));
  stream_fifo #(.W(C1), .DEPTH(FIFO_DEPTH)) u_f1 (.clk, .rst_n,
    .in_valid(a1_v), .in_ready(a1_r), .in_data(a1_d), .out_valid(b1_v), .out_ready(b1_r), .out_data(b1_d));

  pool_or #(.DIM(D0), .C(C1)) u_pool1 (.clk, .rst_n,
    .in_valid(b1_v), .in_ready(b1_r), .in_data(b1_d), .out_valid(q1_v), .out_ready(q1_r), .out_data(q1_d));
  stream_fifo #(.W(C1), .DEPTH(FIFO_DEPTH)) u_fp1 (.clk, .rst_n,
    .in_valid(q1_v), .in_ready(q1_r), .in_data(q1_d), .out_valid(r1_v), .out_ready(r1_r), .out_data(r1_d));

  // ------------------------------------------------------------ conv group 2
  conv_layer #(.IFM_DIM(D1), .CIN(C1), .IN_BITS(1), .COUT(C2), .P(P2), .S(S2),
               .LAYER_ID(2), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_conv2 (.clk, .rst_n, .in_valid(r1_v), .in_ready(r1_r), .in_data(r1_d),
           .out_valid(a2_v), .out_ready(a2_r), .out_data(a2_d),
           .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data,
           .pad_write_o(pad_write[2]), .stall_o(stall[2]));
  stream_fifo #(.W(C2), .DEPTH(FIFO_DEPTH)) u_f2 (.clk, .rst_n,
    .in_valid(a2_v), .in_ready(a2_r), .in_data(a2_d), .out_valid(b2_v), .out_ready(b2_r), .out_data(b2_d));

  conv_layer #(.IFM_DIM(D1), .CIN(C2), .IN_BITS(1), .COUT(C2), .P(P3), .S(S3),
               .LAYER_ID(3), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_conv3 (.clk, .rst_n, .in_valid(b2_v), .in_ready(b2_r), .in_data(b2_d),
           .out_valid(a3_v), .out_ready(a3_r), .out_data(a3_d),
           .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data,
           .pad_write_o(pad_write[3]), .stall_o(stall[3]));
  stream_fifo #(.W(C2), .DEPTH(FIFO_DEPTH)) u_f3 (.clk, .rst_n,
    .in_valid(a3_v), .in_ready(a3_r), .in_data(a3_d), .out_valid(b3_v), .out_ready(b3_r), .out_data(b3_d));

  pool_or #(.DIM(D1), .C(C2)) u_pool2 (.clk, .rst_n,
    .in_valid(b3_v), .in_ready(b3_r), .in_data(b3_d), .out_valid(q2_v), .out_ready(q2_r), .out_data(q2_d));
  stream_fifo #(.W(C2), .DEPTH(FIFO_DEPTH)) u_fp2 (.clk, .rst_n,
    .in_valid(q2_v), .in_ready(q2_r), .in_data(q2_d), .out_valid(r2_v), .out_ready(r2_r), .out_data(r2_d));

  // ------------------------------------------------------------ conv group 3
  conv_layer #(.IFM_DIM(D2), .CIN(C2), .IN_BITS(1), .COUT(C3), .P(P4), .S(S4),
               .LAYER_ID(4), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_conv4 (.clk, .rst_n, .in_valid(r2_v), .in_ready(r2_r), .in_data(r2_d),
           .out_valid(a4_v), .out_ready(a4_r), .out_data(a4_d),
           .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data,
           .pad_write_o(pad_write[4]), .stall_o(stall[4]));
  stream_fifo #(.W(C3), .DEPTH(FIFO_DEPTH)) u_f4 (.clk, .rst_n,
    .in_valid(a4_v), .in_ready(a4_r), .in_data(a4_d), .out_valid(b4_v), .out_ready(b4_r), .out_data(b4_d));

  conv_layer #(.IFM_DIM(D2), .CIN(C3), .IN_BITS(1), .COUT(C3), .P(P5), .S(S5),
               .LAYER_ID(5), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_conv5 (.clk, .rst_n, .in_valid(b4_v), .in_ready(b4_r), .in_data(b4_d),
           .out_valid(a5_v), .out_ready(a5_r), .out_data(a5_d),
           .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data,
           .pad_write_o(pad_write[5]), .stall_o(stall[5]));
  stream_fifo #(.W(C3), .DEPTH(FIFO_DEPTH)) u_f5 (.clk, .rst_n,
    .in_valid(a5_v), .in_ready(a5_r), .in_data(a5_d), .out_valid(b5_v), .out_ready(b5_r), .out_data(b5_d));

  pool_or #(.DIM(D2), .C(C3)) u_pool3 (.clk, .rst_n,
    .in_valid(b5_v), .in_ready(b5_r), .in_data(b5_d), .out_valid(q3_v), .out_ready(q3_r), .out_data(q3_d));
  stream_fifo #(.W(C3), .DEPTH(FIFO_DEPTH)) u_fp3 (.clk, .rst_n,
    .in_valid(q3_v), .in_ready(q3_r), .in_data(q3_d), .out_valid(r3_v), .out_ready(r3_r), .out_data(r3_d));

  // ------------------------------------------------------------ fully connected
  mvtu #(.IN_BITS(1), .IN_BEAT_W(C3), .IN_BEATS(D3 * D3), .X(FC), .P(P6), .S(S6), .THRESH(1'b1),
         .LAYER_ID(6), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_fc6 (.clk, .rst_n, .in_valid(r3_v), .in_ready(r3_r), .in_data(r3_d),
         .out_valid(a6_v), .out_ready(a6_r), .out_data(a6_d),
         .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data, .stall_o(stall[6]));
  stream_fifo #(.W(FC), .DEPTH(FIFO_DEPTH)) u_f6 (.clk, .rst_n,
    .in_valid(a6_v), .in_ready(a6_r), .in_data(a6_d), .out_valid(b6_v), .out_ready(b6_r), .out_data(b6_d));

  mvtu #(.IN_BITS(1), .IN_BEAT_W(FC), .IN_BEATS(1), .X(FC), .P(P7), .S(S7), .THRESH(1'b1),
         .LAYER_ID(7), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_fc7 (.clk, .rst_n, .in_valid(b6_v), .in_ready(b6_r), .in_data(b6_d),
         .out_valid(a7_v), .out_ready(a7_r), .out_data(a7_d),
         .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data, .stall_o(stall[7]));
  stream_fifo #(.W(FC), .DEPTH(FIFO_DEPTH)) u_f7 (.clk, .rst_n,
    .in_valid(a7_v), .in_ready(a7_r), .in_data(a7_d), .out_valid(b7_v), .out_ready(b7_r), .out_data(b7_d));

  mvtu #(.IN_BITS(1), .IN_BEAT_W(FC), .IN_BEATS(1), .X(CLASSES), .P(P8), .S(S8), .THRESH(1'b0),
         .LAYER_ID(8), .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W))
  u_fc8 (.clk, .rst_n, .in_valid(b7_v), .in_ready(b7_r), .in_data(b7_d),
         .out_valid(a8_v), .out_ready(a8_r), .out_data(a8_d),
         .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data, .stall_o(stall[8]));

  label_select #(.CLASSES(CLASSES), .T(T8)) u_label (.clk, .rst_n,
    .in_valid(a8_v), .in_ready(a8_r), .in_scores(a8_d),
    .out_valid(cls_valid), .out_ready(cls_ready), .out_label(cls_label), .out_scores(cls_scores));

endmodule

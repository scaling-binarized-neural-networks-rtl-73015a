// conv_layer: one padded 3x3 convolution engine = SWU + MVTU.
//
// The convolution is lowered to a matrix-matrix product: the sliding window
// unit (swu_pad) streams, for every output pixel, the K*K window pixels of the
// -1-padded input map, and the MVTU multiplies each such image-matrix column
// (Y = K*K*CIN elements) by the COUT x Y filter matrix and thresholds the
// result. Output: one beat per output pixel, COUT activation bits (channel c
// at bit c), raster order, OFM_DIM = IFM_DIM (stride 1, "same" padding).
// Per frame the engine needs F^s * F^n * F^m cycles, F^m = IFM_DIM^2.
module conv_layer
  import bnn_pkg::*;
#(
  parameter int IFM_DIM    = 32,
  parameter int CIN        = 128,
  parameter int IN_BITS    = 1,
  parameter int COUT       = 128,
  parameter int P          = 64,
  parameter int S          = 288,
  parameter int K          = 3,
  parameter int PAD        = 1,
  parameter int LAYER_ID   = 1,
  parameter int CFG_W      = 288,
  parameter int CFG_PE_W   = 8,
  parameter int CFG_ADDR_W = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [CIN*IN_BITS-1:0]  in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [COUT-1:0]         out_data,
  input  logic                    cfg_we,
  input  logic [3:0]              cfg_layer,
  input  cfg_target_e             cfg_target,
  input  logic [CFG_PE_W-1:0]     cfg_pe,
  input  logic [CFG_ADDR_W-1:0]   cfg_addr,
  input  logic [CFG_W-1:0]        cfg_data,
  output logic                    pad_write_o,
  output logic                    stall_o
);

  localparam int BW = CIN * IN_BITS;

  logic          w_valid, w_ready;
  logic [BW-1:0] w_data;

  swu_pad #(
    .IFM_DIM(IFM_DIM), .C(CIN), .IN_BITS(IN_BITS), .K(K), .PAD(PAD)
  ) u_swu (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data),
    .pad_write_o
  );

  mvtu #(
    .IN_BITS(IN_BITS), .IN_BEAT_W(BW), .IN_BEATS(K * K), .X(COUT), .P(P), .S(S),
    .THRESH(1'b1), .LAYER_ID(LAYER_ID),
    .CFG_W(CFG_W), .CFG_PE_W(CFG_PE_W), .CFG_ADDR_W(CFG_ADDR_W)
  ) u_mvtu (
    .clk, .rst_n,
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid, .out_ready, .out_data,
    .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data,
    .stall_o
  );

endmodule

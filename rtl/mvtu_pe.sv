// mvtu_pe: one processing element of the Matrix-Vector-Threshold Unit, a
// hardware neuron that handles S synapses per clock cycle.
//
// Datapath (as drawn for the MVTU in the paper): the weight memory is read at
// the fold index and its S bits are XNORed with the S-element input slice;
// the popcount of the result is added to the accumulator, and after the last
// fold the sum is compared (>=) against the neuron's threshold, read from the
// threshold memory, giving one output bit. For a non-binary input
// (IN_BITS > 1, used by the first layer) the XNOR-popcount is replaced by a
// multiply-add with +-1 weights: a set weight bit adds the element, an unset
// one subtracts it.
//
// Timing: stage 0 presents rd_i/widx_i/tidx_i; the memory words are
// registered (stage 1, a block-RAM read). In stage 1 the controller presents
// s1_valid_i/s1_first_i/s1_x_i, acc_o and bit_o are combinational and the
// accumulator is updated at the clock edge. en_i freezes both stages.
// The controller (mvtu) owns the shared control pipeline, so every PE gets
// the same control signals, as in the paper; the pipeline split, the signed
// threshold format and the configuration write port are this design's own.
module mvtu_pe
  import bnn_pkg::*;
#(
  parameter int S       = 288,          // SIMD lanes
  parameter int IN_BITS = 1,            // bits per input element
  parameter int WDEPTH  = 64,           // weight words = F^s * F^n
  parameter int TDEPTH  = 8,            // thresholds = F^n
  parameter int T       = 14,           // accumulator / threshold width
  localparam int WA     = idx_w(WDEPTH),
  localparam int TA     = idx_w(TDEPTH)
) (
  input  logic                    clk,
  input  logic                    en_i,
  // stage 0: memory reads
  input  logic                    rd_i,
  input  logic [WA-1:0]           widx_i,
  input  logic [TA-1:0]           tidx_i,
  // stage 1: accumulate / compare
  input  logic                    s1_valid_i,
  input  logic                    s1_first_i,
  input  logic [S*IN_BITS-1:0]    s1_x_i,
  output logic signed [T-1:0]     acc_o,
  output logic                    bit_o,
  // parameter memory writes
  input  logic                    wr_w_i,
  input  logic [WA-1:0]           wr_w_addr_i,
  input  logic [S-1:0]            wr_w_data_i,
  input  logic                    wr_t_i,
  input  logic [TA-1:0]           wr_t_addr_i,
  input  logic signed [T-1:0]     wr_t_data_i
);

  logic [S-1:0]        wmem [WDEPTH];
  logic signed [T-1:0] tmem [TDEPTH];

  logic [S-1:0]        s1_w;
  logic signed [T-1:0] s1_t;
  logic signed [T-1:0] acc_q;

  // Weight memory: one write port (configuration), one registered read port.
  always_ff @(posedge clk) begin
    if (wr_w_i) wmem[wr_w_addr_i] <= wr_w_data_i;
    if (en_i && rd_i) s1_w <= wmem[widx_i];
  end

  // Threshold memory.
  always_ff @(posedge clk) begin
    if (wr_t_i) tmem[wr_t_addr_i] <= wr_t_data_i;
    if (en_i && rd_i) s1_t <= tmem[tidx_i];
  end

  // XNOR + popcount, or +-1 multiply-add for multi-bit input.
  logic signed [T-1:0] fold_sum;
  if (IN_BITS == 1) begin : g_xnor
    assign fold_sum = T'($countones(~(s1_w ^ s1_x_i)));
  end else begin : g_madd
    logic signed [T-1:0] term [S];
    for (genvar i = 0; i < S; i++) begin : g_lane
      logic signed [IN_BITS-1:0] xe;
      assign xe      = s1_x_i[i*IN_BITS +: IN_BITS];
      assign term[i] = s1_w[i] ? T'(xe) : -T'(xe);
    end
    always_comb begin
      fold_sum = '0;
      for (int i = 0; i < S; i++) fold_sum = fold_sum + term[i];
    end
  end

  assign acc_o = (s1_first_i ? T'(0) : acc_q) + fold_sum;
  assign bit_o = (acc_o >= s1_t);

  always_ff @(posedge clk) begin
    if (en_i && s1_valid_i) acc_q <= acc_o;
  end

endmodule

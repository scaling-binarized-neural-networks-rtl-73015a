// label_select: turns the class scores of the last layer into a label.
//
// The last layer of the network has no thresholding, so it delivers one
// signed score of T bits per class (class k at bits k*T). This unit takes the
// index of the largest score (the lowest index on a tie) and offers it,
// together with the scores, on a registered valid/ready output stream. The
// paper only states that predicted labels are returned to the host; taking
// the arg-max on chip is this design's choice.
module label_select
  import bnn_pkg::*;
#(
  parameter int CLASSES = 10,
  parameter int T       = 12,
  localparam int LW     = idx_w(CLASSES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [CLASSES*T-1:0] in_scores,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [LW-1:0]        out_label,
  output logic [CLASSES*T-1:0] out_scores
);

  logic [LW-1:0]       best;
  logic signed [T-1:0] best_v;

  always_comb begin
    best   = '0;
    best_v = signed'(in_scores[T-1:0]);
    for (int k = 1; k < CLASSES; k++) begin
      if (signed'(in_scores[k*T +: T]) > best_v) begin
        best   = LW'(k);
        best_v = signed'(in_scores[k*T +: T]);
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_label  <= '0;
      out_scores <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_label  <= best;
        out_scores <= in_scores;
      end
    end
  end

endmodule

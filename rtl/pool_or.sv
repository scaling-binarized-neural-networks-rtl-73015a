// pool_or: 2x2, stride-2 max pooling of binarized feature maps.
//
// With activations in {-1, +1} coded as bits {0, 1}, the maximum of four
// values is their Boolean OR, so pooling after the activation (as the paper
// does) needs no comparators. Input: a DIM x DIM map, one pixel (C channel
// bits) per beat in raster order. Output: the DIM/2 x DIM/2 pooled map in
// raster order, one beat per 2x2 block, emitted when the block's last pixel
// (odd row, odd column) arrives.
//
// Structure (this design's choice): a line buffer of DIM/2 partial ORs holds
// the results of an even row; a register holds the partial OR of the current
// pair of columns. Output is a registered valid/ready stream; the input
// is stalled only when a finished block meets a full output register.
module pool_or
  import bnn_pkg::*;
#(
  parameter int DIM = 32,
  parameter int C   = 128
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [C-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [C-1:0] out_data
);

  localparam int XW = idx_w(DIM);
  localparam int HW = idx_w(DIM / 2);

  initial assert (DIM % 2 == 0) else $error("DIM must be even");

  logic [C-1:0]  line [DIM / 2];
  logic [C-1:0]  hold;
  logic [XW-1:0] px, py;
  logic          emit, take;
  logic [HW-1:0] lx;

  assign lx       = HW'(px >> 1);
  assign emit     = py[0] && px[0];
  assign in_ready = !(emit && out_valid && !out_ready);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (take) begin
      if (!py[0]) begin
        if (!px[0]) hold     <= in_data;
        else        line[lx] <= hold | in_data;
      end else if (!px[0]) begin
        hold <= in_data | line[lx];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      px <= '0; py <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (emit) begin
          out_valid <= 1'b1;
          out_data  <= hold | in_data;
        end
        if (px == XW'(DIM - 1)) begin
          px <= '0;
          py <= (py == XW'(DIM - 1)) ? '0 : py + 1'b1;
        end else begin
          px <= px + 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

// stream_fifo: stream buffer between two compute engines.
//
// A first-in first-out queue of DEPTH words of W bits with valid/ready on both
// sides. A word written is visible at the output the next cycle; a full FIFO
// still accepts a word in a cycle in which one is read. The paper names FIFOs
// as the stream buffers between layers; the depth is this design's choice.
module stream_fifo
  import bnn_pkg::*;
#(
  parameter int W     = 128,
  parameter int DEPTH = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  localparam int AW = idx_w(DEPTH);
  localparam int CW = $clog2(DEPTH + 1);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rp, wp;
  logic [CW-1:0] cnt;
  logic          push, pop;

  assign out_valid = (cnt != '0);
  assign out_data  = mem[rp];
  assign pop       = out_valid && out_ready;
  assign in_ready  = (cnt != CW'(DEPTH)) || out_ready;
  assign push      = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + CW'(push) - CW'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    cnt <= CW'(DEPTH));

endmodule

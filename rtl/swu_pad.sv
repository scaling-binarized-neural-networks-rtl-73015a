// swu_pad: Sliding Window Unit with streaming padding.
//
// Turns a stream of feature-map pixels (raster order, one pixel of C
// channels of IN_BITS each per beat) into the image matrix of a KxK, stride-1
// convolution with PAD pixels of padding on every border. For each output
// pixel (raster order) it emits K*K beats, the window pixels in order
// (ky, kx), each beat holding all C channels: the vector elements are thus
// interleaved channel-innermost, as the next MVTU consumes them.
//
// How it works (following the paper): the pixels are written, in the order
// they arrive, into one wide IFM memory (one word = one pixel), with
// sequential write addresses over the *padded* map. A multiplexer picks the
// data written: when the write address lies in the padding region the
// padding value is written instead of a stream element, and no input is
// consumed. A read address generator then reads out the window pixels.
// The padding value is -1: bit 0 for binary data, all ones (integer -1)
// for multi-bit data.
//
// This design's choices: the IFM memory holds NB = K+1 padded rows used as
// a circular buffer, so that the next row is written while the K rows of
// the current window row are read; an output row is read once its K rows
// are complete, and its oldest row is then freed (all K at a frame's last
// output row). The read port is registered (block RAM), so out_data follows
// a read by one cycle; out_valid/out_ready is a valid/ready stream.
module swu_pad
  import bnn_pkg::*;
#(
  parameter int IFM_DIM = 32,       // input feature map is IFM_DIM x IFM_DIM
  parameter int C       = 128,      // channels
  parameter int IN_BITS = 1,        // bits per channel value
  parameter int K       = 3,        // kernel size
  parameter int PAD     = 1,        // padding pixels on each border
  localparam int BW      = C * IN_BITS,
  localparam int PD      = IFM_DIM + 2 * PAD,   // padded dimension
  localparam int OD      = PD - K + 1,          // output dimension
  localparam int NB      = K + 1                // buffered rows
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [BW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [BW-1:0] out_data,
  output logic          pad_write_o     // a padding word is written this cycle
);

  localparam int DEPTH = NB * PD;
  localparam int AW    = idx_w(DEPTH);
  localparam int CW    = idx_w(PD);
  localparam int RW    = idx_w(NB);
  localparam int KW    = idx_w(K);
  localparam int OW    = idx_w(OD);
  localparam int NW    = $clog2(NB + 1);

  // Padding value: -1 in every channel.
  localparam logic [BW-1:0] PAD_WORD = (IN_BITS == 1) ? '0 : '1;

  logic [BW-1:0] mem [DEPTH];

  // ---------------------------------------------------------------- writer
  logic [CW-1:0] wr_r, wr_c;
  logic [RW-1:0] wslot;
  logic [NW-1:0] rows;          // complete rows held in the buffer
  logic          in_pad, wr_ok, wr_en, wr_row_done;
  logic [BW-1:0] wr_data;
  logic [AW-1:0] waddr;

  assign in_pad = (wr_r < CW'(PAD)) || (wr_r >= CW'(PAD + IFM_DIM)) ||
                  (wr_c < CW'(PAD)) || (wr_c >= CW'(PAD + IFM_DIM));
  assign wr_ok    = (rows < NW'(NB));
  assign in_ready = wr_ok && !in_pad;
  assign wr_en    = wr_ok && (in_pad || in_valid);
  assign wr_data  = in_pad ? PAD_WORD : in_data;     // the padding multiplexer
  assign waddr    = AW'(wslot) * AW'(PD) + AW'(wr_c);
  assign wr_row_done = wr_en && (wr_c == CW'(PD - 1));
  assign pad_write_o = wr_en && in_pad;

  // ---------------------------------------------------------------- reader
  logic [OW-1:0] oy, ox;
  logic [KW-1:0] ky, kx;
  logic [RW-1:0] rslot, rrow;
  logic          rd_ok, rd_en, advance, rd_row_done;
  logic [NW-1:0] freed;
  logic [AW-1:0] raddr;

  assign rd_ok   = (rows >= NW'(K));
  assign advance = !out_valid || out_ready;
  assign rd_en   = advance && rd_ok;
  // slot of window row ky, modulo NB
  always_comb begin
    int sum;
    sum  = int'(rslot) + int'(ky);
    rrow = RW'((sum >= NB) ? sum - NB : sum);
  end
  assign raddr = AW'(rrow) * AW'(PD) + AW'(ox) + AW'(kx);
  assign rd_row_done = rd_en && (ky == KW'(K - 1)) && (kx == KW'(K - 1)) && (ox == OW'(OD - 1));
  assign freed = !rd_row_done ? '0 : (oy == OW'(OD - 1)) ? NW'(K) : NW'(1);

  // memory: one write port, one registered read port
  always_ff @(posedge clk) begin
    if (wr_en) mem[waddr] <= wr_data;
    if (rd_en) out_data <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_r <= '0; wr_c <= '0; wslot <= '0;
      rows <= '0;
      oy <= '0; ox <= '0; ky <= '0; kx <= '0; rslot <= '0;
      out_valid <= 1'b0;
    end else begin
      rows <= rows + NW'(wr_row_done) - freed;
      // writer position over the padded map
      if (wr_en) begin
        if (wr_c == CW'(PD - 1)) begin
          wr_c  <= '0;
          wslot <= (wslot == RW'(NB - 1)) ? '0 : wslot + 1'b1;
          wr_r  <= (wr_r == CW'(PD - 1)) ? '0 : wr_r + 1'b1;
        end else begin
          wr_c <= wr_c + 1'b1;
        end
      end
      // reader position
      if (advance) out_valid <= rd_ok;
      if (rd_en) begin
        if (kx != KW'(K - 1)) kx <= kx + 1'b1;
        else begin
          kx <= '0;
          if (ky != KW'(K - 1)) ky <= ky + 1'b1;
          else begin
            ky <= '0;
            if (ox != OW'(OD - 1)) ox <= ox + 1'b1;
            else begin
              ox <= '0;
              oy <= (oy == OW'(OD - 1)) ? '0 : oy + 1'b1;
              begin
                int ns;
                ns = int'(rslot) + int'(freed);
                rslot <= RW'((ns >= NB) ? ns - NB : ns);
              end
            end
          end
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

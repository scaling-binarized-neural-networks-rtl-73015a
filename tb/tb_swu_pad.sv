// tb_swu_pad: self-checking test of the sliding window unit with padding.
// Unit A: 4x4 map, 2 channels of 4 bits (padding value -1 = 4'hF).
// Unit B: 5x5 map, 3 binary channels (padding value -1 = bit 0).
// Three frames of random pixels are streamed in back to back with random
// gaps and random output back-pressure; the window stream is compared beat by
// beat with windows cut here from a -1-padded copy of each frame, and the
// number of padding words written is checked against (D+2)^2 - D^2 per frame.
module tb_swu_pad;
  localparam int NF = 3;
  localparam int AD = 4, AC = 2, AB = 4, ABW = AC * AB;
  localparam int BD = 5, BC = 3, BBW = BC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_iv, a_ir, a_ov, a_or, a_pw; logic [ABW-1:0] a_id, a_od;
  logic b_iv, b_ir, b_ov, b_or, b_pw; logic [BBW-1:0] b_id, b_od;

  swu_pad #(.IFM_DIM(AD), .C(AC), .IN_BITS(AB)) dut_a (.clk, .rst_n,
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id), .out_valid(a_ov), .out_ready(a_or), .out_data(a_od),
    .pad_write_o(a_pw));
  swu_pad #(.IFM_DIM(BD), .C(BC), .IN_BITS(1)) dut_b (.clk, .rst_n,
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id), .out_valid(b_ov), .out_ready(b_or), .out_data(b_od),
    .pad_write_o(b_pw));

  logic [ABW-1:0] apix [NF][AD][AD];
  logic [BBW-1:0] bpix [NF][BD][BD];
  logic [ABW-1:0] aexp [$];
  logic [BBW-1:0] bexp [$];
  int a_pads = 0, b_pads = 0, a_n = 0, b_n = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_iv = 0; b_iv = 0; a_id = 0; b_id = 0;
    for (int f = 0; f < NF; f++) begin
      for (int y = 0; y < AD; y++) for (int x = 0; x < AD; x++) apix[f][y][x] = ABW'($urandom);
      for (int y = 0; y < BD; y++) for (int x = 0; x < BD; x++) bpix[f][y][x] = BBW'($urandom);
      // expected windows
      for (int oy = 0; oy < AD; oy++) for (int ox = 0; ox < AD; ox++)
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int py, px;
          py = oy + ky - 1; px = ox + kx - 1;
          aexp.push_back((py < 0 || py >= AD || px < 0 || px >= AD) ? '1 : apix[f][py][px]);
        end
      for (int oy = 0; oy < BD; oy++) for (int ox = 0; ox < BD; ox++)
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int py, px;
          py = oy + ky - 1; px = ox + kx - 1;
          bexp.push_back((py < 0 || py >= BD || px < 0 || px >= BD) ? '0 : bpix[f][py][px]);
        end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      for (int f = 0; f < NF; f++) for (int y = 0; y < AD; y++) for (int x = 0; x < AD; x++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin a_iv = 0; @(negedge clk); end
        a_iv = 1; a_id = apix[f][y][x];
        @(posedge clk); while (!a_ir) @(posedge clk);
        #1 a_iv = 0;
      end
      for (int f = 0; f < NF; f++) for (int y = 0; y < BD; y++) for (int x = 0; x < BD; x++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin b_iv = 0; @(negedge clk); end
        b_iv = 1; b_id = bpix[f][y][x];
        @(posedge clk); while (!b_ir) @(posedge clk);
        #1 b_iv = 0;
      end
    join
  end

  always @(negedge clk) begin
    a_or <= ($urandom_range(0, 2) != 0);
    b_or <= ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (a_pw) a_pads++;
      if (b_pw) b_pads++;
      if (a_ov && a_or) begin
        checks++;
        if (aexp.size() == 0) begin failures++; $display("A: extra beat"); end
        else begin
          logic [ABW-1:0] e;
          e = aexp.pop_front();
          if (a_od !== e) begin failures++; $display("A beat %0d: got %h exp %h", a_n, a_od, e); end
        end
        a_n++;
      end
      if (b_ov && b_or) begin
        checks++;
        if (bexp.size() == 0) begin failures++; $display("B: extra beat"); end
        else begin
          logic [BBW-1:0] e;
          e = bexp.pop_front();
          if (b_od !== e) begin failures++; $display("B beat %0d: got %h exp %h", b_n, b_od, e); end
        end
        b_n++;
      end
      if (a_n == NF * AD * AD * 9 && b_n == NF * BD * BD * 9) begin
        repeat (20) @(posedge clk);
        checks++;
        // pad words of the next frame may already be written: count whole frames
        if (a_pads < NF * ((AD+2)*(AD+2) - AD*AD) || a_pads > (NF+1) * ((AD+2)*(AD+2) - AD*AD)) begin
          failures++; $display("A pad writes %0d", a_pads);
        end
        checks++;
        if (b_pads < NF * ((BD+2)*(BD+2) - BD*BD) || b_pads > (NF+1) * ((BD+2)*(BD+2) - BD*BD)) begin
          failures++; $display("B pad writes %0d", b_pads);
        end
        checks++;
        if (a_ov || b_ov) begin failures++; $display("extra output beats"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule

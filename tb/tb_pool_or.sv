// tb_pool_or: self-checking test of the OR max-pooling unit.
// An 6x6 map of 5 binary channels is streamed in for three frames with
// random gaps and random output back-pressure. Each pooled pixel is compared
// with the OR (= max over {-1,+1}) of its 2x2 block computed here, and the
// number of output beats must be (6/2)^2 per frame.
module tb_pool_or;
  localparam int D = 6, C = 5, NF = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, ordy; logic [C-1:0] id, od;
  pool_or #(.DIM(D), .C(C)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  logic [C-1:0] pix [NF][D][D];
  logic [C-1:0] expq [$];
  int n_out = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; id = 0;
    for (int f = 0; f < NF; f++) begin
      for (int y = 0; y < D; y++) for (int x = 0; x < D; x++) pix[f][y][x] = C'($urandom);
      for (int y = 0; y < D; y += 2) for (int x = 0; x < D; x += 2)
        expq.push_back(pix[f][y][x] | pix[f][y][x+1] | pix[f][y+1][x] | pix[f][y+1][x+1]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) for (int y = 0; y < D; y++) for (int x = 0; x < D; x++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin iv = 0; @(negedge clk); end
      iv = 1; id = pix[f][y][x];
      @(posedge clk); while (!ir) @(posedge clk);
      #1 iv = 0;
    end
  end

  always @(negedge clk) ordy <= ($urandom_range(0, 3) == 0);

  always @(posedge clk) begin
    if (rst_n && ov && ordy) begin
      logic [C-1:0] e;
      checks++;
      e = expq.pop_front();
      if (od !== e) begin failures++; $display("pixel %0d: got %b exp %b", n_out, od, e); end
      n_out++;
      if (n_out == NF * (D/2) * (D/2)) begin
        repeat (30) @(posedge clk);
        checks++;
        if (ov) begin failures++; $display("extra output"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule

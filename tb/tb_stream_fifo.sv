// tb_stream_fifo: self-checking test of the stream FIFO.
// 300 random words pass through a 3-entry FIFO with random gaps on the
// write side and random back-pressure on the read side; the words must come
// out complete and in order, the FIFO must fill up at least once, and a
// full FIFO must accept a write in the same cycle as a read.
module tb_stream_fifo;
  localparam int W = 12, DEPTH = 3, N = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, ordy; logic [W-1:0] id, od;
  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  logic [W-1:0] words [N];
  int n_in = 0, n_out = 0, full_seen = 0, full_pass = 0, occ = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) words[i] = W'($urandom);
    iv = 0; id = 0; ordy = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
  end

  always @(negedge clk) if (rst_n) begin
    iv   <= (n_in < N) && ($urandom_range(0, 4) != 0);
    id   <= words[(n_in < N) ? n_in : 0];
    ordy <= ($urandom_range(0, 2) == 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (occ == DEPTH) begin
      full_seen++;
      if (iv && ir) full_pass++;
      checks++;
      if (ir != ordy) begin failures++; $display("full FIFO: in_ready %b with out_ready %b", ir, ordy); end
    end
    if (iv && ir) n_in++;
    if (ov && ordy) begin
      checks++;
      if (od !== words[n_out]) begin failures++; $display("word %0d: got %h exp %h", n_out, od, words[n_out]); end
      n_out++;
    end
    occ = occ + ((iv && ir) ? 1 : 0) - ((ov && ordy) ? 1 : 0);
    if (n_out == N) begin
      checks++;
      if (full_seen == 0 || full_pass == 0) begin failures++; $display("FIFO never full/passed when full"); end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule

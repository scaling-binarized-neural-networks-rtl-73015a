// tb_label_select: self-checking test of the arg-max label unit.
// Random signed score vectors (10 classes of 8 bits, with deliberate ties
// and negative values) are offered with random back-pressure; each label is
// compared with the index of the first maximum found here, and the scores
// must be passed through unchanged.
module tb_label_select;
  localparam int K = 10, T = 8, N = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, ordy; logic [K*T-1:0] sc, osc; logic [3:0] lab;
  label_select #(.CLASSES(K), .T(T)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_scores(sc),
    .out_valid(ov), .out_ready(ordy), .out_label(lab), .out_scores(osc));

  logic [K*T-1:0] vecs [N];
  int n_in = 0, n_out = 0;

  function automatic int ref_label(logic [K*T-1:0] v);
    int b = 0;
    for (int k = 1; k < K; k++) if ($signed(v[k*T +: T]) > $signed(v[b*T +: T])) b = k;
    return b;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++)
      for (int k = 0; k < K; k++)
        vecs[i][k*T +: T] = (i % 3 == 0) ? T'($urandom_range(0, 3)) - T'(2) : T'($urandom);
    iv = 0; sc = 0; ordy = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
  end

  always @(negedge clk) if (rst_n) begin
    iv   <= (n_in < N) && ($urandom_range(0, 3) != 0);
    sc   <= vecs[(n_in < N) ? n_in : 0];
    ordy <= ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (iv && ir) n_in++;
    if (ov && ordy) begin
      checks++;
      if (int'(lab) != ref_label(vecs[n_out]) || osc !== vecs[n_out]) begin
        failures++; $display("vector %0d: label %0d exp %0d", n_out, lab, ref_label(vecs[n_out]));
      end
      n_out++;
      if (n_out == N) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule

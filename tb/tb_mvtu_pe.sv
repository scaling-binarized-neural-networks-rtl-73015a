// tb_mvtu_pe: self-checking test of one processing element.
// Two PEs are tested: a binary one (XNOR-popcount, S=8) and a multi-bit one
// (4-bit signed inputs, +-1 multiply-add). Weights and thresholds are written
// at random through the write ports; then, for several neurons, the folds are
// run one at a time and the accumulator and the threshold bit are compared
// with sums computed here from the same random data. One fold takes one
// cycle after its memory read; en low must freeze the accumulator.
module tb_mvtu_pe;
  localparam int S = 8, WD = 8, TD = 2, T = 6;
  localparam int IB2 = 4, T2 = 9;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // binary PE
  logic en, rd, s1v, s1f;
  logic [2:0] widx; logic tidx;
  logic [S-1:0] x;
  logic signed [T-1:0] acc; logic b;
  logic ww, wt; logic [2:0] wwa; logic wta; logic [S-1:0] wwd; logic signed [T-1:0] wtd;
  // multi-bit PE
  logic [S*IB2-1:0] x2;
  logic signed [T2-1:0] acc2; logic b2;
  logic signed [T2-1:0] wtd2;

  mvtu_pe #(.S(S), .IN_BITS(1), .WDEPTH(WD), .TDEPTH(TD), .T(T)) dut (
    .clk, .en_i(en), .rd_i(rd), .widx_i(widx), .tidx_i(tidx),
    .s1_valid_i(s1v), .s1_first_i(s1f), .s1_x_i(x), .acc_o(acc), .bit_o(b),
    .wr_w_i(ww), .wr_w_addr_i(wwa), .wr_w_data_i(wwd), .wr_t_i(wt), .wr_t_addr_i(wta), .wr_t_data_i(wtd));
  mvtu_pe #(.S(S), .IN_BITS(IB2), .WDEPTH(WD), .TDEPTH(TD), .T(T2)) dut2 (
    .clk, .en_i(en), .rd_i(rd), .widx_i(widx), .tidx_i(tidx),
    .s1_valid_i(s1v), .s1_first_i(s1f), .s1_x_i(x2), .acc_o(acc2), .bit_o(b2),
    .wr_w_i(ww), .wr_w_addr_i(wwa), .wr_w_data_i(wwd), .wr_t_i(wt), .wr_t_addr_i(wta), .wr_t_data_i(wtd2));

  logic [S-1:0] W [WD];
  logic signed [T-1:0]  TH [TD];
  logic signed [T2-1:0] TH2 [TD];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref1, ref2;
    en = 1; rd = 0; s1v = 0; s1f = 0; widx = 0; tidx = 0; x = 0; x2 = 0;
    ww = 0; wt = 0; wwa = 0; wta = 0; wwd = 0; wtd = 0; wtd2 = 0;
    for (int a = 0; a < WD; a++) W[a] = S'($urandom);
    for (int a = 0; a < TD; a++) begin
      TH[a]  = T'(4 + $urandom_range(0, 24));
      TH2[a] = T2'($signed($urandom_range(0, 60)) - 30);
    end
    // load memories
    for (int a = 0; a < WD; a++) begin
      @(negedge clk); ww = 1; wwa = 3'(a); wwd = W[a];
    end
    for (int a = 0; a < TD; a++) begin
      @(negedge clk); ww = 0; wt = 1; wta = 1'(a); wtd = TH[a]; wtd2 = TH2[a];
    end
    @(negedge clk); wt = 0;
    // neurons: tidx n, folds f = 0..3 at address n*4+f
    for (int rep = 0; rep < 20; rep++) begin
      for (int n = 0; n < TD; n++) begin
        ref1 = 0; ref2 = 0;
        for (int f = 0; f < 4; f++) begin
          logic [S-1:0] xv; logic [S*IB2-1:0] xv2;
          xv = S'($urandom); xv2 = {$urandom, $urandom};
          // stage 0
          @(negedge clk); rd = 1; widx = 3'(n * 4 + f); tidx = 1'(n); s1v = 0;
          // stage 1
          @(negedge clk); rd = 0; s1v = 1; s1f = (f == 0); x = xv; x2 = xv2;
          for (int i = 0; i < S; i++) begin
            ref1 += (W[n*4+f][i] == xv[i]) ? 1 : 0;
            ref2 += W[n*4+f][i] ? int'($signed(xv2[i*IB2 +: IB2])) : -int'($signed(xv2[i*IB2 +: IB2]));
          end
          #1;
          checks++; if (int'(acc) != ref1) begin failures++; $display("acc1 %0d exp %0d", acc, ref1); end
          checks++; if (int'(acc2) != ref2) begin failures++; $display("acc2 %0d exp %0d", acc2, ref2); end
          if (f == 3) begin
            checks++; if (b != (ref1 >= int'(TH[n]))) begin failures++; $display("bit1 wrong"); end
            checks++; if (b2 != (ref2 >= int'(TH2[n]))) begin failures++; $display("bit2 wrong"); end
          end
        end
        // en low: accumulator must hold across a frozen cycle
        @(negedge clk); s1v = 1; s1f = 0; en = 0; x = '1; x2 = '0;
        @(negedge clk); en = 1; s1v = 1;
        #1;
        // frozen cycle did not add; all-ones input adds popcount of the held word
        checks++;
        if (int'(acc) != ref1 + $countones(W[n*4+3])) begin
          failures++; $display("freeze: acc %0d exp %0d", acc, ref1 + $countones(W[n*4+3]));
        end
        @(negedge clk); s1v = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

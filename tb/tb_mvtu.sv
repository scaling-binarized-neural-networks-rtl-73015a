// tb_mvtu: self-checking test of the Matrix-Vector-Threshold Unit.
// Unit A is binary with thresholds (Y=24, X=8, P=2, S=6: F^s=4, F^n=4).
// Unit B takes 4-bit signed inputs and has no thresholding (Y=12, X=4, P=2,
// S=4), so it outputs the raw sums. Random weights and thresholds are loaded
// through the configuration port, random vectors are streamed in with random
// gaps and random output back-pressure, and every output vector is compared
// with a matrix-vector product computed here. A final phase streams vectors
// back to back with the output always ready and checks that A delivers one
// vector every F^s*F^n = 16 cycles.
module tb_mvtu;
  import bnn_pkg::*;
  localparam int NV = 40;
  // unit A
  localparam int AY = 24, AX = 8, AP = 2, AS = 6, AFS = 4, AFN = 4, AT = 6;
  // unit B
  localparam int BIB = 4, BY = 12, BX = 4, BP = 2, BS = 4, BFS = 3, BFN = 2, BT = 9;
  localparam int CW = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  logic cfg_we; logic [3:0] cfg_layer; cfg_target_e cfg_target;
  logic [7:0] cfg_pe; logic [15:0] cfg_addr; logic [CW-1:0] cfg_data;

  logic a_iv, a_ir, a_ov, a_or, a_st; logic [7:0] a_id; logic [AX-1:0] a_od;
  logic b_iv, b_ir, b_ov, b_or, b_st; logic [15:0] b_id; logic [BX*BT-1:0] b_od;

  mvtu #(.IN_BITS(1), .IN_BEAT_W(8), .IN_BEATS(3), .X(AX), .P(AP), .S(AS), .THRESH(1'b1),
         .LAYER_ID(0), .CFG_W(CW)) dut_a (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od),
    .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data, .stall_o(a_st));
  mvtu #(.IN_BITS(BIB), .IN_BEAT_W(16), .IN_BEATS(3), .X(BX), .P(BP), .S(BS), .THRESH(1'b0),
         .LAYER_ID(1), .CFG_W(CW)) dut_b (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od),
    .cfg_we, .cfg_layer, .cfg_target, .cfg_pe, .cfg_addr, .cfg_data, .stall_o(b_st));

  logic [AY-1:0]   AW_ [AX];  int ATH [AX];
  logic [BY-1:0]   BW_ [BX];  int BTH [BX];
  logic [AY-1:0]   avec [NV];
  logic [BY*BIB-1:0] bvec [NV];
  int a_out_n = 0, b_out_n = 0, a_stalls = 0;
  int a_times [NV];
  bit random_ready = 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int layer, cfg_target_e tg, int pe, int addr, logic [CW-1:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_layer = 4'(layer); cfg_target = tg; cfg_pe = 8'(pe); cfg_addr = 16'(addr); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // reference outputs
  function automatic logic [AX-1:0] ref_a(logic [AY-1:0] v);
    logic [AX-1:0] r;
    for (int n = 0; n < AX; n++) begin
      int pc = 0;
      for (int e = 0; e < AY; e++) pc += (AW_[n][e] == v[e]) ? 1 : 0;
      r[n] = (pc >= ATH[n]);
    end
    return r;
  endfunction
  function automatic logic [BX*BT-1:0] ref_b(logic [BY*BIB-1:0] v);
    logic [BX*BT-1:0] r;
    for (int n = 0; n < BX; n++) begin
      int s = 0;
      for (int e = 0; e < BY; e++) begin
        int xe = int'($signed(v[e*BIB +: BIB]));
        s += BW_[n][e] ? xe : -xe;
      end
      r[n*BT +: BT] = BT'(s);
    end
    return r;
  endfunction

  // drivers
  initial begin
    cfg_we = 0; cfg_layer = 0; cfg_target = CFG_WEIGHT; cfg_pe = 0; cfg_addr = 0; cfg_data = 0;
    a_iv = 0; b_iv = 0; a_id = 0; b_id = 0;
    for (int n = 0; n < AX; n++) begin AW_[n] = AY'($urandom); ATH[n] = $urandom_range(8, 16); end
    for (int n = 0; n < BX; n++) begin BW_[n] = BY'($urandom); BTH[n] = 0; end
    for (int v = 0; v < NV; v++) begin avec[v] = AY'($urandom); bvec[v] = {$urandom, $urandom}; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load unit A
    for (int pe = 0; pe < AP; pe++)
      for (int nf = 0; nf < AFN; nf++) begin
        for (int sf = 0; sf < AFS; sf++) begin
          logic [CW-1:0] d;
          d = '0;
          for (int i = 0; i < AS; i++) d[i] = AW_[nf*AP+pe][sf*AS+i];
          cfg_write(0, CFG_WEIGHT, pe, nf*AFS+sf, d);
        end
        cfg_write(0, CFG_THRESH, pe, nf, CW'(ATH[nf*AP+pe]));
      end
    // load unit B
    for (int pe = 0; pe < BP; pe++)
      for (int nf = 0; nf < BFN; nf++)
        for (int sf = 0; sf < BFS; sf++) begin
          logic [CW-1:0] d;
          d = '0;
          for (int i = 0; i < BS; i++) d[i] = BW_[nf*BP+pe][sf*BS+i];
          cfg_write(1, CFG_WEIGHT, pe, nf*BFS+sf, d);
        end
    fork
      begin
        for (int v = 0; v < NV; v++)
          for (int b = 0; b < 3; b++) begin
            @(negedge clk);
            while (v < NV/2 && $urandom_range(0, 3) == 0) begin a_iv = 0; @(negedge clk); end
            a_iv = 1; a_id = avec[v][b*8 +: 8];
            @(posedge clk); while (!a_ir) @(posedge clk);
            #1 a_iv = 0;
          end
      end
      begin
        for (int v = 0; v < NV; v++)
          for (int b = 0; b < 3; b++) begin
            @(negedge clk);
            while ($urandom_range(0, 3) == 0) begin b_iv = 0; @(negedge clk); end
            b_iv = 1; b_id = bvec[v][b*16 +: 16];
            @(posedge clk); while (!b_ir) @(posedge clk);
            #1 b_iv = 0;
          end
      end
    join
  end

  // output ready: random in the first half, always ready in the second
  always @(negedge clk) begin
    a_or <= (a_out_n >= NV/2) ? 1'b1 : ((cycle % 64) < 12);
    b_or <= ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) begin
    if (rst_n && a_st) a_stalls++;
    if (rst_n && a_ov && a_or) begin
      checks++;
      if (a_od !== ref_a(avec[a_out_n])) begin
        failures++; $display("A vector %0d: got %b exp %b", a_out_n, a_od, ref_a(avec[a_out_n]));
      end
      a_times[a_out_n] = cycle;
      a_out_n++;
    end
    if (rst_n && b_ov && b_or) begin
      checks++;
      if (b_od !== ref_b(bvec[b_out_n])) begin
        failures++; $display("B vector %0d: got %h exp %h", b_out_n, b_od, ref_b(bvec[b_out_n]));
      end
      b_out_n++;
    end
    if (a_out_n == NV && b_out_n == NV) begin
      // steady-state rate: F^s * F^n cycles per vector
      for (int v = NV - 8; v < NV; v++) begin
        checks++;
        if (a_times[v] - a_times[v-1] != AFS * AFN) begin
          failures++; $display("A interval %0d at vector %0d", a_times[v] - a_times[v-1], v);
        end
      end
      checks++;
      if (a_stalls == 0) begin failures++; $display("output back-pressure never stalled unit A"); end
      $display("unit A stalled %0d cycles", a_stalls);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule

// tb_mvtu_folded: self-checking test of the folded matrix-vector-threshold
// unit.
//
// Unit A is the C2M configuration (150 -> 16, SIMD 25, PE 8, thresholded).
// Unit B takes the same vectors unfolded (SIMD 150, PE 16) and without
// thresholds, which exercises the raw-sum output of the last layer and the
// one-cycle fold. Expected results are computed here from the weight and
// threshold tables with a plain dot product and a threshold count.
// Checks: every output vector, the steady-state rate of one vector per
// SF*NF cycles, the latency SF*NF+1 from an idle unit, and that results
// survive random output back-pressure and input gaps in order.
module tb_mvtu_folded;
  import ls_pkg::*;
  localparam int MW = 150, MH = 16, SIMD = 25, PE = 8;
  localparam int SF = MW / SIMD, NF = MH / PE;
  localparam int SEED = 7, TSTEP = 48;
  localparam int NVEC = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 a_iv, a_ir, a_ov, a_or;
  logic                 b_iv, b_ir, b_ov, b_or;
  logic [MW*A_BITS-1:0] in_d;
  logic [MH*A_BITS-1:0] a_od;
  logic [MH*ACC_BITS-1:0] b_od;

  mvtu_folded #(.MW(MW), .MH(MH), .SIMD(SIMD), .PE(PE), .USE_THR(1'b1),
                .SEED(SEED), .TSTEP(TSTEP)) dut_a (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_data(in_d),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));

  mvtu_folded #(.MW(MW), .MH(MH), .SIMD(MW), .PE(MH), .USE_THR(1'b0),
                .SEED(SEED), .TSTEP(TSTEP)) dut_b (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_data(in_d),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(negedge clk) cyc++;

  logic [MW*A_BITS-1:0] vecs [NVEC];

  function automatic int ref_sum(input logic [MW*A_BITS-1:0] v, input int r);
    int s = 0;
    for (int c = 0; c < MW; c++)
      s += int'(v[c*A_BITS +: A_BITS]) * weight(SEED, r, c, 100);
    return s;
  endfunction

  function automatic int ref_act(input int s, input int r);
    int a = 0;
    for (int k = 0; k < N_THR; k++) if (s >= threshold(SEED, r, k, TSTEP)) a++;
    return a;
  endfunction

  task automatic fail(input string msg);
    failures++;
    $display("FAIL %s", msg);
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------- output monitors
  int a_seen = 0, b_seen = 0;
  int a_acc_cyc [NVEC];
  int a_out_cyc [NVEC];
  int hist [16];

  int a_in_cnt = 0;
  always @(posedge clk) if (rst_n && a_iv && a_ir) begin
    a_acc_cyc[a_in_cnt % NVEC] = cyc;
    a_in_cnt++;
  end

  always @(posedge clk) if (rst_n && a_ov && a_or) begin
    int idx;
    idx = a_seen % NVEC;
    a_out_cyc[idx] = cyc;
    for (int r = 0; r < MH; r++) begin
      int e;
      e = ref_act(ref_sum(vecs[idx], r), r);
      hist[e]++;
      checks++;
      if (int'(a_od[r*A_BITS +: A_BITS]) != e)
        fail($sformatf("A vec %0d row %0d got %0d exp %0d", a_seen, r,
                       a_od[r*A_BITS +: A_BITS], e));
    end
    a_seen++;
  end

  always @(posedge clk) if (rst_n && b_ov && b_or) begin
    int idx;
    idx = b_seen % NVEC;
    for (int r = 0; r < MH; r++) begin
      int e;
      e = ref_sum(vecs[idx], r);
      checks++;
      if ($signed(b_od[r*ACC_BITS +: ACC_BITS]) != e)
        fail($sformatf("B vec %0d row %0d got %0d exp %0d", b_seen, r,
                       $signed(b_od[r*ACC_BITS +: ACC_BITS]), e));
    end
    b_seen++;
  end

  // ----------------------------------------------------------------- stimulus
  task automatic drive(input bit to_a, input int n, input bit gaps);
    for (int i = 0; i < n; i++) begin
      if (gaps) while ($urandom_range(3) == 0) begin @(posedge clk); #1; end
      in_d = vecs[i % NVEC];
      if (to_a) a_iv = 1; else b_iv = 1;
      do @(negedge clk); while (to_a ? !a_ir : !b_ir);
      @(posedge clk); #1;
      a_iv = 0; b_iv = 0;
    end
  endtask

  initial begin
    a_iv = 0; b_iv = 0; a_or = 1; b_or = 1; in_d = '0;
    for (int i = 0; i < NVEC; i++)
      for (int c = 0; c < MW; c++) vecs[i][c*A_BITS +: A_BITS] = A_BITS'($urandom);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // Phase 1: unit A at full rate, output always ready.
    drive(1, NVEC, 0);
    wait (a_seen == NVEC);
    @(posedge clk); #1;
    // latency from idle: first vector
    checks++;
    if (a_out_cyc[0] - a_acc_cyc[0] != SF*NF + 2)
      fail($sformatf("latency %0d exp %0d", a_out_cyc[0] - a_acc_cyc[0], SF*NF + 2));
    // steady-state rate
    for (int i = 2; i < NVEC; i++) begin
      checks++;
      if (a_acc_cyc[i] - a_acc_cyc[i-1] != SF*NF)
        fail($sformatf("input interval %0d exp %0d", a_acc_cyc[i] - a_acc_cyc[i-1], SF*NF));
      checks++;
      if (a_out_cyc[i] - a_out_cyc[i-1] != SF*NF)
        fail($sformatf("output interval %0d exp %0d", a_out_cyc[i] - a_out_cyc[i-1], SF*NF));
    end

    // Phase 2: unit A with input gaps and output back-pressure.
    a_seen = 0; a_in_cnt = 0;
    fork
      drive(1, NVEC, 1);
      begin
        while (a_seen < NVEC) begin
          a_or = ($urandom_range(2) != 0);
          @(posedge clk); #1;
        end
        a_or = 1;
      end
    join

    // Phase 3: unit B (one-cycle fold, raw sums), back-to-back then stalled.
    drive(0, NVEC, 0);
    wait (b_seen == NVEC);
    @(posedge clk); #1;
    b_seen = 0;
    fork
      drive(0, NVEC, 1);
      begin
        while (b_seen < NVEC) begin
          b_or = ($urandom_range(1) != 0);
          @(posedge clk); #1;
        end
        b_or = 1;
      end
    join
    repeat (5) @(posedge clk);

    // The test vectors must reach more than a few activation levels.
    begin
      int levels = 0;
      for (int l = 0; l < 16; l++) if (hist[l] > 0) levels++;
      checks++;
      if (levels < 6) fail($sformatf("only %0d activation levels seen", levels));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_mvtu_sparse: self-checking test of the fully unrolled sparse layer in
// its C1M configuration (25 -> 6, 8-bit pixels, pruned weights).
//
// Expected activations are computed here from the weight and threshold
// tables. Checks: every output; one vector accepted per cycle and the first
// result one cycle after its input when the output is always ready; order
// and values under random back-pressure and input gaps; that the number of
// connections built equals the number of non-zero weights and that the
// layer really is sparse. A second, 3x3 instance is built from an explicit
// table, the pruned example matrix [-5 0 -6; 6 0 0; 0 7 -3] with one PE per
// row, and must build exactly its five non-zero connections.
module tb_mvtu_sparse;
  import ls_pkg::*;
  localparam int MW = K * K, MH = C1_CH;
  localparam int NVEC = 200;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                   iv, ir, ov, ordy;
  logic [MW*IN_BITS-1:0]  in_d;
  logic [MH*A_BITS-1:0]   od;

  mvtu_sparse dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(in_d),
                   .out_valid(ov), .out_ready(ordy), .out_data(od));

  // 3x3 example instance
  localparam int FW [3][3] = '{'{-5, 0, -6}, '{6, 0, 0}, '{0, 7, -3}};
  function automatic logic [9*W_BITS-1:0] fig_table();
    logic [9*W_BITS-1:0] t;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) t[(r*3+c)*W_BITS +: W_BITS] = W_BITS'(FW[r][c]);
    return t;
  endfunction
  localparam int FSTEP = 6;
  logic              f_iv, f_ir, f_ov;
  logic [3*A_BITS-1:0] f_in, f_od;
  mvtu_sparse #(.MW(3), .MH(3), .IN_W(A_BITS), .TSTEP(FSTEP), .SEED(9),
                .USE_TABLE(1'b1), .W_TABLE(fig_table())) dut_fig (
    .clk, .rst_n, .in_valid(f_iv), .in_ready(f_ir), .in_data(f_in),
    .out_valid(f_ov), .out_ready(1'b1), .out_data(f_od));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(negedge clk) cyc++;

  logic [MW*IN_BITS-1:0] vecs [NVEC];
  int in_cyc [NVEC];
  int out_cyc [NVEC];
  int hist [16];
  int n_in = 0, n_out = 0;

  function automatic int ref_act(input logic [MW*IN_BITS-1:0] v, input int r);
    int s = 0, a = 0;
    for (int c = 0; c < MW; c++)
      s += int'(v[c*IN_BITS +: IN_BITS]) * weight(SEED_C1, r, c, C1_DENSITY);
    for (int k = 0; k < N_THR; k++) if (s >= threshold(SEED_C1, r, k, TSTEP_C1)) a++;
    return a;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && iv && ir) begin
    in_cyc[n_in % NVEC] = cyc;
    n_in++;
  end

  always @(posedge clk) if (rst_n && ov && ordy) begin
    int idx;
    idx = n_out % NVEC;
    out_cyc[idx] = cyc;
    for (int r = 0; r < MH; r++) begin
      int e;
      e = ref_act(vecs[idx], r);
      hist[e]++;
      checks++;
      if (int'(od[r*A_BITS +: A_BITS]) != e) begin
        failures++;
        $display("FAIL vec %0d row %0d got %0d exp %0d", n_out, r, od[r*A_BITS +: A_BITS], e);
      end
    end
    n_out++;
  end

  task automatic drive(input int n, input bit gaps);
    for (int i = 0; i < n; i++) begin
      if (gaps) while ($urandom_range(3) == 0) begin @(posedge clk); #1; end
      in_d = vecs[i % NVEC];
      iv = 1;
      do @(negedge clk); while (!ir);
      @(posedge clk); #1;
      iv = 0;
    end
  endtask

  initial begin
    int nnz;
    for (int l = 0; l < 16; l++) hist[l] = 0;
    iv = 0; ordy = 1; in_d = '0; f_iv = 0; f_in = '0;
    for (int i = 0; i < NVEC; i++)
      for (int c = 0; c < MW; c++) vecs[i][c*IN_BITS +: IN_BITS] = IN_BITS'($urandom);

    nnz = 0;
    for (int r = 0; r < MH; r++)
      for (int c = 0; c < MW; c++) if (weight(SEED_C1, r, c, C1_DENSITY) != 0) nnz++;
    checks++;
    if (dut.NNZ != nnz) begin failures++; $display("FAIL NNZ %0d exp %0d", dut.NNZ, nnz); end
    checks++;
    if (nnz == 0 || nnz > MW*MH/2) begin failures++; $display("FAIL density %0d/%0d", nnz, MW*MH); end
    $display("connections kept: %0d of %0d", nnz, MW*MH);

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // full rate
    drive(NVEC, 0);
    wait (n_out == NVEC);
    @(posedge clk); #1;
    checks++;
    if (out_cyc[0] - in_cyc[0] != 1) begin
      failures++; $display("FAIL latency %0d", out_cyc[0] - in_cyc[0]);
    end
    for (int i = 1; i < NVEC; i++) begin
      checks++;
      if (in_cyc[i] - in_cyc[i-1] != 1) begin
        failures++; $display("FAIL input interval %0d at %0d", in_cyc[i] - in_cyc[i-1], i);
      end
    end

    // 3x3 example from an explicit table
    checks++;
    if (dut_fig.NNZ != 5) begin failures++; $display("FAIL example NNZ %0d", dut_fig.NNZ); end
    for (int i = 0; i < 100; i++) begin
      int x [3];
      for (int c = 0; c < 3; c++) begin
        x[c] = int'($urandom_range(15));
        f_in[c*A_BITS +: A_BITS] = A_BITS'(x[c]);
      end
      f_iv = 1;
      @(posedge clk); #1;
      f_iv = 0;
      for (int r = 0; r < 3; r++) begin
        int s, a;
        s = 0; a = 0;
        for (int c = 0; c < 3; c++) s += x[c] * FW[r][c];
        for (int k = 0; k < N_THR; k++) if (s >= threshold(9, r, k, FSTEP)) a++;
        checks++;
        if (!f_ov || int'(f_od[r*A_BITS +: A_BITS]) != a) begin
          failures++;
          $display("FAIL example row %0d got %0d exp %0d", r, f_od[r*A_BITS +: A_BITS], a);
        end
      end
    end

    // gaps and back-pressure
    n_out = 0; n_in = 0;
    fork
      drive(NVEC, 1);
      begin
        while (n_out < NVEC) begin
          ordy = ($urandom_range(2) != 0);
          @(posedge clk); #1;
        end
        ordy = 1;
      end
    join
    repeat (3) @(posedge clk);
    begin
      int levels = 0;
      for (int l = 0; l < 16; l++) if (hist[l] > 0) levels++;
      checks++;
      if (levels < 6) begin failures++; $display("FAIL only %0d levels", levels); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

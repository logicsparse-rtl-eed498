// tb_lenet5_top: end-to-end test of the LeNet-5 dataflow accelerator at its
// default configuration.
//
// A reference model written here runs the same network layer by layer on
// integers (convolution, threshold count, 2x2 max, fully connected) from
// the weight and threshold tables, and every class-score vector leaving the
// accelerator is compared with it. Phase 1 streams images back to back into
// an always-ready sink and measures the steady-state image interval, which
// must not exceed the 1,280-cycle bottleneck bound of the design. Phase 2
// adds input gaps and a sink that first refuses until the back-pressure has
// travelled all the way to the input, then accepts at random.
//
// Mechanisms counted (each must occur): input refused by the pipeline while
// the bottleneck stage is busy, sink back-pressure, a folded layer stalling
// on a full output, the C2 window generator writing one bank while the other
// is still read, C1 activations saturating at both ends, and pruned
// connections removed from the unrolled C1M.
module tb_lenet5_top;
  import ls_pkg::*;
  localparam int NIMG  = 34;
  localparam int NFAST = 24;
  localparam int BOUND = 1280;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               iv, ir, ov, ordy;
  logic [IN_BITS-1:0] pix;
  acc_t [F2_OUT-1:0]  scores;

  lenet5_top dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_pixel(pix),
                  .out_valid(ov), .out_ready(ordy), .out_scores(scores));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(negedge clk) cyc++;

  // ------------------------------------------------------- reference model
  logic [IN_BITS-1:0] img [NIMG][IMG_DIM][IMG_DIM];
  int exp_sc [NIMG][F2_OUT];
  int w1 [C1_CH][25], w2 [C2_CH][150], w3 [C3_CH][400], wf1 [F1_OUT][120], wf2 [F2_OUT][84];
  int sat_lo = 0, sat_hi = 0;

  function automatic int act(input int s, input int seed, input int ch, input int step);
    int a = 0;
    for (int k = 0; k < N_THR; k++) if (s >= threshold(seed, ch, k, step)) a++;
    return a;
  endfunction

  task automatic reference(input int n);
    int a1 [28][28][C1_CH];
    int p1 [14][14][C1_CH];
    int a2 [10][10][C2_CH];
    int p2 [5][5][C2_CH];
    int a3 [C3_CH];
    int a4 [F1_OUT];
    for (int y = 0; y < 28; y++)
      for (int x = 0; x < 28; x++)
        for (int o = 0; o < C1_CH; o++) begin
          int s = 0;
          for (int ky = 0; ky < 5; ky++)
            for (int kx = 0; kx < 5; kx++)
              s += int'(img[n][y+ky][x+kx]) * w1[o][ky*5+kx];
          a1[y][x][o] = act(s, SEED_C1, o, TSTEP_C1);
          if (a1[y][x][o] == 0) sat_lo++;
          if (a1[y][x][o] == N_THR) sat_hi++;
        end
    for (int y = 0; y < 14; y++)
      for (int x = 0; x < 14; x++)
        for (int c = 0; c < C1_CH; c++) begin
          int m = a1[2*y][2*x][c];
          if (a1[2*y][2*x+1][c] > m) m = a1[2*y][2*x+1][c];
          if (a1[2*y+1][2*x][c] > m) m = a1[2*y+1][2*x][c];
          if (a1[2*y+1][2*x+1][c] > m) m = a1[2*y+1][2*x+1][c];
          p1[y][x][c] = m;
        end
    for (int y = 0; y < 10; y++)
      for (int x = 0; x < 10; x++)
        for (int o = 0; o < C2_CH; o++) begin
          int s = 0;
          for (int ky = 0; ky < 5; ky++)
            for (int kx = 0; kx < 5; kx++)
              for (int c = 0; c < C1_CH; c++)
                s += p1[y+ky][x+kx][c] * w2[o][(ky*5+kx)*C1_CH+c];
          a2[y][x][o] = act(s, SEED_C2, o, TSTEP_C2);
        end
    for (int y = 0; y < 5; y++)
      for (int x = 0; x < 5; x++)
        for (int c = 0; c < C2_CH; c++) begin
          int m = a2[2*y][2*x][c];
          if (a2[2*y][2*x+1][c] > m) m = a2[2*y][2*x+1][c];
          if (a2[2*y+1][2*x][c] > m) m = a2[2*y+1][2*x][c];
          if (a2[2*y+1][2*x+1][c] > m) m = a2[2*y+1][2*x+1][c];
          p2[y][x][c] = m;
        end
    for (int o = 0; o < C3_CH; o++) begin
      int s = 0;
      for (int ky = 0; ky < 5; ky++)
        for (int kx = 0; kx < 5; kx++)
          for (int c = 0; c < C2_CH; c++)
            s += p2[ky][kx][c] * w3[o][(ky*5+kx)*C2_CH+c];
      a3[o] = act(s, SEED_C3, o, TSTEP_C3);
    end
    for (int o = 0; o < F1_OUT; o++) begin
      int s = 0;
      for (int i = 0; i < C3_CH; i++) s += a3[i] * wf1[o][i];
      a4[o] = act(s, SEED_F1, o, TSTEP_F1);
    end
    for (int o = 0; o < F2_OUT; o++) begin
      int s = 0;
      for (int i = 0; i < F1_OUT; i++) s += a4[i] * wf2[o][i];
      exp_sc[n][o] = s;
    end
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- monitors
  int n_out = 0;
  int img_start [NIMG];
  int n_pix = 0;
  int in_stall = 0, out_stall = 0, fold_stall = 0, bank_overlap = 0;

  always @(posedge clk) if (rst_n) begin
    if (iv && ir) begin
      if (n_pix % (IMG_DIM*IMG_DIM) == 0) img_start[n_pix / (IMG_DIM*IMG_DIM)] = cyc;
      n_pix++;
    end
    if (iv && !ir) in_stall++;
    if (ov && !ordy) out_stall++;
    if (dut.u_c2m.stall || dut.u_c3m.stall || dut.u_f1.stall || dut.u_f2.stall) fold_stall++;
    if (dut.u_c2.in_valid && dut.u_c2.in_ready && dut.u_c2.wr_bank != dut.u_c2.rd_bank)
      bank_overlap++;
  end

  always @(posedge clk) if (rst_n && ov && ordy) begin
    for (int o = 0; o < F2_OUT; o++) begin
      checks++;
      if (int'(scores[o]) != exp_sc[n_out][o]) begin
        failures++;
        if (failures < 20)
          $display("FAIL image %0d class %0d got %0d exp %0d", n_out, o,
                   int'(scores[o]), exp_sc[n_out][o]);
      end
    end
    n_out++;
  end

  task automatic send_image(input int n, input bit gaps);
    for (int y = 0; y < IMG_DIM; y++)
      for (int x = 0; x < IMG_DIM; x++) begin
        if (gaps) while ($urandom_range(7) == 0) begin @(posedge clk); #1; end
        pix = img[n][y][x];
        iv = 1;
        do @(negedge clk); while (!ir);
        @(posedge clk); #1;
        iv = 0;
      end
  endtask

  initial begin
    iv = 0; ordy = 1; pix = '0;
    foreach (w1[o, i])  w1[o][i]  = weight(SEED_C1, o, i, C1_DENSITY);
    foreach (w2[o, i])  w2[o][i]  = weight(SEED_C2, o, i, 100);
    foreach (w3[o, i])  w3[o][i]  = weight(SEED_C3, o, i, 100);
    foreach (wf1[o, i]) wf1[o][i] = weight(SEED_F1, o, i, 100);
    foreach (wf2[o, i]) wf2[o][i] = weight(SEED_F2, o, i, 100);
    // Images: a bright random blob on a dark noisy background.
    for (int n = 0; n < NIMG; n++) begin
      int cy, cx, r2;
      cy = 8 + int'($urandom_range(15));
      cx = 8 + int'($urandom_range(15));
      r2 = 20 + int'($urandom_range(40));
      for (int y = 0; y < IMG_DIM; y++)
        for (int x = 0; x < IMG_DIM; x++)
          img[n][y][x] = ((y-cy)*(y-cy) + (x-cx)*(x-cx) < r2)
                         ? IN_BITS'(160 + $urandom_range(95)) : IN_BITS'($urandom_range(60));
      reference(n);
    end

    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // Phase 1: back-to-back images, sink always ready.
    for (int n = 0; n < NFAST; n++) send_image(n, 0);
    wait (n_out == NFAST);
    @(posedge clk); #1;
    for (int n = 2; n < NFAST; n++) begin
      checks++;
      $display("image %0d accepted %0d cycles after image %0d", n, img_start[n] - img_start[n-1], n-1);
      if (img_start[n] - img_start[n-1] > BOUND) begin
        failures++;
        $display("FAIL image interval %0d above %0d", img_start[n] - img_start[n-1], BOUND);
      end
    end

    // Phase 2: input gaps; the sink first refuses everything, then at random.
    fork
      for (int n = NFAST; n < NIMG; n++) send_image(n, 1);
      begin
        // block the sink until the stall has reached the input
        int mark;
        mark = in_stall;
        ordy = 0;
        wait (in_stall > mark + 2000 || n_pix == NIMG*IMG_DIM*IMG_DIM);
        @(posedge clk); #1;
        while (n_out < NIMG) begin
          ordy = ($urandom_range(3) == 0);
          @(posedge clk); #1;
        end
        ordy = 1;
      end
    join
    repeat (5) @(posedge clk);

    $display("input refused %0d, sink stalls %0d, folded-layer stalls %0d, C2 bank overlap %0d",
             in_stall, out_stall, fold_stall, bank_overlap);
    $display("C1 activations at 0: %0d, at %0d: %0d; C1M connections %0d of %0d",
             sat_lo, N_THR, sat_hi, dut.u_c1m.NNZ, C1_CH*25);
    checks++; if (in_stall == 0)     begin failures++; $display("FAIL no input stall"); end
    checks++; if (out_stall == 0)    begin failures++; $display("FAIL no sink stall"); end
    checks++; if (fold_stall == 0)   begin failures++; $display("FAIL no folded-layer stall"); end
    checks++; if (bank_overlap == 0) begin failures++; $display("FAIL no bank overlap"); end
    checks++; if (sat_lo == 0 || sat_hi == 0) begin failures++; $display("FAIL no saturation"); end
    checks++; if (dut.u_c1m.NNZ >= C1_CH*25) begin failures++; $display("FAIL C1M not sparse"); end
    checks++; if (n_out != NIMG) begin failures++; $display("FAIL %0d results", n_out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

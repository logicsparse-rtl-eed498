// tb_swg: self-checking test of the sliding-window generator in its C2
// configuration (14x14x6 input, 5x5 kernel, 4-bit elements).
//
// Random frames are streamed in; every window is compared with the K x K x C
// patch cut here from the stored frame. Phase 1 streams four frames back to
// back into an always-ready consumer and checks that no input cycle is lost,
// also across frame boundaries. Phase 2 uses a slow, random consumer and
// checks that the next frame is written into the second bank while windows
// of the previous one are still pending, and that results stay correct.
module tb_swg;
  localparam int IFM = 14, C = 6, K = 5, W = 4;
  localparam int OFM = IFM - K + 1;
  localparam int NF  = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic               iv, ir, ov, ordy;
  logic [C*W-1:0]     in_d;
  logic [K*K*C*W-1:0] od;

  swg #(.IFM(IFM), .C(C), .K(K), .IN_W(W)) dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(in_d),
    .out_valid(ov), .out_ready(ordy), .out_data(od));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(negedge clk) cyc++;

  logic [W-1:0] frm [NF][IFM][IFM][C];
  int n_out = 0, n_in = 0;
  int first_in = 0, last_in = 0;
  int overlap = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && iv && ir) begin
    if (n_in == 0) first_in = cyc;
    last_in = cyc;
    n_in++;
    // writing one frame while the previous frame's windows are pending
    if (dut.wr_bank != dut.rd_bank) overlap++;
  end

  always @(posedge clk) if (rst_n && ov && ordy) begin
    int f, oy, ox;
    bit bad;
    f  = (n_out / (OFM*OFM)) % NF;
    oy = (n_out % (OFM*OFM)) / OFM;
    ox = n_out % OFM;
    bad = 0;
    for (int ky = 0; ky < K; ky++)
      for (int kx = 0; kx < K; kx++)
        for (int c = 0; c < C; c++)
          if (od[((ky*K+kx)*C+c)*W +: W] != frm[f][oy+ky][ox+kx][c]) bad = 1;
    checks++;
    if (bad) begin
      failures++;
      if (failures < 10) $display("FAIL window %0d (frame %0d, %0d,%0d)", n_out, f, oy, ox);
    end
    n_out++;
  end

  task automatic send_frame(input int f, input bit gaps);
    for (int y = 0; y < IFM; y++)
      for (int x = 0; x < IFM; x++) begin
        if (gaps) while ($urandom_range(4) == 0) begin @(posedge clk); #1; end
        for (int c = 0; c < C; c++) in_d[c*W +: W] = frm[f][y][x][c];
        iv = 1;
        do @(negedge clk); while (!ir);
        @(posedge clk); #1;
        iv = 0;
      end
  endtask

  initial begin
    iv = 0; ordy = 1; in_d = '0;
    foreach (frm[f, y, x, c]) frm[f][y][x][c] = W'($urandom);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // Phase 1: back-to-back frames, consumer always ready.
    for (int f = 0; f < NF; f++) send_frame(f, 0);
    wait (n_out == NF*OFM*OFM);
    @(posedge clk); #1;
    checks++;
    if (last_in - first_in != NF*IFM*IFM - 1) begin
      failures++;
      $display("FAIL %0d pixels took %0d cycles", NF*IFM*IFM, last_in - first_in + 1);
    end

    // Phase 2: slow consumer.
    n_out = 0; overlap = 0;
    fork
      for (int f = 0; f < NF; f++) send_frame(f, 1);
      begin
        while (n_out < NF*OFM*OFM) begin
          ordy = ($urandom_range(3) == 0);
          @(posedge clk); #1;
        end
        ordy = 1;
      end
    join
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL no frame overlap seen"); end
    $display("pixels written while the other bank was read: %0d", overlap);
    repeat (5) @(posedge clk);
    checks++;
    if (ov) begin failures++; $display("FAIL extra window"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_maxpool: self-checking test of the 2x2 max pool in its C1P
// configuration (28x28x6, 4-bit activations).
//
// Random frames are streamed in raster order; every pooled pixel is
// compared with the maximum of its 2x2 block computed here, channel by
// channel. Checks also that an always-ready consumer never stalls the input
// (one pixel per cycle) and that random back-pressure loses nothing.
module tb_maxpool;
  localparam int IFM = 28, C = 6, W = 4, OD = IFM / 2;
  localparam int NF = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           iv, ir, ov, ordy;
  logic [C*W-1:0] in_d, od;

  maxpool dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(in_d),
               .out_valid(ov), .out_ready(ordy), .out_data(od));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(negedge clk) cyc++;

  logic [W-1:0] frm [NF][IFM][IFM][C];
  int n_out = 0, n_in = 0, first_in = 0, last_in = 0;

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
  end

  always @(posedge clk) if (rst_n && ov && ordy) begin
    int f, py, px;
    f  = (n_out / (OD*OD)) % NF;
    py = (n_out % (OD*OD)) / OD;
    px = n_out % OD;
    for (int c = 0; c < C; c++) begin
      logic [W-1:0] m;
      m = frm[f][2*py][2*px][c];
      if (frm[f][2*py][2*px+1][c]   > m) m = frm[f][2*py][2*px+1][c];
      if (frm[f][2*py+1][2*px][c]   > m) m = frm[f][2*py+1][2*px][c];
      if (frm[f][2*py+1][2*px+1][c] > m) m = frm[f][2*py+1][2*px+1][c];
      checks++;
      if (od[c*W +: W] != m) begin
        failures++;
        if (failures < 10)
          $display("FAIL out %0d ch %0d got %0d exp %0d", n_out, c, od[c*W +: W], m);
      end
    end
    n_out++;
  end

  task automatic send_frame(input int f, input bit gaps);
    for (int y = 0; y < IFM; y++)
      for (int x = 0; x < IFM; x++) begin
        if (gaps) while ($urandom_range(3) == 0) begin @(posedge clk); #1; end
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

    for (int f = 0; f < NF; f++) send_frame(f, 0);
    wait (n_out == NF*OD*OD);
    @(posedge clk); #1;
    checks++;
    if (last_in - first_in != NF*IFM*IFM - 1) begin
      failures++;
      $display("FAIL %0d pixels took %0d cycles", NF*IFM*IFM, last_in - first_in + 1);
    end

    n_out = 0;
    fork
      for (int f = 0; f < NF; f++) send_frame(f, 1);
      begin
        while (n_out < NF*OD*OD) begin
          ordy = ($urandom_range(2) == 0);
          @(posedge clk); #1;
        end
        ordy = 1;
      end
    join
    repeat (5) @(posedge clk);
    checks++;
    if (ov) begin failures++; $display("FAIL extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_thresholding: self-checking test of the multi-threshold activation.
//
// Drives random accumulators against random ascending threshold lists, plus
// the corner cases exactly on, one below and one above a threshold and the
// two saturation ends, and compares the activation with a count made here.
module tb_thresholding;
  localparam int ACC_W = 20;
  localparam int A_W   = 4;
  localparam int N_THR = 15;

  logic signed [ACC_W-1:0]   acc;
  logic [N_THR*ACC_W-1:0]    thr;
  logic [A_W-1:0]            act;
  int checks = 0, failures = 0;
  int t [N_THR];

  thresholding #(.ACC_W(ACC_W), .A_W(A_W), .N_THR(N_THR)) dut (.acc, .thr, .act);

  task automatic check(input int a);
    int exp;
    acc = ACC_W'(a);
    #1;
    exp = 0;
    for (int k = 0; k < N_THR; k++) if (a >= t[k]) exp++;
    checks++;
    if (act != A_W'(exp)) begin
      failures++;
      $display("FAIL acc=%0d act=%0d exp=%0d", a, act, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int trial = 0; trial < 200; trial++) begin
      int base;
      base = int'($urandom_range(2000)) - 1000;
      for (int k = 0; k < N_THR; k++) begin
        base = base + int'($urandom_range(300)) + 1;
        t[k] = base;
        thr[k*ACC_W +: ACC_W] = ACC_W'(base);
      end
      check(t[0] - 1);          // below all -> 0
      check(t[N_THR-1] + 5);    // above all -> 15
      for (int j = 0; j < 4; j++) begin
        int k;
        k = int'($urandom_range(N_THR-1));
        check(t[k]); check(t[k] - 1); check(t[k] + 1);
      end
      for (int j = 0; j < 5; j++) check(int'($urandom_range(8000)) - 4000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// thresholding: multi-threshold activation of one processing element.
//
// A quantised layer does not apply a floating-point activation function to
// its dot product. It compares the integer accumulator with a per-channel
// list of N_THR ascending thresholds, and the activation is the number of
// thresholds that the accumulator reaches (acc >= T[k]). With N_THR = 2^A - 1
// the result is an A-bit unsigned activation; batch-norm and the quantiser
// are folded into the threshold values. Each PE of a matrix unit owns one
// such comparator bank, fed with the thresholds of the channel it is
// currently computing (T0, T1, T2 ... in the per-PE threshold columns).
//
// Interface: acc (signed accumulator) and thr (packed thresholds, thr[k] in
// bits [k*ACC_W +: ACC_W], ascending) in; act out. Purely combinational.
// The counting rule is the usual one for quantised dataflow accelerators;
// the comparison as ">=" and the packing are this design's choice.
module thresholding #(
  parameter int unsigned ACC_W = 20,
  parameter int unsigned A_W   = 4,
  parameter int unsigned N_THR = (1 << A_W) - 1
) (
  input  logic signed [ACC_W-1:0]       acc,
  input  logic        [N_THR*ACC_W-1:0] thr,
  output logic        [A_W-1:0]         act
);

  always_comb begin
    act = '0;
    for (int k = 0; k < N_THR; k++) begin
      if (acc >= $signed(thr[k*ACC_W +: ACC_W])) act = act + 1'b1;
    end
  end

endmodule

// mvtu_sparse: fully unrolled, unstructured-sparse matrix-vector-threshold
// unit (layer C1M, the first convolution's matrix part).
//
// This is the "engine-free" way of using unstructured sparsity. Once a layer
// is fully unrolled, every weight is a constant that never changes at run
// time, so there is no weight memory and no index decoding: each
// connection is wired statically. A pruned (zero) weight simply generates
// no multiplier and no adder input, so the pruning pattern is absorbed into
// the logic at elaboration and whatever its irregularity, the unit keeps its
// full rate of one vector per cycle. No sparse format, scheduler or zero
// skipping control exists at run time.
//
// Each of the MH output rows has its own PE: a chain of constant-coefficient
// multiply-adds over the non-zero columns of its row, followed by a
// comparator bank against the row's constant thresholds.
//
// Interface: valid/ready streams, whole vector per beat (element j in
// in_data[j*IN_W +: IN_W], unsigned) in, all MH activations per beat out.
// The sum is combinational and the result is registered: latency one cycle,
// throughput one vector per cycle, in_ready = !out_valid || out_ready.
//
// Fully unrolling with pruned weights baked into the logic follows the
// accelerator's scheme. The weight values come from ls_pkg::weight (no
// trained model is available) unless a table is given through W_TABLE; the
// single output register is this design's choice.
module mvtu_sparse #(
  parameter int unsigned MW      = ls_pkg::K * ls_pkg::K,
  parameter int unsigned MH      = ls_pkg::C1_CH,
  parameter int unsigned IN_W    = ls_pkg::IN_BITS,
  parameter int unsigned W_W     = ls_pkg::W_BITS,
  parameter int unsigned ACC_W   = ls_pkg::ACC_BITS,
  parameter int unsigned A_W     = ls_pkg::A_BITS,
  parameter int unsigned SEED    = ls_pkg::SEED_C1,
  parameter int unsigned DENSITY = ls_pkg::C1_DENSITY,
  parameter int unsigned TSTEP   = ls_pkg::TSTEP_C1,
  // Optional explicit weight table: weight (r, c) is the signed W_W-bit
  // field W_TABLE[(r*MW + c)*W_W +: W_W]. Used instead of the generated
  // weights when USE_TABLE is set.
  parameter bit                      USE_TABLE = 1'b0,
  parameter logic [MH*MW*W_W-1:0]    W_TABLE   = '0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [MW*IN_W-1:0]  in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [MH*A_W-1:0]   out_data
);

  localparam int unsigned N_THR = (1 << A_W) - 1;

  // Weight of connection (r, c), an elaboration-time constant.
  function automatic int wgt(input int unsigned r, input int unsigned c);
    if (USE_TABLE) return int'($signed(W_TABLE[(r*MW + c)*W_W +: W_W]));
    return ls_pkg::weight(SEED, r, c, DENSITY);
  endfunction

  // Number of connections left after pruning (the multipliers built).
  function automatic int unsigned count_nnz();
    int unsigned n;
    n = 0;
    for (int unsigned r = 0; r < MH; r++)
      for (int unsigned c = 0; c < MW; c++)
        if (wgt(r, c) != 0) n++;
    return n;
  endfunction
  localparam int unsigned NNZ = count_nnz();

  logic [MH*A_W-1:0] act_all;

  for (genvar r = 0; r < int'(MH); r++) begin : g_row
    logic signed [ACC_W-1:0]  ps [MW+1];
    logic [N_THR*ACC_W-1:0]   thr;
    logic [A_W-1:0]           act;

    assign ps[0] = '0;
    for (genvar c = 0; c < int'(MW); c++) begin : g_col
      localparam int WV = wgt(r, c);
      if (WV != 0) begin : g_tap
        assign ps[c+1] = ps[c]
          + ACC_W'($signed({1'b0, in_data[c*IN_W +: IN_W]}) * WV);
      end else begin : g_pruned
        assign ps[c+1] = ps[c];
      end
    end

    for (genvar k = 0; k < int'(N_THR); k++) begin : g_t
      localparam int TV = ls_pkg::threshold(SEED, r, k, TSTEP);
      assign thr[k*ACC_W +: ACC_W] = ACC_W'(TV);
    end

    thresholding #(.ACC_W(ACC_W), .A_W(A_W), .N_THR(N_THR)) u_thr (
      .acc(ps[MW]),
      .thr(thr),
      .act(act)
    );
    assign act_all[r*A_W +: A_W] = act;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= act_all;
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

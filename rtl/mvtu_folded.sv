// mvtu_folded: dense, folded matrix-vector-threshold unit (one layer of the
// dataflow pipeline: C2M, C3M, F1 and F2).
//
// The layer multiplies an MW-element input vector by an MH x MW weight
// matrix and thresholds each of the MH sums. It is folded in the usual way
// of dataflow QNN accelerators: PE processing elements each handle one output
// row at a time and consume SIMD input elements per cycle. A vector
// therefore takes SF = MW/SIMD cycles per group of PE rows ("synapse fold")
// and NF = MH/PE such groups ("neuron fold"): SF*NF cycles per vector. Weights
// stay in a ROM of NF*SF words of PE*SIMD weights; zero weights are stored
// and multiplied like any other, which is why this form gains nothing from
// pruning. Thresholds sit in a ROM of NF words of PE threshold lists.
//
// Interface: valid/ready streams. One input beat carries the whole vector
// (element j in in_data[j*IN_W +: IN_W], unsigned); one output beat carries
// all MH results (activation of A_W bits when USE_THR, else the raw ACC_W-bit
// signed sum, as for the last layer). A one-vector input register lets the
// next vector arrive while the current one is computed, so the unit sustains
// one vector every SF*NF cycles; the first result appears SF*NF+1 cycles
// after a vector is accepted into an idle unit. in_ready depends
// combinationally on out_ready through the output stall.
//
// Folding by PE and SIMD follows the accelerator's mapping scheme; the whole
// vector per beat, the buffering, the ROM layout and the generated weights
// (ls_pkg::weight/threshold) are this design's choice.
module mvtu_folded #(
  parameter int unsigned MW      = 150,
  parameter int unsigned MH      = 16,
  parameter int unsigned SIMD    = 25,
  parameter int unsigned PE      = 8,
  parameter int unsigned IN_W    = ls_pkg::A_BITS,
  parameter int unsigned W_W     = ls_pkg::W_BITS,
  parameter int unsigned ACC_W   = ls_pkg::ACC_BITS,
  parameter int unsigned A_W     = ls_pkg::A_BITS,
  parameter bit          USE_THR = 1'b1,
  parameter int unsigned OUT_W   = USE_THR ? A_W : ACC_W,
  parameter int unsigned SEED    = ls_pkg::SEED_C2,
  parameter int unsigned DENSITY = 100,
  parameter int unsigned TSTEP   = ls_pkg::TSTEP_C2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [MW*IN_W-1:0]    in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [MH*OUT_W-1:0]   out_data
);

  localparam int unsigned SF    = MW / SIMD;
  localparam int unsigned NF    = MH / PE;
  localparam int unsigned N_THR = (1 << A_W) - 1;
  localparam int unsigned SFW   = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NFW   = (NF > 1) ? $clog2(NF) : 1;

  initial begin
    assert (MW % SIMD == 0) else $error("SIMD must divide MW");
    assert (MH % PE == 0)   else $error("PE must divide MH");
  end

  // ------------------------------------------------------------------ ROMs
  // Each ROM word is an elaboration-time constant, so the tables become
  // read-only logic (LUT ROM) after synthesis.
  function automatic logic [PE*SIMD*W_W-1:0] wword_init(input int nf, input int sf);
    logic [PE*SIMD*W_W-1:0] w;
    for (int p = 0; p < int'(PE); p++)
      for (int s = 0; s < int'(SIMD); s++)
        w[(p*SIMD+s)*W_W +: W_W] = W_W'(ls_pkg::weight(SEED, nf*PE+p, sf*SIMD+s, DENSITY));
    return w;
  endfunction

  function automatic logic [PE*N_THR*ACC_W-1:0] tword_init(input int nf);
    logic [PE*N_THR*ACC_W-1:0] t;
    for (int p = 0; p < int'(PE); p++)
      for (int k = 0; k < int'(N_THR); k++)
        t[(p*N_THR+k)*ACC_W +: ACC_W] = ACC_W'(ls_pkg::threshold(SEED, nf*PE+p, k, TSTEP));
    return t;
  endfunction

  logic [PE*SIMD*W_W-1:0]    wrom [NF*SF];
  logic [PE*N_THR*ACC_W-1:0] trom [NF];

  for (genvar i = 0; i < int'(NF*SF); i++) begin : g_wrom
    localparam logic [PE*SIMD*W_W-1:0] WORD = wword_init(i / SF, i % SF);
    assign wrom[i] = WORD;
  end

  for (genvar i = 0; i < int'(NF); i++) begin : g_trom
    localparam logic [PE*N_THR*ACC_W-1:0] WORD = tword_init(i);
    assign trom[i] = WORD;
  end

  // ---------------------------------------------------------------- control
  logic                     ib_v;
  logic [MW*IN_W-1:0]       ib;       // input register (next vector)
  logic [MW*IN_W-1:0]       xw;       // vector being computed
  logic                     busy;
  logic [SFW-1:0]           sf;
  logic [NFW-1:0]           nf;
  logic signed [ACC_W-1:0]  acc [PE];
  logic [MH*OUT_W-1:0]      ovec, ovec_nx;

  logic last, stall, take;
  assign last  = busy && (sf == SFW'(SF-1)) && (nf == NFW'(NF-1));
  assign stall = last && out_valid && !out_ready;
  assign take  = !busy || (last && !stall);   // xw can be reloaded
  assign in_ready = !ib_v || take;

  // --------------------------------------------------------------- datapath
  logic [PE*SIMD*W_W-1:0]    wword;
  logic [PE*N_THR*ACC_W-1:0] tword;
  logic signed [ACC_W-1:0]   dot [PE];
  logic signed [ACC_W-1:0]   sum [PE];
  logic [OUT_W-1:0]          res [PE];

  assign wword = wrom[int'(nf)*SF + int'(sf)];
  assign tword = trom[nf];

  always_comb begin
    for (int p = 0; p < int'(PE); p++) begin
      dot[p] = '0;
      for (int s = 0; s < int'(SIMD); s++) begin
        dot[p] = dot[p]
          + ACC_W'($signed({1'b0, xw[(int'(sf)*SIMD+s)*IN_W +: IN_W]})
                   * $signed(wword[(p*SIMD+s)*W_W +: W_W]));
      end
      sum[p] = acc[p] + dot[p];
    end
  end

  for (genvar p = 0; p < int'(PE); p++) begin : g_pe
    if (USE_THR) begin : g_thr
      logic [A_W-1:0] act;
      thresholding #(.ACC_W(ACC_W), .A_W(A_W), .N_THR(N_THR)) u_thr (
        .acc(sum[p]),
        .thr(tword[p*N_THR*ACC_W +: N_THR*ACC_W]),
        .act(act)
      );
      assign res[p] = OUT_W'(act);
    end else begin : g_raw
      assign res[p] = OUT_W'(sum[p]);
    end
  end

  always_comb begin
    ovec_nx = ovec;
    for (int p = 0; p < int'(PE); p++)
      ovec_nx[(int'(nf)*PE+p)*OUT_W +: OUT_W] = res[p];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ib_v      <= 1'b0;
      busy      <= 1'b0;
      out_valid <= 1'b0;
      sf        <= '0;
      nf        <= '0;
      for (int p = 0; p < int'(PE); p++) acc[p] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (busy && !stall) begin
        // one fold step
        for (int p = 0; p < int'(PE); p++)
          acc[p] <= (sf == SFW'(SF-1)) ? '0 : sum[p];
        if (sf == SFW'(SF-1)) begin
          ovec <= ovec_nx;
          sf   <= '0;
          nf   <= (nf == NFW'(NF-1)) ? '0 : nf + 1'b1;
        end else begin
          sf <= sf + 1'b1;
        end
        if (last) begin
          out_data  <= ovec_nx;
          out_valid <= 1'b1;
          busy      <= 1'b0;
        end
      end
      if (take && ib_v) begin
        xw   <= ib;
        busy <= 1'b1;
      end
      if (in_valid && in_ready) begin
        ib   <= in_data;
        ib_v <= 1'b1;
      end else if (take) begin
        ib_v <= 1'b0;
      end
    end
  end

  // A result that is offered stays offered and unchanged until taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

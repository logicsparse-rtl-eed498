// lenet5_top: LeNet-5 dataflow accelerator whose first convolution is fully
// unrolled with its pruned weights removed from the logic, while the other
// layers are folded.
//
// Every layer is its own pipeline stage, connected to the next by a
// valid/ready stream, and all layers work on different data at once. The
// throughput of such a pipeline is set by its slowest stage, so each
// layer's folding (PE x SIMD) is chosen to bring its cycles per image below
// the same bound. The first convolution's matrix part (C1M) has to process
// 784 windows per image: folding it would make it the bottleneck, and fully
// unrolling it densely is costly. Here it is fully unrolled with
// unstructured pruning: its zero weights vanish from the netlist, so it
// runs at one window per cycle for a fraction of the dense cost.
//
//   C1  swg         32x32x1 pixels -> 784 windows of 25        (1 pixel/cycle)
//   C1M mvtu_sparse 25 -> 6, fully unrolled, pruned            (1 window/cycle)
//   C1P maxpool     28x28x6 -> 14x14x6
//   C2  swg         14x14x6 -> 100 windows of 150
//   C2M mvtu_folded 150 -> 16, SIMD 25, PE 8                   (12 cycles/window)
//   C2P maxpool     10x10x16 -> 5x5x16
//   C3  swg         5x5x16 -> 1 window of 400
//   C3M mvtu_folded 400 -> 120, SIMD 16, PE 8                  (375 cycles)
//   F1  mvtu_folded 120 -> 84,  SIMD 12, PE 7                  (120 cycles)
//   F2  mvtu_folded 84 -> 10,   SIMD 12, PE 2, no threshold    (35 cycles)
//
// The slowest stages are C2M (1200 cycles per image) and C1 (1024 pixels
// per image), so in steady state one image is accepted every ~1200 cycles.
//
// Interface: in_pixel is an 8-bit unsigned pixel, raster order, one per beat;
// out_scores is the ten signed class sums of F2 in one beat. Both are
// valid/ready streams. Synchronous active-low reset.
//
// The layer list, the pruned full unrolling of C1M and the folding of the
// rest follow the accelerator described for LeNet-5; the folding factors,
// bit widths and weight values are this design's own choice.
module lenet5_top
  import ls_pkg::*;
#(
  parameter int unsigned C2M_SIMD = 25,
  parameter int unsigned C2M_PE   = 8,
  parameter int unsigned C3M_SIMD = 16,
  parameter int unsigned C3M_PE   = 8,
  parameter int unsigned F1_SIMD  = 12,
  parameter int unsigned F1_PE    = 7,
  parameter int unsigned F2_SIMD  = 12,
  parameter int unsigned F2_PE    = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [IN_BITS-1:0]          in_pixel,
  output logic                        out_valid,
  input  logic                        out_ready,
  output acc_t [F2_OUT-1:0]           out_scores
);

  localparam int unsigned D1 = IMG_DIM - K + 1;   // 28
  localparam int unsigned P1 = D1 / 2;            // 14
  localparam int unsigned D2 = P1 - K + 1;        // 10
  localparam int unsigned P2 = D2 / 2;            // 5

  // C1 -> C1M
  logic                         c1_v, c1_r;
  logic [K*K*IN_BITS-1:0]       c1_d;
  // C1M -> C1P
  logic                         c1m_v, c1m_r;
  logic [C1_CH*A_BITS-1:0]      c1m_d;
  // C1P -> C2
  logic                         c1p_v, c1p_r;
  logic [C1_CH*A_BITS-1:0]      c1p_d;
  // C2 -> C2M
  logic                         c2_v, c2_r;
  logic [K*K*C1_CH*A_BITS-1:0]  c2_d;
  // C2M -> C2P
  logic                         c2m_v, c2m_r;
  logic [C2_CH*A_BITS-1:0]      c2m_d;
  // C2P -> C3
  logic                         c2p_v, c2p_r;
  logic [C2_CH*A_BITS-1:0]      c2p_d;
  // C3 -> C3M
  logic                         c3_v, c3_r;
  logic [K*K*C2_CH*A_BITS-1:0]  c3_d;
  // C3M -> F1
  logic                         c3m_v, c3m_r;
  logic [C3_CH*A_BITS-1:0]      c3m_d;
  // F1 -> F2
  logic                         f1_v, f1_r;
  logic [F1_OUT*A_BITS-1:0]     f1_d;
  logic [F2_OUT*ACC_BITS-1:0]   f2_d;

  swg #(.IFM(IMG_DIM), .C(1), .K(K), .IN_W(IN_BITS)) u_c1 (
    .clk, .rst_n,
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_pixel),
    .out_valid(c1_v), .out_ready(c1_r), .out_data(c1_d));

  mvtu_sparse #(.MW(K*K), .MH(C1_CH), .IN_W(IN_BITS), .ACC_W(ACC_BITS),
                .A_W(A_BITS), .SEED(SEED_C1), .DENSITY(C1_DENSITY),
                .TSTEP(TSTEP_C1)) u_c1m (
    .clk, .rst_n,
    .in_valid(c1_v), .in_ready(c1_r), .in_data(c1_d),
    .out_valid(c1m_v), .out_ready(c1m_r), .out_data(c1m_d));

  maxpool #(.IFM(D1), .C(C1_CH), .IN_W(A_BITS)) u_c1p (
    .clk, .rst_n,
    .in_valid(c1m_v), .in_ready(c1m_r), .in_data(c1m_d),
    .out_valid(c1p_v), .out_ready(c1p_r), .out_data(c1p_d));

  swg #(.IFM(P1), .C(C1_CH), .K(K), .IN_W(A_BITS)) u_c2 (
    .clk, .rst_n,
    .in_valid(c1p_v), .in_ready(c1p_r), .in_data(c1p_d),
    .out_valid(c2_v), .out_ready(c2_r), .out_data(c2_d));

  mvtu_folded #(.MW(K*K*C1_CH), .MH(C2_CH), .SIMD(C2M_SIMD), .PE(C2M_PE),
                .IN_W(A_BITS), .W_W(W_BITS), .ACC_W(ACC_BITS), .A_W(A_BITS),
                .USE_THR(1'b1), .SEED(SEED_C2), .DENSITY(100),
                .TSTEP(TSTEP_C2)) u_c2m (
    .clk, .rst_n,
    .in_valid(c2_v), .in_ready(c2_r), .in_data(c2_d),
    .out_valid(c2m_v), .out_ready(c2m_r), .out_data(c2m_d));

  maxpool #(.IFM(D2), .C(C2_CH), .IN_W(A_BITS)) u_c2p (
    .clk, .rst_n,
    .in_valid(c2m_v), .in_ready(c2m_r), .in_data(c2m_d),
    .out_valid(c2p_v), .out_ready(c2p_r), .out_data(c2p_d));

  swg #(.IFM(P2), .C(C2_CH), .K(K), .IN_W(A_BITS)) u_c3 (
    .clk, .rst_n,
    .in_valid(c2p_v), .in_ready(c2p_r), .in_data(c2p_d),
    .out_valid(c3_v), .out_ready(c3_r), .out_data(c3_d));

  mvtu_folded #(.MW(K*K*C2_CH), .MH(C3_CH), .SIMD(C3M_SIMD), .PE(C3M_PE),
                .IN_W(A_BITS), .W_W(W_BITS), .ACC_W(ACC_BITS), .A_W(A_BITS),
                .USE_THR(1'b1), .SEED(SEED_C3), .DENSITY(100),
                .TSTEP(TSTEP_C3)) u_c3m (
    .clk, .rst_n,
    .in_valid(c3_v), .in_ready(c3_r), .in_data(c3_d),
    .out_valid(c3m_v), .out_ready(c3m_r), .out_data(c3m_d));

  mvtu_folded #(.MW(C3_CH), .MH(F1_OUT), .SIMD(F1_SIMD), .PE(F1_PE),
                .IN_W(A_BITS), .W_W(W_BITS), .ACC_W(ACC_BITS), .A_W(A_BITS),
                .USE_THR(1'b1), .SEED(SEED_F1), .DENSITY(100),
                .TSTEP(TSTEP_F1)) u_f1 (
    .clk, .rst_n,
    .in_valid(c3m_v), .in_ready(c3m_r), .in_data(c3m_d),
    .out_valid(f1_v), .out_ready(f1_r), .out_data(f1_d));

  mvtu_folded #(.MW(F1_OUT), .MH(F2_OUT), .SIMD(F2_SIMD), .PE(F2_PE),
                .IN_W(A_BITS), .W_W(W_BITS), .ACC_W(ACC_BITS), .A_W(A_BITS),
                .USE_THR(1'b0), .SEED(SEED_F2), .DENSITY(100),
                .TSTEP(1)) u_f2 (
    .clk, .rst_n,
    .in_valid(f1_v), .in_ready(f1_r), .in_data(f1_d),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(f2_d));

  assign out_scores = f2_d;

endmodule

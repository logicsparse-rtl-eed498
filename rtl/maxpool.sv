// maxpool: 2x2, stride-2 max pooling on a raster pixel stream (layers C1P
// and C2P).
//
// Pixels (C unsigned channels per beat) arrive row by row. On an even row
// the maximum of each horizontal pair is kept in a half-row buffer; on the
// following odd row the pair maximum is combined with the buffered one and
// the pooled pixel is sent out. Because the activations are unsigned
// threshold counts, max pooling of activations equals pooling before the
// threshold, which is why pooling follows the matrix unit.
//
// Interface: valid/ready streams, C*IN_W bits in and out. One output beat for
// every four input beats, registered; an input is only refused while a
// finished output waits (in_ready = !out_valid || out_ready).
//
// Pooling after each of the first two convolutions comes from the
// accelerator's layer list; the 2x2 window is the classic LeNet-5 one, and
// the buffer structure is this design's choice. IFM must be even.
module maxpool #(
  parameter int unsigned IFM  = ls_pkg::IMG_DIM - ls_pkg::K + 1,
  parameter int unsigned C    = ls_pkg::C1_CH,
  parameter int unsigned IN_W = ls_pkg::A_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [C*IN_W-1:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [C*IN_W-1:0] out_data
);

  localparam int unsigned XW = $clog2(IFM);

  initial assert (IFM % 2 == 0) else $error("maxpool needs an even IFM");

  logic [XW-1:0]     x, y;
  logic [C*IN_W-1:0] hold;
  logic [C*IN_W-1:0] rowbuf [IFM/2];
  logic [C*IN_W-1:0] pair_max, quad_max;

  function automatic logic [C*IN_W-1:0] vmax(input logic [C*IN_W-1:0] a,
                                             input logic [C*IN_W-1:0] b);
    logic [C*IN_W-1:0] m;
    for (int c = 0; c < int'(C); c++)
      m[c*IN_W +: IN_W] = (a[c*IN_W +: IN_W] > b[c*IN_W +: IN_W])
                          ? a[c*IN_W +: IN_W] : b[c*IN_W +: IN_W];
    return m;
  endfunction

  assign pair_max = vmax(hold, in_data);
  assign quad_max = vmax(rowbuf[x[XW-1:1]], pair_max);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x         <= '0;
      y         <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (!x[0]) begin
          hold <= in_data;
        end else if (!y[0]) begin
          rowbuf[x[XW-1:1]] <= pair_max;
        end else begin
          out_data  <= quad_max;
          out_valid <= 1'b1;
        end
        if (x == XW'(IFM-1)) begin
          x <= '0;
          y <= (y == XW'(IFM-1)) ? '0 : y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

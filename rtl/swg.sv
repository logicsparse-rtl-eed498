// swg: sliding-window generator, the convolution input stage of a layer
// (C1, C2, C3). It turns a convolution into a stream of matrix-vector
// products: for every output position it emits the K x K x C input window
// as one vector, so that the following matrix unit sees an im2col matrix.
//
// Pixels arrive in raster order, one pixel (all C channels) per beat, and
// are written into one of two frame banks. Windows are read from the bank
// being read in raster order of output positions (stride 1, no padding,
// OFM = IFM - K + 1). A window is emitted as soon as the last pixel it needs
// has been written, so reading overlaps writing within a frame; the second
// bank lets the next frame be written while the last windows of the current
// one are still waiting for a slow consumer. Window element order is
// (ky, kx, c) with c fastest: element ((ky*K + kx)*C + c).
//
// Interface: valid/ready streams; in_data is C elements of IN_W bits,
// out_data is K*K*C elements. out_valid is registered. With a consumer that
// is always ready the generator accepts one pixel per cycle without a gap,
// also across frames.
//
// The generator's role comes from the accelerator's layer list; the double
// frame buffer (rather than line buffers) is this design's simple choice.
module swg #(
  parameter int unsigned IFM  = ls_pkg::IMG_DIM,
  parameter int unsigned C    = 1,
  parameter int unsigned K    = ls_pkg::K,
  parameter int unsigned IN_W = ls_pkg::IN_BITS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [C*IN_W-1:0]     in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [K*K*C*IN_W-1:0] out_data
);

  localparam int unsigned OFM  = IFM - K + 1;
  localparam int unsigned NPIX = IFM * IFM;
  localparam int unsigned PW   = $clog2(NPIX + 1);
  localparam int unsigned OW   = (OFM > 1) ? $clog2(OFM) : 1;

  logic [C*IN_W-1:0] mem [2][NPIX];

  logic          wr_bank, rd_bank;
  logic [PW-1:0] wr_cnt;
  logic [1:0]    filled;          // bank fully written, windows pending
  logic [OW-1:0] oy, ox;

  // ------------------------------------------------------------------ write
  assign in_ready = !filled[wr_bank];

  // ------------------------------------------------------------------- read
  logic [PW-1:0]           need;  // raster index of the window's last pixel
  logic                    avail, emit;
  logic [K*K*C*IN_W-1:0]   win;

  assign need  = PW'((int'(oy) + K - 1) * IFM + int'(ox) + K - 1);
  assign avail = filled[rd_bank] || ((wr_bank == rd_bank) && (wr_cnt > need));
  assign emit  = avail && (!out_valid || out_ready);

  always_comb begin
    for (int ky = 0; ky < int'(K); ky++)
      for (int kx = 0; kx < int'(K); kx++)
        win[(ky*K+kx)*C*IN_W +: C*IN_W] =
          mem[rd_bank][(int'(oy)+ky)*IFM + int'(ox) + kx];
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wr_bank][int'(wr_cnt)] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_bank   <= 1'b0;
      rd_bank   <= 1'b0;
      wr_cnt    <= '0;
      filled    <= '0;
      oy        <= '0;
      ox        <= '0;
      out_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) begin
        if (wr_cnt == PW'(NPIX-1)) begin
          wr_cnt           <= '0;
          filled[wr_bank]  <= 1'b1;
          wr_bank          <= ~wr_bank;
        end else begin
          wr_cnt <= wr_cnt + 1'b1;
        end
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (emit) begin
        out_data  <= win;
        out_valid <= 1'b1;
        if (ox == OW'(OFM-1)) begin
          ox <= '0;
          if (oy == OW'(OFM-1)) begin
            oy              <= '0;
            filled[rd_bank] <= 1'b0;
            rd_bank         <= ~rd_bank;
          end else begin
            oy <= oy + 1'b1;
          end
        end else begin
          ox <= ox + 1'b1;
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule

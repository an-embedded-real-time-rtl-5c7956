// lpd_accel: streaming accelerator of the license plate detection network.
//
// A 576 x 576 RGB frame (8 bits per colour, pixels in raster order, one
// pixel per beat) goes through ten quantised convolution layers; a 2x2 max
// pool follows each of the first five, so the map shrinks to 18 x 18.  The
// last layer has 18 output channels (3 anchor boxes x {x, y, w, h, class,
// confidence}); its accumulators pass through the quantised sigmoid and leave
// as 18 x 18 beats of 18 unsigned 8-bit values, again in raster order.
//
//   layer   0   1   2   3   4    5    6    7(1x1)  8    9
//   map   576 288 144  72  36   18   18   18     18   18
//   Cout    8   8  16  32  56  104  208   56    104   18
//   pool    y   y   y   y   y    -    -    -      -    -
//
// Every stage is a separate streaming unit joined by ready/valid, so all
// layers work at the same time on different parts of the frame, as in a
// dataflow accelerator.  Each layer's weight memory is written through the
// shared load port: wr_layer selects the layer, wr_addr the word, and the
// low PE*SIMD*4 bits of wr_data hold the word (layout in mvau.sv).
//
// Frame time is set by the slowest layer: (pixels of its map) x (its fold
// NF*SF) cycles; with the default folding in lpr_pkg about 1.5 million
// cycles, i.e. 9.9 ms at a 150 MHz clock.
//
// From the paper: the layer sequence, map sizes, channel counts, 4-bit
// weights and activations, 576x576 input and 18x18x18 output, and the
// quantised sigmoid.  This design's own: the folding, the shift
// requantisation, the load port, the 8-bit input pixels.  IMG may be
// lowered (a multiple of 32) for short simulations.
module lpd_accel
  import lpr_pkg::*;
#(
  parameter int IMG     = LPD_IMG,
  parameter int WDW     = 288,
  parameter int SIG_SHIFT = relu_shift(9 * 104, 4, 4) - 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // weight load port
  input  logic                        wr_en,
  input  logic [3:0]                  wr_layer,
  input  logic [15:0]                 wr_addr,
  input  logic [WDW-1:0]              wr_data,
  // input frame stream (R in bits 7:0, G 15:8, B 23:16)
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [LPD_IN_CH*PIXBITS-1:0] in_data,
  // detection output stream, one grid cell per beat
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [LPD_OUT_CH*8-1:0]     out_data
);
  localparam int MAXW = 832;   // widest stage stream (208 channels x 4 bits)

  logic            s_valid [LPD_NL+1];
  logic            s_ready [LPD_NL+1];
  logic [MAXW-1:0] s_data  [LPD_NL+1];

  assign s_valid[0] = in_valid;
  assign in_ready   = s_ready[0];
  assign s_data[0]  = MAXW'(in_data);

  for (genvar i = 0; i < LPD_NL; i++) begin : g_l
    localparam int CIN   = (i == 0) ? LPD_IN_CH : LPD_COUT[(i == 0) ? 0 : i - 1];
    localparam int COUT  = LPD_COUT[i];
    localparam int K     = LPD_K[i];
    localparam int HW    = IMG >> ((i < 5) ? i : 5);
    localparam int IB    = (i == 0) ? PIXBITS : ABITS;
    localparam bit LIN   = (i == LPD_NL - 1);
    localparam int OB    = LIN ? ACCBITS : ABITS;
    localparam int WWORD = LPD_PE[i] * LPD_SIMD[i] * LPD_WBITS;
    localparam int NW    = (COUT / LPD_PE[i]) * (K * K * CIN / LPD_SIMD[i]);
    localparam int AW    = (NW > 1) ? $clog2(NW) : 1;

    logic                c_valid, c_ready;
    logic [COUT*OB-1:0]  c_data;

    conv_layer #(
      .H(HW), .W(HW), .CIN(CIN), .COUT(COUT), .K(K), .IBITS(IB),
      .WBITS(LPD_WBITS), .SIMD(LPD_SIMD[i]), .PE(LPD_PE[i]),
      .SHIFT(relu_shift(K * K * CIN, LPD_WBITS, IB)), .RELU(!LIN), .OBITS(OB)
    ) u_conv (
      .clk, .rst_n,
      .wr_en   (wr_en && wr_layer == 4'(i)),
      .wr_addr (wr_addr[AW-1:0]),
      .wr_data (wr_data[WWORD-1:0]),
      .in_valid(s_valid[i]), .in_ready(s_ready[i]), .in_data(s_data[i][CIN*IB-1:0]),
      .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data));

    if (LPD_POOL[i] != 0) begin : g_pool
      logic [COUT*OB-1:0] p_data;
      maxpool2x2 #(.H(HW), .W(HW), .C(COUT), .BITS(OB)) u_pool (
        .clk, .rst_n,
        .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
        .out_valid(s_valid[i+1]), .out_ready(s_ready[i+1]), .out_data(p_data));
      assign s_data[i+1] = MAXW'(p_data);
    end else begin : g_nopool
      assign s_valid[i+1] = c_valid;
      assign c_ready      = s_ready[i+1];
      assign s_data[i+1]  = MAXW'(c_data);
    end
  end

  quant_sigmoid #(.N(LPD_OUT_CH), .IBITS(ACCBITS), .SHIFT(SIG_SHIFT)) u_sig (
    .clk, .rst_n,
    .in_valid(s_valid[LPD_NL]), .in_ready(s_ready[LPD_NL]),
    .in_data(s_data[LPD_NL][LPD_OUT_CH*ACCBITS-1:0]),
    .out_valid, .out_ready, .out_data);

  initial assert (IMG % 32 == 0) else $error("lpd_accel: IMG must be a multiple of 32");
endmodule

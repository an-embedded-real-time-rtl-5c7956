// lpcr_accel: streaming accelerator of the license plate character
// recognition network, with the character decision at its output.
//
// A cropped plate image of 64 x 128 grey pixels (8 bits, raster order, one
// pixel per beat) is max pooled 2x2 and then passes eleven quantised
// convolution layers, with further 2x2 max pools after layers 1, 3 and 6:
//
//   layer   0   1   2   3   4   5   6(1x1) 7   8(1x1) 9(1x1) 10
//   map   32x64   16x32   8x16       4x8
//   Cout   16  32  64 128 128 128  256    256 512    1024    296
//   wbits   4   4   4   2   2   2    2      2   2       2      1
//
// The 296 output channels are max pooled over the whole 4 x 8 map and then
// decoded by char_decoder into 8 characters with a softmax confidence test
// (a doubtful character becomes a space).  All activations are 4-bit
// unsigned (ReLU), the input pixels 8-bit.
//
// Each layer is its own streaming unit; the units run concurrently and are
// joined by ready/valid.  Weight memories are written through the shared
// load port (wr_layer selects the layer, wr_addr the word, the low
// PE*SIMD*WBITS bits of wr_data carry it).  With the default folding the
// slowest layer needs about 0.34 million cycles per plate, about 2.3 ms at
// 150 MHz.
//
// From the paper: the layer sequence, map sizes and channel counts, the
// per-layer weight bit widths (4, 2, 1), 4-bit activations, global max
// pooling, softmax and the space substitution.  This design's own: folding,
// shift requantisation, the 8 x 37 character split, the decoder's scale,
// the load port.  H and W may be lowered (multiples of 16) for short
// simulations.
module lpcr_accel
  import lpr_pkg::*;
#(
  parameter int  H     = LPCR_H,
  parameter int  W     = LPCR_W,
  parameter int  WDW   = 256,
  parameter real SCALE = 0.5
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight load port
  input  logic               wr_en,
  input  logic [3:0]         wr_layer,
  input  logic [15:0]        wr_addr,
  input  logic [WDW-1:0]     wr_data,
  input  logic [7:0]         conf_thr,   // confidence threshold, 1/256 units
  // plate image stream
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [PIXBITS-1:0] in_data,
  // recognised plate
  output logic               out_valid,
  input  logic               out_ready,
  output logic [7:0]         chars [NPOS],
  output logic [7:0]         cls   [NPOS],
  output logic [NPOS-1:0]    kept
);
  localparam int MAXW = 4096;  // widest stage stream (1024 channels x 4 bits)

  logic            s_valid [LPCR_NL+1];
  logic            s_ready [LPCR_NL+1];
  logic [MAXW-1:0] s_data  [LPCR_NL+1];

  // input 2x2 max pool on the 8-bit pixels
  logic [PIXBITS-1:0] p0_data;
  maxpool2x2 #(.H(H), .W(W), .C(1), .BITS(PIXBITS)) u_pool0 (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(s_valid[0]), .out_ready(s_ready[0]), .out_data(p0_data));
  assign s_data[0] = MAXW'(p0_data);

  // number of 2x2 pools in front of layer i
  function automatic int pools_before(int i);
    int n;
    n = 1;
    for (int j = 0; j < i; j++) n += LPCR_POOL[j];
    return n;
  endfunction

  for (genvar i = 0; i < LPCR_NL; i++) begin : g_l
    localparam int CIN   = (i == 0) ? 1 : LPCR_COUT[(i == 0) ? 0 : i - 1];
    localparam int COUT  = LPCR_COUT[i];
    localparam int K     = LPCR_K[i];
    localparam int LH    = H >> pools_before(i);
    localparam int LW    = W >> pools_before(i);
    localparam int IB    = (i == 0) ? PIXBITS : ABITS;
    localparam int WB    = LPCR_WBITS[i];
    localparam int WWORD = LPCR_PE[i] * LPCR_SIMD[i] * WB;
    localparam int NW    = (COUT / LPCR_PE[i]) * (K * K * CIN / LPCR_SIMD[i]);
    localparam int AW    = (NW > 1) ? $clog2(NW) : 1;

    logic                  c_valid, c_ready;
    logic [COUT*ABITS-1:0] c_data;

    conv_layer #(
      .H(LH), .W(LW), .CIN(CIN), .COUT(COUT), .K(K), .IBITS(IB),
      .WBITS(WB), .SIMD(LPCR_SIMD[i]), .PE(LPCR_PE[i]),
      .SHIFT(relu_shift(K * K * CIN, WB, IB)), .RELU(1'b1), .OBITS(ABITS)
    ) u_conv (
      .clk, .rst_n,
      .wr_en   (wr_en && wr_layer == 4'(i)),
      .wr_addr (wr_addr[AW-1:0]),
      .wr_data (wr_data[WWORD-1:0]),
      .in_valid(s_valid[i]), .in_ready(s_ready[i]), .in_data(s_data[i][CIN*IB-1:0]),
      .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data));

    if (LPCR_POOL[i] != 0) begin : g_pool
      logic [COUT*ABITS-1:0] p_data;
      maxpool2x2 #(.H(LH), .W(LW), .C(COUT), .BITS(ABITS)) u_pool (
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

  localparam int FH = H >> pools_before(LPCR_NL);
  localparam int FW = W >> pools_before(LPCR_NL);

  logic                          g_valid, g_ready;
  logic [LPCR_OUT_CH*ABITS-1:0]  g_data;

  global_maxpool #(.H(FH), .W(FW), .C(LPCR_OUT_CH), .BITS(ABITS)) u_gmax (
    .clk, .rst_n,
    .in_valid(s_valid[LPCR_NL]), .in_ready(s_ready[LPCR_NL]),
    .in_data(s_data[LPCR_NL][LPCR_OUT_CH*ABITS-1:0]),
    .out_valid(g_valid), .out_ready(g_ready), .out_data(g_data));

  char_decoder #(.NPOS(NPOS), .NCLS(NCLS), .BITS(ABITS), .SCALE(SCALE)) u_dec (
    .clk, .rst_n, .conf_thr,
    .in_valid(g_valid), .in_ready(g_ready), .in_data(g_data),
    .out_valid, .out_ready, .chars, .cls, .kept);

  initial assert (H % 16 == 0 && W % 16 == 0) else $error("lpcr_accel: H, W must be multiples of 16");
endmodule

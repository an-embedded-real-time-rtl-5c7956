// conv_layer: one quantised convolution layer of a streaming CNN, "same"
// padding, stride 1, followed by ReLU and requantisation (or a raw
// accumulator output when RELU = 0).
//
// A K = 3 layer is a sliding_window line buffer feeding an mvau; a K = 1
// layer feeds each pixel straight into the mvau.  Input and output are
// raster-order pixel streams of H x W pixels with all channels packed in one
// beat (CIN*IBITS and COUT*OBITS bits).  The weight memory of the mvau is
// loaded through the wr_* port; word layout and folding are described in
// mvau.sv.  Throughput: one output pixel every (COUT/PE)*(K*K*CIN/SIMD)
// cycles.
//
// Kernel sizes, channel counts and ReLU follow the paper's network diagrams;
// the folding and the requantisation by SHIFT are this design's own.
module conv_layer #(
  parameter int H     = 4,
  parameter int W     = 4,
  parameter int CIN   = 2,
  parameter int COUT  = 4,
  parameter int K     = 3,
  parameter int IBITS = 4,
  parameter int WBITS = 4,
  parameter int SIMD  = 6,
  parameter int PE    = 2,
  parameter int SHIFT = 4,
  parameter bit RELU  = 1'b1,
  parameter int OBITS = 4,
  localparam int KDIM  = K * K * CIN,
  localparam int NW    = (COUT / PE) * (KDIM / SIMD),
  localparam int WWORD = PE * SIMD * WBITS,
  localparam int AW    = (NW > 1) ? $clog2(NW) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  logic [WWORD-1:0]       wr_data,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [CIN*IBITS-1:0]   in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [COUT*OBITS-1:0]  out_data
);
  logic                  v_valid, v_ready;
  logic [KDIM*IBITS-1:0] v_data;

  if (K == 3) begin : g_win
    sliding_window #(.H(H), .W(W), .C(CIN), .BITS(IBITS)) u_win (
      .clk, .rst_n,
      .in_valid, .in_ready, .in_data,
      .out_valid(v_valid), .out_ready(v_ready), .out_data(v_data));
  end else begin : g_pix
    assign v_valid  = in_valid;
    assign in_ready = v_ready;
    assign v_data   = in_data;
  end

  mvau #(.KDIM(KDIM), .COUT(COUT), .IBITS(IBITS), .WBITS(WBITS), .SIMD(SIMD),
         .PE(PE), .SHIFT(SHIFT), .RELU(RELU), .OBITS(OBITS)) u_mvau (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data,
    .in_valid(v_valid), .in_ready(v_ready), .in_data(v_data),
    .out_valid, .out_ready, .out_data);

  initial begin
    assert (K == 1 || K == 3) else $error("conv_layer: K must be 1 or 3");
    assert (KDIM % SIMD == 0 && COUT % PE == 0) else $error("conv_layer: folding must divide");
  end
endmodule

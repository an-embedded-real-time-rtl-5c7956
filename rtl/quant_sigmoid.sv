// quant_sigmoid: quantised sigmoid of the detection network's last layer.
//
// Each of the N signed accumulator values of a beat is scaled to the 8-bit
// code q = acc >>> SHIFT, clipped to -128 .. 127, which stands for the real
// value q * 3.5/128, i.e. the input limited to [-3.5, 3.5] and quantised to
// 8 bits.  The code indexes a 256-entry table holding
// round(255 * sigmoid(q * 3.5/128)), so the output is an unsigned 8-bit
// fraction of one.  The table is computed at elaboration from the sigmoid
// formula.
//
// Following the paper: the limit of 3.5, the 8-bit quantisation and the
// 256 precomputed sigmoid values replacing HardTanh.  This design's own
// choices: the symmetric code scale 3.5/128, the 8-bit output, and the
// power-of-two SHIFT that maps accumulator units onto the code.
//
// Interface: ready/valid, one register stage (one cycle latency, one beat
// per cycle).
module quant_sigmoid #(
  parameter int N     = 18,
  parameter int IBITS = 32,
  parameter int SHIFT = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [N*IBITS-1:0] in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [N*8-1:0]     out_data
);
  typedef logic [7:0] lut_t [256];

  function automatic int sigmoid_code(int i);
    real x;
    x = real'(i - 128) * 3.5 / 128.0;
    return int'(255.0 / (1.0 + $exp(-x)));   // int' rounds to nearest
  endfunction

  function automatic lut_t make_lut();
    lut_t l;
    for (int i = 0; i < 256; i++) l[i] = 8'(sigmoid_code(i));
    return l;
  endfunction

  localparam lut_t LUT = make_lut();

  function automatic logic [7:0] code_of(logic signed [IBITS-1:0] a);
    logic signed [IBITS-1:0] v;
    v = a >>> SHIFT;
    if (v < -128) return 8'd0;
    if (v > 127)  return 8'd255;
    return 8'(v + 128);
  endfunction

  logic [N*8-1:0] y;
  always_comb begin
    for (int k = 0; k < N; k++)
      y[k*8 +: 8] = LUT[code_of(in_data[k*IBITS +: IBITS])];
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (in_ready) out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) out_data <= y;
  end
endmodule

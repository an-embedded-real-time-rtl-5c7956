// mvau: folded matrix-vector-activation unit, the compute core of one
// quantised convolution layer.
//
// One input beat is a vector of KDIM unsigned IBITS activations (a 3x3xCin
// window or a 1x1xCin pixel).  The unit multiplies it by a COUT x KDIM
// weight matrix held in an on-chip memory, and emits one beat of COUT
// results.  The work is folded: every clock, PE output channels each take
// SIMD products, so one vector takes NF*SF = (COUT/PE)*(KDIM/SIMD) cycles.
// PE and SIMD are the parallelism knobs of the layer.
//
// Weights are signed WBITS integers; a 1-bit weight is bipolar (0 -> -1,
// 1 -> +1).  Memory word a = nf*SF + sf holds PE*SIMD weights; bits
// [(p*SIMD + s)*WBITS +: WBITS] are the weight of output channel nf*PE + p
// and input element sf*SIMD + s.  The memory is written through the wr_*
// port (one word per cycle) before frames are streamed.
//
// Activation: with RELU = 1 each accumulator is shifted right by SHIFT and
// clipped to 0 .. 2^OBITS-1 (ReLU followed by uniform OBITS-bit
// quantisation).  With RELU = 0 the raw signed accumulator is passed on in
// OBITS bits (used in front of the quantised sigmoid).
//
// Timing: a new input is taken in the same cycle as the last fold step of
// the previous one, so a stream of vectors is processed at exactly NF*SF
// cycles per vector when the output side does not stall.  The result
// appears in an output register one cycle after the last fold step.
//
// The layer shapes and weight bit widths come from the networks described
// in the paper; the folding order, memory layout, shift-based requantisation
// and the load port are this design's own choices.
module mvau #(
  parameter int KDIM  = 18,
  parameter int COUT  = 4,
  parameter int IBITS = 4,
  parameter int WBITS = 4,
  parameter int SIMD  = 9,
  parameter int PE    = 2,
  parameter int SHIFT = 4,
  parameter bit RELU  = 1'b1,
  parameter int OBITS = 4,
  localparam int NF    = COUT / PE,
  localparam int SF    = KDIM / SIMD,
  localparam int WWORD = PE * SIMD * WBITS,
  localparam int AW    = (NF * SF > 1) ? $clog2(NF * SF) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // weight memory load port
  input  logic                   wr_en,
  input  logic [AW-1:0]          wr_addr,
  input  logic [WWORD-1:0]       wr_data,
  // input vectors
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [KDIM*IBITS-1:0]  in_data,
  // output vectors
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [COUT*OBITS-1:0]  out_data
);
  import lpr_pkg::*;

  logic [WWORD-1:0] wmem [NF*SF];

  always_ff @(posedge clk) begin
    if (wr_en) wmem[wr_addr] <= wr_data;
  end

  logic [KDIM*IBITS-1:0]      xbuf;
  logic                       busy;
  int unsigned                nf, sf;
  logic signed [ACCBITS-1:0]  acc [PE];
  logic [COUT*OBITS-1:0]      res, res_n;
  logic signed [ACCBITS-1:0]  psum [PE];
  logic [WWORD-1:0]           wword;
  logic [SIMD*IBITS-1:0]      xs;

  assign wword = wmem[nf * SF + sf];
  assign xs    = xbuf[sf * SIMD * IBITS +: SIMD * IBITS];

  // SIMD-wide dot products of the current fold step
  always_comb begin
    for (int p = 0; p < PE; p++) begin
      psum[p] = '0;
      for (int s = 0; s < SIMD; s++) begin
        psum[p] += ACCBITS'(wval(4'(wword[(p*SIMD + s)*WBITS +: WBITS]), WBITS)) *
                   $signed({1'b0, xs[s*IBITS +: IBITS]});
      end
    end
  end

  function automatic logic [OBITS-1:0] act(logic signed [ACCBITS-1:0] a);
    logic signed [ACCBITS-1:0] v;
    if (!RELU) return OBITS'(a);
    v = a >>> SHIFT;
    if (v < 0) return '0;
    if (v > ACCBITS'((1 << OBITS) - 1)) return '1;
    return OBITS'(v);
  endfunction

  wire last_sf = (sf == SF - 1);
  wire last    = busy && last_sf && (nf == NF - 1);
  // the final fold step waits while the output register is still full
  wire adv     = busy && !(last && out_valid && !out_ready);

  always_comb begin
    res_n = res;
    for (int p = 0; p < PE; p++)
      res_n[(nf*PE + p)*OBITS +: OBITS] = act(acc[p] + psum[p]);
  end

  assign in_ready = !busy || (last && adv);
  wire in_fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; nf <= 0; sf <= 0;
      out_valid <= 1'b0;
      for (int p = 0; p < PE; p++) acc[p] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv) begin
        if (last_sf) begin
          for (int p = 0; p < PE; p++) acc[p] <= '0;
          sf <= 0;
          if (last) begin
            out_valid <= 1'b1;
            busy      <= 1'b0;
            nf        <= 0;
          end else begin
            nf <= nf + 1;
          end
        end else begin
          for (int p = 0; p < PE; p++) acc[p] <= acc[p] + psum[p];
          sf <= sf + 1;
        end
      end
      if (in_fire) busy <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire) xbuf <= in_data;
    if (adv && last_sf) res <= res_n;
    if (adv && last) out_data <= res_n;
  end

  // the output register is never overwritten while it holds an unread result
  assert property (@(posedge clk) disable iff (!rst_n)
                   (out_valid && !out_ready) |-> !(adv && last));
endmodule

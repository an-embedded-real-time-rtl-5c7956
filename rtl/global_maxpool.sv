// global_maxpool: channel-wise maximum over a whole H x W feature map.
//
// Pixels of C unsigned BITS-bit channels arrive in raster order; after the
// H*W-th pixel the module emits one beat holding, for every channel, the
// largest value seen in the frame.  The running maximum register is loaded
// directly from the first pixel of each frame, so frames follow each other
// without a clear cycle.
//
// Interface: ready/valid on both sides; input is stalled only while the
// result of the previous frame waits to be read.
//
// The paper applies global max pooling to every output channel of the
// character recognition network before the softmax; the implementation is
// this design's own.
module global_maxpool #(
  parameter int H    = 2,
  parameter int W    = 2,
  parameter int C    = 4,
  parameter int BITS = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [C*BITS-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [C*BITS-1:0]  out_data
);
  logic [C*BITS-1:0] run_max, nxt;
  int unsigned cnt;

  always_comb begin
    for (int ch = 0; ch < C; ch++)
      nxt[ch*BITS +: BITS] = (cnt == 0 || in_data[ch*BITS +: BITS] > run_max[ch*BITS +: BITS])
                             ? in_data[ch*BITS +: BITS] : run_max[ch*BITS +: BITS];
  end

  assign in_ready = !out_valid || out_ready;
  wire in_fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= 0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (cnt == H * W - 1) begin
          cnt <= 0;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire) begin
      run_max <= nxt;
      if (cnt == H * W - 1) out_data <= nxt;
    end
  end
endmodule

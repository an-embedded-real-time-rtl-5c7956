// maxpool2x2: streaming 2x2 max pooling with stride 2.
//
// Input pixels (C unsigned channels of BITS bits, packed) arrive in raster
// order over an H x W map; the output is the (H/2) x (W/2) map of
// channel-wise maxima of each 2x2 block, also in raster order.  H and W must
// be even.
//
// How it works: on an even column the pixel is held; on the following odd
// column the pair maximum is formed.  On an even row that pair maximum is
// stored in a half-row buffer; on an odd row it is combined with the stored
// value and emitted.  One output is produced for every four inputs.
//
// Interface: ready/valid on both sides with a single output register; the
// input is stalled only while that register holds an unread result.
//
// The operation (2x2 max pooling) is the paper's; the buffering is this
// design's own.
module maxpool2x2 #(
  parameter int H    = 4,
  parameter int W    = 4,
  parameter int C    = 2,
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
  logic [C*BITS-1:0] hold;
  logic [C*BITS-1:0] half_row [W/2];
  int unsigned r, c;

  function automatic logic [C*BITS-1:0] vmax(logic [C*BITS-1:0] a, logic [C*BITS-1:0] b);
    logic [C*BITS-1:0] m;
    for (int ch = 0; ch < C; ch++)
      m[ch*BITS +: BITS] = (a[ch*BITS +: BITS] > b[ch*BITS +: BITS]) ? a[ch*BITS +: BITS]
                                                                     : b[ch*BITS +: BITS];
    return m;
  endfunction

  logic [C*BITS-1:0] pair, quad;
  assign pair = vmax(hold, in_data);
  assign quad = vmax(half_row[c/2], pair);

  assign in_ready = !out_valid || out_ready;
  wire in_fire = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= 0; c <= 0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (c == W - 1) begin
          c <= 0;
          r <= (r == H - 1) ? 0 : r + 1;
        end else begin
          c <= c + 1;
        end
        if (c[0] && r[0]) out_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_fire) begin
      if (!c[0]) hold <= in_data;
      else if (!r[0]) half_row[c/2] <= pair;
      else out_data <= quad;
    end
  end
endmodule

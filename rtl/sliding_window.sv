// sliding_window: 3x3 window generator for a stride-1, zero-padded
// convolution over a streamed feature map.
//
// Pixels arrive in raster order, one pixel (all C channels, packed) per
// accepted beat.  They are written into a three-row circular line buffer.
// For each output position (r, c), also in raster order, the module emits
// the 3x3 neighbourhood of that pixel as one wide beat; neighbours outside
// the frame read as zero ("same" padding, so the output map is H x W).
//
// Element order in out_data: element e = (ky*3 + kx)*C + ch occupies bits
// [e*BITS +: BITS], ky/kx = 0..2 from the top-left neighbour.  The MVAU that
// follows uses the same order for its weight columns.
//
// Flow control: ready/valid on both sides.  An output window is offered as
// soon as the last pixel it needs (row r+1, column c+1, clipped to the
// frame) has been written; a new pixel is accepted only when the row slot it
// overwrites is no longer needed (the first three rows overwrite nothing).
// After the H*W-th window the counters return to zero and the next frame may start.  With a downstream that is
// always ready the module passes one window per cycle after a start-up
// delay of W+2 pixels.
//
// The line buffer is the usual structure of a streaming convolution input
// generator; its details are this design's own.
module sliding_window #(
  parameter int H    = 8,
  parameter int W    = 8,
  parameter int C    = 4,
  parameter int BITS = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [C*BITS-1:0]       in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [9*C*BITS-1:0]     out_data
);
  localparam int NPIX = H * W;
  localparam int PW   = C * BITS;

  logic [PW-1:0] line_buf [3][W];

  int unsigned in_idx, out_idx;     // linear pixel indices inside the frame
  int unsigned in_c, out_r, out_c;
  logic [1:0]  in_slot, out_slot;   // row slot = row mod 3

  int unsigned need_r, need_c;
  always_comb begin
    need_r = (out_r + 1 < H) ? out_r + 1 : H - 1;
    need_c = (out_c + 1 < W) ? out_c + 1 : W - 1;
  end

  // pixel in_idx overwrites pixel in_idx - 3W, whose last reader is the
  // window one row below and one column to the right (clipped to the frame)
  assign in_ready  = (in_idx < NPIX) &&
                     (in_idx < 3 * W ||
                      out_idx + 2 * W > in_idx + ((in_c == W - 1) ? 0 : 1));
  assign out_valid = (out_idx < NPIX) && (in_idx > need_r * W + need_c);

  // window assembly
  always_comb begin
    out_data = '0;
    for (int ky = 0; ky < 3; ky++) begin
      for (int kx = 0; kx < 3; kx++) begin
        int rr, cc;
        logic [1:0] sl;
        rr = int'(out_r) + ky - 1;
        cc = int'(out_c) + kx - 1;
        sl = (ky == 0) ? ((out_slot == 2'd0) ? 2'd2 : out_slot - 2'd1) :
             (ky == 1) ? out_slot :
                         ((out_slot == 2'd2) ? 2'd0 : out_slot + 2'd1);
        if (rr >= 0 && rr < H && cc >= 0 && cc < W)
          out_data[(ky*3+kx)*PW +: PW] = line_buf[sl][cc];
      end
    end
  end

  wire in_fire  = in_valid && in_ready;
  wire out_fire = out_valid && out_ready;
  wire frame_end = out_fire && (out_idx == NPIX - 1);

  always_ff @(posedge clk) begin
    if (in_fire) line_buf[in_slot][in_c] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_idx <= 0; in_c <= 0; in_slot <= 2'd0;
      out_idx <= 0; out_r <= 0; out_c <= 0; out_slot <= 2'd0;
    end else if (frame_end) begin
      // all pixels of the frame were accepted before its last window
      in_idx <= 0; in_c <= 0; in_slot <= 2'd0;
      out_idx <= 0; out_r <= 0; out_c <= 0; out_slot <= 2'd0;
    end else begin
      if (in_fire) begin
        in_idx <= in_idx + 1;
        if (in_c == W - 1) begin
          in_c    <= 0;
          in_slot <= (in_slot == 2'd2) ? 2'd0 : in_slot + 2'd1;
        end else begin
          in_c <= in_c + 1;
        end
      end
      if (out_fire) begin
        out_idx <= out_idx + 1;
        if (out_c == W - 1) begin
          out_c    <= 0;
          out_r    <= out_r + 1;
          out_slot <= (out_slot == 2'd2) ? 2'd0 : out_slot + 2'd1;
        end else begin
          out_c <= out_c + 1;
        end
      end
    end
  end

  // a window is never offered before the pixels it reads have arrived
  assert property (@(posedge clk) disable iff (!rst_n) out_valid |-> in_idx > out_idx);
endmodule

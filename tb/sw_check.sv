// sw_check: one sliding_window instance with its own stimulus and checker,
// used by tb_sliding_window for several frame shapes.  Two frames are
// streamed back to back with random gaps on the input and random
// back-pressure on the output, then a third frame with no gaps and no
// back-pressure checks the rate: H*W windows within H*W + W + 4 cycles.
// Every window is compared with one cut directly from the stored frame.
module sw_check #(
  parameter int H = 5, W = 6, C = 2, BITS = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output bit   done
);

  logic in_valid, in_ready, out_valid, out_ready;
  logic [C*BITS-1:0] in_data;
  logic [9*C*BITS-1:0] out_data;

  sliding_window #(.H(H), .W(W), .C(C), .BITS(BITS)) dut (.*);

  int frame [3][H*W*C];
  int in_f = 0, in_p = 0, out_f = 0, out_p = 0;
  bit rand_mode = 1;
  int t_first_in, t_last_out, cyc = 0;

  initial begin
    checks = 0; failures = 0; done = 0;
    foreach (frame[f, k]) frame[f][k] = $urandom_range(0, 15);
  end

  always @(posedge clk) cyc <= cyc + 1;

  // driver
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_valid <= 0; out_ready <= 0;
    end else begin
      if (in_valid && in_ready) in_p <= in_p + 1;
      if (in_valid && in_ready && in_p == H*W - 1) begin in_f <= in_f + 1; in_p <= 0; end
    end
  end
  always_comb begin
    for (int ch = 0; ch < C; ch++) in_data[ch*BITS +: BITS] = BITS'(frame[in_f % 3][in_p*C + ch]);
  end
  always @(negedge clk) if (rst_n) begin
    rand_mode = (in_f < 2 || out_f < 2);
    in_valid  <= (in_f < 3) && (!rand_mode || $urandom_range(0, 3) != 0);
    out_ready <= !rand_mode || $urandom_range(0, 2) != 0;
  end

  // checker
  always @(posedge clk) if (rst_n && !done && out_valid && out_ready) begin
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        for (int ch = 0; ch < C; ch++) begin
          int r, c, exp_v;
          r = out_p / W + ky - 1; c = out_p % W + kx - 1;
          exp_v = (r >= 0 && r < H && c >= 0 && c < W) ? frame[out_f][(r*W + c)*C + ch] : 0;
          checks++;
          if (int'(out_data[((ky*3 + kx)*C + ch)*BITS +: BITS]) != exp_v) begin
            failures++;
            if (failures < 10) $display("mismatch f%0d p%0d k(%0d,%0d) ch%0d: %0d vs %0d",
                                        out_f, out_p, ky, kx, ch, out_data[((ky*3+kx)*C+ch)*BITS +: BITS], exp_v);
          end
        end
    if (out_f == 2 && out_p == 0) t_first_in = cyc;
    if (out_p == H*W - 1) begin out_f++; out_p = 0; end
    else out_p++;
    if (out_f == 3) begin
      t_last_out = cyc;
      checks++;
      if (t_last_out - t_first_in > H*W + W + 4) begin
        failures++; $display("rate: %0d cycles for %0d windows", t_last_out - t_first_in, H*W);
      end
      done = 1;
    end
  end
endmodule

// tb_lpd_accel: end-to-end check of the detection accelerator at a reduced
// input size (IMG = 64, so the output grid is 2 x 2).  Random 4-bit weights
// are written into all ten layers through the load port, two random RGB
// frames are streamed back to back, and every one of the 2 x 2 x 18 sigmoid
// outputs per frame is compared with the reference network of lpr_ref_pkg.
// The output side applies random back-pressure.  The frame time is checked
// against the slowest layer's pixels x fold product.
module tb_lpd_accel;
  import lpr_pkg::*;
  import lpr_ref_pkg::*;
  localparam int IMG = 64, G = IMG / 32, NFR = 2;
  localparam int SIGS = relu_shift(9 * 104, 4, 4) - 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [3:0] wr_layer; logic [15:0] wr_addr; logic [287:0] wr_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [23:0] in_data;
  logic [LPD_OUT_CH*8-1:0] out_data;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  lpd_accel #(.IMG(IMG)) dut (.*);

  fmap_t w [LPD_NL];
  fmap_t img [NFR], expv [NFR];
  int ip = 0, op = 0, t_in0 = 0, t_out_last = 0, nonzero = 0;
  bit loaded = 0;
  int hist [8];

  always_comb for (int ch = 0; ch < 3; ch++)
    in_data[ch*8 +: 8] = 8'(img[(ip / (IMG*IMG)) % NFR][(ip % (IMG*IMG))*3 + ch]);

  always @(negedge clk) if (loaded) begin
    in_valid  <= ip < NFR*IMG*IMG;
    out_ready <= $urandom_range(0, 1) != 0;
  end

  always @(posedge clk) if (loaded) begin
    if (in_valid && in_ready) begin
      if (ip == 0) t_in0 = cyc;
      ip <= ip + 1;
    end
    if (out_valid && out_ready) begin
      for (int k = 0; k < LPD_OUT_CH; k++) begin
        int e;
        e = expv[op / (G*G)][(op % (G*G))*LPD_OUT_CH + k];
        checks++;
        if (e != 128) nonzero++;
        hist[e / 32]++;
        if (int'(out_data[k*8 +: 8]) != e) begin
          failures++;
          if (failures < 10) $display("cell %0d ch %0d: %0d vs %0d", op, k, out_data[k*8 +: 8], e);
        end
      end
      op = op + 1;
      if (op == G*G) t_out_last = cyc;
      if (op == NFR*G*G) begin
        int maxc, c, fill;
        maxc = 0; fill = 0;
        for (int i = 0; i < LPD_NL; i++) begin
          c = (IMG >> ((i < 5) ? i : 5)) ** 2 * (LPD_COUT[i] / LPD_PE[i]) * (lpd_kdim(i) / LPD_SIMD[i]);
          if (c > maxc) maxc = c;
          fill += (LPD_COUT[i] / LPD_PE[i]) * (lpd_kdim(i) / LPD_SIMD[i]) * (2 * (IMG >> ((i < 5) ? i : 5)) + 4);
        end
        $display("first frame: %0d cycles, slowest layer %0d cycles, fill bound %0d", t_out_last - t_in0, maxc, fill);
        checks++;
        if (t_out_last - t_in0 > maxc + fill) begin failures++; $display("frame too slow"); end
        $display("output histogram (/32): %p", hist);
        checks++;
        if (nonzero < NFR*G*G*LPD_OUT_CH / 2) begin failures++; $display("degenerate outputs"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    for (int i = 0; i < LPD_NL; i++) w[i] = rand_w(LPD_COUT[i] * lpd_kdim(i), LPD_WBITS);
    for (int f = 0; f < NFR; f++) begin
      img[f] = new[IMG*IMG*3];
      foreach (img[f][k]) img[f][k] = $urandom_range(0, 255);
      expv[f] = lpd_ref(img[f], IMG, w, SIGS);
    end
    wr_en = 0; wr_layer = 0; wr_addr = 0; wr_data = '0; in_valid = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < LPD_NL && w[i].size() > 0; i++) begin   // run-time bound: not unrolled
      int nw;
      nw = (LPD_COUT[i] / LPD_PE[i]) * (lpd_kdim(i) / LPD_SIMD[i]);
      for (int a = 0; a < nw; a++) begin
        @(negedge clk);
        wr_en = 1; wr_layer = 4'(i); wr_addr = 16'(a);
        wr_data = 288'(word_of(w[i], lpd_kdim(i), LPD_PE[i], LPD_SIMD[i], LPD_WBITS, a));
      end
    end
    @(negedge clk) wr_en = 0;
    loaded = 1;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog timeout ip=%0d op=%0d", ip, op);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

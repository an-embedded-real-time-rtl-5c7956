// tb_lpcr_accel: end-to-end check of the character recognition accelerator
// at a reduced plate size (16 x 32 instead of 64 x 128, so the last map is
// 1 x 2).  Random weights of the per-layer widths (4, 2 and 1 bit) are
// written through the load port, three random plates are streamed back to
// back with three confidence thresholds (0: everything kept, a middle one,
// 255: almost everything replaced by spaces), and class, character and
// kept flag of all 8 positions are compared with the reference network and
// softmax of lpr_ref_pkg.  The plate time is checked against the slowest
// layer's pixels x fold product plus the pipeline fill.
module tb_lpcr_accel;
  import lpr_pkg::*;
  import lpr_ref_pkg::*;
  localparam int H = 16, W = 32, NP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en; logic [3:0] wr_layer; logic [15:0] wr_addr; logic [255:0] wr_data;
  logic [7:0] conf_thr;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [7:0] in_data;
  logic [7:0] chars [NPOS], cls [NPOS];
  logic [NPOS-1:0] kept;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  lpcr_accel #(.H(H), .W(W)) dut (.*);

  fmap_t w [LPCR_NL];
  fmap_t img [NP], sc [NP];
  int thr [NP] = '{0, 24, 255};
  int ip = 0, op = 0, t0 = 0, t1 = 0, nkept = 0, nspace = 0;
  bit loaded = 0;

  assign in_data = 8'(img[(ip / (H*W)) % NP][ip % (H*W)]);
  // the threshold is sampled while the decoder works on a plate
  assign conf_thr = 8'(thr[op < NP ? op : NP - 1]);

  always @(negedge clk) if (loaded) begin
    in_valid  <= ip < NP*H*W && $urandom_range(0, 7) != 0;
    out_ready <= $urandom_range(0, 2) != 0;
  end

  always @(posedge clk) if (loaded) begin
    if (in_valid && in_ready) begin
      if (ip == 0) t0 = cyc;
      ip <= ip + 1;
    end
    if (out_valid && out_ready) begin
      for (int p = 0; p < NPOS; p++) begin
        bit k; int c; byte a;
        c = decode_pos(sc[op], p, thr[op], 0.5, k);
        a = k ? ascii_of(c) : 8'h20;
        checks++;
        if (int'(cls[p]) != c || kept[p] != k || chars[p] != a) begin
          failures++;
          $display("plate %0d pos %0d: cls %0d/%0d kept %0d/%0d", op, p, cls[p], c, kept[p], k);
        end
        if (k) nkept++; else nspace++;
      end
      if (op == 0) t1 = cyc;
      op = op + 1;
      if (op == NP) begin
        int maxc, c, fill, hh, ww;
        maxc = 0; fill = 0; hh = H / 2; ww = W / 2;
        for (int i = 0; i < LPCR_NL; i++) begin
          int fold;
          fold = (LPCR_COUT[i] / LPCR_PE[i]) * (lpcr_kdim(i) / LPCR_SIMD[i]);
          c = hh * ww * fold;
          if (c > maxc) maxc = c;
          fill += fold * (2 * ww + 4);
          if (LPCR_POOL[i] != 0) begin hh /= 2; ww /= 2; end
        end
        $display("first plate: %0d cycles, slowest layer %0d, fill bound %0d; kept %0d spaces %0d",
                 t1 - t0, maxc, fill, nkept, nspace);
        checks++;
        if (t1 - t0 > 8 * H * W + maxc + fill) begin failures++; $display("plate too slow"); end
        checks++;
        if (nkept == 0 || nspace == 0) begin failures++; $display("decision coverage"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end

  initial begin
    for (int i = 0; i < LPCR_NL; i++) w[i] = rand_w(LPCR_COUT[i] * lpcr_kdim(i), LPCR_WBITS[i]);
    for (int p = 0; p < NP; p++) begin
      img[p] = new[H*W];
      foreach (img[p][k]) img[p][k] = $urandom_range(0, 255);
      sc[p] = lpcr_ref(img[p], H, W, w);
    end
    wr_en = 0; wr_layer = 0; wr_addr = 0; wr_data = '0; in_valid = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < LPCR_NL && w[i].size() > 0; i++) begin   // run-time bound: not unrolled
      int nw;
      nw = (LPCR_COUT[i] / LPCR_PE[i]) * (lpcr_kdim(i) / LPCR_SIMD[i]);
      for (int a = 0; a < nw; a++) begin
        @(negedge clk);
        wr_en = 1; wr_layer = 4'(i); wr_addr = 16'(a);
        wr_data = 256'(word_of(w[i], lpcr_kdim(i), LPCR_PE[i], LPCR_SIMD[i], LPCR_WBITS[i], a));
      end
    end
    @(negedge clk) wr_en = 0;
    loaded = 1;
  end
  initial begin
    repeat (600000) @(posedge clk);
    failures++; $display("watchdog timeout ip=%0d op=%0d", ip, op);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

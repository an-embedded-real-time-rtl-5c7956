// tb_lpr_top_full: the end-to-end test of tb_lpr_top with the top level at
// its default, full size: 576 x 576 frames and 64 x 128 plates.
//
// Sequence: load random weights into both accelerators; stream two camera
// frames back to back into the detector and three plates into the
// recogniser at the same time; then reload the detector's last two layers
// with all-maximum weights and run a third frame, whose outputs must saturate
// at the ends of the quantised sigmoid's [-3.5, 3.5] range.  Every
// detector output and every decoded character is compared with the
// reference networks in lpr_ref_pkg.  Both input streams see random gaps
// and both output streams random back-pressure.
//
// Mechanisms counted (each must occur at least once): input stall
// (valid while not ready), output back-pressure, back-to-back frames,
// weight reload between frames, sigmoid saturation, character kept,
// character replaced by a space.
module tb_lpr_top_full;
  import lpr_pkg::*;
  import lpr_ref_pkg::*;
  localparam int IMG = LPD_IMG, PH = LPCR_H, PW = LPCR_W;
  localparam int G = IMG / 32, NFR = 3, NP = 3;
  localparam int SIGS = relu_shift(9 * 104, 4, 4) - 4;
  localparam int WATCHDOG = 8000000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lpd_wr_en; logic [3:0] lpd_wr_layer; logic [15:0] lpd_wr_addr; logic [287:0] lpd_wr_data;
  logic frame_valid, frame_ready, det_valid, det_ready;
  logic [23:0] frame_data; logic [LPD_OUT_CH*8-1:0] det_data;
  logic lpcr_wr_en; logic [3:0] lpcr_wr_layer; logic [15:0] lpcr_wr_addr; logic [255:0] lpcr_wr_data;
  logic [7:0] conf_thr;
  logic plate_valid, plate_ready, text_valid, text_ready;
  logic [7:0] plate_data;
  logic [7:0] text_chars [NPOS], text_cls [NPOS];
  logic [NPOS-1:0] text_kept;

  lpr_top dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  fmap_t wd [LPD_NL], wd2 [LPD_NL], wr [LPCR_NL];
  fmap_t frm [NFR], dexp [NFR], pl [NP], sc [NP];
  int thr [NP] = '{0, 24, 255};
  int fi = 0, fo = 0, pi = 0, po = 0;
  bit loaded = 0, reloaded = 0;
  int t_frame0 = 0, t_frame1 = 0;
  // mechanism counters
  int n_in_stall = 0, n_out_bp = 0, n_b2b = 0, n_reload = 0, n_sat = 0, n_kept = 0, n_space = 0;

  always_comb for (int ch = 0; ch < 3; ch++)
    frame_data[ch*8 +: 8] = 8'(frm[(fi / (IMG*IMG)) % NFR][(fi % (IMG*IMG))*3 + ch]);
  assign plate_data = 8'(pl[(pi / (PH*PW)) % NP][pi % (PH*PW)]);
  assign conf_thr   = 8'(thr[po < NP ? po : NP - 1]);

  always @(negedge clk) if (loaded) begin
    // frames 0 and 1 back to back; frame 2 only after the reload
    frame_valid <= (fi < 2*IMG*IMG || (reloaded && fi < NFR*IMG*IMG)) && $urandom_range(0, 15) != 0;
    det_ready   <= $urandom_range(0, 2) != 0;
    plate_valid <= pi < NP*PH*PW && $urandom_range(0, 7) != 0;
    text_ready  <= $urandom_range(0, 2) != 0;
  end

  always @(posedge clk) if (loaded) begin
    if ((frame_valid && !frame_ready) || (plate_valid && !plate_ready)) n_in_stall++;
    if ((det_valid && !det_ready) || (text_valid && !text_ready)) n_out_bp++;
    if (frame_valid && frame_ready) begin
      if (fi == IMG*IMG && fo < G*G) n_b2b++;   // frame 1 enters before frame 0 has left
      fi <= fi + 1;
    end
    if (plate_valid && plate_ready) pi <= pi + 1;
    if (det_valid && det_ready) begin
      for (int k = 0; k < LPD_OUT_CH; k++) begin
        int e;
        e = dexp[fo / (G*G)][(fo % (G*G))*LPD_OUT_CH + k];
        checks++;
        if (e == 247 || e == 7) n_sat++;
        if (int'(det_data[k*8 +: 8]) != e) begin
          failures++;
          if (failures < 10) $display("frame %0d cell %0d ch %0d: %0d vs %0d", fo / (G*G), fo % (G*G), k, det_data[k*8 +: 8], e);
        end
      end
      fo = fo + 1;
      if (fo == G*G) t_frame0 = cyc;
    end
    if (text_valid && text_ready) begin
      for (int p = 0; p < NPOS; p++) begin
        bit k; int c; byte a;
        c = decode_pos(sc[po], p, thr[po], 0.5, k);
        a = k ? ascii_of(c) : 8'h20;
        checks++;
        if (int'(text_cls[p]) != c || text_kept[p] != k || text_chars[p] != a) begin
          failures++;
          $display("plate %0d pos %0d: cls %0d/%0d kept %0d/%0d", po, p, text_cls[p], c, text_kept[p], k);
        end
        if (k) n_kept++; else n_space++;
      end
      po = po + 1;
    end
  end

  task automatic load_lpd(fmap_t w [LPD_NL], int first);
    for (int i = first; i < LPD_NL && w[i].size() > 0; i++)   // run-time bound: not unrolled
      for (int a = 0; a < (LPD_COUT[i] / LPD_PE[i]) * (lpd_kdim(i) / LPD_SIMD[i]); a++) begin
        @(negedge clk);
        lpd_wr_en = 1; lpd_wr_layer = 4'(i); lpd_wr_addr = 16'(a);
        lpd_wr_data = 288'(word_of(w[i], lpd_kdim(i), LPD_PE[i], LPD_SIMD[i], LPD_WBITS, a));
      end
    @(negedge clk) lpd_wr_en = 0;
  endtask

  task automatic load_lpcr();
    for (int i = 0; i < LPCR_NL && wr[i].size() > 0; i++)
      for (int a = 0; a < (LPCR_COUT[i] / LPCR_PE[i]) * (lpcr_kdim(i) / LPCR_SIMD[i]); a++) begin
        @(negedge clk);
        lpcr_wr_en = 1; lpcr_wr_layer = 4'(i); lpcr_wr_addr = 16'(a);
        lpcr_wr_data = 256'(word_of(wr[i], lpcr_kdim(i), LPCR_PE[i], LPCR_SIMD[i], LPCR_WBITS[i], a));
      end
    @(negedge clk) lpcr_wr_en = 0;
  endtask

  initial begin
    for (int i = 0; i < LPD_NL; i++) begin
      wd[i]  = rand_w(LPD_COUT[i] * lpd_kdim(i), LPD_WBITS);
      wd2[i] = wd[i];
    end
    foreach (wd2[LPD_NL-2][k]) wd2[LPD_NL-2][k] = 7;      // saturating last two layers
    foreach (wd2[LPD_NL-1][k]) wd2[LPD_NL-1][k] = 7;
    for (int i = 0; i < LPCR_NL; i++) wr[i] = rand_w(LPCR_COUT[i] * lpcr_kdim(i), LPCR_WBITS[i]);
    for (int f = 0; f < NFR; f++) begin
      frm[f] = new[IMG*IMG*3];
      foreach (frm[f][k]) frm[f][k] = $urandom_range(0, 255);
      dexp[f] = lpd_ref(frm[f], IMG, (f < 2) ? wd : wd2, SIGS);
    end
    for (int p = 0; p < NP; p++) begin
      pl[p] = new[PH*PW];
      foreach (pl[p][k]) pl[p][k] = $urandom_range(0, 255);
      sc[p] = lpcr_ref(pl[p], PH, PW, wr);
    end
    $display("references computed at cycle %0d", cyc);
    lpd_wr_en = 0; lpd_wr_layer = 0; lpd_wr_addr = 0; lpd_wr_data = '0;
    lpcr_wr_en = 0; lpcr_wr_layer = 0; lpcr_wr_addr = 0; lpcr_wr_data = '0;
    frame_valid = 0; det_ready = 0; plate_valid = 0; text_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_lpd(wd, 0);
    load_lpcr();
    loaded = 1;
    // wait for frames 0 and 1 to leave, then reload the last two detector layers
    wait (fo == 2*G*G);
    load_lpd(wd2, LPD_NL - 2);
    n_reload++;
    reloaded = 1;
    wait (fo == NFR*G*G && po == NP);
    @(posedge clk);
    $display("first frame out after %0d cycles", t_frame0);
    $display("mechanisms: input stalls %0d, output back-pressure %0d, back-to-back frames %0d, reloads %0d, sigmoid saturations %0d, kept chars %0d, spaces %0d",
             n_in_stall, n_out_bp, n_b2b, n_reload, n_sat, n_kept, n_space);
    checks++; if (n_in_stall == 0) begin failures++; $display("no input stall"); end
    checks++; if (n_out_bp == 0)   begin failures++; $display("no back-pressure"); end
    checks++; if (n_b2b == 0)      begin failures++; $display("no back-to-back frames"); end
    checks++; if (n_reload == 0)   begin failures++; $display("no reload"); end
    checks++; if (n_sat == 0)      begin failures++; $display("no sigmoid saturation"); end
    checks++; if (n_kept == 0)     begin failures++; $display("no kept character"); end
    checks++; if (n_space == 0)    begin failures++; $display("no space substitution"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    wait (rst_n);
    repeat (WATCHDOG) @(posedge clk);
    failures++; $display("watchdog timeout fi=%0d fo=%0d pi=%0d po=%0d", fi, fo, pi, po);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

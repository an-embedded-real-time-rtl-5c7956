// tb_char_decoder: drives score vectors for 8 positions x 37 classes and
// checks the chosen class, the ASCII character, the confidence flag and
// the substitution of a space for a doubtful character, against a softmax
// worked out here.  Covers a clear winner, a near tie, all-equal scores,
// the space class winning, a threshold of zero (everything kept) and a
// high threshold (everything replaced), plus the NPOS+1 cycle latency.
module tb_char_decoder;
  import lpr_ref_pkg::*;
  import lpr_pkg::NPOS, lpr_pkg::NCLS;
  localparam real SCALE = 0.5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] conf_thr;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [NPOS*NCLS*4-1:0] in_data;
  logic [7:0] chars [NPOS], cls [NPOS];
  logic [NPOS-1:0] kept;
  int checks = 0, failures = 0, kept_n = 0, space_n = 0;

  char_decoder #(.NPOS(NPOS), .NCLS(NCLS), .BITS(4), .SCALE(SCALE)) dut (.*);

  task automatic run(fmap_t s, int thr);
    int t0, t1;
    @(negedge clk);
    conf_thr = 8'(thr);
    for (int k = 0; k < NPOS*NCLS; k++) in_data[k*4 +: 4] = 4'(s[k]);
    in_valid = 1;
    @(posedge clk); t0 = $time;
    @(negedge clk) in_valid = 0;
    while (!out_valid) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != NPOS + 1) begin failures++; $display("latency %0d", (t1 - t0) / 10); end
    for (int p = 0; p < NPOS; p++) begin
      bit k; int c; byte a;
      c = decode_pos(s, p, thr, SCALE, k);
      a = k ? ascii_of(c) : 8'h20;
      checks++;
      if (int'(cls[p]) != c || kept[p] != k || chars[p] != a) begin
        failures++;
        $display("pos %0d: cls %0d/%0d kept %0d/%0d char %c/%c", p, cls[p], c, kept[p], k, chars[p], a);
      end
      if (k) kept_n++; else space_n++;
    end
    @(negedge clk) out_ready = 1;
    @(negedge clk) out_ready = 0;
  endtask

  initial begin
    fmap_t s;
    in_valid = 0; out_ready = 0; conf_thr = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    s = new[NPOS*NCLS];
    // clear winners: "KC5259  " like layout
    for (int t = 0; t < 6; t++) begin
      foreach (s[k]) s[k] = $urandom_range(0, 4);
      for (int p = 0; p < NPOS; p++) begin
        int win = $urandom_range(0, NCLS - 1);
        s[p*NCLS + win] = $urandom_range(6, 15);
        if (t % 2 == 1) s[p*NCLS + (win + 1) % NCLS] = s[p*NCLS + win] - $urandom_range(0, 1);
      end
      run(s, (t < 2) ? 0 : (t < 4) ? 128 : 200);
    end
    foreach (s[k]) s[k] = 7;                 // all equal: class 0, low confidence
    run(s, 20);
    foreach (s[k]) s[k] = 0;
    for (int p = 0; p < NPOS; p++) s[p*NCLS + 36] = 15;   // spaces
    run(s, 250);
    checks++;
    if (kept_n == 0 || space_n == 0) begin failures++; $display("coverage kept=%0d space=%0d", kept_n, space_n); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

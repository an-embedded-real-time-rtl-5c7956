// tb_conv_layer: checks a 3x3 and a 1x1 convolution layer on random frames
// against the reference convolution of lpr_ref_pkg (zero padding, ReLU,
// shift, 4-bit clip).  The 3x3 layer sees two frames back to back with
// random input gaps and output back-pressure; its output rate is checked
// on the second frame: H*W pixels at NF*SF cycles each plus a small margin.
module tb_conv_layer;
  import lpr_ref_pkg::*;
  localparam int H = 6, W = 5, CIN = 3, COUT = 4, SIMD = 9, PE = 2;
  localparam int SH3 = 4, SH1 = 2;
  localparam int NW3 = (COUT/PE)*(9*CIN/SIMD), NW1 = COUT/PE;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // 3x3 layer
  logic wr3; logic [$clog2(NW3)-1:0] wa3; logic [PE*SIMD*4-1:0] wd3;
  logic iv3, ir3, ov3, or3; logic [CIN*4-1:0] id3; logic [COUT*4-1:0] od3;
  conv_layer #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .K(3), .IBITS(4), .WBITS(4),
               .SIMD(SIMD), .PE(PE), .SHIFT(SH3)) dut3 (
    .clk, .rst_n, .wr_en(wr3), .wr_addr(wa3), .wr_data(wd3),
    .in_valid(iv3), .in_ready(ir3), .in_data(id3), .out_valid(ov3), .out_ready(or3), .out_data(od3));
  // 1x1 layer, 2-bit weights
  logic wr1; logic wa1; logic [PE*CIN*2-1:0] wd1;
  logic iv1, ir1, ov1, or1; logic [CIN*4-1:0] id1; logic [COUT*4-1:0] od1;
  conv_layer #(.H(H), .W(W), .CIN(CIN), .COUT(COUT), .K(1), .IBITS(4), .WBITS(2),
               .SIMD(CIN), .PE(PE), .SHIFT(SH1)) dut1 (
    .clk, .rst_n, .wr_en(wr1), .wr_addr(wa1), .wr_data(wd1),
    .in_valid(iv1), .in_ready(ir1), .in_data(id1), .out_valid(ov1), .out_ready(or1), .out_data(od1));

  fmap_t w3, w1, img [2], exp3 [2], exp1;
  int ip3 = 0, op3 = 0, ip1 = 0, op1 = 0, t0 = 0;
  bit loaded = 0;

  always_comb begin
    for (int ch = 0; ch < CIN; ch++) begin
      id3[ch*4 +: 4] = 4'(img[(ip3 / (H*W)) % 2][(ip3 % (H*W))*CIN + ch]);
      id1[ch*4 +: 4] = 4'(img[0][(ip1 % (H*W))*CIN + ch]);
    end
  end

  always @(negedge clk) if (loaded) begin
    iv3 <= ip3 < 2*H*W && (ip3 >= H*W || $urandom_range(0, 3) != 0);
    or3 <= op3 >= H*W || $urandom_range(0, 3) != 0;
    iv1 <= ip1 < H*W && $urandom_range(0, 2) != 0;
    or1 <= $urandom_range(0, 2) != 0;
  end

  always @(posedge clk) if (loaded) begin
    if (iv3 && ir3) ip3 <= ip3 + 1;
    if (iv1 && ir1) ip1 <= ip1 + 1;
    if (ov3 && or3) begin
      for (int o = 0; o < COUT; o++) begin
        checks++;
        if (int'(od3[o*4 +: 4]) != exp3[op3 / (H*W)][(op3 % (H*W))*COUT + o]) begin
          failures++;
          if (failures < 10) $display("3x3 px %0d ch %0d: %0d vs %0d", op3, o, od3[o*4 +: 4],
                                      exp3[op3 / (H*W)][(op3 % (H*W))*COUT + o]);
        end
      end
      if (op3 == H*W) t0 = cyc;
      op3 = op3 + 1;
    end
    if (ov1 && or1) begin
      for (int o = 0; o < COUT; o++) begin
        checks++;
        if (int'(od1[o*4 +: 4]) != exp1[op1*COUT + o]) begin
          failures++;
          if (failures < 10) $display("1x1 px %0d ch %0d: %0d vs %0d", op1, o, od1[o*4 +: 4], exp1[op1*COUT + o]);
        end
      end
      op1 = op1 + 1;
    end
    if (op3 == 2*H*W && op1 == H*W) begin
      checks++;
      if (cyc - t0 > (H*W - 1) * NW3 + 4) begin
        failures++; $display("rate: %0d cycles", cyc - t0);
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    w3 = rand_w(COUT*9*CIN, 4, 1'b1);
    w1 = rand_w(COUT*CIN, 2, 1'b1);
    for (int f = 0; f < 2; f++) begin
      img[f] = new[H*W*CIN];
      foreach (img[f][k]) img[f][k] = $urandom_range(0, 15);
      exp3[f] = conv(img[f], H, W, CIN, COUT, 3, w3, SH3, 1'b1, 4);
    end
    exp1 = conv(img[0], H, W, CIN, COUT, 1, w1, SH1, 1'b1, 4);
    wr3 = 0; wr1 = 0; iv3 = 0; iv1 = 0; or3 = 0; or1 = 0; wa3 = '0; wa1 = '0; wd3 = '0; wd1 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NW3; a++) begin
      @(negedge clk); wr3 = 1; wa3 = $bits(wa3)'(a); wd3 = $bits(wd3)'(word_of(w3, 9*CIN, PE, SIMD, 4, a));
    end
    @(negedge clk) wr3 = 0;
    for (int a = 0; a < NW1; a++) begin
      @(negedge clk); wr1 = 1; wa1 = $bits(wa1)'(a); wd1 = $bits(wd1)'(word_of(w1, CIN, PE, CIN, 2, a));
    end
    @(negedge clk) wr1 = 0;
    loaded = 1;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_maxpool2x2: streams three random H x W frames through the 2x2 max
// pool with random input gaps and output back-pressure and compares every
// output pixel with the maximum of its 2x2 block computed here.  A last,
// stall-free frame must produce its outputs within H*W + 2 cycles.
module tb_maxpool2x2;
  import lpr_ref_pkg::*;
  localparam int H = 4, W = 6, C = 3, BITS = 4, NF = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [C*BITS-1:0] in_data, out_data;
  int checks = 0, failures = 0, cyc = 0, t0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  maxpool2x2 #(.H(H), .W(W), .C(C), .BITS(BITS)) dut (.*);

  fmap_t img [NF], expv [NF];
  int ip = 0, op = 0;
  localparam int NO = (H/2)*(W/2);

  always_comb for (int ch = 0; ch < C; ch++) in_data[ch*BITS +: BITS] = BITS'(img[(ip/(H*W)) % NF][(ip % (H*W))*C + ch]);
  always @(negedge clk) if (rst_n) begin
    in_valid  <= ip < NF*H*W && (ip >= (NF-1)*H*W || $urandom_range(0, 3) != 0);
    out_ready <= op >= (NF-1)*NO || $urandom_range(0, 2) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (ip == (NF-1)*H*W) t0 = cyc;
      ip <= ip + 1;
    end
    if (out_valid && out_ready) begin
      for (int ch = 0; ch < C; ch++) begin
        checks++;
        if (int'(out_data[ch*BITS +: BITS]) != expv[op / NO][(op % NO)*C + ch]) begin
          failures++;
          if (failures < 10) $display("out %0d ch %0d: %0d vs %0d", op, ch, out_data[ch*BITS +: BITS], expv[op/NO][(op%NO)*C+ch]);
        end
      end
      op = op + 1;
      if (op == NF*NO) begin
        checks++;
        if (cyc - t0 > H*W + 2) begin failures++; $display("rate: %0d cycles", cyc - t0); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
  initial begin
    for (int f = 0; f < NF; f++) begin
      img[f] = new[H*W*C];
      foreach (img[f][k]) img[f][k] = $urandom_range(0, 15);
      expv[f] = pool2(img[f], H, W, C);
    end
    in_valid = 0; out_ready = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_global_maxpool: streams three random frames (random gaps and
// back-pressure) and compares each result beat with the channel-wise
// maximum of its frame computed here.  Each frame must give exactly one
// result.
module tb_global_maxpool;
  import lpr_ref_pkg::*;
  localparam int H = 3, W = 4, C = 5, BITS = 4, NF = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [C*BITS-1:0] in_data, out_data;
  int checks = 0, failures = 0;

  global_maxpool #(.H(H), .W(W), .C(C), .BITS(BITS)) dut (.*);

  fmap_t img [NF], expv [NF];
  int ip = 0, op = 0;
  always_comb for (int ch = 0; ch < C; ch++) in_data[ch*BITS +: BITS] = BITS'(img[(ip/(H*W)) % NF][(ip % (H*W))*C + ch]);
  always @(negedge clk) if (rst_n) begin
    in_valid  <= ip < NF*H*W && $urandom_range(0, 3) != 0;
    out_ready <= $urandom_range(0, 3) == 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) ip <= ip + 1;
    if (out_valid && out_ready) begin
      for (int ch = 0; ch < C; ch++) begin
        checks++;
        if (int'(out_data[ch*BITS +: BITS]) != expv[op][ch]) begin
          failures++;
          $display("frame %0d ch %0d: %0d vs %0d", op, ch, out_data[ch*BITS +: BITS], expv[op][ch]);
        end
      end
      op = op + 1;
      if (op == NF) begin
        repeat (20) @(posedge clk);
        checks++;
        if (out_valid) begin failures++; $display("extra result"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
  initial begin
    for (int f = 0; f < NF; f++) begin
      img[f] = new[H*W*C];
      foreach (img[f][k]) img[f][k] = $urandom_range(0, (f == 1) ? 3 : 15);
      expv[f] = gmax(img[f], H, W, C);
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

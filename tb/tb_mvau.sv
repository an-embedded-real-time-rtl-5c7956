// tb_mvau: checks the folded matrix-vector unit.  Random signed weights are
// written through the load port, random activation vectors are streamed
// with random gaps and back-pressure, and every output is compared with a
// plain dot product + ReLU/shift/clip computed here.  A final burst with no
// stalls checks the rate of NF*SF cycles per vector.
module tb_mvau;
  import lpr_ref_pkg::*;
  localparam int KDIM = 18, COUT = 6, IBITS = 4, WBITS = 4, SIMD = 6, PE = 2, SHIFT = 3;
  localparam int NF = COUT / PE, SF = KDIM / SIMD, NV = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en; logic [$clog2(NF*SF)-1:0] wr_addr; logic [PE*SIMD*WBITS-1:0] wr_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [KDIM*IBITS-1:0] in_data;
  logic [COUT*4-1:0] out_data;
  int checks = 0, failures = 0;

  mvau #(.KDIM(KDIM), .COUT(COUT), .IBITS(IBITS), .WBITS(WBITS), .SIMD(SIMD), .PE(PE),
         .SHIFT(SHIFT), .RELU(1'b1), .OBITS(4)) dut (.*);

  fmap_t w;
  int x [NV][KDIM];
  int ni = 0, no = 0, cyc = 0, t0 = 0;
  bit burst = 0, loaded = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always_comb for (int e = 0; e < KDIM; e++) in_data[e*IBITS +: IBITS] = IBITS'(x[ni % NV][e]);

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) ni <= ni + 1;
    if (out_valid && out_ready) begin
      for (int o = 0; o < COUT; o++) begin
        int acc, v;
        acc = 0;
        for (int e = 0; e < KDIM; e++) acc += w[o*KDIM + e] * x[no][e];
        v = acc >>> SHIFT; if (v < 0) v = 0; if (v > 15) v = 15;
        checks++;
        if (int'(out_data[o*4 +: 4]) != v) begin
          failures++;
          if (failures < 10) $display("vec %0d ch %0d: got %0d exp %0d", no, o, out_data[o*4 +: 4], v);
        end
      end
      if (no == NV/2) t0 = cyc;
      no = no + 1;
      if (no == NV) begin
        checks++;
        if (cyc - t0 != (NV - 1 - NV/2) * NF * SF) begin
          failures++; $display("rate: %0d cycles for %0d vectors", cyc - t0, NV - 1 - NV/2);
        end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
  always @(negedge clk) if (rst_n && loaded) begin
    burst = (ni >= NV/2) && (no >= NV/2 - 1);
    in_valid  <= (ni < NV) && (burst || ni >= NV/2 || $urandom_range(0, 2) != 0);
    out_ready <= burst || $urandom_range(0, 2) != 0;
  end

  initial begin
    w = rand_w(COUT*KDIM, WBITS, 1'b1);
    foreach (x[v, e]) x[v][e] = $urandom_range(0, 15);
    wr_en = 0; in_valid = 0; out_ready = 0; wr_addr = '0; wr_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < NF*SF; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = $bits(wr_addr)'(a); wr_data = $bits(wr_data)'(word_of(w, KDIM, PE, SIMD, WBITS, a));
    end
    @(negedge clk) wr_en = 0;
    loaded = 1;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_quant_sigmoid: feeds accumulator values covering the whole code range
// (including values far outside [-3.5, 3.5], which must saturate) and
// compares every output with 255*sigmoid(q*3.5/128) computed here in real
// arithmetic.  Also checks the end points the paper quotes
// (sigmoid(3.5) ~ 0.97) and the one-cycle latency.
module tb_quant_sigmoid;
  import lpr_ref_pkg::*;
  localparam int N = 4, IBITS = 32, SHIFT = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [N*IBITS-1:0] in_data;
  logic [N*8-1:0] out_data;
  int checks = 0, failures = 0;

  quant_sigmoid #(.N(N), .IBITS(IBITS), .SHIFT(SHIFT)) dut (.*);

  int vals [$];
  int sent = 0, got = 0;

  initial begin
    for (int q = -140; q < 140; q++) vals.push_back(q * 32 + $urandom_range(0, 31));
    vals.push_back(-1000000); vals.push_back(1000000);
    while (vals.size() % N != 0) vals.push_back(0);
    in_valid = 0; out_ready = 1; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (sent < vals.size()) begin
      @(negedge clk);
      in_valid = 1;
      for (int k = 0; k < N; k++) in_data[k*IBITS +: IBITS] = vals[sent + k];
      out_ready = $urandom_range(0, 3) != 0;
      @(posedge clk);
      if (in_ready) sent += N;
    end
    @(negedge clk) in_valid = 0; out_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (got != vals.size()) begin failures++; $display("got %0d of %0d", got, vals.size()); end
    // end points: code 127 -> sigmoid(3.47) = 0.970
    checks++;
    if (qsig(1000000, SHIFT) != 247 || qsig(-1000000, SHIFT) != 7) begin failures++; $display("end points"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int k = 0; k < N; k++) begin
      checks++;
      if (int'(out_data[k*8 +: 8]) != qsig(longint'(vals[got + k]), SHIFT)) begin
        failures++;
        if (failures < 10) $display("acc %0d: %0d vs %0d", vals[got+k], out_data[k*8 +: 8], qsig(longint'(vals[got+k]), SHIFT));
      end
    end
    got += N;
  end
  // one cycle latency: output valid exactly one cycle after an accepted input
  logic acc_d;
  always @(posedge clk) begin
    acc_d <= rst_n && in_valid && in_ready;
    if (rst_n && acc_d) begin
      checks++;
      if (!out_valid) begin failures++; $display("latency"); end
    end
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

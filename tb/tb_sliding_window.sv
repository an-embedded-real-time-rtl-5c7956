// tb_sliding_window: runs the window generator checker sw_check on three
// frame shapes: a general one (5 x 6, 2 channels), a narrow one (4 x 2),
// where the first rows of the three-row line buffer must be filled without
// waiting for output, and a single-column one (3 x 1).
module tb_sliding_window;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int c [3], f [3];
  bit d [3];

  sw_check #(.H(5), .W(6), .C(2), .BITS(4)) u_a (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .done(d[0]));
  sw_check #(.H(4), .W(2), .C(3), .BITS(4)) u_b (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .done(d[1]));
  sw_check #(.H(3), .W(1), .C(1), .BITS(8)) u_c (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .done(d[2]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (d[0] && d[1] && d[2]);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2]);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog timeout %0d %0d %0d", d[0], d[1], d[2]);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
    $finish;
  end
endmodule

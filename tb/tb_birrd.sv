// tb_birrd: runs the BIRRD lane test for the 16-input network (the default
// size), an 8-input network and the 3-stage 4-input special case.
module tb_birrd;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  int checks, failures;
  int c16, f16, c8, f8, c4, f4;
  logic d16, d8, d4;

  tb_birrd_lane #(.AW(16)) l16 (.clk, .rst_n, .go, .finished(d16), .checks(c16), .failures(f16));
  tb_birrd_lane #(.AW(8))  l8  (.clk, .rst_n, .go, .finished(d8),  .checks(c8),  .failures(f8));
  tb_birrd_lane #(.AW(4))  l4  (.clk, .rst_n, .go, .finished(d4),  .checks(c4),  .failures(f4));

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c16 + c8 + c4, f16 + f8 + f4 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    go = 1;
    wait (d16 && d8 && d4);
    @(posedge clk);
    checks = c16 + c8 + c4; failures = f16 + f8 + f4;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

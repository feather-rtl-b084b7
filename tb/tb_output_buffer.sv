// tb_output_buffer: random sequences of overwrite / accumulate / last waves to
// random entries; a reference array in the testbench tracks the expected
// contents. Each 'last' wave must emit entry+input on valid lanes one cycle later
// with its address; non-last waves and invalid lanes must emit nothing.
module tb_output_buffer;
  localparam int AW = 4, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid [AW], out_valid [AW];
  logic signed [31:0] in_data [AW], out_data [AW];
  logic [2:0] idx; logic acc, last;
  logic [9:0] in_addr, out_addr;

  output_buffer #(.AW(AW), .OB_DEPTH(D), .ADDR_W(10)) dut (.clk, .rst_n, .in_valid, .in_data, .idx,
    .acc, .last, .in_addr, .out_valid, .out_data, .out_addr);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_m [AW][D];
  initial begin
    int ev [AW]; bit evv [AW];
    for (int j = 0; j < AW; j++) begin in_valid[j] = 0; in_data[j] = 0; end
    idx = 0; acc = 0; last = 0; in_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // initialise all entries
    for (int e = 0; e < D; e++) begin
      @(negedge clk); idx = e; acc = 0; last = 0;
      for (int j = 0; j < AW; j++) begin in_valid[j] = 1; in_data[j] = 0; ref_m[j][e] = 0; end
    end
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      idx = $urandom % D; acc = $urandom % 4 != 0; last = $urandom % 3 == 0; in_addr = $urandom;
      for (int j = 0; j < AW; j++) begin
        in_valid[j] = $urandom % 5 != 0;
        in_data[j] = int'($urandom % 2001) - 1000;
        ev[j] = (acc ? ref_m[j][idx] : 0) + in_data[j];
        evv[j] = in_valid[j] && last;
        if (in_valid[j]) ref_m[j][idx] = ev[j];
      end
      @(posedge clk); #1;
      for (int j = 0; j < AW; j++) begin
        checks++;
        if (out_valid[j] !== evv[j] || (evv[j] && (out_data[j] !== ev[j] || out_addr !== in_addr))) begin
          failures++;
          if (failures < 10) $display("t=%0d lane %0d got %0b/%0d exp %0b/%0d", t, j, out_valid[j], out_data[j], evv[j], ev[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

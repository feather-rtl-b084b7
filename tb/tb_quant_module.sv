// tb_quant_module: random 32-bit inputs, scales and zero points; the expected int8
// is computed with real arithmetic (x*scale/2^16 rounded half up, plus zp,
// clamped to [-128,127]) and compared one cycle later. Includes saturating cases.
module tb_quant_module;
  localparam int AW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid [AW], out_valid [AW];
  logic signed [31:0] in_data [AW], scale [AW];
  logic signed [7:0] zp [AW], out_data [AW];
  logic [9:0] in_addr, out_addr;

  quant_module #(.AW(AW), .SHIFT(16), .ADDR_W(10)) dut (.clk, .rst_n, .in_valid, .in_data, .in_addr,
    .scale, .zp, .out_valid, .out_data, .out_addr);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [AW];
    for (int j = 0; j < AW; j++) begin in_valid[j] = 0; in_data[j] = 0; scale[j] = 0; zp[j] = 0; end
    in_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_addr = $urandom;
      for (int j = 0; j < AW; j++) begin
        real r;
        in_valid[j] = $urandom % 4 != 0;
        in_data[j] = (t % 10 == 0) ? $urandom : int'($urandom % 200001) - 100000;
        scale[j] = $urandom % 65536;          // 0 .. ~1.0 in Q16
        zp[j] = $urandom;
        r = $floor(real'(in_data[j]) * real'(scale[j]) / 65536.0 + 0.5) + real'(zp[j]);
        if (r > 127.0) r = 127.0;
        if (r < -128.0) r = -128.0;
        e[j] = int'(r);
      end
      @(posedge clk); #1;
      checks++;
      if (out_addr !== in_addr) failures++;
      for (int j = 0; j < AW; j++) begin
        checks++;
        if (out_valid[j] !== in_valid[j] || int'(out_data[j]) != e[j]) begin
          failures++;
          if (failures < 10) $display("x=%0d s=%0d zp=%0d got %0d exp %0d", in_data[j], scale[j], zp[j], out_data[j], e[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

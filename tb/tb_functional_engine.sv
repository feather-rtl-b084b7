// tb_functional_engine: ReLU (clamp at the zero point), folded BatchNorm
// (fixed-point multiply, round, add, saturate) and MaxPool over windows of 3
// lines, each compared with values computed in the testbench, including output
// addresses dst_base + n and the one-cycle latency.
module tb_functional_engine;
  import feather_pkg::*;
  localparam int AW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, in_valid, out_valid;
  fe_op_e op; logic [3:0] win; logic [9:0] dst_base, out_addr;
  logic signed [7:0] in_data [AW], zp [AW], out_data [AW];
  logic signed [31:0] scale [AW];

  functional_engine #(.AW(AW), .SHIFT(16), .ADDR_W(10)) dut (.clk, .rst_n, .start, .op, .win, .dst_base,
    .in_valid, .in_data, .scale, .zp, .out_valid, .out_data, .out_addr);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [AW]; int m [AW]; int n;
    start = 0; in_valid = 0; op = FE_RELU; win = 3; dst_base = 100;
    for (int j = 0; j < AW; j++) begin in_data[j] = 0; zp[j] = j - 2; scale[j] = 32768 + j * 10000; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int o = 0; o < 3; o++) begin
      @(negedge clk); start = 1; op = fe_op_e'(o); dst_base = 100 + 50 * o;
      @(negedge clk); start = 0;
      n = 0;
      for (int t = 0; t < 30; t++) begin
        @(negedge clk);
        in_valid = 1;
        for (int j = 0; j < AW; j++) begin
          in_data[j] = $urandom;
          case (o)
            0: e[j] = (in_data[j] > zp[j]) ? in_data[j] : zp[j];
            1: begin
                 real r;
                 r = $floor(real'(in_data[j]) * real'(scale[j]) / 65536.0 + 0.5) + real'(zp[j]);
                 e[j] = r > 127 ? 127 : (r < -128 ? -128 : int'(r));
               end
            default: begin
                 if (t % 3 == 0 || in_data[j] > m[j]) m[j] = in_data[j];
                 e[j] = m[j];
               end
          endcase
        end
        @(posedge clk); #1;
        if (o != 2 || t % 3 == 2) begin
          checks++;
          if (!out_valid || out_addr != 10'(100 + 50 * o + n)) begin failures++; $display("op %0d t %0d valid/addr", o, t); end
          for (int j = 0; j < AW; j++) begin
            checks++;
            if (int'(out_data[j]) != e[j]) begin failures++; if (failures < 10) $display("op %0d t %0d lane %0d got %0d exp %0d", o, t, j, out_data[j], e[j]); end
          end
          n++;
        end else begin
          checks++;
          if (out_valid) begin failures++; $display("maxpool output mid-window t %0d", t); end
        end
      end
      @(negedge clk); in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

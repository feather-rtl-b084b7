// tb_birrd_egg: random test of the Egg switch. For every opcode and random
// operands/valid bits, the registered outputs one cycle later are compared with
// the function table of pass / swap / add-left / add-right.
module tb_birrd_egg;
  import feather_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  egg_op_e op;
  logic lv, rv, olv, orv;
  logic signed [31:0] l, r, ol, orr;

  birrd_egg #(.W(32)) dut (.clk, .rst_n, .op, .in_l_valid(lv), .in_l(l), .in_r_valid(rv), .in_r(r),
    .out_l_valid(olv), .out_l(ol), .out_r_valid(orv), .out_r(orr));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [31:0] el, er, a, b;
    logic evl, evr;
    op = EGG_PASS; lv = 0; rv = 0; l = 0; r = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      op = egg_op_e'(t % 4);
      lv = (t % 16) != 5;  rv = (t % 16) != 9;
      l = $urandom; r = $urandom;
      a = lv ? l : 0; b = rv ? r : 0;
      case (op)
        EGG_PASS:     begin evl = lv; el = a; evr = rv; er = b; end
        EGG_SWAP:     begin evl = rv; el = b; evr = lv; er = a; end
        EGG_ADD_LEFT: begin evl = lv | rv; el = a + b; evr = rv; er = b; end
        default:      begin evl = lv; el = a; evr = lv | rv; er = a + b; end
      endcase
      @(posedge clk); #1;
      checks++;
      if (olv !== evl || orv !== evr || (evl && ol !== el) || (evr && orr !== er)) begin
        failures++;
        if (failures < 10) $display("egg mismatch op=%0d l=%0d r=%0d -> %0d/%0d expected %0d/%0d", op, l, r, ol, orr, el, er);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

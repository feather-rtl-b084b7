// tb_nest_pe: drives one PE with groups of AH iActs against weights loaded into
// the shadow bank and swapped in; checks each locally reduced result against
// sum_k (x_k - zx) * (w_k - zw), the one-cycle result timing, the pass-down
// pipeline, and that the shadow bank can be reloaded without disturbing compute.
module tb_nest_pe;
  localparam int AH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_first, in_last, wl_en, swap;
  logic signed [7:0] in_iact, izp, wzp, wl_data, out_iact;
  logic [1:0] in_widx, wl_idx, out_widx;
  logic out_valid, out_first, out_last, result_valid;
  logic signed [31:0] result;

  nest_pe #(.AH(AH)) dut (.clk, .rst_n, .in_valid, .in_iact, .in_widx, .in_first, .in_last,
    .iact_zp(izp), .wgt_zp(wzp), .wl_en, .wl_idx, .wl_data, .swap,
    .out_valid, .out_iact, .out_widx, .out_first, .out_last, .result_valid, .result);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0] w [2][AH];
  int act;

  task automatic load_bank(int b);
    for (int k = 0; k < AH; k++) begin
      @(negedge clk);
      w[b][k] = $urandom; wl_en = 1; wl_idx = k; wl_data = w[b][k];
    end
    @(negedge clk); wl_en = 0;
  endtask

  initial begin
    int exp_sum;
    logic signed [7:0] x [AH];
    in_valid = 0; in_first = 0; in_last = 0; wl_en = 0; swap = 0; in_iact = 0; in_widx = 0;
    wl_idx = 0; wl_data = 0; izp = 3; wzp = -2;
    repeat (2) @(posedge clk); rst_n = 1;
    act = 0;
    load_bank(1);                     // shadow bank is bank 1 after reset
    @(negedge clk); swap = 1; @(negedge clk); swap = 0; act = 1;
    for (int g = 0; g < 40; g++) begin
      if (g == 20) begin
        // reload the (now shadow) bank 0 while idle, then swap
        load_bank(0);
        @(negedge clk); swap = 1; @(negedge clk); swap = 0; act = 0;
      end
      exp_sum = 0;
      for (int k = 0; k < AH; k++) begin
        @(negedge clk);
        x[k] = $urandom;
        in_valid = 1; in_iact = x[k]; in_widx = k; in_first = (k == 0); in_last = (k == AH-1);
        exp_sum += (int'(x[k]) - int'(izp)) * (int'(w[act][k]) - int'(wzp));
        @(posedge clk); #1;
        checks++;
        if (!(out_valid && out_iact == x[k] && out_widx == 2'(k) && out_last == (k == AH-1))) begin
          failures++; $display("pass-down mismatch g=%0d k=%0d", g, k);
        end
        if (k < AH-1) begin
          checks++;
          if (result_valid) begin failures++; $display("early result g=%0d", g); end
        end
      end
      checks++;
      if (!(result_valid && result == exp_sum)) begin
        failures++; $display("result mismatch g=%0d got %0d exp %0d v=%0b", g, result, exp_sum, result_valid);
      end
      @(negedge clk); in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

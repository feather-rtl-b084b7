// tb_feather_controller: AH = 4. Checks (1) the weight loader: AH*AH StrB reads
// from w_base, write strobes one cycle later walking row-major over (row, index);
// (2) a conv layer started while the loader is still busy: it stalls, then swaps,
// then reads num_lines StaB lines from rd_base with NEST strobes one cycle later
// carrying widx = t mod AH and first/last flags; done after the drain and the
// ping-pong select flips; the instruction address follows the wave count;
// (3) a bypass layer (first = last = 1, bypass set, no swap); (4) an FE layer
// run with flip = 0, after which the ping-pong select must stay where it was;
// (5) a strided read: 2x2 windows over rows of 8 lines, 3 window positions per
// row, 2 rows, whose address sequence is compared with the loop nest written out.
module tb_feather_controller;
  import feather_pkg::*;
  localparam int AH = 4, DRAIN = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wload_start, w_set, wload_busy, start, swap_weights, flip, busy, done, wait_stall;
  layer_op_e op;
  logic [8:0] w_base, strb_rd_addr;
  logic [10:0] num_lines;
  logic [9:0] rd_base, stab_rd_addr, ib_base, ib_rd_addr;
  logic [9:0] rd_cnt [3], rd_stride [4];
  int exp_seq [$];
  logic stab_sel, stab_rd_en, strb_sel, strb_rd_en, bypass, nest_valid, nest_first, nest_last;
  logic [1:0] nest_widx, wl_row, wl_idx;
  logic wl_en, swap, wave_valid, fe_valid, fe_start;

  feather_controller #(.AH(AH), .DRAIN(DRAIN)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s at %0t", what, $time); end
  endtask

  // monitors
  int n_strb = 0, n_wl = 0, n_stab = 0, n_nest = 0, n_swap = 0, n_stall = 0, n_fe = 0;
  logic [8:0] exp_w; logic [9:0] exp_l;
  always @(posedge clk) if (rst_n) begin
    if (strb_rd_en) begin chk(strb_rd_addr == exp_w, "strb addr"); exp_w++; n_strb++; end
    if (wl_en) begin chk(wl_row == 2'(n_wl / AH) && wl_idx == 2'(n_wl % AH), "wl row/idx"); n_wl++; end
    if (stab_rd_en) begin
      if (exp_seq.size() > 0) chk(int'(stab_rd_addr) == exp_seq.pop_front(), "strided stab addr");
      else begin chk(stab_rd_addr == exp_l, "stab addr"); exp_l++; end
      n_stab++;
    end
    if (nest_valid) begin
      if (bypass) chk(nest_first && nest_last, "bypass flags");
      else chk(nest_widx == 2'(n_nest % AH) && nest_first == (n_nest % AH == 0)
               && nest_last == (n_nest % AH == AH-1), "nest ctrl");
      n_nest++;
    end
    if (fe_valid) n_fe++;
    if (swap) n_swap++;
    if (wait_stall) n_stall++;
  end

  initial begin
    int t0, t1;
    wload_start = 0; w_set = 0; w_base = 0; start = 0; op = OP_CONV; swap_weights = 0; flip = 1;
    rd_cnt = '{1, 1, 1}; rd_stride = '{1, 1, 1, 1};
    num_lines = 0; rd_base = 0; ib_base = 0; wave_valid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // (1)+(2): loader, then start a conv while it is busy
    @(negedge clk); wload_start = 1; w_set = 1; w_base = 100; exp_w = 100;
    @(negedge clk); wload_start = 0;
    chk(strb_sel == 1, "strb set");
    repeat (3) @(negedge clk);
    start = 1; op = OP_CONV; swap_weights = 1; num_lines = 12; rd_base = 40; exp_l = 40; ib_base = 7;
    @(negedge clk); start = 0;
    wait (n_swap == 1);
    chk(n_wl == AH * AH && n_strb == AH * AH, "full weight load before swap");
    chk(n_stall > 0, "stall observed");
    // emulate waves on the column bus and watch the instruction address
    @(negedge clk); wave_valid = 1; chk(ib_rd_addr == 7, "ib addr 0");
    @(negedge clk); chk(ib_rd_addr == 8, "ib addr 1");
    @(negedge clk); wave_valid = 0; chk(ib_rd_addr == 9, "ib addr 2");
    t0 = $time;
    wait (done);
    @(negedge clk);
    chk(n_stab == 12 && n_nest == 12, "12 lines streamed");
    chk(stab_sel == 1, "ping-pong flipped");
    chk(!busy, "idle after done");
    // (3) bypass layer
    n_nest = 0;
    @(negedge clk); start = 1; op = OP_BYPASS; swap_weights = 1; num_lines = 5; rd_base = 3; exp_l = 3;
    @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    chk(n_nest == 5 && n_swap == 1, "bypass streamed without swap");
    chk(stab_sel == 0, "flipped back");
    // (4) FE layer
    @(negedge clk); start = 1; op = OP_FE; swap_weights = 0; flip = 0; num_lines = 6; rd_base = 0; exp_l = 0;
    @(negedge clk); start = 0; flip = 1;
    chk(fe_start == 1, "fe start pulse");
    wait (done); @(negedge clk);
    chk(n_fe == 6 && n_nest == 5, "fe streamed");
    chk(stab_sel == 0, "no flip when flip = 0");
    // (5) strided read
    for (int p = 0; p < 2; p++) for (int q = 0; q < 3; q++) for (int r = 0; r < 2; r++) for (int c = 0; c < 2; c++)
      exp_seq.push_back(5 + 8 * p + q + 8 * r + c);
    n_stab = 0; n_nest = 0;
    @(negedge clk); start = 1; op = OP_CONV; swap_weights = 0; num_lines = 24; rd_base = 5;
    rd_cnt = '{2, 2, 3}; rd_stride = '{1, 8, 1, 8};
    @(negedge clk); start = 0; rd_cnt = '{1, 1, 1}; rd_stride = '{1, 1, 1, 1};
    wait (done); @(negedge clk);
    chk(n_stab == 24 && exp_seq.size() == 0, "24 strided reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_feather_layout_switch: the layout-switching example of FEATHER's
// reorder-in-reduction description, end to end on a 4x4 feather_top (AW = AH = 4).
//
// Workload: iAct 8x8 with C = 4 channels stored channel-last, four channels per
// line (line 8h + w, bank c); 2x2 kernels; M = 4 output channels; stride 1, so
// oAct 7x7x4. Mapping: NEST column c takes input channel c, row m computes output
// channel m, and each PE holds the four weights of its (m, c) kernel. For output
// pixel (p, q) the controller's read loop nest fetches lines 8(p+R) + (q+S) for
// the four taps (R, S): counts {2, 2, 7}, strides {1, 8, 1, 8}, giving the read
// trace 0, 1, 8, 9, 1, 2, 9, 10, ... with no line stored twice. Each row's four
// column sums are reduced 4:1 in BIRRD and steered to bank q % 4 of line
// OUTB + 14m + 2p + q/4, i.e. the oActs land row-major, four W positions per line
// (the next layer's layout), one oAct per wave under a one-hot lane mask.
//
// Checks: the whole read-address sequence, every oAct against a direct
// convolution with the same requantization, that the unused bank of each
// half-filled line keeps its old value, and that the 196-line layer takes no more
// than 196 cycles plus the pipeline depth and drain.
module tb_feather_layout_switch;
  import feather_pkg::*;
  localparam int AW = 4, AH = 4, NS = 3, CW = NS * AW, SAW = 10, IW = CW + SAW + 2 + AW;
  localparam int OUTB = 100, HW = 8, PQ = HW - 1, NLINES = PQ * PQ * 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wload_start, w_set, wload_busy, start, swap_weights, flip, busy, done, stab_sel, wait_stall;
  logic [8:0] w_base;
  layer_op_e op;
  logic [10:0] num_lines;
  logic [9:0] rd_base, ib_base, fe_dst_base;
  logic [9:0] rd_cnt [3], rd_stride [4];
  fe_op_e fe_op;
  logic [3:0] fe_win;
  logic stab_wr_en, stab_wr_set, stab_rd_en, stab_rd_set;
  logic [9:0] stab_wr_addr, stab_rd_addr;
  logic [AW-1:0] stab_wr_mask;
  logic [7:0] stab_wr_data [AW], stab_rd_data [AW];
  logic strb_wr_en, strb_wr_set;
  logic [8:0] strb_wr_addr;
  logic [7:0] strb_wr_data [AW];
  logic ib_wr_en;
  logic [9:0] ib_wr_addr;
  logic [IW-1:0] ib_wr_data;
  logic zp_wr_en;
  logic [1:0] zp_wr_lane, zp_wr_field;
  logic [31:0] zp_wr_data;

  feather_top #(.AW(AW), .AH(AH)) dut (.*);

  int checks = 0, failures = 0, n_stall = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && wait_stall) n_stall++;

  // ---------------- workload ----------------
  logic signed [7:0] x [4][HW][HW];               // [c][h][w]
  logic signed [7:0] w [4][4][4];                 // [m][c][k = 2R + S]
  int zx, zw, zo, scl;

  // ---------------- BIRRD model (4 inputs, 3 stages) ----------------
  function automatic int rev2(int j);
    return (j & ~3) | ((j & 1) << 1) | ((j >> 1) & 1);
  endfunction
  function automatic int nxt(int s, int j);
    return (s == NS - 1) ? j : rev2(j);
  endfunction
  function automatic void birrd_model(input logic [CW-1:0] c, inout bit v [AW], inout int d [AW]);
    bit ov [AW]; int od [AW];
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k < AW/2; k++) begin
        bit vl, vr; int a, b;
        vl = v[2*k]; vr = v[2*k+1]; a = vl ? d[2*k] : 0; b = vr ? d[2*k+1] : 0;
        case (c[2*(s*AW/2+k) +: 2])
          2'b00: begin ov[nxt(s,2*k)] = vl; od[nxt(s,2*k)] = a; ov[nxt(s,2*k+1)] = vr; od[nxt(s,2*k+1)] = b; end
          2'b01: begin ov[nxt(s,2*k)] = vr; od[nxt(s,2*k)] = b; ov[nxt(s,2*k+1)] = vl; od[nxt(s,2*k+1)] = a; end
          2'b10: begin ov[nxt(s,2*k)] = vl|vr; od[nxt(s,2*k)] = a+b; ov[nxt(s,2*k+1)] = vr; od[nxt(s,2*k+1)] = b; end
          default: begin ov[nxt(s,2*k)] = vl; od[nxt(s,2*k)] = a; ov[nxt(s,2*k+1)] = vl|vr; od[nxt(s,2*k+1)] = a+b; end
        endcase
      end
      v = ov; d = od;
    end
  endfunction

  // first configuration that adds all four lanes and delivers the sum to bank b
  function automatic logic [CW-1:0] find_cfg(int b);
    for (int n = 0; n < (1 << CW); n++) begin
      bit v [AW]; int d [AW];
      for (int j = 0; j < AW; j++) begin v[j] = 1; d[j] = 1 << (4 * j); end
      birrd_model(CW'(n), v, d);
      if (v[b] && d[b] == 'h1111) return CW'(n);
    end
    return '0;
  endfunction

  function automatic int quant(int acc);
    longint y;
    y = ((longint'(acc) * longint'(scl) + 64'sd32768) >>> 16) + longint'(zo);
    if (y > 127) return 127;
    if (y < -128) return -128;
    return int'(y);
  endfunction

  // ---------------- host helpers ----------------
  task automatic set_q(int lane, int field, int val);
    @(negedge clk); zp_wr_en = 1; zp_wr_lane = 2'(lane); zp_wr_field = 2'(field); zp_wr_data = val;
    @(negedge clk); zp_wr_en = 0;
  endtask

  // expected read addresses, in loop-nest order
  int exp_rd [$];
  int n_rd = 0;
  always @(posedge clk) if (rst_n && dut.c_stab_rd_en) begin
    n_rd++;
    if (exp_rd.size() > 0) begin
      int e;
      e = exp_rd.pop_front();
      chk(int'(dut.c_stab_rd_addr) == e, $sformatf("read %0d: line %0d, expected %0d", n_rd, dut.c_stab_rd_addr, e));
    end else chk(0, "more reads than expected");
  end

  initial begin
    logic [CW-1:0] cfg [AW];
    longint t0;
    int t_layer;
    wload_start = 0; w_set = 0; w_base = 0; start = 0; swap_weights = 0; flip = 1; op = OP_CONV;
    rd_cnt = '{1, 1, 1}; rd_stride = '{1, 1, 1, 1};
    fe_op = FE_RELU; fe_win = 1; fe_dst_base = 0; num_lines = 0; rd_base = 0; ib_base = 0;
    stab_wr_en = 0; stab_wr_set = 0; stab_wr_addr = 0; stab_wr_mask = '1; stab_rd_en = 0;
    stab_rd_set = 0; stab_rd_addr = 0; strb_wr_en = 0; strb_wr_set = 0; strb_wr_addr = 0;
    ib_wr_en = 0; ib_wr_addr = 0; ib_wr_data = 0; zp_wr_en = 0; zp_wr_lane = 0; zp_wr_field = 0;
    zp_wr_data = 0;
    for (int j = 0; j < AW; j++) begin stab_wr_data[j] = 0; strb_wr_data[j] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;

    for (int c = 0; c < 4; c++) for (int h = 0; h < HW; h++) for (int v = 0; v < HW; v++) x[c][h][v] = 8'($urandom);
    for (int m = 0; m < 4; m++) for (int c = 0; c < 4; c++) for (int k = 0; k < 4; k++) w[m][c][k] = 8'($urandom);
    zx = int'($urandom % 16) - 8; zw = int'($urandom % 8) - 4; zo = int'($urandom % 20) - 10;
    scl = 8 + $urandom % 24;
    for (int j = 0; j < AW; j++) begin set_q(j, 0, zx); set_q(j, 1, zw); set_q(j, 2, zo); set_q(j, 3, scl); end

    // iActs, channel-last: set 0 line 8h + w, bank c; output area of set 1 preset to 0x5a
    for (int a = 0; a < HW * HW; a++) begin
      @(negedge clk); stab_wr_en = 1; stab_wr_set = 0; stab_wr_addr = 10'(a);
      for (int j = 0; j < AW; j++) stab_wr_data[j] = x[j][a / HW][a % HW];
    end
    for (int a = 0; a < 4 * 14; a++) begin
      @(negedge clk); stab_wr_en = 1; stab_wr_set = 1; stab_wr_addr = 10'(OUTB + a);
      for (int j = 0; j < AW; j++) stab_wr_data[j] = 8'h5a;
    end
    @(negedge clk); stab_wr_en = 0;

    // weights: line 4m + k, byte c = w[m][c][k]
    for (int m = 0; m < AH; m++)
      for (int k = 0; k < AH; k++) begin
        @(negedge clk); strb_wr_en = 1; strb_wr_set = 0; strb_wr_addr = 9'(m * AH + k);
        for (int j = 0; j < AW; j++) strb_wr_data[j] = w[m][j][k];
      end
    @(negedge clk); strb_wr_en = 0;

    // one instruction per wave (p, q, m): 4:1 sum to bank q % 4
    for (int b = 0; b < AW; b++) begin
      cfg[b] = find_cfg(b);
      chk(cfg[b] != 0, $sformatf("a 4:1 configuration to bank %0d exists", b));
    end
    for (int p = 0; p < PQ; p++)
      for (int q = 0; q < PQ; q++)
        for (int m = 0; m < AH; m++) begin
          @(negedge clk); ib_wr_en = 1; ib_wr_addr = 10'((p * PQ + q) * 4 + m);
          ib_wr_data = {4'(1 << (q % 4)), 1'b1, 1'b0, SAW'(OUTB + 14 * m + 2 * p + q / 4), cfg[q % 4]};
        end
    @(negedge clk); ib_wr_en = 0;

    for (int p = 0; p < PQ; p++) for (int q = 0; q < PQ; q++) for (int r = 0; r < 2; r++) for (int s = 0; s < 2; s++)
      exp_rd.push_back(HW * (p + r) + q + s);

    // load the weights, then run the layer
    @(negedge clk); wload_start = 1; w_set = 0; w_base = 0;
    @(negedge clk); wload_start = 0;
    wait (!wload_busy);
    @(negedge clk);
    t0 = longint'($time);
    start = 1; op = OP_CONV; swap_weights = 1; flip = 1; num_lines = 11'(NLINES); rd_base = 0; ib_base = 0;
    rd_cnt = '{2, 2, 10'(PQ)}; rd_stride = '{1, 10'(HW), 1, 10'(HW)};
    @(negedge clk); start = 0;
    wait (done);
    t_layer = int'((longint'($time) - t0) / 10);
    @(negedge clk);
    chk(exp_rd.size() == 0 && n_rd == NLINES, $sformatf("%0d lines read", n_rd));
    chk(stab_sel == 1, "ping-pong select flipped");
    chk(t_layer <= NLINES + AH + NS + (AH + NS + 6) + 8, $sformatf("layer took %0d cycles", t_layer));

    // oActs: line OUTB + 14m + 2p + q/4, bank q % 4
    for (int m = 0; m < AH; m++)
      for (int p = 0; p < PQ; p++)
        for (int l = 0; l < 2; l++) begin
          @(negedge clk); stab_rd_en = 1; stab_rd_set = 1; stab_rd_addr = 10'(OUTB + 14 * m + 2 * p + l);
          @(posedge clk); #1;
          for (int b = 0; b < AW; b++) begin
            int q, acc;
            q = 4 * l + b;
            if (q >= PQ) begin
              chk(stab_rd_data[b] == 8'h5a, "unused bank untouched");
              continue;
            end
            acc = 0;
            for (int c = 0; c < 4; c++)
              for (int k = 0; k < 4; k++)
                acc += (int'(x[c][p + k / 2][q + k % 2]) - zx) * (int'(w[m][c][k]) - zw);
            chk(int'($signed(stab_rd_data[b])) == quant(acc),
                $sformatf("oAct m=%0d p=%0d q=%0d: got %0d exp %0d", m, p, q, $signed(stab_rd_data[b]), quant(acc)));
          end
        end
    @(negedge clk); stab_rd_en = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

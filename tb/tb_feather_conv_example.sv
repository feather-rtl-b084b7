// tb_feather_conv_example: the walk-through convolution of FEATHER's NEST/BIRRD
// description, run end to end on a 4x4 instance of feather_top (AW = AH = 4,
// 3-stage BIRRD).
//
// Workload: iAct 4x4 with C = 2 channels, 2x2 kernels, M = 16 output channels,
// stride 1, so oAct 3x3x16. Mapping (weight stationary, as in the walk-through):
// PE column j handles input channel c = j % 2 of output-channel slot ml = j / 2;
// PE row r handles output channel m = 8*tile + 2*r + ml; each PE holds the four
// weights of its (m, c) kernel, indexed k = 2*R + S. A group of AH = 4 StaB lines
// feeds the four kernel taps of one output pixel: line 4*p + k, bank j holds
// x[c(j)][P+R][Q+S]. Each wave (one row's four column sums) needs a 4:2
// reduction: lanes 0+1 give channel m with ml = 0, lanes 2+3 give ml = 1.
//
// Output layout (channel-last, four channels per line): oAct (m, p) goes to line
// OUTB + 4*p + m/4, bank m % 4. Even rows therefore write banks 0,1 and odd rows
// banks 2,3 of the same line. The BIRRD configuration for each of the two
// placements is found here by searching all 4^6 Egg settings with a model of the
// network; the instruction's lane mask drops the two leftover outputs.
//
// M = 16 needs two weight tiles of 8 channels. Tile 0 runs with flip = 0 so that
// tile 1 reads the same iActs; tile 1's weights load during tile 0 and must not
// cause a stall. Every oAct is compared with a direct convolution followed by
// the same requantization; the tile time is checked against streaming 36 lines
// at one line per cycle plus the pipeline drain.
module tb_feather_conv_example;
  import feather_pkg::*;
  localparam int AW = 4, AH = 4, NS = 3, CW = NS * AW, SAW = 10, IW = CW + SAW + 2 + AW;
  localparam int OUTB = 100, NLINES = 36;
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
  logic signed [7:0] x [2][4][4];                 // [c][h][w]
  logic signed [7:0] w [16][2][4];                // [m][c][k = 2R + S]
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

  // first configuration that sends lanes 0+1 to bank b0 and lanes 2+3 to bank b0+1
  function automatic logic [CW-1:0] find_cfg(int b0);
    for (int n = 0; n < (1 << CW); n++) begin
      bit v [AW]; int d [AW];
      for (int j = 0; j < AW; j++) begin v[j] = 1; d[j] = 1 << (4 * j); end
      birrd_model(CW'(n), v, d);
      if (v[b0] && d[b0] == 'h11 && v[b0+1] && d[b0+1] == 'h1100) return CW'(n);
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

  task automatic run_tile(int tile, bit fl);
    @(negedge clk);
    start = 1; op = OP_CONV; swap_weights = 1; flip = fl; num_lines = 11'(NLINES); rd_base = 0;
    ib_base = 10'(tile * NLINES);
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
  endtask

  initial begin
    logic [CW-1:0] cfg_lo, cfg_hi;
    longint t0;
    int t_tile, st;
    wload_start = 0; w_set = 0; w_base = 0; start = 0; swap_weights = 0; flip = 1; rd_cnt = '{1, 1, 1}; rd_stride = '{1, 1, 1, 1}; op = OP_CONV;
    fe_op = FE_RELU; fe_win = 1; fe_dst_base = 0; num_lines = 0; rd_base = 0; ib_base = 0;
    stab_wr_en = 0; stab_wr_set = 0; stab_wr_addr = 0; stab_wr_mask = '1; stab_rd_en = 0;
    stab_rd_set = 0; stab_rd_addr = 0; strb_wr_en = 0; strb_wr_set = 0; strb_wr_addr = 0;
    ib_wr_en = 0; ib_wr_addr = 0; ib_wr_data = 0; zp_wr_en = 0; zp_wr_lane = 0; zp_wr_field = 0;
    zp_wr_data = 0;
    for (int j = 0; j < AW; j++) begin stab_wr_data[j] = 0; strb_wr_data[j] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;

    // random tensors and per-tensor quantization parameters
    for (int c = 0; c < 2; c++) for (int h = 0; h < 4; h++) for (int v = 0; v < 4; v++) x[c][h][v] = 8'($urandom);
    for (int m = 0; m < 16; m++) for (int c = 0; c < 2; c++) for (int k = 0; k < 4; k++) w[m][c][k] = 8'($urandom);
    zx = int'($urandom % 16) - 8; zw = int'($urandom % 8) - 4; zo = int'($urandom % 20) - 10;
    scl = 8 + $urandom % 24;
    for (int j = 0; j < AW; j++) begin set_q(j, 0, zx); set_q(j, 1, zw); set_q(j, 2, zo); set_q(j, 3, scl); end

    // iActs: line 4p + k, bank j = x[c(j)][P+R][Q+S]
    for (int p = 0; p < 9; p++)
      for (int k = 0; k < 4; k++) begin
        @(negedge clk); stab_wr_en = 1; stab_wr_set = 0; stab_wr_addr = 10'(4 * p + k);
        for (int j = 0; j < AW; j++) stab_wr_data[j] = x[j % 2][p / 3 + k / 2][p % 3 + k % 2];
      end
    @(negedge clk); stab_wr_en = 0;

    // weights: StrB set t, line 4r + k, byte j = w[8t + 2r + j/2][j%2][k]
    for (int t = 0; t < 2; t++)
      for (int r = 0; r < AH; r++)
        for (int k = 0; k < AH; k++) begin
          @(negedge clk); strb_wr_en = 1; strb_wr_set = 1'(t); strb_wr_addr = 9'(r * AH + k);
          for (int j = 0; j < AW; j++) strb_wr_data[j] = w[8 * t + 2 * r + j / 2][j % 2][k];
        end
    @(negedge clk); strb_wr_en = 0;

    // instructions: wave 4g + r of tile t writes line OUTB + 4g + 2t + r/2
    cfg_lo = find_cfg(0);
    cfg_hi = find_cfg(2);
    chk(cfg_lo != 0 && cfg_hi != 0, "BIRRD configurations for both placements exist");
    for (int t = 0; t < 2; t++)
      for (int g = 0; g < 9; g++)
        for (int r = 0; r < AH; r++) begin
          logic [AW-1:0] m;
          m = (r % 2 == 0) ? 4'b0011 : 4'b1100;
          @(negedge clk); ib_wr_en = 1; ib_wr_addr = 10'(t * NLINES + 4 * g + r);
          ib_wr_data = {m, 1'b1, 1'b0, SAW'(OUTB + 4 * g + 2 * t + r / 2), (r % 2 == 0) ? cfg_lo : cfg_hi};
        end
    @(negedge clk); ib_wr_en = 0;

    // tile 0: load its weights and start at once (waits for the load), keep the
    // ping-pong select; load tile 1's weights behind tile 0
    @(negedge clk); wload_start = 1; w_set = 0; w_base = 0;
    @(negedge clk); wload_start = 0;
    fork
      run_tile(0, 0);
      begin
        wait (dut.swap); @(negedge clk); @(negedge clk);
        wload_start = 1; w_set = 1; w_base = 0;
        @(negedge clk); wload_start = 0;
      end
    join
    chk(stab_sel == 0, "tile 0 keeps the ping-pong select");
    chk(n_stall > 0, "tile 0 waited for its weights");
    st = n_stall;
    t0 = longint'($time);
    run_tile(1, 1);
    t_tile = int'((longint'($time) - t0) / 10);
    chk(n_stall == st, "tile 1 weights were loaded behind tile 0");
    chk(stab_sel == 1, "ping-pong select flips after the last tile");
    chk(t_tile <= NLINES + AH + NS + (AH + NS + 6) + 8, $sformatf("tile 1 took %0d cycles", t_tile));

    // compare every oAct with a direct convolution
    for (int p = 0; p < 9; p++)
      for (int l = 0; l < 4; l++) begin
        @(negedge clk); stab_rd_en = 1; stab_rd_set = 1; stab_rd_addr = 10'(OUTB + 4 * p + l);
        @(posedge clk); #1;
        for (int b = 0; b < AW; b++) begin
          int m, acc;
          m = 4 * l + b; acc = 0;
          for (int c = 0; c < 2; c++)
            for (int k = 0; k < 4; k++)
              acc += (int'(x[c][p / 3 + k / 2][p % 3 + k % 2]) - zx) * (int'(w[m][c][k]) - zw);
          chk(int'($signed(stab_rd_data[b])) == quant(acc),
              $sformatf("oAct m=%0d P=%0d Q=%0d: got %0d exp %0d", m, p / 3, p % 3, $signed(stab_rd_data[b]), quant(acc)));
        end
      end
    @(negedge clk); stab_rd_en = 0;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

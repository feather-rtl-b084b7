// tb_feather_top: end-to-end test of feather_top at its default size (16x16
// NEST, 16-input BIRRD). A reference model in the testbench follows every layer
// through the same steps (local reduction, BIRRD, output buffer, quantization)
// and keeps a shadow copy of both stationary-buffer sets; at the end both sets
// are read back through the off-chip port and compared line by line.
//
// Program:
//   L1 CONV   set0 lines 0..47 -> set1; weights loaded just before, so the start
//             stalls on the weight loader. Group 0 waves park partial sums in the
//             output buffer, group 1 waves add to them and write lines 0..15,
//             group 2 waves write lines 16..31. Even waves use random Egg
//             functions (reduction + reorder), odd waves pass/swap only (reorder).
//   L2 BYPASS set1 lines 0..31 -> set0 lines 64..95, PE array bypassed, random
//             reorder; a second weight load runs hidden behind this layer.
//   L3 FE     ReLU on set0 lines 64..95 -> set1 lines 200..231, issued as two
//             16-line commands; the first has flip = 0, so the second reads the
//             same set.
//   L4 CONV   set1 lines 200..215 with the weights loaded during L2/L3 -> set0;
//             that load is fully hidden, so L4 must not wait.
// Every instruction carries a random lane write mask, so some BIRRD outputs
// (including the copies an add leaves on its secondary output) are dropped.
// Each mechanism is counted and must have happened at least once.
module tb_feather_top;
  import feather_pkg::*;
  localparam int AW = 16, AH = 16, SDEPTH = 1024, WDEPTH = 512, IDEPTH = 1024;
  localparam int NS = 2 * $clog2(AW), CW = NS * AW, SAW = 10, IW = CW + SAW + 2 + AW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wload_start, w_set, wload_busy, start, swap_weights, flip, busy, done, stab_sel, wait_stall;
  logic [8:0] w_base;
  layer_op_e op; fe_op_e fe_op;
  logic [10:0] num_lines;
  logic [9:0] rd_base, ib_base, fe_dst_base;
  logic [9:0] rd_cnt [3], rd_stride [4];
  logic [3:0] fe_win;
  logic stab_wr_en, stab_wr_set, stab_rd_en, stab_rd_set, strb_wr_en, strb_wr_set, ib_wr_en, zp_wr_en;
  logic [9:0] stab_wr_addr, stab_rd_addr, ib_wr_addr;
  logic [AW-1:0] stab_wr_mask;
  logic [7:0] stab_wr_data [AW], stab_rd_data [AW], strb_wr_data [AW];
  logic [8:0] strb_wr_addr;
  logic [IW-1:0] ib_wr_data;
  logic [3:0] zp_wr_lane; logic [1:0] zp_wr_field; logic [31:0] zp_wr_data;

  feather_top dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_hidden_wl = 0, n_bypass = 0, n_fe = 0, n_add = 0, n_reorder = 0;
  int n_ob_acc = 0, n_pingpong = 0, n_swap = 0, n_wave = 0, n_masked = 0, n_noflip = 0;
  logic sel_prev = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (wait_stall) n_stall++;
    if (wload_busy && dut.u_ctrl.stab_rd_en) n_hidden_wl++;
    if (dut.bypass && dut.nest_valid) n_bypass++;
    if (dut.fe_valid) n_fe++;
    if (dut.swap) n_swap++;
    if (stab_sel != sel_prev) n_pingpong++;
    sel_prev <= stab_sel;
    if (dut.wave_valid) n_wave++;
  end

  // ---------------- reference state ----------------
  logic signed [7:0] sh [2][SDEPTH][AW];          // shadow of the stationary buffer
  logic signed [7:0] wt [2][AH][AW][AH];          // [strb set][row][col][k]
  logic signed [7:0] wact [AH][AW][AH];           // weights active in the PEs
  logic signed [7:0] izp [AW], wzp [AW], ozp [AW];
  int scl [AW];
  int obm [AW][64];                               // output-buffer model
  logic [IW-1:0] prog [IDEPTH];

  function automatic int rev(int d, int n);
    int r = 0;
    for (int i = 0; i < n; i++) if (d[i]) r |= 1 << (n - 1 - i);
    return (d & ~((1 << n) - 1)) | r;
  endfunction
  function automatic int nxt(int s, int j);
    int lg = $clog2(AW), n;
    if (s == NS - 1) return j;
    n = lg;
    if (2 + s < n) n = 2 + s;
    if (2 * lg - s < n) n = 2 * lg - s;
    return rev(j, n);
  endfunction

  // BIRRD model on one wave
  task automatic birrd_model(input logic [CW-1:0] c, inout bit v [AW], inout int d [AW]);
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
  endtask

  function automatic int quant(int x, int s, int z);
    longint p; longint y;
    p = longint'(x) * longint'(s);
    y = ((p + 64'sd32768) >>> 16) + longint'(z);
    if (y > 127) return 127;
    if (y < -128) return -128;
    return int'(y);
  endfunction

  // one wave through BIRRD, OB and QM into the shadow write set
  task automatic wave_model(int wset, logic [IW-1:0] ins, bit v [AW], int d [AW]);
    logic [CW-1:0] c; int addr; bit acc, last;
    c = ins[CW-1:0]; addr = int'(ins[CW +: SAW]); acc = ins[CW+SAW]; last = ins[CW+SAW+1];
    birrd_model(c, v, d);
    for (int j = 0; j < AW; j++) if (v[j] && !ins[CW+SAW+2+j]) n_masked++;
    for (int j = 0; j < AW; j++) if (v[j] && ins[CW+SAW+2+j]) begin
      int tot;
      tot = (acc ? obm[j][addr % 64] : 0) + d[j];
      obm[j][addr % 64] = tot;
      if (last) sh[wset][addr][j] = 8'(quant(tot, scl[j], ozp[j]));
    end
  endtask

  task automatic model_conv(int rset, int base, int nl, int ibb);
    int w;
    w = 0;
    for (int g = 0; g < nl / AH; g++)
      for (int r = 0; r < AH; r++) begin
        bit v [AW]; int d [AW];
        for (int j = 0; j < AW; j++) begin
          int s = 0;
          for (int k = 0; k < AH; k++)
            s += (int'(sh[rset][base + g*AH + k][j]) - int'(izp[j])) * (int'(wact[r][j][k]) - int'(wzp[j]));
          v[j] = 1; d[j] = s;
        end
        wave_model(1 - rset, prog[ibb + w], v, d);
        w++;
      end
  endtask

  task automatic model_bypass(int rset, int base, int nl, int ibb);
    for (int t = 0; t < nl; t++) begin
      bit v [AW]; int d [AW];
      for (int j = 0; j < AW; j++) begin v[j] = 1; d[j] = int'(sh[rset][base + t][j]); end
      wave_model(1 - rset, prog[ibb + t], v, d);
    end
  endtask

  // ---------------- host helpers ----------------
  task automatic set_q(int lane, int field, int val);
    @(negedge clk); zp_wr_en = 1; zp_wr_lane = 4'(lane); zp_wr_field = 2'(field); zp_wr_data = val;
    @(negedge clk); zp_wr_en = 0;
  endtask

  task automatic put_instr(int a, logic [CW-1:0] c, int addr, bit acc, bit last);
    logic [AW-1:0] m;
    // about a quarter of the lanes do not write; a wave that parks partial sums
    // for later accumulation writes every lane, so no entry is left stale
    m = last ? AW'($urandom | $urandom) : '1;
    prog[a] = {m, last, acc, SAW'(addr), c};
    @(negedge clk); ib_wr_en = 1; ib_wr_addr = 10'(a); ib_wr_data = prog[a];
    @(negedge clk); ib_wr_en = 0;
    if (last || acc) begin
      for (int s = 0; s < NS; s++) for (int k = 0; k < AW/2; k++) begin
        if (c[2*(s*AW/2+k) + 1]) n_add++;
      end
    end
  endtask

  function automatic logic [CW-1:0] rand_cfg(bit reorder_only);
    logic [CW-1:0] c;
    for (int b = 0; b < CW; b += 32) c[b +: 32] = $urandom;
    if (reorder_only) for (int b = 1; b < CW; b += 2) c[b] = 1'b0;
    return c;
  endfunction

  task automatic run_layer(layer_op_e o, bit sw, int nl, int base, int ibb, bit fl = 1);
    @(negedge clk);
    start = 1; op = o; swap_weights = sw; flip = fl; num_lines = 11'(nl); rd_base = 10'(base); ib_base = 10'(ibb);
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
  endtask

  task automatic load_strb(int set, int base);
    for (int r = 0; r < AH; r++)
      for (int k = 0; k < AH; k++) begin
        @(negedge clk); strb_wr_en = 1; strb_wr_set = set; strb_wr_addr = 9'(base + r*AH + k);
        for (int j = 0; j < AW; j++) begin wt[set][r][j][k] = $urandom; strb_wr_data[j] = wt[set][r][j][k]; end
      end
    @(negedge clk); strb_wr_en = 0;
  endtask

  task automatic compare_set(int s, int lo, int hi);
    for (int a = lo; a < hi; a++) begin
      @(negedge clk); stab_rd_en = 1; stab_rd_set = s; stab_rd_addr = 10'(a);
      @(posedge clk); #1;
      for (int j = 0; j < AW; j++)
        chk(stab_rd_data[j] == 8'(sh[s][a][j]), $sformatf("set %0d line %0d bank %0d: got %0d exp %0d", s, a, j, $signed(stab_rd_data[j]), sh[s][a][j]));
    end
    @(negedge clk); stab_rd_en = 0;
  endtask

  // ---------------- the program ----------------
  initial begin
    int t0, t_l1;
    wload_start = 0; w_set = 0; w_base = 0; start = 0; swap_weights = 0; flip = 1; rd_cnt = '{1, 1, 1}; rd_stride = '{1, 1, 1, 1}; op = OP_CONV; fe_op = FE_RELU;
    num_lines = 0; rd_base = 0; ib_base = 0; fe_dst_base = 0; fe_win = 1;
    stab_wr_en = 0; stab_wr_set = 0; stab_wr_addr = 0; stab_wr_mask = '1; stab_rd_en = 0; stab_rd_set = 0;
    stab_rd_addr = 0; strb_wr_en = 0; strb_wr_set = 0; strb_wr_addr = 0; ib_wr_en = 0; ib_wr_addr = 0;
    ib_wr_data = 0; zp_wr_en = 0; zp_wr_lane = 0; zp_wr_field = 0; zp_wr_data = 0;
    for (int j = 0; j < AW; j++) begin stab_wr_data[j] = 0; strb_wr_data[j] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;

    // off-chip loads: both StaB sets get a known background on lines 0..319 (every
    // line a layer writes, since masked lanes leave old contents); set 0 lines
    // 0..47 are the L1 iActs
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 320; a++) begin
        @(negedge clk); stab_wr_en = 1; stab_wr_set = s; stab_wr_addr = 10'(a);
        for (int j = 0; j < AW; j++) begin sh[s][a][j] = $urandom; stab_wr_data[j] = sh[s][a][j]; end
      end
    @(negedge clk); stab_wr_en = 0;
    load_strb(0, 0);
    load_strb(1, 256);
    for (int j = 0; j < AW; j++) begin
      izp[j] = $urandom % 16; wzp[j] = $urandom % 16 - 8; ozp[j] = $urandom % 20 - 10;
      scl[j] = 2 + $urandom % 30;
      set_q(j, 0, izp[j]); set_q(j, 1, wzp[j]); set_q(j, 2, ozp[j]); set_q(j, 3, scl[j]);
    end
    // instruction programs
    for (int w = 0; w < 48; w++) begin
      int addr; bit acc, last;
      if (w < 16)      begin addr = w;      acc = 0; last = 0; end
      else if (w < 32) begin addr = w - 16; acc = 1; last = 1; n_ob_acc++; end
      else             begin addr = w - 16; acc = 0; last = 1; end
      put_instr(w, rand_cfg(w % 2 == 1), addr, acc, last);
      if (w % 2 == 1) n_reorder++;
    end
    for (int t = 0; t < 32; t++) begin put_instr(100 + t, rand_cfg(1), 64 + t, 0, 1); n_reorder++; end
    for (int w = 0; w < 16; w++) put_instr(200 + w, rand_cfg(w % 4 == 0), 300 + w, 0, 1);

    // L1: weight load then an immediate start, which must wait for the loader
    @(negedge clk); wload_start = 1; w_set = 0; w_base = 0;
    @(negedge clk); wload_start = 0;
    t0 = $time;
    run_layer(OP_CONV, 1, 48, 0, 0);
    wact = wt[0];
    model_conv(0, 0, 48, 0);
    t_l1 = ($time - t0) / 10;
    // load (AH*AH) + swap + 48 lines + drain must all be in the layer time
    chk(t_l1 >= AH*AH + 48 && t_l1 <= AH*AH + 48 + AH + NS + 12, $sformatf("L1 took %0d cycles", t_l1));
    chk(stab_sel == 1, "ping-pong after L1");
    compare_set(1, 0, 48);

    // L2: bypass reorder, quantizer set to identity; weight load for L4 overlaps
    for (int j = 0; j < AW; j++) begin ozp[j] = 0; scl[j] = 65536; set_q(j, 2, 0); set_q(j, 3, 65536); end
    @(negedge clk); wload_start = 1; w_set = 1; w_base = 256;
    @(negedge clk); wload_start = 0;
    run_layer(OP_BYPASS, 0, 32, 0, 100);
    model_bypass(1, 0, 32, 100);
    chk(stab_sel == 0, "ping-pong after L2");
    compare_set(0, 64, 96);

    // L3: ReLU engine, run as two commands over two halves of the lines; the
    // first keeps the ping-pong select so the second still reads the same set
    @(negedge clk); fe_op = FE_RELU; fe_dst_base = 200;
    run_layer(OP_FE, 0, 16, 64, 0, 0);
    chk(stab_sel == 0, "no ping-pong swap after a command with flip = 0");
    n_noflip++;
    @(negedge clk); fe_dst_base = 216;
    run_layer(OP_FE, 0, 16, 80, 0);
    for (int t = 0; t < 32; t++)
      for (int j = 0; j < AW; j++)
        sh[1][200 + t][j] = (sh[0][64 + t][j] > 0) ? sh[0][64 + t][j] : 0;
    compare_set(1, 200, 232);

    // L4: conv with the weights loaded during L2/L3 (no stall)
    for (int j = 0; j < AW; j++) begin scl[j] = 128 + j; set_q(j, 3, scl[j]); end
    begin
      int st;
      st = n_stall;
      run_layer(OP_CONV, 1, 16, 200, 200);
      chk(n_stall == st, $sformatf("L4 waited %0d cycles: the load must be hidden behind L2/L3", n_stall - st));
    end
    wact = wt[1];
    model_conv(1, 200, 16, 200);
    compare_set(0, 300, 316);
    // everything else must be untouched
    compare_set(0, 0, 64);
    compare_set(1, 48, 200);

    $display("mechanisms: masked_lanes=%0d noflip=%0d", n_masked, n_noflip);
    chk(n_masked > 0, "lane write mask dropped a BIRRD output");
    chk(n_noflip > 0, "command without ping-pong swap happened");
    $display("mechanisms: stall=%0d hidden_wload=%0d bypass=%0d fe=%0d add_eggs=%0d reorder_waves=%0d ob_acc=%0d pingpong=%0d swap=%0d waves=%0d",
             n_stall, n_hidden_wl, n_bypass, n_fe, n_add, n_reorder, n_ob_acc, n_pingpong, n_swap, n_wave);
    chk(n_stall > 0, "stall on weight loader happened");
    chk(n_hidden_wl > 0, "weight load hidden behind a layer happened");
    chk(n_bypass > 0, "PE-array bypass happened");
    chk(n_fe > 0, "functional engine ran");
    chk(n_add > 0, "BIRRD reduction happened");
    chk(n_reorder > 0, "BIRRD pure reorder happened");
    chk(n_ob_acc > 0, "output-buffer accumulation happened");
    chk(n_pingpong == 4, "four ping-pong swaps");
    chk(n_swap == 2, "two weight-bank swaps");
    chk(n_wave == 48 + 32 + 16, "wave count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

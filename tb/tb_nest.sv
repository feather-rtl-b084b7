// tb_nest: 4x4 NEST. Loads random weights through the row/index load port (AH*AH
// cycles), swaps them in, streams G back-to-back groups of AH iAct lines and
// checks every column-bus value against a model of the local reduction, as well
// as the cycle at which it appears (row r of group g right after the edge
// E0 + g*AH + AH-1 + r). Then checks that in bypass the bus carries the iActs
// one cycle later.
module tb_nest;
  localparam int AW = 4, AH = 4, G = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bypass, in_valid, in_first, in_last, wl_en, swap;
  logic signed [7:0] in_iact [AW], izp [AW], wzp [AW], wl_data [AW];
  logic [1:0] in_widx, wl_row, wl_idx;
  logic col_valid [AW];
  logic signed [31:0] col_data [AW];

  nest #(.AW(AW), .AH(AH)) dut (.clk, .rst_n, .bypass, .in_valid, .in_iact, .in_widx, .in_first,
    .in_last, .iact_zp(izp), .wgt_zp(wzp), .wl_en, .wl_row, .wl_idx, .wl_data, .swap, .col_valid, .col_data);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [7:0] w [AH][AW][AH];     // [row][col][k]
  logic signed [7:0] x [G*AH][AW];
  int cyc = 0, wl_cycles = 0;
  always @(posedge clk) begin cyc++; if (wl_en) wl_cycles++; end

  int got_cyc [AW][$];
  int got_val [AW][$];
  always @(posedge clk) begin
    #1;
    for (int j = 0; j < AW; j++)
      if (col_valid[j]) begin got_cyc[j].push_back(cyc); got_val[j].push_back(col_data[j]); end
  end

  initial begin
    int e0;
    bypass = 0; in_valid = 0; in_first = 0; in_last = 0; wl_en = 0; swap = 0; in_widx = 0;
    wl_row = 0; wl_idx = 0;
    for (int j = 0; j < AW; j++) begin in_iact[j] = 0; izp[j] = j - 1; wzp[j] = 2 - j; wl_data[j] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // weight load: AH*AH cycles
    for (int r = 0; r < AH; r++)
      for (int k = 0; k < AH; k++) begin
        @(negedge clk);
        wl_en = 1; wl_row = r; wl_idx = k;
        for (int j = 0; j < AW; j++) begin w[r][j][k] = $urandom; wl_data[j] = w[r][j][k]; end
      end
    @(negedge clk); wl_en = 0; swap = 1;
    checks++;
    if (wl_cycles != AH * AH) begin failures++; $display("weight load took %0d cycles", wl_cycles); end
    @(negedge clk); swap = 0;
    // stream
    for (int t = 0; t < G * AH; t++) begin
      @(negedge clk);
      if (t == 0) e0 = cyc + 1;
      in_valid = 1; in_widx = t % AH; in_first = (t % AH == 0); in_last = (t % AH == AH - 1);
      for (int j = 0; j < AW; j++) begin x[t][j] = $urandom; in_iact[j] = x[t][j]; end
    end
    @(negedge clk); in_valid = 0;
    repeat (AH + 4) @(posedge clk);
    for (int j = 0; j < AW; j++) begin
      checks++;
      if (got_val[j].size() != G * AH) begin failures++; $display("col %0d: %0d results", j, got_val[j].size()); end
      for (int g = 0; g < G; g++)
        for (int r = 0; r < AH; r++) begin
          int e, idx;
          e = 0;
          for (int k = 0; k < AH; k++) e += (int'(x[g*AH+k][j]) - int'(izp[j])) * (int'(w[r][j][k]) - int'(wzp[j]));
          idx = g * AH + r;
          if (idx < got_val[j].size()) begin
            checks += 2;
            if (got_val[j][idx] != e) begin failures++; $display("col %0d g %0d r %0d: got %0d exp %0d", j, g, r, got_val[j][idx], e); end
            if (got_cyc[j][idx] != e0 + g*AH + AH-1 + r) begin failures++; $display("col %0d g %0d r %0d: cycle %0d exp %0d", j, g, r, got_cyc[j][idx], e0 + g*AH + AH-1 + r); end
          end
        end
      got_val[j].delete(); got_cyc[j].delete();
    end
    // bypass: iActs go straight to the buses
    for (int t = 0; t < 8; t++) begin
      @(negedge clk);
      if (t == 0) e0 = cyc + 1;
      bypass = 1; in_valid = 1;
      for (int j = 0; j < AW; j++) begin x[t][j] = $urandom; in_iact[j] = x[t][j]; end
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(posedge clk);
    for (int j = 0; j < AW; j++)
      for (int t = 0; t < 8; t++) begin
        checks++;
        if (t >= got_val[j].size() || got_val[j][t] != int'(x[t][j]) || got_cyc[j][t] != e0 + t) begin
          failures++; $display("bypass col %0d t %0d wrong", j, t);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

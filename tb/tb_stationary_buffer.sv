// tb_stationary_buffer: fills both sets through the external port (with bank
// masks), then with sel = 0 and sel = 1 reads lines through the datapath port
// while writing the other set with per-bank addresses, and reads back both sets
// through the external port. Every read is compared with a shadow model and must
// arrive exactly one cycle after its address.
module tb_stationary_buffer;
  localparam int AW = 4, D = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sel, rd_en, ext_wr_en, ext_wr_set, ext_rd_en, ext_rd_set;
  logic [4:0] rd_addr, ext_wr_addr, ext_rd_addr;
  logic [7:0] rd_data [AW], wr_data [AW], ext_wr_data [AW], ext_rd_data [AW];
  logic wr_en [AW]; logic [4:0] wr_addr [AW]; logic [AW-1:0] ext_wr_mask;

  stationary_buffer #(.AW(AW), .DEPTH(D)) dut (.clk, .rst_n, .sel, .rd_en, .rd_addr, .rd_data,
    .wr_en, .wr_addr, .wr_data, .ext_wr_en, .ext_wr_set, .ext_wr_addr, .ext_wr_mask, .ext_wr_data,
    .ext_rd_en, .ext_rd_set, .ext_rd_addr, .ext_rd_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] sh [2][AW][D];

  initial begin
    sel = 0; rd_en = 0; ext_wr_en = 0; ext_rd_en = 0; ext_wr_set = 0; ext_rd_set = 0;
    rd_addr = 0; ext_wr_addr = 0; ext_rd_addr = 0; ext_wr_mask = '1;
    for (int j = 0; j < AW; j++) begin wr_en[j] = 0; wr_addr[j] = 0; wr_data[j] = 0; ext_wr_data[j] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // external fill of both sets, then a masked overwrite pass
    for (int pass = 0; pass < 2; pass++)
      for (int s = 0; s < 2; s++)
        for (int a = 0; a < D; a++) begin
          @(negedge clk);
          ext_wr_en = 1; ext_wr_set = s; ext_wr_addr = a; ext_wr_mask = pass == 0 ? '1 : AW'($urandom);
          for (int j = 0; j < AW; j++) begin
            ext_wr_data[j] = $urandom;
            if (ext_wr_mask[j]) sh[s][j][a] = ext_wr_data[j];
          end
        end
    @(negedge clk); ext_wr_en = 0;
    for (int s = 0; s < 2; s++) begin
      sel = s;
      for (int t = 0; t < 3 * D; t++) begin
        logic [4:0] ra;
        @(negedge clk);
        ra = $urandom; rd_en = 1; rd_addr = ra;
        for (int j = 0; j < AW; j++) begin
          wr_en[j] = $urandom % 2; wr_addr[j] = $urandom; wr_data[j] = $urandom;
        end
        @(posedge clk); #1;
        for (int j = 0; j < AW; j++) begin
          checks++;
          if (rd_data[j] !== sh[s][j][ra]) begin failures++; if (failures < 10) $display("sel %0d rd line %0d bank %0d", s, ra, j); end
        end
        for (int j = 0; j < AW; j++) if (wr_en[j]) sh[1-s][j][wr_addr[j]] = wr_data[j];
      end
      @(negedge clk); rd_en = 0; for (int j = 0; j < AW; j++) wr_en[j] = 0;
    end
    // external read back of both sets (a set is read externally while the
    // datapath reads the other one)
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk); sel = 1 - s; ext_rd_en = 1; ext_rd_set = s; ext_rd_addr = a;
        @(posedge clk); #1;
        for (int j = 0; j < AW; j++) begin
          checks++;
          if (ext_rd_data[j] !== sh[s][j][a]) begin failures++; if (failures < 10) $display("ext rd set %0d line %0d bank %0d", s, a, j); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

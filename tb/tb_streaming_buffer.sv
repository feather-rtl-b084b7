// tb_streaming_buffer: writes random lines into both sets, then reads random
// lines of the selected set and checks them one cycle after the address.
module tb_streaming_buffer;
  localparam int AW = 4, D = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic sel, rd_en, ext_wr_en, ext_wr_set;
  logic [3:0] rd_addr, ext_wr_addr;
  logic [7:0] rd_data [AW], ext_wr_data [AW];

  streaming_buffer #(.AW(AW), .DEPTH(D)) dut (.clk, .sel, .rd_en, .rd_addr, .rd_data,
    .ext_wr_en, .ext_wr_set, .ext_wr_addr, .ext_wr_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] sh [2][D][AW];
  initial begin
    sel = 0; rd_en = 0; ext_wr_en = 0; ext_wr_set = 0; rd_addr = 0; ext_wr_addr = 0;
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk); ext_wr_en = 1; ext_wr_set = s; ext_wr_addr = a;
        for (int j = 0; j < AW; j++) begin ext_wr_data[j] = $urandom; sh[s][a][j] = ext_wr_data[j]; end
      end
    @(negedge clk); ext_wr_en = 0;
    for (int t = 0; t < 200; t++) begin
      logic [3:0] a; logic s;
      @(negedge clk); a = $urandom; s = $urandom; sel = s; rd_en = 1; rd_addr = a;
      @(posedge clk); #1;
      for (int j = 0; j < AW; j++) begin
        checks++;
        if (rd_data[j] !== sh[s][a][j]) begin failures++; if (failures < 10) $display("set %0d line %0d byte %0d", s, a, j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_instruction_buffer: writes random instruction words to every entry, then
// reads them back in random order (combinational read) and compares.
module tb_instruction_buffer;
  localparam int D = 64, IW = 70;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en; logic [5:0] wr_addr, rd_addr; logic [IW-1:0] wr_data, rd_data;

  instruction_buffer #(.DEPTH(D), .IW(IW)) dut (.clk, .wr_en, .wr_addr, .wr_data, .rd_addr, .rd_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [IW-1:0] sh [D];
  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = a;
      wr_data = {$urandom, $urandom, $urandom}; sh[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk); rd_addr = $urandom; #1;
      checks++;
      if (rd_data !== sh[rd_addr]) begin failures++; if (failures < 10) $display("entry %0d", rd_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

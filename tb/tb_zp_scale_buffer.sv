// tb_zp_scale_buffer: writes every field of every lane with random values in a
// random order and checks all outputs against a shadow copy after each write.
module tb_zp_scale_buffer;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en; logic [2:0] wr_lane; logic [1:0] wr_field; logic [31:0] wr_data;
  logic signed [7:0] iact_zp [AW], wgt_zp [AW], out_zp [AW];
  logic signed [31:0] scale [AW];

  zp_scale_buffer #(.AW(AW)) dut (.clk, .rst_n, .wr_en, .wr_lane, .wr_field, .wr_data,
    .iact_zp, .wgt_zp, .out_zp, .scale);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] sh [4][AW];
  initial begin
    wr_en = 0; wr_lane = 0; wr_field = 0; wr_data = 0;
    for (int f = 0; f < 4; f++) for (int j = 0; j < AW; j++) sh[f][j] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      wr_en = $urandom % 4 != 0; wr_lane = $urandom; wr_field = $urandom; wr_data = $urandom;
      if (wr_en) sh[wr_field][wr_lane] = (wr_field == 3) ? wr_data : {24'b0, wr_data[7:0]};
      @(posedge clk); #1;
      for (int j = 0; j < AW; j++) begin
        checks++;
        if (iact_zp[j] !== sh[0][j][7:0] || wgt_zp[j] !== sh[1][j][7:0] ||
            out_zp[j] !== sh[2][j][7:0] || scale[j] !== sh[3][j]) begin
          failures++; if (failures < 10) $display("t=%0d lane %0d mismatch", t, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

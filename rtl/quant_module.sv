// quant_module: QM, requantizes 32-bit oActs to 8-bit oActs, one lane per
// output-buffer bank.
//
// Per lane: y = saturate_int8( round((x * scale) / 2^SHIFT) + zp ), where scale is
// a 32-bit fixed-point multiplier with SHIFT fractional bits and zp an 8-bit zero
// point, both from the ZP/scale buffer. Rounding is half up
// (add 2^(SHIFT-1) before the arithmetic shift). This is the integer form of the
// per-tensor/per-channel affine requantization used by FBGEMM and QNNPACK.
//
// Timing: one registered stage; the write address rides along.
//
// From the paper: 32-bit input, 32-bit scale, 8-bit zero point, 8-bit output.
// Own choices: fixed-point scale format (SHIFT), rounding and saturation.
module quant_module #(
  parameter int AW     = 16,
  parameter int W      = 32,
  parameter int DW     = 8,
  parameter int SHIFT  = 16,
  parameter int ADDR_W = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid [AW],
  input  logic signed [W-1:0]  in_data  [AW],
  input  logic [ADDR_W-1:0]    in_addr,
  input  logic signed [31:0]   scale    [AW],
  input  logic signed [DW-1:0] zp       [AW],
  output logic                 out_valid [AW],
  output logic signed [DW-1:0] out_data  [AW],
  output logic [ADDR_W-1:0]    out_addr
);

  localparam logic signed [DW-1:0] QMAX = {1'b0, {(DW-1){1'b1}}};
  localparam logic signed [DW-1:0] QMIN = {1'b1, {(DW-1){1'b0}}};

  logic signed [W+31:0] prod [AW];
  logic signed [W+31:0] y    [AW];
  logic signed [DW-1:0] q    [AW];

  always_comb begin
    for (int j = 0; j < AW; j++) begin
      prod[j] = (W+32)'(in_data[j]) * (W+32)'(scale[j]);
      y[j]    = ((prod[j] + ((W+32)'(1) <<< (SHIFT-1))) >>> SHIFT) + (W+32)'(zp[j]);
      if (y[j] > (W+32)'(QMAX))      q[j] = QMAX;
      else if (y[j] < (W+32)'(QMIN)) q[j] = QMIN;
      else                           q[j] = y[j][DW-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_addr <= '0;
      for (int j = 0; j < AW; j++) begin
        out_valid[j] <= 1'b0;
        out_data[j]  <= '0;
      end
    end else begin
      out_addr <= in_addr;
      for (int j = 0; j < AW; j++) begin
        out_valid[j] <= in_valid[j];
        out_data[j]  <= q[j];
      end
    end
  end

endmodule

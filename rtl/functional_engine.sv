// functional_engine: element-wise post-processing engines (ReLU, BatchNorm,
// MaxPooling) that work on stationary-buffer lines.
//
// A layer of kind OP_FE streams lines of the read set of the stationary buffer
// through this unit; each result line is written to the other set at line
// dst_base + n, where n counts the lines produced since 'start'. Per lane j:
//   FE_RELU     y = max(x, zp[j])   (zp[j] is the quantized zero, so this is ReLU)
//   FE_BN       y = sat8(round(x * scale[j] / 2^SHIFT) + zp[j])  (folded BatchNorm)
//   FE_MAXPOOL  y = max of 'win' consecutive lines; one line out per 'win' in
// Lanes are independent, so a pooling window runs along the line order; which
// tensor dimension that is depends on the layout the previous layer chose.
//
// Timing: one registered stage; out_valid follows in_valid by one cycle (for
// MAXPOOL only on the last line of a window).
//
// The paper names separate ReLU, BatchNorm and MaxPooling engines that share the
// on-chip storage but gives no details; the arithmetic and the line-wise
// organisation are this design's own.
module functional_engine
  import feather_pkg::*;
#(
  parameter int AW     = 16,
  parameter int DW     = 8,
  parameter int SHIFT  = 16,
  parameter int ADDR_W = 10
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  fe_op_e               op,
  input  logic [3:0]           win,
  input  logic [ADDR_W-1:0]    dst_base,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data [AW],
  input  logic signed [31:0]   scale   [AW],
  input  logic signed [DW-1:0] zp      [AW],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_data [AW],
  output logic [ADDR_W-1:0]    out_addr
);

  localparam logic signed [DW-1:0] QMAX = {1'b0, {(DW-1){1'b1}}};
  localparam logic signed [DW-1:0] QMIN = {1'b1, {(DW-1){1'b0}}};

  logic signed [DW-1:0] pool [AW];      // running max of the current window
  logic [3:0]           wcnt;           // lines seen in the current window
  logic [ADDR_W-1:0]    ocnt;           // lines produced
  logic signed [DW-1:0] y    [AW];
  logic signed [DW-1:0] pmax [AW];
  logic signed [DW+32:0] bn  [AW];
  logic                 win_end;

  assign win_end = (wcnt + 1'b1 >= win);

  always_comb begin
    for (int j = 0; j < AW; j++) begin
      pmax[j] = (wcnt == 0 || in_data[j] > pool[j]) ? in_data[j] : pool[j];
      bn[j]   = (((DW+33)'(in_data[j]) * (DW+33)'(scale[j]) + ((DW+33)'(1) <<< (SHIFT-1)))
                 >>> SHIFT) + (DW+33)'(zp[j]);
      unique case (op)
        FE_RELU:    y[j] = (in_data[j] > zp[j]) ? in_data[j] : zp[j];
        FE_BN:      y[j] = (bn[j] > (DW+33)'(QMAX)) ? QMAX :
                           (bn[j] < (DW+33)'(QMIN)) ? QMIN : bn[j][DW-1:0];
        default:    y[j] = pmax[j];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt      <= '0;
      ocnt      <= '0;
      out_valid <= 1'b0;
      out_addr  <= '0;
      for (int j = 0; j < AW; j++) begin
        pool[j]     <= '0;
        out_data[j] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (start) begin
        wcnt <= '0;
        ocnt <= '0;
      end else if (in_valid) begin
        for (int j = 0; j < AW; j++) pool[j] <= pmax[j];
        if (op != FE_MAXPOOL || win_end) begin
          out_valid <= 1'b1;
          out_addr  <= dst_base + ocnt;
          ocnt      <= ocnt + 1'b1;
          for (int j = 0; j < AW; j++) out_data[j] <= y[j];
        end
        wcnt <= (op == FE_MAXPOOL && !win_end) ? wcnt + 1'b1 : '0;
      end
    end
  end

endmodule

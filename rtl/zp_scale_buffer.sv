// zp_scale_buffer: the zero-point / scale buffer.
//
// Holds, for each of the AW lanes, the quantization parameters of the layer being
// run: the iAct and weight zero points used inside the NEST PEs (column j), and
// the output zero point and 32-bit scale used by quantization lane j. The
// functional engine's BatchNorm reuses the output zero point and scale as its
// folded bias and multiplier. The host writes one field of one lane per cycle;
// all values are read in parallel.
//
// Timing: a write is visible on the outputs the cycle after it is made.
//
// From the paper: 8-bit zero points, 32-bit scales, feeding NEST and QM. Own
// choices: one entry per lane (no per-layer history) and the write-port format.
module zp_scale_buffer #(
  parameter int AW = 16,
  parameter int DW = 8,
  localparam int LW = $clog2(AW)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [LW-1:0]        wr_lane,
  input  logic [1:0]           wr_field,   // 0 iact_zp, 1 wgt_zp, 2 out_zp, 3 scale
  input  logic [31:0]          wr_data,
  output logic signed [DW-1:0] iact_zp [AW],
  output logic signed [DW-1:0] wgt_zp  [AW],
  output logic signed [DW-1:0] out_zp  [AW],
  output logic signed [31:0]   scale   [AW]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < AW; j++) begin
        iact_zp[j] <= '0;
        wgt_zp[j]  <= '0;
        out_zp[j]  <= '0;
        scale[j]   <= '0;
      end
    end else if (wr_en) begin
      unique case (wr_field)
        2'd0: iact_zp[wr_lane] <= wr_data[DW-1:0];
        2'd1: wgt_zp[wr_lane]  <= wr_data[DW-1:0];
        2'd2: out_zp[wr_lane]  <= wr_data[DW-1:0];
        default: scale[wr_lane] <= wr_data;
      endcase
    end
  end

endmodule

// nest_pe: one processing element of the NEST array.
//
// Each cycle a valid iAct arrives from the PE above together with a small control
// bundle (weight index, first/last flags of a local-reduction group). The PE
// subtracts the iAct and weight zero points (8-bit -> 9-bit), multiplies the two
// 9-bit values (18-bit product) and accumulates into a 32-bit local register
// (phase 1, local temporal reduction). On the "last" beat of a group the
// completed sum is latched into the result register and result_valid pulses for
// one cycle, which is when the PE owns its column's output bus (phase 2). The
// iAct and its control bundle are registered and passed to the PE below, so the
// rows of a column see the same stream skewed by one cycle per row.
//
// Weights: AH 8-bit registers in each of two banks (ping/pong). The loader writes
// the shadow bank while compute reads the active bank; 'swap' exchanges them.
//
// Timing: result_valid is asserted the cycle after the PE consumed the last iAct
// of a group; the pass-down outputs lag the inputs by one cycle.
//
// From the paper: zero-point subtraction on both operands, 9-bit multiplier,
// 32-bit accumulation, ping/pong local weight registers of depth AH, one local
// reduction of AH products before each spatial reduction. Own choices: the
// control bundle, the swap handshake, signed two's-complement operands.
module nest_pe
  import feather_pkg::*;
#(
  parameter int AH    = 16,   // local weight registers per bank (= NEST rows)
  parameter int DW    = 8,    // iAct / weight width
  parameter int ACCW  = 32,   // accumulator width
  localparam int IW   = (AH > 1) ? $clog2(AH) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // streamed iAct and control from the row above
  input  logic                   in_valid,
  input  logic signed [DW-1:0]   in_iact,
  input  logic [IW-1:0]          in_widx,
  input  logic                   in_first,
  input  logic                   in_last,
  // zero points (per column, from the ZP buffer)
  input  logic signed [DW-1:0]   iact_zp,
  input  logic signed [DW-1:0]   wgt_zp,
  // weight loading into the shadow bank, and bank swap
  input  logic                   wl_en,
  input  logic [IW-1:0]          wl_idx,
  input  logic signed [DW-1:0]   wl_data,
  input  logic                   swap,
  // pass-down to the row below
  output logic                   out_valid,
  output logic signed [DW-1:0]   out_iact,
  output logic [IW-1:0]          out_widx,
  output logic                   out_first,
  output logic                   out_last,
  // locally reduced result for the column output bus
  output logic                   result_valid,
  output logic signed [ACCW-1:0] result
);

  logic signed [DW-1:0]   wreg [2][AH];
  logic                   active;          // bank used by compute
  logic signed [DW:0]     a9, w9;          // 9-bit zero-point-corrected operands
  logic signed [2*DW+1:0] prod;            // 18-bit product
  logic signed [ACCW-1:0] acc, acc_next;

  always_comb begin
    a9       = (DW+1)'(in_iact) - (DW+1)'(iact_zp);
    w9       = (DW+1)'(wreg[active][in_widx]) - (DW+1)'(wgt_zp);
    prod     = a9 * w9;
    acc_next = (in_first ? '0 : acc) + ACCW'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= 1'b0;
      acc          <= '0;
      result       <= '0;
      result_valid <= 1'b0;
      out_valid    <= 1'b0;
      out_iact     <= '0;
      out_widx     <= '0;
      out_first    <= 1'b0;
      out_last     <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int i = 0; i < AH; i++) wreg[b][i] <= '0;
    end else begin
      if (swap) active <= ~active;
      if (wl_en) wreg[~active][wl_idx] <= wl_data;
      if (in_valid) acc <= acc_next;
      result_valid <= in_valid && in_last;
      if (in_valid && in_last) result <= acc_next;
      out_valid <= in_valid;
      out_iact  <= in_iact;
      out_widx  <= in_widx;
      out_first <= in_first;
      out_last  <= in_last;
    end
  end

endmodule

// nest: the NEST array (Neural Engine with Spatial forwarding and Temporal
// reduction), AW columns by AH rows of nest_pe.
//
// Column j receives one iAct per cycle from stationary-buffer bank j over a
// point-to-point link (no distribution network). The iAct and its control bundle
// enter row 0 and are forwarded one row per cycle, so every row of a column
// multiplies the same iAct stream against its own weights. Each PE reduces AH
// products locally; because row r finishes a group one cycle after row r-1, the
// rows of a column take turns on the shared column output bus, one row per cycle,
// and the bus is never contended in steady state. The AW bus values of one cycle
// form one "wave" for BIRRD.
//
// Weight loading: one streaming-buffer line (AW bytes) per cycle is written to
// weight register wl_idx of every PE in row wl_row (shadow bank), so a full load
// takes AH*AH cycles; 'swap' makes the loaded bank active in all PEs at once.
//
// Bypass: when 'bypass' is set the PE array is skipped and the (registered,
// sign-extended) iActs go straight to the column buses, for pure reorder or
// reduction jobs in BIRRD.
//
// Timing: with the last iAct of a group presented at cycle t, row r drives the
// column bus at cycle t+1+r. In bypass, the bus carries the iAct one cycle later.
//
// From the paper: array shape, top-to-bottom streaming, time-multiplexed column
// bus, AH^2-cycle weight load, ping/pong weights, bypass of the PE array. Own
// choices: the load port format and the one-cycle bypass register.
//
// Lint note: the bus-contention assertion is disabled while rst_n is low, so a
// linter sees rst_n used both as the flops' asynchronous reset and inside a
// clocked property and reports it; the property creates no hardware, so the
// message stands.
module nest
  import feather_pkg::*;
#(
  parameter int AW   = 16,
  parameter int AH   = 16,
  parameter int DW   = 8,
  parameter int ACCW = 32,
  localparam int IW  = (AH > 1) ? $clog2(AH) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   bypass,
  input  logic                   in_valid,
  input  logic signed [DW-1:0]   in_iact [AW],
  input  logic [IW-1:0]          in_widx,
  input  logic                   in_first,
  input  logic                   in_last,
  input  logic signed [DW-1:0]   iact_zp [AW],
  input  logic signed [DW-1:0]   wgt_zp  [AW],
  input  logic                   wl_en,
  input  logic [IW-1:0]          wl_row,
  input  logic [IW-1:0]          wl_idx,
  input  logic signed [DW-1:0]   wl_data [AW],
  input  logic                   swap,
  output logic                   col_valid [AW],
  output logic signed [ACCW-1:0] col_data  [AW]
);

  // vertical pipeline between rows: index r is the input of row r
  logic                 v_valid [AH+1][AW];
  logic signed [DW-1:0] v_iact  [AH+1][AW];
  logic [IW-1:0]        v_widx  [AH+1][AW];
  logic                 v_first [AH+1][AW];
  logic                 v_last  [AH+1][AW];

  logic                   res_valid [AH][AW];
  logic signed [ACCW-1:0] res       [AH][AW];

  logic                   byp_valid;
  logic signed [DW-1:0]   byp_iact [AW];

  for (genvar j = 0; j < AW; j++) begin : g_col
    assign v_valid[0][j] = in_valid && !bypass;
    assign v_iact[0][j]  = in_iact[j];
    assign v_widx[0][j]  = in_widx;
    assign v_first[0][j] = in_first;
    assign v_last[0][j]  = in_last;

    for (genvar r = 0; r < AH; r++) begin : g_row
      nest_pe #(.AH(AH), .DW(DW), .ACCW(ACCW)) u_pe (
        .clk, .rst_n,
        .in_valid (v_valid[r][j]),
        .in_iact  (v_iact[r][j]),
        .in_widx  (v_widx[r][j]),
        .in_first (v_first[r][j]),
        .in_last  (v_last[r][j]),
        .iact_zp  (iact_zp[j]),
        .wgt_zp   (wgt_zp[j]),
        .wl_en    (wl_en && (wl_row == IW'(r))),
        .wl_idx   (wl_idx),
        .wl_data  (wl_data[j]),
        .swap     (swap),
        .out_valid(v_valid[r+1][j]),
        .out_iact (v_iact[r+1][j]),
        .out_widx (v_widx[r+1][j]),
        .out_first(v_first[r+1][j]),
        .out_last (v_last[r+1][j]),
        .result_valid(res_valid[r][j]),
        .result   (res[r][j])
      );
    end

    // column output bus: the one row whose result is ready drives it
    always_comb begin
      col_valid[j] = 1'b0;
      col_data[j]  = '0;
      if (byp_valid) begin
        col_valid[j] = 1'b1;
        col_data[j]  = ACCW'(byp_iact[j]);
      end else begin
        for (int r = 0; r < AH; r++)
          if (res_valid[r][j]) begin
            col_valid[j] = 1'b1;
            col_data[j]  = res[r][j];
          end
      end
    end

// at most one PE per column may use the output bus in a cycle
    logic [AH-1:0] rv_col;
    for (genvar r = 0; r < AH; r++) begin : g_rv
      assign rv_col[r] = res_valid[r][j];
    end
    a_bus_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rv_col))
      else $error("nest: column %0d output bus contention", j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      byp_valid <= 1'b0;
      for (int j = 0; j < AW; j++) byp_iact[j] <= '0;
    end else begin
      byp_valid <= in_valid && bypass;
      for (int j = 0; j < AW; j++) byp_iact[j] <= in_iact[j];
    end
  end

endmodule

// feather_top: the FEATHER accelerator datapath with its buffers and controller.
//
// Compute pipeline (one layer):
//   StaB read set --(bank j -> column j)--> NEST --(AW column buses)--> BIRRD
//     --> OB --> QM --> StaB write set (new layout)
// NEST does the local temporal reduction of AH products per PE; its rows take
// turns on the column buses, so each cycle one row's AW partial sums form a
// "wave". The instruction buffer supplies, per wave, the BIRRD configuration (which
// inputs to sum and which output bank each sum goes to), the stationary-buffer
// line to write and a mask of the lanes that write it. The output buffer can add partial sums of several waves; the
// quantization module turns the 32-bit totals into int8 oActs, which land in the
// other stationary-buffer set. At the end of the layer the sets swap roles (when
// the command's 'flip' is set), so the next layer reads its iActs in exactly the
// layout this layer wrote.
// Weights come from the streaming buffer into the PEs' shadow weight registers,
// overlapped with compute. OP_BYPASS skips the PE array (BIRRD reorder/reduce
// only); OP_FE streams lines through the ReLU/BatchNorm/MaxPool engine instead.
//
// Off-chip memory is not part of the design: its side of the stationary buffer,
// streaming buffer, instruction buffer and ZP/scale buffer are top-level ports.
//
// Latency of one wave from the NEST column bus to the StaB write: NSTAGES (BIRRD)
// + 1 (OB) + 1 (QM) cycles. The first wave of a layer leaves NEST AH+2 cycles after
// the layer's first line is read (AH iActs of local reduction, one read cycle, one
// result register).
//
// Sizes follow the 16x16 configuration the paper lays out in 28 nm (AW = AH = 16,
// int8 operands, 32-bit partial sums). Buffer depths are this design's choice,
// as are the per-instruction lane write mask and the command's flip bit.
//
// Lint note: the assertions inside the PE array, controller and stationary
// buffer are disabled while rst_n is low, so a linter reports rst_n as used both
// asynchronously and synchronously here; no hardware results from it.
module feather_top
  import feather_pkg::*;
#(
  parameter int AW       = 16,
  parameter int AH       = 16,
  parameter int DW       = 8,
  parameter int ACCW     = 32,
  parameter int SDEPTH   = 1024,
  parameter int WDEPTH   = 512,
  parameter int IDEPTH   = 1024,
  parameter int OB_DEPTH = 64,
  parameter int QSHIFT   = 16,
  localparam int NSTAGES = birrd_stages(AW),
  localparam int CFG_W   = NSTAGES * AW,
  localparam int SAW     = $clog2(SDEPTH),
  localparam int WAW     = $clog2(WDEPTH),
  localparam int IAW     = $clog2(IDEPTH),
  localparam int OBW     = $clog2(OB_DEPTH),
  localparam int TAG_W   = SAW + 2 + AW,
  localparam int INSTR_W = CFG_W + TAG_W,
  localparam int LW      = $clog2(AW),
  localparam int DRAIN   = AH + NSTAGES + 6
) (
  input  logic               clk,
  input  logic               rst_n,
  // weight loader
  input  logic               wload_start,
  input  logic               w_set,
  input  logic [WAW-1:0]     w_base,
  output logic               wload_busy,
  // layer command
  input  logic               start,
  input  layer_op_e          op,
  input  logic               swap_weights,
  input  logic               flip,
  input  logic [SAW:0]       num_lines,
  input  logic [SAW-1:0]     rd_base,
  input  logic [SAW-1:0]     rd_cnt [3],      // StaB read loop nest, see feather_controller
  input  logic [SAW-1:0]     rd_stride [4],
  input  logic [IAW-1:0]     ib_base,
  input  fe_op_e             fe_op,
  input  logic [3:0]         fe_win,
  input  logic [SAW-1:0]     fe_dst_base,
  output logic               busy,
  output logic               done,
  output logic               stab_sel,
  output logic               wait_stall,   // layer start waits for the weight loader
  // off-chip side of the stationary buffer
  input  logic               stab_wr_en,
  input  logic               stab_wr_set,
  input  logic [SAW-1:0]     stab_wr_addr,
  input  logic [AW-1:0]      stab_wr_mask,
  input  logic [DW-1:0]      stab_wr_data [AW],
  input  logic               stab_rd_en,
  input  logic               stab_rd_set,
  input  logic [SAW-1:0]     stab_rd_addr,
  output logic [DW-1:0]      stab_rd_data [AW],
  // off-chip side of the streaming buffer
  input  logic               strb_wr_en,
  input  logic               strb_wr_set,
  input  logic [WAW-1:0]     strb_wr_addr,
  input  logic [DW-1:0]      strb_wr_data [AW],
  // instruction buffer load
  input  logic               ib_wr_en,
  input  logic [IAW-1:0]     ib_wr_addr,
  input  logic [INSTR_W-1:0] ib_wr_data,
  // ZP / scale buffer load
  input  logic               zp_wr_en,
  input  logic [LW-1:0]      zp_wr_lane,
  input  logic [1:0]         zp_wr_field,
  input  logic [31:0]        zp_wr_data
);

  localparam int IXW = (AH > 1) ? $clog2(AH) : 1;

  // ---------------- controller ----------------
  logic            c_stab_rd_en, c_strb_sel, c_strb_rd_en;
  logic [SAW-1:0]  c_stab_rd_addr;
  logic [WAW-1:0]  c_strb_rd_addr;
  logic [IAW-1:0]  ib_rd_addr;
  logic            bypass, nest_valid, nest_first, nest_last;
  logic [IXW-1:0]  nest_widx, wl_row, wl_idx;
  logic            wl_en, swap, wave_valid, fe_valid, fe_start;

  feather_controller #(
    .AH(AH), .SDEPTH(SDEPTH), .WDEPTH(WDEPTH), .IDEPTH(IDEPTH), .DRAIN(DRAIN)
  ) u_ctrl (
    .clk, .rst_n,
    .wload_start, .w_set, .w_base, .wload_busy,
    .start, .op, .swap_weights, .flip, .num_lines, .rd_base, .rd_cnt, .rd_stride, .ib_base,
    .busy, .done, .wait_stall,
    .stab_sel,
    .stab_rd_en  (c_stab_rd_en),
    .stab_rd_addr(c_stab_rd_addr),
    .strb_sel    (c_strb_sel),
    .strb_rd_en  (c_strb_rd_en),
    .strb_rd_addr(c_strb_rd_addr),
    .ib_rd_addr,
    .bypass, .nest_valid, .nest_widx, .nest_first, .nest_last,
    .wl_en, .wl_row, .wl_idx, .swap,
    .wave_valid,
    .fe_valid, .fe_start
  );

  // ---------------- buffers ----------------
  logic [DW-1:0]         stab_q [AW];
  logic                  stab_we   [AW];
  logic [SAW-1:0]        stab_wa   [AW];
  logic [DW-1:0]         stab_wd   [AW];
  logic [DW-1:0]         strb_q [AW];
  logic [INSTR_W-1:0]    instr;
  logic signed [DW-1:0]  iact_zp [AW], wgt_zp [AW], out_zp [AW];
  logic signed [31:0]    scale [AW];

  stationary_buffer #(.AW(AW), .DW(DW), .DEPTH(SDEPTH)) u_stab (
    .clk, .rst_n,
    .sel        (stab_sel),
    .rd_en      (c_stab_rd_en),
    .rd_addr    (c_stab_rd_addr),
    .rd_data    (stab_q),
    .wr_en      (stab_we),
    .wr_addr    (stab_wa),
    .wr_data    (stab_wd),
    .ext_wr_en  (stab_wr_en),
    .ext_wr_set (stab_wr_set),
    .ext_wr_addr(stab_wr_addr),
    .ext_wr_mask(stab_wr_mask),
    .ext_wr_data(stab_wr_data),
    .ext_rd_en  (stab_rd_en),
    .ext_rd_set (stab_rd_set),
    .ext_rd_addr(stab_rd_addr),
    .ext_rd_data(stab_rd_data)
  );

  streaming_buffer #(.AW(AW), .DW(DW), .DEPTH(WDEPTH)) u_strb (
    .clk,
    .sel        (c_strb_sel),
    .rd_en      (c_strb_rd_en),
    .rd_addr    (c_strb_rd_addr),
    .rd_data    (strb_q),
    .ext_wr_en  (strb_wr_en),
    .ext_wr_set (strb_wr_set),
    .ext_wr_addr(strb_wr_addr),
    .ext_wr_data(strb_wr_data)
  );

  instruction_buffer #(.DEPTH(IDEPTH), .IW(INSTR_W)) u_ib (
    .clk,
    .wr_en  (ib_wr_en),
    .wr_addr(ib_wr_addr),
    .wr_data(ib_wr_data),
    .rd_addr(ib_rd_addr),
    .rd_data(instr)
  );

  zp_scale_buffer #(.AW(AW), .DW(DW)) u_zps (
    .clk, .rst_n,
    .wr_en   (zp_wr_en),
    .wr_lane (zp_wr_lane),
    .wr_field(zp_wr_field),
    .wr_data (zp_wr_data),
    .iact_zp, .wgt_zp, .out_zp, .scale
  );

  // ---------------- NEST ----------------
  logic signed [DW-1:0]   nest_in [AW];
  logic signed [DW-1:0]   wl_data [AW];
  logic                   col_valid [AW];
  logic signed [ACCW-1:0] col_data  [AW];

  always_comb
    for (int j = 0; j < AW; j++) begin
      nest_in[j] = stab_q[j];
      wl_data[j] = strb_q[j];
    end

  nest #(.AW(AW), .AH(AH), .DW(DW), .ACCW(ACCW)) u_nest (
    .clk, .rst_n,
    .bypass,
    .in_valid(nest_valid),
    .in_iact (nest_in),
    .in_widx (nest_widx),
    .in_first(nest_first),
    .in_last (nest_last),
    .iact_zp, .wgt_zp,
    .wl_en, .wl_row, .wl_idx, .wl_data,
    .swap,
    .col_valid, .col_data
  );

  always_comb begin
    wave_valid = 1'b0;
    for (int j = 0; j < AW; j++) wave_valid |= col_valid[j];
  end

  // ---------------- BIRRD ----------------
  logic                   b_valid [AW];
  logic signed [ACCW-1:0] b_data  [AW];
  logic [TAG_W-1:0]       b_tag;

  birrd #(.AW(AW), .W(ACCW), .TAG_W(TAG_W)) u_birrd (
    .clk, .rst_n,
    .cfg      (instr[CFG_W-1:0]),
    .in_tag   (instr[CFG_W +: TAG_W]),
    .in_valid (col_valid),
    .in_data  (col_data),
    .out_tag  (b_tag),
    .out_valid(b_valid),
    .out_data (b_data)
  );

  // tag layout: {lane write mask, last, acc, write line}; a lane whose mask bit
  // is clear is dropped before the output buffer (e.g. the copy an add leaves on
  // its secondary output)
  logic [SAW-1:0] b_addr;
  logic           b_keep [AW];
  assign b_addr = b_tag[SAW-1:0];
  always_comb
    for (int j = 0; j < AW; j++) b_keep[j] = b_valid[j] && b_tag[SAW+2+j];

  // ---------------- OB, QM ----------------
  logic                   ob_valid [AW];
  logic signed [ACCW-1:0] ob_data  [AW];
  logic [SAW-1:0]         ob_addr;
  logic                   qm_valid [AW];
  logic signed [DW-1:0]   qm_data  [AW];
  logic [SAW-1:0]         qm_addr;

  output_buffer #(.AW(AW), .W(ACCW), .OB_DEPTH(OB_DEPTH), .ADDR_W(SAW)) u_ob (
    .clk, .rst_n,
    .in_valid (b_keep),
    .in_data  (b_data),
    .idx      (b_addr[OBW-1:0]),
    .acc      (b_tag[SAW]),
    .last     (b_tag[SAW+1]),
    .in_addr  (b_addr),
    .out_valid(ob_valid),
    .out_data (ob_data),
    .out_addr (ob_addr)
  );

  quant_module #(.AW(AW), .W(ACCW), .DW(DW), .SHIFT(QSHIFT), .ADDR_W(SAW)) u_qm (
    .clk, .rst_n,
    .in_valid (ob_valid),
    .in_data  (ob_data),
    .in_addr  (ob_addr),
    .scale,
    .zp       (out_zp),
    .out_valid(qm_valid),
    .out_data (qm_data),
    .out_addr (qm_addr)
  );

  // ---------------- functional engine ----------------
  logic                 fe_out_valid;
  logic signed [DW-1:0] fe_out [AW];
  logic [SAW-1:0]       fe_addr;

  functional_engine #(.AW(AW), .DW(DW), .SHIFT(QSHIFT), .ADDR_W(SAW)) u_fe (
    .clk, .rst_n,
    .start    (fe_start),
    .op       (fe_op),
    .win      (fe_win),
    .dst_base (fe_dst_base),
    .in_valid (fe_valid),
    .in_data  (nest_in),
    .scale,
    .zp       (out_zp),
    .out_valid(fe_out_valid),
    .out_data (fe_out),
    .out_addr (fe_addr)
  );

  // write-back into the stationary buffer's write set
  always_comb
    for (int j = 0; j < AW; j++) begin
      if (fe_out_valid) begin
        stab_we[j] = 1'b1;
        stab_wa[j] = fe_addr;
        stab_wd[j] = fe_out[j];
      end else begin
        stab_we[j] = qm_valid[j];
        stab_wa[j] = qm_addr;
        stab_wd[j] = qm_data[j];
      end
    end

endmodule

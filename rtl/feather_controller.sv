// feather_controller: sequences one layer at a time on the FEATHER datapath.
//
// Two engines run independently so that weight loading is hidden behind compute:
//
//  * Weight loader: on wload_start it reads AH*AH streaming-buffer lines from
//    w_base of set w_set and writes line (r*AH + k) into weight register k of PE
//    row r, shadow bank. It takes AH*AH cycles (plus one of read latency) and can
//    run while a layer is streaming on the active weight bank.
//
//  * Layer runner: on start it (if swap_weights) waits until the loader is idle,
//    pulses 'swap' so the loaded weights become active, then reads num_lines
//    stationary-buffer lines starting at rd_base, one per cycle, and presents them to
//    NEST with a weight index that cycles 0..AH-1 (first/last mark the ends of a
//    local-reduction group). In OP_BYPASS the same lines go around the PE array;
//    in OP_FE they go to the functional engine. After the stream it waits
//    DRAIN cycles for the pipeline to empty, flips the stationary-buffer ping-pong
//    select if 'flip' was set with the command (the oActs just written become the
//    next layer's iActs) and pulses done. Clearing 'flip' lets one layer be run
//    as several commands, e.g. one per weight tile, on the same iActs.
//
// Read addresses: a four-level loop nest. Levels 0..2 count rd_cnt[0..2] steps
// (a count of 0 or 1 means the level does not loop) and level 3 runs until
// num_lines lines are read. Each step of level k adds rd_stride[k] to the address
// where that level's current iteration began, so sliding windows can re-read
// lines instead of storing them twice; e.g. a 2x2 window over rows of r lines is
// cnt = {2, 2, Q}, stride = {1, r, 1, r}. cnt = {1, 1, 1}, stride[3] = 1 reads
// consecutive lines.
//
// Waves: every cycle in which a NEST column bus is valid is one BIRRD wave; the
// runner counts them and addresses the instruction buffer with ib_base + count.
//
// Timing: buffer reads are synchronous, so the NEST/FE valid and the weight-load
// write strobes lag the read strobes by one cycle.
//
// From the paper: AH^2-cycle weight load into ping/pong registers hidden behind
// compute, AH local reductions per group, ping-pong StaB swap between layers. The
// paper only names the controller; everything else here is this design's own.
//
// Lint note: the assertions here are disabled while rst_n is low, so a linter
// sees rst_n used both as an asynchronous reset and inside a clocked property
// and reports it; the properties create no hardware, so the message stands.
module feather_controller
  import feather_pkg::*;
#(
  parameter int AH      = 16,
  parameter int SDEPTH  = 1024,     // stationary-buffer lines
  parameter int WDEPTH  = 512,      // streaming-buffer lines
  parameter int IDEPTH  = 1024,     // instruction-buffer entries
  parameter int DRAIN   = 32,       // cycles to wait after the last line
  localparam int IW     = (AH > 1) ? $clog2(AH) : 1,
  localparam int SAW    = $clog2(SDEPTH),
  localparam int WAW    = $clog2(WDEPTH),
  localparam int IAW    = $clog2(IDEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // weight loader command
  input  logic            wload_start,
  input  logic            w_set,
  input  logic [WAW-1:0]  w_base,
  output logic            wload_busy,
  // layer command
  input  logic            start,
  input  layer_op_e       op,
  input  logic            swap_weights,
  input  logic            flip,           // swap StaB sets when this command ends
  input  logic [SAW:0]    num_lines,
  input  logic [SAW-1:0]  rd_base,
  input  logic [SAW-1:0]  rd_cnt [3],
  input  logic [SAW-1:0]  rd_stride [4],
  input  logic [IAW-1:0]  ib_base,
  output logic            busy,
  output logic            done,
  output logic            wait_stall,     // start waiting on the weight loader
  // buffers
  output logic            stab_sel,
  output logic            stab_rd_en,
  output logic [SAW-1:0]  stab_rd_addr,
  output logic            strb_sel,
  output logic            strb_rd_en,
  output logic [WAW-1:0]  strb_rd_addr,
  output logic [IAW-1:0]  ib_rd_addr,
  // NEST control
  output logic            bypass,
  output logic            nest_valid,
  output logic [IW-1:0]   nest_widx,
  output logic            nest_first,
  output logic            nest_last,
  output logic            wl_en,
  output logic [IW-1:0]   wl_row,
  output logic [IW-1:0]   wl_idx,
  output logic            swap,
  input  logic            wave_valid,
  // functional engine control
  output logic            fe_valid,
  output logic            fe_start
);

  // ---------------- weight loader ----------------
  localparam int NWL = AH * AH;
  logic [$clog2(NWL+1)-1:0] wl_cnt;
  logic                     wl_rd_q;
  logic [IW-1:0]            wl_row_q, wl_idx_q;

  assign wload_busy = (wl_cnt != 0) || wl_rd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_cnt       <= '0;
      strb_sel     <= 1'b0;
      strb_rd_addr <= '0;
      wl_rd_q      <= 1'b0;
      wl_row_q     <= '0;
      wl_idx_q     <= '0;
    end else begin
      wl_rd_q <= strb_rd_en;
      if (strb_rd_en) begin
        wl_idx_q <= (wl_idx_q == IW'(AH-1)) ? '0 : wl_idx_q + 1'b1;
        if (wl_idx_q == IW'(AH-1)) wl_row_q <= wl_row_q + 1'b1;
      end
      if (wload_start && !wload_busy) begin
        wl_cnt       <= ($clog2(NWL+1))'(NWL);
        strb_sel     <= w_set;
        strb_rd_addr <= w_base;
        wl_row_q     <= '0;
        wl_idx_q     <= '0;
      end else if (wl_cnt != 0) begin
        wl_cnt       <= wl_cnt - 1'b1;
        strb_rd_addr <= strb_rd_addr + 1'b1;
      end
    end
  end
  assign strb_rd_en = (wl_cnt != 0);

  // write strobes follow the StrB read by one cycle
  logic [IW-1:0] wl_row_d, wl_idx_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_en    <= 1'b0;
      wl_row_d <= '0;
      wl_idx_d <= '0;
    end else begin
      wl_en    <= strb_rd_en;
      wl_row_d <= wl_row_q;
      wl_idx_d <= wl_idx_q;
    end
  end
  assign wl_row = wl_row_d;
  assign wl_idx = wl_idx_d;

  // ---------------- layer runner ----------------
  typedef enum logic [2:0] {S_IDLE, S_WAITW, S_STREAM, S_DRAIN, S_DONE} state_e;
  state_e             state;
  layer_op_e          op_q;
  logic               flip_q;
  logic [SAW:0]       line_cnt;
  logic [IW-1:0]      widx;
  logic [$clog2(DRAIN+1)-1:0] drain_cnt;
  logic [IAW-1:0]     wave_cnt;
  logic               stream_rd;
  logic [SAW-1:0]     lp_i [3];       // loop indices, levels 0..2
  logic [SAW-1:0]     lp_b [3];       // address where the current level-k+1 iteration began
  logic [SAW-1:0]     cnt_q [3];
  logic [SAW-1:0]     str_q [4];
  logic [1:0]         lp_lvl;         // lowest level that steps this cycle
  logic [SAW-1:0]     next_addr;

  // the lowest level whose index has not reached its count steps; all below wrap
  always_comb begin
    lp_lvl = 2'd3;
    for (int k = 2; k >= 0; k--)
      if (lp_i[k] + 1'b1 < cnt_q[k]) lp_lvl = 2'(k);
    unique case (lp_lvl)
      2'd0:    next_addr = stab_rd_addr + str_q[0];
      2'd1:    next_addr = lp_b[0] + str_q[1];
      2'd2:    next_addr = lp_b[1] + str_q[2];
      default: next_addr = lp_b[2] + str_q[3];
    endcase
  end

  assign stream_rd  = (state == S_STREAM);
  assign stab_rd_en = stream_rd;
  assign busy       = (state != S_IDLE);
  assign wait_stall = (state == S_WAITW) && wload_busy;
  assign bypass     = (op_q == OP_BYPASS);
  assign ib_rd_addr = ib_base + wave_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      op_q         <= OP_CONV;
      flip_q       <= 1'b0;
      line_cnt     <= '0;
      widx         <= '0;
      drain_cnt    <= '0;
      stab_rd_addr <= '0;
      lp_i         <= '{default: '0};
      lp_b         <= '{default: '0};
      cnt_q        <= '{default: '0};
      str_q        <= '{default: '0};
      stab_sel     <= 1'b0;
      swap         <= 1'b0;
      done         <= 1'b0;
      fe_start     <= 1'b0;
      wave_cnt     <= '0;
    end else begin
      swap     <= 1'b0;
      done     <= 1'b0;
      fe_start <= 1'b0;
      if (wave_valid) wave_cnt <= wave_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          op_q         <= op;
          flip_q       <= flip;
          line_cnt     <= num_lines;
          widx         <= '0;
          stab_rd_addr <= rd_base;
          lp_i         <= '{default: '0};
          lp_b         <= '{default: rd_base};
          cnt_q        <= rd_cnt;
          str_q        <= rd_stride;
          wave_cnt     <= '0;
          fe_start     <= (op == OP_FE);
          state        <= (swap_weights && op == OP_CONV) ? S_WAITW : S_STREAM;
        end
        S_WAITW: if (!wload_busy) begin
          swap  <= 1'b1;
          state <= S_STREAM;
        end
        S_STREAM: begin
          stab_rd_addr <= next_addr;
          for (int k = 0; k < 3; k++) begin
            if (k < int'(lp_lvl)) begin
              lp_i[k] <= '0;
              lp_b[k] <= next_addr;
            end else if (k == int'(lp_lvl)) begin
              lp_i[k] <= lp_i[k] + 1'b1;
            end
          end
          widx         <= (widx == IW'(AH-1)) ? '0 : widx + 1'b1;
          line_cnt     <= line_cnt - 1'b1;
          if (line_cnt == 1) begin
            drain_cnt <= ($clog2(DRAIN+1))'(DRAIN);
            state     <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          drain_cnt <= drain_cnt - 1'b1;
          if (drain_cnt == 1) state <= S_DONE;
        end
        S_DONE: begin
          if (flip_q) stab_sel <= ~stab_sel;
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // NEST / FE strobes follow the StaB read by one cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nest_valid <= 1'b0;
      nest_widx  <= '0;
      nest_first <= 1'b0;
      nest_last  <= 1'b0;
      fe_valid   <= 1'b0;
    end else begin
      nest_valid <= stream_rd && (op_q != OP_FE);
      fe_valid   <= stream_rd && (op_q == OP_FE);
      nest_widx  <= widx;
      nest_first <= (widx == '0) || (op_q == OP_BYPASS);
      nest_last  <= (widx == IW'(AH-1)) || (op_q == OP_BYPASS);
    end
  end

  a_lines_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (num_lines != 0))
    else $error("feather_controller: layer started with zero lines");

endmodule

// stationary_buffer: StaB, the ping-pong stationary buffer holding iActs/oActs.
//
// Two sets (ping and pong), each of AW banks of DEPTH one-byte entries. A buffer
// "line" is entry a of all AW banks. Bank j feeds NEST column j directly. While a
// layer runs, set 'sel' is read line by line for the layer's iActs and the other
// set receives the layer's oActs from the quantization module. Every bank has its
// own write enable and write address, so one wave of oActs can land on different
// lines in different banks; this is what lets results be written in a new layout.
// Each set has one read and one write port (two ports per bank, the maximum the
// paper assumes for a 28 nm SRAM bank).
//
// Off-chip side: ext_wr_* loads a line (with a per-bank mask) into a chosen set,
// ext_rd_* reads a line of a chosen set. The host must not use the external
// ports on a set while the datapath is using the same port of that set (the
// datapath wins); the assertions below flag it.
//
// Timing: reads are synchronous (data the cycle after the address); writes take
// effect at the clock edge.
//
// From the paper: ping/pong, AW single-byte banks, per-bank write addresses. Own
// choices: DEPTH, port arbitration and the external ports.
//
// Lint note: the assertions here are disabled while rst_n is low, so a linter
// sees rst_n used both as an asynchronous reset and inside a clocked property
// and reports it; the properties create no hardware, so the message stands.
module stationary_buffer #(
  parameter int AW    = 16,
  parameter int DW    = 8,
  parameter int DEPTH = 1024,
  localparam int AWID = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sel,                // set read by the datapath
  // datapath read (set 'sel')
  input  logic               rd_en,
  input  logic [AWID-1:0]    rd_addr,
  output logic [DW-1:0]      rd_data [AW],
  // datapath write (set '~sel'), per bank
  input  logic               wr_en   [AW],
  input  logic [AWID-1:0]    wr_addr [AW],
  input  logic [DW-1:0]      wr_data [AW],
  // external (off-chip) line write
  input  logic               ext_wr_en,
  input  logic               ext_wr_set,
  input  logic [AWID-1:0]    ext_wr_addr,
  input  logic [AW-1:0]      ext_wr_mask,
  input  logic [DW-1:0]      ext_wr_data [AW],
  // external (off-chip) line read
  input  logic               ext_rd_en,
  input  logic               ext_rd_set,
  input  logic [AWID-1:0]    ext_rd_addr,
  output logic [DW-1:0]      ext_rd_data [AW]
);

  logic [DW-1:0] mem [2][AW][DEPTH];

  for (genvar s = 0; s < 2; s++) begin : g_set
    // read port of set s: the datapath when s is the read set and it is
    // reading, otherwise the external port
    logic            r_en;
    logic [AWID-1:0] r_addr;
    logic [DW-1:0]   r_q [AW];
    always_comb begin
      if (sel == 1'(s) && rd_en) begin r_en = 1'b1; r_addr = rd_addr; end
      else begin r_en = ext_rd_en && (ext_rd_set == 1'(s)); r_addr = ext_rd_addr; end
    end
    always_ff @(posedge clk)
      if (r_en)
        for (int j = 0; j < AW; j++) r_q[j] <= mem[s][j][r_addr];

    // write port of set s: external writes take priority over datapath writes
    always_ff @(posedge clk) begin
      for (int j = 0; j < AW; j++) begin
        if (ext_wr_en && ext_wr_set == 1'(s)) begin
          if (ext_wr_mask[j]) mem[s][j][ext_wr_addr] <= ext_wr_data[j];
        end else if (sel != 1'(s) && wr_en[j]) begin
          mem[s][j][wr_addr[j]] <= wr_data[j];
        end
      end
    end
  end

  // read data is routed by the set that was selected when the read was issued
  logic sel_q, ext_set_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin sel_q <= 1'b0; ext_set_q <= 1'b0; end
    else begin sel_q <= sel; ext_set_q <= ext_rd_set; end

  always_comb
    for (int j = 0; j < AW; j++) begin
      rd_data[j]     = sel_q ? g_set[1].r_q[j] : g_set[0].r_q[j];
      ext_rd_data[j] = ext_set_q ? g_set[1].r_q[j] : g_set[0].r_q[j];
    end

  a_ext_rd_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(rd_en && ext_rd_en && ext_rd_set == sel))
    else $error("stationary_buffer: external read of the set the datapath is reading");

  logic any_wr;
  always_comb begin
    any_wr = 1'b0;
    for (int j = 0; j < AW; j++) any_wr |= wr_en[j];
  end
  a_ext_wr_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    !(any_wr && ext_wr_en && ext_wr_set != sel))
    else $error("stationary_buffer: external write collides with oAct write-back");

endmodule

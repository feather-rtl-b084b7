// streaming_buffer: StrB, the ping-pong streaming buffer holding weights.
//
// Two sets, each a single bank of DEPTH lines of AW bytes (weights need no layout
// reordering, so one wide bank suffices). The datapath reads set 'sel' one line
// per cycle; the off-chip side fills the other set meanwhile.
//
// Timing: synchronous read, data the cycle after the address.
//
// From the paper: ping/pong, single bank with AW-byte bandwidth. Own choices:
// DEPTH and the port set.
module streaming_buffer #(
  parameter int AW    = 16,
  parameter int DW    = 8,
  parameter int DEPTH = 512,
  localparam int AWID = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            sel,
  input  logic            rd_en,
  input  logic [AWID-1:0] rd_addr,
  output logic [DW-1:0]   rd_data [AW],
  input  logic            ext_wr_en,
  input  logic            ext_wr_set,
  input  logic [AWID-1:0] ext_wr_addr,
  input  logic [DW-1:0]   ext_wr_data [AW]
);

  logic [AW*DW-1:0] mem [2][DEPTH];
  logic [AW*DW-1:0] q;

  always_ff @(posedge clk) begin
    if (rd_en) q <= mem[sel][rd_addr];
    if (ext_wr_en)
      for (int j = 0; j < AW; j++) mem[ext_wr_set][ext_wr_addr][j*DW +: DW] <= ext_wr_data[j];
  end

  always_comb
    for (int j = 0; j < AW; j++) rd_data[j] = q[j*DW +: DW];

endmodule

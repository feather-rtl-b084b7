// instruction_buffer: IB, holds the per-wave instructions generated offline.
//
// One instruction configures one BIRRD wave (the AW column-bus values NEST
// produces in one cycle) and says where its results go. Layout, LSB first:
//   [CFG_W-1:0]                  BIRRD configuration, 2 bits per Egg
//   [CFG_W +: ADDR_W]            stationary-buffer write line (also selects the
//                                output-buffer entry by its low bits)
//   [CFG_W+ADDR_W]               OB accumulate (add to the stored partial sum)
//   [CFG_W+ADDR_W+1]             OB last (send the total on to QM / StaB)
//   [CFG_W+ADDR_W+2 +: AW]       lane write mask (lane j writes bank j only if set)
// The host writes instructions through a simple write port; the controller reads
// the instruction for the current wave combinationally, in the cycle the wave
// leaves NEST.
//
// From the paper: a single bank holding BIRRD configurations and the write address.
// Own choices: depth, the two OB control bits, the lane mask and asynchronous read.
module instruction_buffer #(
  parameter int DEPTH = 1024,
  parameter int IW    = 156,
  localparam int AWID = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AWID-1:0] wr_addr,
  input  logic [IW-1:0]   wr_data,
  input  logic [AWID-1:0] rd_addr,
  output logic [IW-1:0]   rd_data
);

  logic [IW-1:0] mem [DEPTH];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_addr] <= wr_data;

  assign rd_data = mem[rd_addr];

endmodule

// output_buffer: the OB between BIRRD and the quantization module.
//
// AW banks, one per BIRRD output port, each with OB_DEPTH 32-bit entries and its
// own 32-bit adder. It lets a reduction that is larger than NEST plus BIRRD can
// do in one pass be finished over time: a partial sum arriving on lane j either
// overwrites entry 'idx' of bank j (acc = 0) or is added to it (acc = 1). When the
// wave is marked 'last', the updated total of every valid lane is also sent on to
// the quantization module together with the wave's write address.
//
// Timing: read-modify-write in one cycle (the entry is read combinationally and
// written at the clock edge), so back-to-back waves to the same entry are fine.
// The output is registered: one cycle of latency.
//
// From the paper: AW banks each with a 32-bit adder, temporal reduction of partial
// sums. Own choices: the depth, the acc/last control bits and that the entry is
// selected by the low bits of the stationary-buffer write address.
module output_buffer #(
  parameter int AW       = 16,
  parameter int W        = 32,
  parameter int OB_DEPTH = 64,
  parameter int ADDR_W   = 10,
  localparam int OBW     = $clog2(OB_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid [AW],
  input  logic signed [W-1:0] in_data  [AW],
  input  logic [OBW-1:0]      idx,
  input  logic                acc,
  input  logic                last,
  input  logic [ADDR_W-1:0]   in_addr,
  output logic                out_valid [AW],
  output logic signed [W-1:0] out_data  [AW],
  output logic [ADDR_W-1:0]   out_addr
);

  logic signed [W-1:0] mem   [AW][OB_DEPTH];
  logic signed [W-1:0] total [AW];

  always_comb
    for (int j = 0; j < AW; j++)
      total[j] = (acc ? mem[j][idx] : '0) + in_data[j];

  always_ff @(posedge clk) begin
    for (int j = 0; j < AW; j++)
      if (in_valid[j]) mem[j][idx] <= total[j];
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
        out_valid[j] <= in_valid[j] && last;
        out_data[j]  <= total[j];
      end
    end
  end

endmodule

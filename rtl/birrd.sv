// birrd: Butterfly Interconnect for Reduction and Reordering in Dataflows.
//
// An AW-input, AW-output multi-stage network of Eggs (birrd_egg), AW/2 per stage,
// built from two butterfly networks back to back. Stage s has 2*log2(AW) stages
// in total (3 for AW = 4). Egg k of a stage takes stage input ports 2k and 2k+1
// and drives output ports 2k and 2k+1. Output port j of stage s is wired to
// input port reverse_bits(j, min(log2 AW, 2+s, 2*log2 AW - s)) of stage s+1
// (the paper's Algorithm 1; see feather_pkg::birrd_link). By choosing each Egg's
// function, any group of inputs can be summed and the sums can be placed on any
// outputs, so partial sums are reduced and laid out for the next layer's banks in
// the same pass ("reorder in reduction").
//
// Configuration travels with the data: the full configuration word for a wave
// (2 bits per Egg, stage-major, Egg k of stage s at bits [2*(s*AW/2+k) +: 2]) is
// presented together with the wave at the input and is pipelined alongside it, so
// consecutive waves may use different configurations with no bubbles. A TAG_W-bit
// side-band tag (write address, buffer control) is delayed by the same amount.
//
// Timing: fully pipelined, one wave per cycle, latency NSTAGES cycles.
//
// From the paper: topology, stage count, Egg functions. Own choices: registered
// Eggs, configuration pipelining and the tag side band.
module birrd
  import feather_pkg::*;
#(
  parameter int AW    = 16,
  parameter int W     = 32,
  parameter int TAG_W = 1,
  localparam int NSTAGES = birrd_stages(AW),
  localparam int CFG_W   = NSTAGES * AW            // 2 bits x AW/2 Eggs per stage
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [CFG_W-1:0]    cfg,
  input  logic [TAG_W-1:0]    in_tag,
  input  logic                in_valid [AW],
  input  logic signed [W-1:0] in_data  [AW],
  output logic [TAG_W-1:0]    out_tag,
  output logic                out_valid [AW],
  output logic signed [W-1:0] out_data  [AW]
);

  // stage inputs; index NSTAGES is the network output
  logic                sv [NSTAGES+1][AW];
  logic signed [W-1:0] sd [NSTAGES+1][AW];
  // Egg outputs per stage (before the inter-stage links)
  logic                ev [NSTAGES][AW];
  logic signed [W-1:0] ed [NSTAGES][AW];
  // configuration and tag pipelines: index s is aligned with stage s inputs
  logic [CFG_W-1:0]    cfg_p [NSTAGES];
  logic [TAG_W-1:0]    tag_p [NSTAGES+1];

  assign cfg_p[0] = cfg;
  assign tag_p[0] = in_tag;

  for (genvar j = 0; j < AW; j++) begin : g_in
    assign sv[0][j] = in_valid[j];
    assign sd[0][j] = in_data[j];
  end

  for (genvar s = 0; s < NSTAGES; s++) begin : g_stage
    for (genvar k = 0; k < AW/2; k++) begin : g_egg
      birrd_egg #(.W(W)) u_egg (
        .clk, .rst_n,
        .op         (egg_op_e'(cfg_p[s][2*(s*AW/2+k) +: 2])),
        .in_l_valid (sv[s][2*k]),
        .in_l       (sd[s][2*k]),
        .in_r_valid (sv[s][2*k+1]),
        .in_r       (sd[s][2*k+1]),
        .out_l_valid(ev[s][2*k]),
        .out_l      (ed[s][2*k]),
        .out_r_valid(ev[s][2*k+1]),
        .out_r      (ed[s][2*k+1])
      );
    end
    for (genvar j = 0; j < AW; j++) begin : g_link
      assign sv[s+1][birrd_link(AW, s, j)] = ev[s][j];
      assign sd[s+1][birrd_link(AW, s, j)] = ed[s][j];
    end
    if (s < NSTAGES - 1) begin : g_cfgp
      always_ff @(posedge clk or negedge rst_n)
        if (!rst_n) cfg_p[s+1] <= '0;
        else        cfg_p[s+1] <= cfg_p[s];
    end
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) tag_p[s+1] <= '0;
      else        tag_p[s+1] <= tag_p[s];
  end

  assign out_tag = tag_p[NSTAGES];
  for (genvar j = 0; j < AW; j++) begin : g_out
    assign out_valid[j] = sv[NSTAGES][j];
    assign out_data[j]  = sd[NSTAGES][j];
  end

endmodule

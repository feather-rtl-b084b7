// tb_birrd_lane: drives one BIRRD instance of size AW with back-to-back waves,
// each with its own random configuration, and compares every output wave with a
// behavioural model of the network (Algorithm-1 links, Egg function table) that
// is evaluated in the testbench. Also checks the NSTAGES-cycle latency, the tag
// side band, and that an all-pass/swap configuration only permutes its inputs.
module tb_birrd_lane #(
  parameter int AW = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
);
  import feather_pkg::*;
  localparam int NS = (AW == 4) ? 3 : 2 * $clog2(AW);
  localparam int CW = NS * AW;
  localparam int NW = 300;

  logic [CW-1:0] cfg;
  logic [15:0] in_tag, out_tag;
  logic in_valid [AW], out_valid [AW];
  logic signed [31:0] in_data [AW], out_data [AW];

  birrd #(.AW(AW), .W(32), .TAG_W(16)) dut (.clk, .rst_n, .cfg, .in_tag, .in_valid, .in_data,
    .out_tag, .out_valid, .out_data);

  // independent model: Algorithm 1 written out again
  function automatic int rev(int d, int n);
    int r = 0;
    for (int i = 0; i < n; i++) if (d[i]) r |= 1 << (n - 1 - i);
    return (d & ~((1 << n) - 1)) | r;
  endfunction
  function automatic int nxt(int s, int j);
    int lg = $clog2(AW), n;
    if (s == NS - 1) return j;
    if (AW == 4) return rev(j, 2);
    n = lg;
    if (2 + s < n) n = 2 + s;
    if (2 * lg - s < n) n = 2 * lg - s;
    return rev(j, n);
  endfunction

  typedef struct { logic v [AW]; logic signed [31:0] d [AW]; logic [15:0] tag; } wave_t;
  wave_t exp_q [$];

  function automatic wave_t model(logic [CW-1:0] c, wave_t w);
    wave_t cur, o;
    cur = w;
    for (int s = 0; s < NS; s++) begin
      for (int k = 0; k < AW/2; k++) begin
        logic vl, vr; logic signed [31:0] a, b;
        vl = cur.v[2*k]; vr = cur.v[2*k+1];
        a = vl ? cur.d[2*k] : 0; b = vr ? cur.d[2*k+1] : 0;
        case (c[2*(s*AW/2+k) +: 2])
          2'b00: begin o.v[nxt(s,2*k)] = vl; o.d[nxt(s,2*k)] = a; o.v[nxt(s,2*k+1)] = vr; o.d[nxt(s,2*k+1)] = b; end
          2'b01: begin o.v[nxt(s,2*k)] = vr; o.d[nxt(s,2*k)] = b; o.v[nxt(s,2*k+1)] = vl; o.d[nxt(s,2*k+1)] = a; end
          2'b10: begin o.v[nxt(s,2*k)] = vl|vr; o.d[nxt(s,2*k)] = a+b; o.v[nxt(s,2*k+1)] = vr; o.d[nxt(s,2*k+1)] = b; end
          default: begin o.v[nxt(s,2*k)] = vl; o.d[nxt(s,2*k)] = a; o.v[nxt(s,2*k+1)] = vl|vr; o.d[nxt(s,2*k+1)] = a+b; end
        endcase
      end
      cur = o;
    end
    cur.tag = w.tag;
    return cur;
  endfunction

  // sent waves are checked NS cycles later
  int sent = 0, recv = 0;
  logic [CW-1:0] cfg_hist [NW];
  wave_t         in_hist  [NW];

  initial begin
    checks = 0; failures = 0; finished = 0;
    cfg = '0; in_tag = '0;
    for (int j = 0; j < AW; j++) begin in_valid[j] = 0; in_data[j] = 0; end
    wait (go);
    for (int t = 0; t < NW; t++) begin
      wave_t w;
      @(negedge clk);
      for (int b = 0; b < CW; b += 32) cfg[b +: 32] = $urandom;
      if (t % 3 == 0)                          // pass/swap only: a pure reorder
        for (int b = 1; b < CW; b += 2) cfg[b] = 1'b0;
      in_tag = t[15:0];
      for (int j = 0; j < AW; j++) begin
        in_valid[j] = ($urandom % 8) != 0;
        in_data[j] = $urandom % 100000;
        w.v[j] = in_valid[j]; w.d[j] = in_data[j];
      end
      w.tag = in_tag;
      exp_q.push_back(model(cfg, w));
      cfg_hist[t] = cfg; in_hist[t] = w;
    end
    @(negedge clk);
    for (int j = 0; j < AW; j++) in_valid[j] = 0;
    repeat (NS + 3) @(posedge clk);
    finished = 1;
  end

  // the wave presented at edge e appears at the output after edge e+NS
  int edge_no = 0;
  int first_edge = -1;
  always @(posedge clk) begin
    if (go && rst_n) begin
      edge_no++;
      if (exp_q.size() > 0 && first_edge < 0) first_edge = edge_no;
      if (first_edge >= 0 && edge_no >= first_edge + NS - 1 && recv < NW) begin
        #1;
        begin
          wave_t e; int sum_in, sum_out; bit reorder_only;
          e = exp_q.pop_front();
          checks++;
          if (out_tag !== e.tag) begin failures++; $display("AW=%0d tag mismatch wave %0d", AW, recv); end
          for (int j = 0; j < AW; j++) begin
            checks++;
            if (out_valid[j] !== e.v[j] || (e.v[j] && out_data[j] !== e.d[j])) begin
              failures++;
              if (failures < 8) $display("AW=%0d wave %0d port %0d got %0b/%0d exp %0b/%0d", AW, recv, j, out_valid[j], out_data[j], e.v[j], e.d[j]);
            end
          end
          // permutation property for pass/swap-only waves
          if (recv % 3 == 0) begin
            sum_in = 0; sum_out = 0;
            for (int j = 0; j < AW; j++) begin
              if (in_hist[recv].v[j]) sum_in += in_hist[recv].d[j];
              if (out_valid[j]) sum_out += out_data[j];
            end
            checks++;
            if (sum_in != sum_out) begin failures++; $display("AW=%0d reorder wave %0d changed the sum", AW, recv); end
          end
          recv++;
        end
      end
    end
  end
endmodule

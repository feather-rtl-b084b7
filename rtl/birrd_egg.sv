// birrd_egg: the "Egg", BIRRD's 2-input x 2-output reorder-reduction switch.
//
// A 2-bit control word selects one of four functions:
//   PASS      left in -> left out, right in -> right out
//   SWAP      left in -> right out, right in -> left out
//   ADD_LEFT  left out = left + right, right out = right in
//   ADD_RIGHT right out = left + right, left out = left in
// In the add functions the secondary output inherits the input on its own side,
// as the paper describes. Each value carries a valid bit; an invalid input adds
// as zero and a sum is valid when either addend is. Outputs are registered, so
// each BIRRD stage adds one cycle of latency.
//
// From the paper: the four functions, the 2-bit control, one adder per Egg. Own
// choices: the opcode encoding (feather_pkg::egg_op_e), valid bits, the output
// register.
module birrd_egg
  import feather_pkg::*;
#(
  parameter int W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  egg_op_e             op,
  input  logic                in_l_valid,
  input  logic signed [W-1:0] in_l,
  input  logic                in_r_valid,
  input  logic signed [W-1:0] in_r,
  output logic                out_l_valid,
  output logic signed [W-1:0] out_l,
  output logic                out_r_valid,
  output logic signed [W-1:0] out_r
);

  logic signed [W-1:0] l, r, sum;
  logic                sum_valid;
  logic                nl_v, nr_v;
  logic signed [W-1:0] nl, nr;

  always_comb begin
    l         = in_l_valid ? in_l : '0;
    r         = in_r_valid ? in_r : '0;
    sum       = l + r;
    sum_valid = in_l_valid || in_r_valid;
    unique case (op)
      EGG_PASS:      begin nl_v = in_l_valid; nl = l;   nr_v = in_r_valid; nr = r;   end
      EGG_SWAP:      begin nl_v = in_r_valid; nl = r;   nr_v = in_l_valid; nr = l;   end
      EGG_ADD_LEFT:  begin nl_v = sum_valid;  nl = sum; nr_v = in_r_valid; nr = r;   end
      EGG_ADD_RIGHT: begin nl_v = in_l_valid; nl = l;   nr_v = sum_valid;  nr = sum; end
      default:       begin nl_v = in_l_valid; nl = l;   nr_v = in_r_valid; nr = r;   end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_l_valid <= 1'b0;
      out_r_valid <= 1'b0;
      out_l       <= '0;
      out_r       <= '0;
    end else begin
      out_l_valid <= nl_v;
      out_r_valid <= nr_v;
      out_l       <= nl;
      out_r       <= nr;
    end
  end

endmodule

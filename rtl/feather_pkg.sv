// feather_pkg: types and constants shared by the FEATHER datapath.
//
// FEATHER pairs a 2D PE array (NEST) with a butterfly reduction network (BIRRD)
// that reduces partial sums and, in the same pass, steers each result to the
// stationary-buffer bank required by the next layer's layout. This package holds
// the Egg opcode, the instruction word that configures one BIRRD "wave", the
// layer descriptor the host hands to the controller, and small helpers.
//
// Paper-given: the four Egg functions with a 2-bit control word, int8 operands,
// 32-bit partial sums, 8-bit zero points and 32-bit scales. Own choices: the
// numeric opcode encoding, the instruction fields beyond the BIRRD configuration
// and write address, and the layer-descriptor fields.
package feather_pkg;

  // Egg (2x2 reorder-reduction switch) functions. Encoding is this design's choice.
  typedef enum logic [1:0] {
    EGG_PASS      = 2'b00,  // left->left, right->right
    EGG_SWAP      = 2'b01,  // left->right, right->left
    EGG_ADD_LEFT  = 2'b10,  // sum->left output, right input->right output
    EGG_ADD_RIGHT = 2'b11   // sum->right output, left input->left output
  } egg_op_e;

  // Operation the controller runs for one layer.
  typedef enum logic [1:0] {
    OP_CONV   = 2'b00,  // NEST local reduction + BIRRD spatial reduction
    OP_BYPASS = 2'b01,  // NEST PE array bypassed, BIRRD reorder/reduce only
    OP_FE     = 2'b10   // functional engine (ReLU / BatchNorm / MaxPool)
  } layer_op_e;

  typedef enum logic [1:0] {
    FE_RELU    = 2'b00,
    FE_BN      = 2'b01,
    FE_MAXPOOL = 2'b10
  } fe_op_e;

  // Number of BIRRD stages for an AW-input network (Sec. III-B1): 2*log2(AW),
  // except the 4-input network whose two middle stages merge into three.
  function automatic int birrd_stages(input int aw);
    return (aw == 4) ? 3 : 2 * $clog2(aw);
  endfunction

  // reverse_bits() of Algorithm 1: reverse the low 'range_bits' bits of 'data'.
  function automatic int reverse_bits(input int data, input int range_bits);
    int mask, rev;
    mask = (1 << range_bits) - 1;
    rev  = 0;
    for (int i = 0; i < range_bits; i++)
      if ((data & (1 << i)) != 0) rev |= 1 << (range_bits - 1 - i);
    return (data & ~mask) | rev;
  endfunction

  function automatic int min3(input int a, input int b, input int c);
    int m;
    m = (a < b) ? a : b;
    return (m < c) ? m : c;
  endfunction

  // Input port of stage s+1 that output port j of stage s drives (Algorithm 1).
  // For the 4-input special case every stage uses a full 2-bit reversal and the
  // last stage is wired straight through.
  function automatic int birrd_link(input int aw, input int s, input int j);
    int lg, ns;
    lg = $clog2(aw);
    ns = birrd_stages(aw);
    if (s == ns - 1) return j;
    if (aw == 4) return reverse_bits(j, 2);
    return reverse_bits(j, min3(lg, 2 + s, 2 * lg - s));
  endfunction

endpackage

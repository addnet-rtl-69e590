// addnet_pkg: types and constants shared by the reconfigurable constant
// coefficient multipliers (RCCMs) and the layer datapath.
//
// An RCCM stage is one adder whose operands come from small multiplexers.
// Which operands are picked, and whether one is negated, is a fixed
// design-time function sigma(s) of the stage's 2-bit select code s. The two
// stage kinds are:
//   Topology A:  y = (+/-)A_p + B1,          A_p in {A1, A2, A3, 0}
//   Topology B:  y = (+/-)A_p (+/-) B_q,     A_p in {A1, A2, 0}, B_q in {B1, 0}
// The operand inputs are the stage's source signals left-shifted by fixed
// amounts phi (wires only). The sigma tables and shifts below are the
// optimized 2-Add, 3-Add and 4-Add configurations; with them the multipliers
// realize exactly the symmetric coefficient sets of 15, 59 and 207 values.
// Select code k of a stage is the pair {s[2k+1], s[2k]} of the stored index.
package addnet_pkg;

  // Operand choice of the A multiplexer.
  typedef enum logic [1:0] {
    SRC_A1   = 2'd0,
    SRC_A2   = 2'd1,
    SRC_A3   = 2'd2,
    SRC_ZERO = 2'd3
  } a_src_e;

  // One entry of sigma(s) for Topology A: pick A_p, optionally negate it; B1 is always added.
  typedef struct packed {
    a_src_e src;
    logic   neg;
  } topo_a_op_t;

  // One entry of sigma(s) for Topology B: A_p in {A1, A2, 0}, B_q in {B1, 0}, each may be negated.
  typedef struct packed {
    a_src_e src;
    logic   neg_a;
    logic   b_on;
    logic   neg_b;
  } topo_b_op_t;

  typedef topo_a_op_t sigma_a_t [4];
  typedef topo_b_op_t sigma_b_t [4];
  typedef int unsigned phi4_t [4];
  typedef int unsigned phi3_t [3];

  // Shorthands for the table entries.
  localparam topo_a_op_t A1_P_B1  = '{src: SRC_A1,   neg: 1'b0};  //  A1 + B1
  localparam topo_a_op_t A2_P_B1  = '{src: SRC_A2,   neg: 1'b0};  //  A2 + B1
  localparam topo_a_op_t A3_P_B1  = '{src: SRC_A3,   neg: 1'b0};  //  A3 + B1
  localparam topo_a_op_t ONLY_B1  = '{src: SRC_ZERO, neg: 1'b0};  //  B1
  localparam topo_a_op_t NA1_P_B1 = '{src: SRC_A1,   neg: 1'b1};  // -A1 + B1
  localparam topo_a_op_t NA2_P_B1 = '{src: SRC_A2,   neg: 1'b1};  // -A2 + B1
  localparam topo_a_op_t NA3_P_B1 = '{src: SRC_A3,   neg: 1'b1};  // -A3 + B1

  localparam topo_b_op_t B_NA1_P_B1 = '{src: SRC_A1, neg_a: 1'b1, b_on: 1'b1, neg_b: 1'b0}; // -A1 + B1
  localparam topo_b_op_t B_NA2_P_B1 = '{src: SRC_A2, neg_a: 1'b1, b_on: 1'b1, neg_b: 1'b0}; // -A2 + B1
  localparam topo_b_op_t B_A1_M_B1  = '{src: SRC_A1, neg_a: 1'b0, b_on: 1'b1, neg_b: 1'b1}; //  A1 - B1
  localparam topo_b_op_t B_A2_M_B1  = '{src: SRC_A2, neg_a: 1'b0, b_on: 1'b1, neg_b: 1'b1}; //  A2 - B1

  // Output stage B is the same mapping in all three multipliers.
  localparam sigma_b_t SIGMA_B = '{B_NA1_P_B1, B_NA2_P_B1, B_A1_M_B1, B_A2_M_B1};

  // 2-Add: A_I -> B
  localparam sigma_a_t SIGMA_2ADD_AI = '{A1_P_B1, A2_P_B1, A3_P_B1, ONLY_B1};
  localparam phi4_t    PHI_2ADD_AI   = '{0, 1, 3, 2};
  localparam phi3_t    PHI_2ADD_B    = '{0, 3, 2};

  // 3-Add: A_I, A_II -> B
  localparam sigma_a_t SIGMA_3ADD_AI  = '{A1_P_B1, A2_P_B1, A3_P_B1, NA2_P_B1};
  localparam phi4_t    PHI_3ADD_AI    = '{0, 2, 3, 3};
  localparam sigma_a_t SIGMA_3ADD_AII = '{A1_P_B1, A2_P_B1, A3_P_B1, NA1_P_B1};
  localparam phi4_t    PHI_3ADD_AII   = '{0, 1, 3, 0};
  localparam phi3_t    PHI_3ADD_B     = '{0, 3, 0};

  // 4-Add: A_I, A_II -> A_III -> B
  localparam sigma_a_t SIGMA_4ADD_AI   = '{A1_P_B1, A2_P_B1, A3_P_B1, NA3_P_B1};
  localparam phi4_t    PHI_4ADD_AI     = '{0, 1, 3, 0};
  localparam sigma_a_t SIGMA_4ADD_AII  = '{A1_P_B1, A2_P_B1, A3_P_B1, NA2_P_B1};
  localparam phi4_t    PHI_4ADD_AII    = '{0, 1, 3, 1};
  localparam sigma_a_t SIGMA_4ADD_AIII = '{A1_P_B1, A2_P_B1, A3_P_B1, NA1_P_B1};
  localparam phi4_t    PHI_4ADD_AIII   = '{0, 1, 3, 3};
  localparam phi3_t    PHI_4ADD_B      = '{0, 3, 1};

  // Width of the stored index (select signal): 2 bits per stage.
  function automatic int unsigned sel_w(int unsigned arch);
    return 2 * arch;
  endfunction

  // Two's complement bits needed for the largest coefficient (92, 128, 1214).
  function automatic int unsigned coef_bits(int unsigned arch);
    case (arch)
      2:       return 8;
      3:       return 10;
      default: return 12;
    endcase
  endfunction

  // Adder stages on the longest path, i.e. cycles of latency when pipelined.
  function automatic int unsigned rccm_stages(int unsigned arch);
    return (arch == 4) ? 3 : 2;
  endfunction

endpackage

// rccm_topology_b: base Topology B of the reconfigurable multipliers.
//
// Computes y = (+/-)A_p (+/-)B_q with A_p in {A1, A2, 0} and B_q in {B1, 0}.
// The design-time table SIGMA, indexed with the 2-bit select s, gives the
// operand choices and signs. Because B can be negated as well as A, an output
// stage of this kind makes the multiplier's coefficient set symmetric about
// zero. As in the LUT mapping, a negated operand is inverted and a carry of
// one is added for it.
//
// Interface: W-bit two's complement operands and result (wrapping);
// combinational.
module rccm_topology_b
  import addnet_pkg::*;
#(
  parameter int unsigned W     = 17,
  parameter sigma_b_t    SIGMA = SIGMA_B
) (
  input  logic [W-1:0] a1,
  input  logic [W-1:0] a2,
  input  logic [W-1:0] b1,
  input  logic [1:0]   s,
  output logic [W-1:0] y
);

  topo_b_op_t   op;
  logic [W-1:0] a_sel;
  logic [W-1:0] b_sel;

  always_comb begin
    op = SIGMA[s];
    unique case (op.src)
      SRC_A1:  a_sel = a1;
      SRC_A2:  a_sel = a2;
      default: a_sel = '0;
    endcase
    b_sel = op.b_on ? b1 : '0;
    y = (op.neg_a ? ~a_sel : a_sel) + (op.neg_b ? ~b_sel : b_sel)
        + W'(op.neg_a) + W'(op.neg_b);
  end

endmodule

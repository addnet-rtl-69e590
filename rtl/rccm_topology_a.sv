// rccm_topology_a: base Topology A of the reconfigurable multipliers.
//
// Computes y = (+/-)A_p + B1 where the operand A_p is A1, A2, A3 or zero,
// chosen together with its sign by the design-time table SIGMA indexed with the
// 2-bit select s. On an FPGA the multiplexer and the optional inversion fit
// into the same 6-input LUT as the adder's propagate function, so the stage
// costs no more than a plain ripple-carry adder. Negation is done the same
// way as in that mapping: the operand is inverted and a carry of one is
// added. B1 cannot be negated in this topology.
//
// Interface: all operands and the result are W-bit two's complement words;
// the result wraps modulo 2^W. The owning multiplier sizes W so that its
// final product never overflows, which makes the wrapped intermediate values
// harmless. Purely combinational.
module rccm_topology_a
  import addnet_pkg::*;
#(
  parameter int unsigned W     = 17,
  parameter sigma_a_t    SIGMA = SIGMA_2ADD_AI
) (
  input  logic [W-1:0] a1,
  input  logic [W-1:0] a2,
  input  logic [W-1:0] a3,
  input  logic [W-1:0] b1,
  input  logic [1:0]   s,
  output logic [W-1:0] y
);

  topo_a_op_t   op;
  logic [W-1:0] a_sel;
  logic [W-1:0] a_opnd;

  always_comb begin
    op = SIGMA[s];
    unique case (op.src)
      SRC_A1:  a_sel = a1;
      SRC_A2:  a_sel = a2;
      SRC_A3:  a_sel = a3;
      default: a_sel = '0;
    endcase
    a_opnd = op.neg ? ~a_sel : a_sel;
    y      = a_opnd + b1 + W'(op.neg);
  end

endmodule

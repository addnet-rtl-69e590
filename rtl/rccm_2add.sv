// rccm_2add: 2-Add reconfigurable constant coefficient multiplier.
//
// Multiplies the activation x by one of 15 coefficients,
//   c_s in {0, +/-1, +/-2, +/-8, +/-28, +/-36, +/-44, +/-92},
// chosen by the 4-bit stored weight index s, using only two adders.
// Stage A_I (Topology A, select {s1,s0}) forms a = x*{5,6,12,4} from x, 2x,
// 8x and B1 = 4x. Stage B (Topology B, select {s3,s2}) forms
// -a+4x, -8a+4x, a-4x or 8a-4x. Shift amounts and operation tables are the
// optimized 2-Add configuration of addnet_pkg; the coefficient set follows
// from them.
//
// Interface: x is a signed W_IN-bit value, y the signed product of
// W_IN+8 bits (enough for |c| <= 92, so y is exact). With PIPELINE = 0 the
// multiplier is combinational; with PIPELINE = 1 a register follows each of
// the two stages (latency 2 cycles, one result per cycle). Where the stage
// registers go is this design's choice. clk and rst_n are used only when
// pipelined.
module rccm_2add
  import addnet_pkg::*;
#(
  parameter int unsigned W_IN     = 9,
  parameter bit          PIPELINE = 1'b0,
  localparam int unsigned PW      = W_IN + coef_bits(2)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [W_IN-1:0] x,
  input  logic [3:0]           s,
  output logic signed [PW-1:0] y
);

  logic [PW-1:0] xe;
  logic [PW-1:0] a_i;
  logic [PW-1:0] a_i_q, x_q;
  logic [1:0]    s_b_q;
  logic [PW-1:0] y_b;

  assign xe = {{(PW - W_IN){x[W_IN-1]}}, x};

  rccm_topology_a #(.W(PW), .SIGMA(SIGMA_2ADD_AI)) u_ai (
    .a1(xe << PHI_2ADD_AI[0]), .a2(xe << PHI_2ADD_AI[1]), .a3(xe << PHI_2ADD_AI[2]),
    .b1(xe << PHI_2ADD_AI[3]), .s(s[1:0]), .y(a_i)
  );

  if (PIPELINE) begin : g_pipe
    logic [PW-1:0] y_q;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        a_i_q <= '0;
        x_q   <= '0;
        s_b_q <= '0;
        y_q   <= '0;
      end else begin
        a_i_q <= a_i;
        x_q   <= xe;
        s_b_q <= s[3:2];
        y_q   <= y_b;
      end
    end
    assign y = y_q;
  end else begin : g_comb
    assign a_i_q = a_i;
    assign x_q   = xe;
    assign s_b_q = s[3:2];
    assign y     = y_b;
  end

  rccm_topology_b #(.W(PW), .SIGMA(SIGMA_B)) u_b (
    .a1(a_i_q << PHI_2ADD_B[0]), .a2(a_i_q << PHI_2ADD_B[1]),
    .b1(x_q << PHI_2ADD_B[2]), .s(s_b_q), .y(y_b)
  );

endmodule

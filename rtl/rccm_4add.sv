// rccm_4add: 4-Add reconfigurable constant coefficient multiplier.
//
// Multiplies x by one of 207 coefficients (0 and +/- 103 magnitudes up to
// 1214) chosen by the 8-bit stored index s, with four adders in three
// levels. A_I (select {s1,s0}) gives a1 = x*{2,3,9,-7} and A_II (select
// {s3,s2}) gives a2 = x*{3,4,10,0}, both from x. A_III (select {s5,s4}) adds
// 8*a2 to a1, 2*a1, 8*a1 or -a1. The Topology B output stage (select
// {s7,s6}) forms -a3+2x, -8a3+2x, a3-2x or 8a3-2x.
//
// Interface: signed W_IN-bit x, signed W_IN+12-bit exact product y.
// PIPELINE = 0: combinational. PIPELINE = 1: a register after each of the
// three levels, latency 3 cycles (placement is this design's choice).
module rccm_4add
  import addnet_pkg::*;
#(
  parameter int unsigned W_IN     = 9,
  parameter bit          PIPELINE = 1'b0,
  localparam int unsigned PW      = W_IN + coef_bits(4)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [W_IN-1:0] x,
  input  logic [7:0]             s,
  output logic signed [PW-1:0]   y
);

  logic [PW-1:0] xe;
  logic [PW-1:0] a_i, a_ii, a_iii;
  // level 1 -> level 2
  logic [PW-1:0] a_i_q, a_ii_q, x_q1;
  logic [3:0]    s_q1;
  // level 2 -> level 3
  logic [PW-1:0] a_iii_q, x_q2;
  logic [1:0]    s_q2;
  logic [PW-1:0] y_b;

  assign xe = {{(PW - W_IN){x[W_IN-1]}}, x};

  rccm_topology_a #(.W(PW), .SIGMA(SIGMA_4ADD_AI)) u_ai (
    .a1(xe << PHI_4ADD_AI[0]), .a2(xe << PHI_4ADD_AI[1]), .a3(xe << PHI_4ADD_AI[2]),
    .b1(xe << PHI_4ADD_AI[3]), .s(s[1:0]), .y(a_i)
  );

  rccm_topology_a #(.W(PW), .SIGMA(SIGMA_4ADD_AII)) u_aii (
    .a1(xe << PHI_4ADD_AII[0]), .a2(xe << PHI_4ADD_AII[1]), .a3(xe << PHI_4ADD_AII[2]),
    .b1(xe << PHI_4ADD_AII[3]), .s(s[3:2]), .y(a_ii)
  );

  rccm_topology_a #(.W(PW), .SIGMA(SIGMA_4ADD_AIII)) u_aiii (
    .a1(a_i_q << PHI_4ADD_AIII[0]), .a2(a_i_q << PHI_4ADD_AIII[1]),
    .a3(a_i_q << PHI_4ADD_AIII[2]), .b1(a_ii_q << PHI_4ADD_AIII[3]),
    .s(s_q1[1:0]), .y(a_iii)
  );

  if (PIPELINE) begin : g_pipe
    logic [PW-1:0] y_q;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        a_i_q   <= '0;
        a_ii_q  <= '0;
        x_q1    <= '0;
        s_q1    <= '0;
        a_iii_q <= '0;
        x_q2    <= '0;
        s_q2    <= '0;
        y_q     <= '0;
      end else begin
        a_i_q   <= a_i;
        a_ii_q  <= a_ii;
        x_q1    <= xe;
        s_q1    <= s[7:4];
        a_iii_q <= a_iii;
        x_q2    <= x_q1;
        s_q2    <= s_q1[3:2];
        y_q     <= y_b;
      end
    end
    assign y = y_q;
  end else begin : g_comb
    assign a_i_q   = a_i;
    assign a_ii_q  = a_ii;
    assign x_q1    = xe;
    assign s_q1    = s[7:4];
    assign a_iii_q = a_iii;
    assign x_q2    = x_q1;
    assign s_q2    = s_q1[3:2];
    assign y       = y_b;
  end

  rccm_topology_b #(.W(PW), .SIGMA(SIGMA_B)) u_b (
    .a1(a_iii_q << PHI_4ADD_B[0]), .a2(a_iii_q << PHI_4ADD_B[1]),
    .b1(x_q2 << PHI_4ADD_B[2]), .s(s_q2), .y(y_b)
  );

endmodule

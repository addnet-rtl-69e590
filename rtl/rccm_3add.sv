// rccm_3add: 3-Add reconfigurable constant coefficient multiplier.
//
// Multiplies x by one of 59 coefficients (0 and +/- the 29 magnitudes
// 1..7, 9, 10, 12, 13, 14, 16, 23, 29, 30, 32, 63, 69, 70, 72, 87, 93, 94, 96,
// 119, 125, 126, 128) chosen by the 6-bit stored index s, with three adders.
// Two Topology A stages work on x in parallel: A_I (select {s1,s0}) gives
// a1 = x*{9,12,16,4}, A_II (select {s3,s2}) gives a2 = x*{2,3,9,0}. The
// Topology B output stage (select {s5,s4}) forms -a1+a2, -8a1+a2, a1-a2 or
// 8a1-a2.
//
// Interface: signed W_IN-bit x, signed W_IN+10-bit exact product y.
// PIPELINE = 0: combinational. PIPELINE = 1: registers after the A stages
// and after the B stage, latency 2 cycles (placement is this design's choice).
module rccm_3add
  import addnet_pkg::*;
#(
  parameter int unsigned W_IN     = 9,
  parameter bit          PIPELINE = 1'b0,
  localparam int unsigned PW      = W_IN + coef_bits(3)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [W_IN-1:0] x,
  input  logic [5:0]             s,
  output logic signed [PW-1:0]   y
);

  logic [PW-1:0] xe;
  logic [PW-1:0] a_i, a_ii;
  logic [PW-1:0] a_i_q, a_ii_q;
  logic [1:0]    s_b_q;
  logic [PW-1:0] y_b;

  assign xe = {{(PW - W_IN){x[W_IN-1]}}, x};

  rccm_topology_a #(.W(PW), .SIGMA(SIGMA_3ADD_AI)) u_ai (
    .a1(xe << PHI_3ADD_AI[0]), .a2(xe << PHI_3ADD_AI[1]), .a3(xe << PHI_3ADD_AI[2]),
    .b1(xe << PHI_3ADD_AI[3]), .s(s[1:0]), .y(a_i)
  );

  rccm_topology_a #(.W(PW), .SIGMA(SIGMA_3ADD_AII)) u_aii (
    .a1(xe << PHI_3ADD_AII[0]), .a2(xe << PHI_3ADD_AII[1]), .a3(xe << PHI_3ADD_AII[2]),
    .b1(xe << PHI_3ADD_AII[3]), .s(s[3:2]), .y(a_ii)
  );

  if (PIPELINE) begin : g_pipe
    logic [PW-1:0] y_q;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        a_i_q  <= '0;
        a_ii_q <= '0;
        s_b_q  <= '0;
        y_q    <= '0;
      end else begin
        a_i_q  <= a_i;
        a_ii_q <= a_ii;
        s_b_q  <= s[5:4];
        y_q    <= y_b;
      end
    end
    assign y = y_q;
  end else begin : g_comb
    assign a_i_q  = a_i;
    assign a_ii_q = a_ii;
    assign s_b_q  = s[5:4];
    assign y      = y_b;
  end

  rccm_topology_b #(.W(PW), .SIGMA(SIGMA_B)) u_b (
    .a1(a_i_q << PHI_3ADD_B[0]), .a2(a_i_q << PHI_3ADD_B[1]),
    .b1(a_ii_q << PHI_3ADD_B[2]), .s(s_b_q), .y(y_b)
  );

endmodule

// addnet_mult: the AddNet multiplier of a processing element.
//
// Selects one of the three reconfigurable constant coefficient multipliers
// by the parameter ARCH (2, 3 or 4 adders). The weight is never stored as a
// number: the PE stores the SEL_W-bit index s and the multiplier's
// structure decodes it, so no codebook lookup is needed.
//
// Interface: signed W_IN-bit x, index s of 2*ARCH bits, signed product y of
// W_IN + 8/10/12 bits. Latency LATENCY = 0 when PIPELINE = 0, otherwise 2, 2
// or 3 cycles for ARCH = 2, 3, 4.
module addnet_mult
  import addnet_pkg::*;
#(
  parameter int unsigned ARCH     = 2,
  parameter int unsigned W_IN     = 9,
  parameter bit          PIPELINE = 1'b0,
  localparam int unsigned SW      = sel_w(ARCH),
  localparam int unsigned PW      = W_IN + coef_bits(ARCH),
  localparam int unsigned LATENCY = PIPELINE ? rccm_stages(ARCH) : 0
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [W_IN-1:0] x,
  input  logic [SW-1:0]          s,
  output logic signed [PW-1:0]   y
);

  if (ARCH == 2) begin : g_2add
    rccm_2add #(.W_IN(W_IN), .PIPELINE(PIPELINE)) u_rccm (
      .clk(clk), .rst_n(rst_n), .x(x), .s(s), .y(y));
  end else if (ARCH == 3) begin : g_3add
    rccm_3add #(.W_IN(W_IN), .PIPELINE(PIPELINE)) u_rccm (
      .clk(clk), .rst_n(rst_n), .x(x), .s(s), .y(y));
  end else begin : g_4add
    rccm_4add #(.W_IN(W_IN), .PIPELINE(PIPELINE)) u_rccm (
      .clk(clk), .rst_n(rst_n), .x(x), .s(s), .y(y));
  end

  initial begin
    assert (ARCH >= 2 && ARCH <= 4) else $error("addnet_mult: ARCH must be 2, 3 or 4");
  end

endmodule

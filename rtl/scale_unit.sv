// scale_unit: per-layer output scaling and requantization.
//
// After fan-in each result is multiplied by the layer's precomputed 8-bit
// scale lambda; this undoes the coefficient scaling used when the weights
// were mapped onto the multiplier's integer coefficient set. The product is
// then brought back to an OUT_W-bit unsigned activation: divided by 2^shift
// with rounding to nearest (ties up, floor(v/2^f + 1/2)) and clipped to
// 2^OUT_W - 1. Inputs are ReLU outputs and therefore non-negative.
//
// Interface: valid/ready, one result per cycle, one register stage
// (latency 1). in_last is carried along. lambda and shift are held constant
// by the controller during a layer. Treating lambda as unsigned and the
// run-time shift are this design's choices.
module scale_unit #(
  parameter int unsigned IN_W  = 32,
  parameter int unsigned OUT_W = 8,
  parameter int unsigned LW    = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  input  logic             in_last,
  input  logic [LW-1:0]    lambda,
  input  logic [5:0]       shift,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data,
  output logic             out_last
);

  localparam int unsigned PWID = IN_W + LW + 1;
  localparam logic [PWID-1:0] MAXV = PWID'((1 << OUT_W) - 1);

  logic [PWID-1:0] prod, rounded;
  logic [OUT_W-1:0] sat;

  always_comb begin
    prod = PWID'(in_data) * PWID'(lambda);
    if (shift == '0) rounded = prod;
    else             rounded = (prod + (PWID'(1) << (shift - 1'b1))) >> shift;
    sat = (rounded > MAXV) ? '1 : rounded[OUT_W-1:0];
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= sat;
        out_last <= in_last;
      end
    end
  end

endmodule

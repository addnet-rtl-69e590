// addnet_pe: processing element of the network layer.
//
// Computes one output neuron (one output channel of the current pixel) as a
// dot product between the feature stream, shared by all PEs, and the PE's
// own weights, followed by ReLU. The weights are held as coefficient indices
// in a weight_index_buffer; P AddNet multipliers take a group of P features
// and the P indices of one buffer word, their products are summed and added
// to an accumulator. The group flagged in_first starts a new sum, the group
// flagged in_last finishes it: the ReLU of the final sum is written to the
// activation buffer (act) and act_valid pulses for one cycle.
//
// Timing: a group issued in cycle t (in_valid) reads the buffer in t, goes
// through the multipliers in t+1 (plus LATENCY-3 extra cycles when they are
// pipelined), its product sum is registered, and the accumulator and act
// update at the end of the next cycle, so act_valid is high in cycle
// t + LATENCY. One group per cycle is accepted without stalls. act holds its
// value until the next in_last group completes.
//
// The PE structure (index buffer, multipliers, accumulator, activation
// buffer) follows the architecture; the pipeline registers, the 32-bit
// accumulator and the in_first/in_last protocol are this design's choices.
// Features are signed W_IN-bit values (the layer zero-extends 8-bit
// activations to 9 bits).
module addnet_pe
  import addnet_pkg::*;
#(
  parameter int unsigned ARCH       = 2,
  parameter int unsigned P          = 1,
  parameter int unsigned W_IN       = 9,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned WBUF_DEPTH = 4096,
  parameter bit          PIPELINE   = 1'b0,
  localparam int unsigned SW        = sel_w(ARCH),
  localparam int unsigned AW        = $clog2(WBUF_DEPTH),
  localparam int unsigned PW        = W_IN + coef_bits(ARCH),
  localparam int unsigned ML        = PIPELINE ? rccm_stages(ARCH) : 0,
  localparam int unsigned LATENCY   = 3 + ML
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // weight index loading
  input  logic                          wr_en,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [P-1:0][SW-1:0]          wr_data,
  // feature groups
  input  logic                          in_valid,
  input  logic                          in_first,
  input  logic                          in_last,
  input  logic [AW-1:0]                 in_addr,
  input  logic [P-1:0][W_IN-1:0]        in_x,
  // activation buffer
  output logic                          act_valid,
  output logic [ACC_W-1:0]              act
);

  localparam int unsigned SUMW = PW + $clog2(P) + 1;

  typedef struct packed {
    logic valid;
    logic first;
    logic last;
  } ctl_t;

  // stage 1: weight index read, features held alongside
  logic [P-1:0][SW-1:0]   widx;
  logic [P-1:0][W_IN-1:0] x1;
  ctl_t                   ctl1;

  weight_index_buffer #(.WIDTH(P * SW), .DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_en(in_valid), .rd_addr(in_addr), .rd_data(widx)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ctl1 <= '0;
      x1   <= '0;
    end else begin
      ctl1 <= '{valid: in_valid, first: in_first, last: in_last};
      if (in_valid) x1 <= in_x;
    end
  end

  // stage 2: AddNet multipliers and product sum
  logic signed [PW-1:0] prod [P];
  logic signed [SUMW-1:0] psum;
  ctl_t ctl_m;

  for (genvar i = 0; i < P; i++) begin : g_mult
    addnet_mult #(.ARCH(ARCH), .W_IN(W_IN), .PIPELINE(PIPELINE)) u_mult (
      .clk(clk), .rst_n(rst_n), .x(x1[i]), .s(widx[i]), .y(prod[i]));
  end

  if (ML == 0) begin : g_nodelay
    assign ctl_m = ctl1;
  end else begin : g_delay
    ctl_t ctl_sh [ML];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int k = 0; k < ML; k++) ctl_sh[k] <= '0;
      end else begin
        ctl_sh[0] <= ctl1;
        for (int k = 1; k < ML; k++) ctl_sh[k] <= ctl_sh[k-1];
      end
    end
    assign ctl_m = ctl_sh[ML-1];
  end

  always_comb begin
    psum = '0;
    for (int i = 0; i < P; i++) psum += SUMW'(prod[i]);
  end

  logic signed [SUMW-1:0] psum_q;
  ctl_t                   ctl2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      psum_q <= '0;
      ctl2   <= '0;
    end else begin
      psum_q <= psum;
      ctl2   <= ctl_m;
    end
  end

  // stage 3: accumulator, ReLU, activation buffer
  logic signed [ACC_W-1:0] acc, acc_next;

  assign acc_next = (ctl2.first ? '0 : acc) + ACC_W'(psum_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      act       <= '0;
      act_valid <= 1'b0;
    end else begin
      act_valid <= ctl2.valid && ctl2.last;
      if (ctl2.valid) begin
        acc <= acc_next;
        if (ctl2.last) act <= acc_next[ACC_W-1] ? '0 : acc_next;
      end
    end
  end

endmodule

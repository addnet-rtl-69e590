// weight_index_buffer: a PE's local store of coefficient indices.
//
// Instead of weights the PE stores the select indices s of its AddNet
// multipliers, p of them per word (one per multiplier), so a word is p*b bits
// with b = 4, 6 or 8 for the 2-, 3- and 4-Add multipliers. Written during
// weight loading, read once per group of p features.
//
// Interface: one write port (wr_en, wr_addr, wr_data) and one read port with
// a registered output: rd_data holds the word addressed by rd_addr one cycle
// after rd_en (block-RAM style). Contents are not reset. The default depth
// of 4096 words is one 18 Kb block RAM in its 4K x 4 shape, the buffer of a
// 2-Add PE with p = 1: the 3x3x256 = 2304 indices of an AlexNet Conv3
// neuron fit in it, as the paper reports for that layer.
module weight_index_buffer #(
  parameter int unsigned WIDTH = 4,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule

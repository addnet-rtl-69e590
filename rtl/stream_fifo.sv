// stream_fifo: first-word-fall-through FIFO with valid/ready handshakes.
//
// Serves as the accelerator's input buffer, weight index buffer and output
// buffer between the DMA streams and the network layer. Storage is a
// DEPTH x W array (a block RAM on an FPGA); the head word is visible on
// out_data whenever out_valid is high.
//
// Interface: a word moves on in_* when in_valid && in_ready and on out_* when
// out_valid && out_ready; in_ready = not full, out_valid = not empty. A word
// written into an empty FIFO appears on the output one cycle later. level
// gives the fill. Synchronous active-low reset, or clear, empties the FIFO. The depth
// is this design's choice; DEPTH must be a power of two.
module stream_fifo #(
  parameter int unsigned W     = 24,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic [AW:0]   level
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;
  logic         push, pop;

  assign level     = wr_ptr - rd_ptr;
  assign in_ready  = (level != (AW + 1)'(DEPTH));
  assign out_valid = (level != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
    end
  end

  // Handshake rules: a word on offer stays put until taken.
  a_in_stable : assert property (@(posedge clk) disable iff (!rst_n || clear)
      out_valid && !out_ready |=> out_valid && $stable(out_data));

  initial assert (DEPTH == (1 << AW)) else $error("stream_fifo: DEPTH must be a power of two");

endmodule

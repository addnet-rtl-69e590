// stream_downsizer: splits each wide stream beat into narrower words.
//
// The DMA engine delivers 256-bit beats; the accelerator's input buffer is
// 24 bits wide and its weight index buffer b bits (4, 6 or 8). This unit
// holds one beat and emits N = floor(IN_W / OUT_W) words from it, least
// significant word first; when IN_W is not a multiple of OUT_W the leftover
// top bits are ignored. It is also used to split each 24-bit input word into
// three 8-bit features.
//
// Interface: valid/ready on both sides. A new beat is taken in the same cycle
// as the last word of the previous one leaves, so a full-rate input gives one
// output word per cycle with no bubble. Synchronous active-low reset; clear drops a partly used beat.
module stream_downsizer #(
  parameter int unsigned IN_W  = 256,
  parameter int unsigned OUT_W = 24,
  localparam int unsigned N    = IN_W / OUT_W,
  localparam int unsigned CW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data
);

  logic [N*OUT_W-1:0] beat;
  logic [CW-1:0]      idx;
  logic               full;
  logic               last_word;

  assign last_word = (idx == CW'(N - 1));
  assign out_valid = full;
  assign out_data  = beat[idx*OUT_W +: OUT_W];
  assign in_ready  = !full || (out_ready && last_word);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      full <= 1'b0;
      idx  <= '0;
      beat <= '0;
    end else if (in_valid && in_ready) begin
      beat <= in_data[N*OUT_W-1:0];
      idx  <= '0;
      full <= 1'b1;
    end else if (out_valid && out_ready) begin
      if (last_word) full <= 1'b0;
      else           idx  <= idx + 1'b1;
    end
  end

endmodule

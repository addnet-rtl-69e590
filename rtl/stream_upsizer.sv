// stream_upsizer: serial-to-parallel converter.
//
// Gathers N consecutive W-bit words into one N-lane word, the first word in
// lane 0. In the network layer it collects p features into the group that
// is broadcast to all PEs (and p weight indices into one weight memory word);
// at the output it packs 8-bit results into 256-bit DMA beats. A word with
// in_last set closes the group early: the remaining lanes are zero and
// out_last is raised with it.
//
// Interface: valid/ready on both sides; the output is a register, so a group
// appears one cycle after its last word is taken. in_ready is low only while
// a finished group waits on out_ready. Synchronous active-low reset; clear
// drops a partial group and a waiting output word.
module stream_upsizer #(
  parameter int unsigned W  = 8,
  parameter int unsigned N  = 32,
  localparam int unsigned CW = (N > 1) ? $clog2(N) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [W-1:0]       in_data,
  input  logic               in_last,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [N-1:0][W-1:0] out_data,
  output logic               out_last
);

  logic [N-1:0][W-1:0] gather;
  logic [CW-1:0]       idx;
  logic                close;
  logic [N-1:0][W-1:0] next_group;

  assign in_ready = !out_valid || out_ready;
  assign close    = in_last || (idx == CW'(N - 1));

  always_comb begin
    next_group      = gather;
    next_group[idx] = in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      gather    <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (close) begin
          out_data  <= next_group;
          out_last  <= in_last;
          out_valid <= 1'b1;
          gather    <= '0;
          idx       <= '0;
        end else begin
          gather <= next_group;
          idx    <= idx + 1'b1;
        end
      end
    end
  end

endmodule

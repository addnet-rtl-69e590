// register_bank: performance counters readable by the host.
//
// Counts, from the cycle after clear, the cycles the layer is busy, the
// input, weight and output DMA beats that were transferred, the cycles the
// feature stream was stalled, and the pixels completed. A memory-mapped
// slave port reads them: rd_data holds register rd_addr one cycle after
// rd_en. Register map (32-bit): 0 busy cycles, 1 input beats, 2 weight
// beats, 3 output beats, 4 stall cycles, 5 pixels, 6 identification
// constant, 7 status (bit 0 busy). The counter set and map are this
// design's choice; counters wrap.
module register_bank #(
  parameter logic [31:0] ID = 32'hADD0_0002
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        busy,
  input  logic        ev_in_beat,
  input  logic        ev_wt_beat,
  input  logic        ev_out_beat,
  input  logic        ev_stall,
  input  logic        ev_pixel,
  input  logic        rd_en,
  input  logic [2:0]  rd_addr,
  output logic [31:0] rd_data
);

  logic [31:0] cnt [6];
  logic [5:0]  ev;

  assign ev = {ev_pixel, ev_stall, ev_out_beat, ev_wt_beat, ev_in_beat, busy};

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int i = 0; i < 6; i++) cnt[i] <= '0;
    end else begin
      for (int i = 0; i < 6; i++) if (ev[i]) cnt[i] <= cnt[i] + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_data <= '0;
    end else if (rd_en) begin
      unique case (rd_addr)
        3'd6:    rd_data <= ID;
        3'd7:    rd_data <= {31'd0, busy};
        default: rd_data <= cnt[rd_addr];
      endcase
    end
  end

endmodule

// fan_in_p2s: parallel-to-serial converter at the end of the network layer.
//
// All PEs finish a pixel in the same cycle and hold their results in their
// activation buffers. A start pulse (the PEs' output-valid) makes this unit
// stream the first `count` buffers out one per accepted cycle, PE 0 first,
// through an N-to-1 multiplexer. out_last marks the last PE of the pixel and
// done pulses when it has been taken.
//
// Interface: start must only come while busy is low (the layer controller
// guarantees it). Output is valid/ready; out_data follows idx combinationally.
// count is sampled at start and must be 1..N. Synchronous active-low reset.
module fan_in_p2s #(
  parameter int unsigned N  = 2048,
  parameter int unsigned W  = 32,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] count,
  input  logic [W-1:0]  act [N],
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_data,
  output logic          out_last,
  output logic          busy,
  output logic          done
);

  logic [IW-1:0] idx;
  logic [IW-1:0] last_idx;

  assign out_valid = busy;
  assign out_data  = act[idx];
  assign out_last  = (idx == last_idx);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      idx      <= '0;
      last_idx <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        idx      <= '0;
        last_idx <= IW'(count - 1'b1);
      end else if (busy && out_ready) begin
        if (out_last) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

  a_no_overrun : assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule

// network_layer: one convolutional layer of N_PE AddNet processing elements.
//
// Every PE computes one output channel; all of them work on the same pixel
// at the same time. The host supplies the input in window order (for each
// output pixel the J x K x S receptive-field values, i.e. im2col order), so
// one output pixel is a dot product of length G*P, where G = cfg_groups.
//
// Operation after cfg_start (configuration is sampled then):
//  1. LOAD: the weight index stream is gathered P indices at a time into
//     buffer words and written as one contiguous burst per PE: PE 0 words
//     0..G-1, then PE 1, ... up to PE cfg_neurons-1.
//  2. RUN: the feature stream is gathered P features at a time
//     (serial-to-parallel) and each group is broadcast, with its buffer
//     address, to all PEs. After G groups the PEs raise output-valid and the
//     fan-in streams their ReLU results, PE 0 first, through the scale unit
//     onto the output stream. The next pixel is accumulated meanwhile; only
//     its final group is held back (a stall) until the fan-in of the
//     previous pixel is complete, so results are never overwritten.
//  3. After cfg_pixels pixels the last output word carries out_last and the
//     layer returns to IDLE.
//
// The PE array, the serial-to-parallel and parallel-to-serial converters
// and the scale after fan-in follow the architecture. The weight loading
// order, the stall rule, the registered broadcast (one cycle) and the event
// outputs are this design's choices. Features are 8-bit unsigned activations
// and are zero-extended to the multipliers' W_IN bits.
module network_layer
  import addnet_pkg::*;
#(
  parameter int unsigned N_PE       = 2048,
  parameter int unsigned P          = 1,
  parameter int unsigned ARCH       = 2,
  parameter int unsigned W_IN       = 9,
  parameter int unsigned FEAT_W     = 8,
  parameter int unsigned ACC_W      = 32,
  parameter int unsigned WBUF_DEPTH = 4096,
  parameter bit          PIPELINE   = 1'b0,
  localparam int unsigned SW        = sel_w(ARCH),
  localparam int unsigned AW        = $clog2(WBUF_DEPTH),
  localparam int unsigned NW        = $clog2(N_PE + 1),
  localparam int unsigned PEW       = (N_PE > 1) ? $clog2(N_PE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic               cfg_start,
  input  logic [AW:0]        cfg_groups,
  input  logic [NW-1:0]      cfg_neurons,
  input  logic [23:0]        cfg_pixels,
  input  logic [7:0]         cfg_scale,
  input  logic [5:0]         cfg_shift,
  // weight index stream
  input  logic               wt_valid,
  output logic               wt_ready,
  input  logic [SW-1:0]      wt_data,
  // feature stream
  input  logic               feat_valid,
  output logic               feat_ready,
  input  logic [FEAT_W-1:0]  feat_data,
  // output stream
  output logic               out_valid,
  input  logic               out_ready,
  output logic [FEAT_W-1:0]  out_data,
  output logic               out_last,
  // status and events
  output logic               busy,
  output logic               ev_stall,
  output logic               ev_pixel
);

  typedef enum logic [1:0] {IDLE, LOAD, RUN, FINISH} state_e;
  state_e state;

  // configuration registers
  logic [AW:0]   groups;
  logic [NW-1:0] neurons;
  logic [23:0]   pixels;
  logic [7:0]    scale;
  logic [5:0]    shift;

  // serial-to-parallel converters
  logic                   wgrp_valid, wgrp_ready;
  logic [P-1:0][SW-1:0]   wgrp_data;
  logic                   fgrp_valid, fgrp_ready;
  logic [P-1:0][FEAT_W-1:0] fgrp_data;
  logic                   wgrp_last_unused, fgrp_last_unused;

  stream_upsizer #(.W(SW), .N(P)) u_wt_s2p (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start), .in_valid(wt_valid), .in_ready(wt_ready), .in_data(wt_data),
    .in_last(1'b0), .out_valid(wgrp_valid), .out_ready(wgrp_ready), .out_data(wgrp_data),
    .out_last(wgrp_last_unused));

  stream_upsizer #(.W(FEAT_W), .N(P)) u_feat_s2p (
    .clk(clk), .rst_n(rst_n), .clear(cfg_start), .in_valid(feat_valid), .in_ready(feat_ready), .in_data(feat_data),
    .in_last(1'b0), .out_valid(fgrp_valid), .out_ready(fgrp_ready), .out_data(fgrp_data),
    .out_last(fgrp_last_unused));

  // control
  logic [AW-1:0]  g_cnt;
  logic [PEW-1:0] pe_cnt;
  logic [23:0]    pix_in, pix_out;
  logic           lock;
  logic           last_group;
  logic           w_hs, f_hs;
  logic           p2s_done, p2s_busy;
  logic           act_valid0;

  assign last_group = (AW + 1)'(g_cnt) == groups - 1'b1;
  assign wgrp_ready = (state == LOAD);
  assign fgrp_ready = (state == RUN) && !(last_group && lock);
  assign w_hs       = wgrp_valid && wgrp_ready;
  assign f_hs       = fgrp_valid && fgrp_ready;
  assign busy       = (state != IDLE);

  // registered broadcast to the PE array
  logic                     bc_wr_en;
  logic [PEW-1:0]           bc_wr_pe;
  logic [AW-1:0]            bc_wr_addr;
  logic [P-1:0][SW-1:0]     bc_wr_data;
  logic                     bc_valid, bc_first, bc_last;
  logic [AW-1:0]            bc_addr;
  logic [P-1:0][W_IN-1:0]   bc_x;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= IDLE;
      groups     <= '0;
      neurons    <= '0;
      pixels     <= '0;
      scale      <= '0;
      shift      <= '0;
      g_cnt      <= '0;
      pe_cnt     <= '0;
      pix_in     <= '0;
      pix_out    <= '0;
      lock       <= 1'b0;
      ev_stall   <= 1'b0;
      ev_pixel   <= 1'b0;
      bc_wr_en   <= 1'b0;
      bc_wr_pe   <= '0;
      bc_wr_addr <= '0;
      bc_wr_data <= '0;
      bc_valid   <= 1'b0;
      bc_first   <= 1'b0;
      bc_last    <= 1'b0;
      bc_addr    <= '0;
      bc_x       <= '0;
    end else begin
      bc_wr_en <= w_hs;
      bc_valid <= f_hs;
      ev_stall <= (state == RUN) && fgrp_valid && !fgrp_ready;
      ev_pixel <= p2s_done;
      if (w_hs) begin
        bc_wr_pe   <= pe_cnt;
        bc_wr_addr <= g_cnt;
        bc_wr_data <= wgrp_data;
      end
      if (f_hs) begin
        bc_addr  <= g_cnt;
        bc_first <= (g_cnt == '0);
        bc_last  <= last_group;
        for (int i = 0; i < P; i++) bc_x[i] <= W_IN'(fgrp_data[i]);
      end
      if (p2s_done) begin
        lock    <= 1'b0;
        pix_out <= pix_out + 1'b1;
      end

      unique case (state)
        IDLE: ;
        LOAD: if (w_hs) begin
          if (last_group) begin
            g_cnt <= '0;
            if (NW'(pe_cnt) == neurons - 1'b1) state <= RUN;
            else                                pe_cnt <= pe_cnt + 1'b1;
          end else begin
            g_cnt <= g_cnt + 1'b1;
          end
        end
        RUN: if (f_hs) begin
          if (last_group) begin
            g_cnt  <= '0;
            lock   <= 1'b1;
            pix_in <= pix_in + 1'b1;
            if (pix_in == pixels - 1'b1) state <= FINISH;
          end else begin
            g_cnt <= g_cnt + 1'b1;
          end
        end
        FINISH: if (out_valid && out_ready && out_last) state <= IDLE;
        default: state <= IDLE;
      endcase

      if (cfg_start) begin
        state   <= LOAD;
        groups  <= cfg_groups;
        neurons <= cfg_neurons;
        pixels  <= cfg_pixels;
        scale   <= cfg_scale;
        shift   <= cfg_shift;
        g_cnt   <= '0;
        pe_cnt  <= '0;
        pix_in  <= '0;
        pix_out <= '0;
        lock    <= 1'b0;
      end
    end
  end

  // PE array
  logic [ACC_W-1:0] act [N_PE];
  logic [N_PE-1:0]  act_valid;

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    addnet_pe #(
      .ARCH(ARCH), .P(P), .W_IN(W_IN), .ACC_W(ACC_W),
      .WBUF_DEPTH(WBUF_DEPTH), .PIPELINE(PIPELINE)
    ) u_pe (
      .clk(clk), .rst_n(rst_n),
      .wr_en(bc_wr_en && (bc_wr_pe == PEW'(i))), .wr_addr(bc_wr_addr), .wr_data(bc_wr_data),
      .in_valid(bc_valid), .in_first(bc_first), .in_last(bc_last), .in_addr(bc_addr), .in_x(bc_x),
      .act_valid(act_valid[i]), .act(act[i])
    );
  end

  // The PEs run in lockstep, so their output-valid flags are identical.
  assign act_valid0 = act_valid[0];

  // fan-in and scale
  logic             ser_valid, ser_ready, ser_last;
  logic [ACC_W-1:0] ser_data;
  logic             final_pixel;

  fan_in_p2s #(.N(N_PE), .W(ACC_W)) u_p2s (
    .clk(clk), .rst_n(rst_n), .start(act_valid0), .count(neurons), .act(act),
    .out_valid(ser_valid), .out_ready(ser_ready), .out_data(ser_data), .out_last(ser_last),
    .busy(p2s_busy), .done(p2s_done));

  assign final_pixel = (pix_out == pixels - 1'b1);

  scale_unit #(.IN_W(ACC_W), .OUT_W(FEAT_W)) u_scale (
    .clk(clk), .rst_n(rst_n), .in_valid(ser_valid), .in_ready(ser_ready), .in_data(ser_data),
    .in_last(ser_last && final_pixel), .lambda(scale), .shift(shift),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data), .out_last(out_last));

  a_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
      act_valid == '0 || act_valid == '1);
  a_start_idle : assert property (@(posedge clk) disable iff (!rst_n) act_valid0 |-> !p2s_busy);

endmodule

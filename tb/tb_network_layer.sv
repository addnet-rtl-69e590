// tb_network_layer: end-to-end check of one network layer with 6 PEs of
// P = 2 2-Add multipliers and 16-word weight buffers.
//
// Two layer runs with different shapes (6 neurons x 3 groups x 5 pixels,
// then 4 neurons x 7 groups x 4 pixels). For each, random weight indices and
// 8-bit features are streamed in with random valid, the output is taken
// with random ready, and every output byte is compared with the reference
// model: requant(ReLU(sum coef(w) * f), lambda, shift). Also checked: out_last
// only on the very last byte, one pixel event per pixel, busy dropping at the
// end. Counted and required at least once: a stall of the feature stream
// while the previous pixel is fanned out, a ReLU zero, a clipped output and
// a reconfiguration between two layers.
module tb_network_layer;
  import tb_coef_pkg::*;
  localparam int N_PE = 6, P = 2, ARCH = 2, DEPTH = 16, SW = 4;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic cfg_start;
  logic [4:0] cfg_groups;
  logic [2:0] cfg_neurons;
  logic [23:0] cfg_pixels;
  logic [7:0] cfg_scale;
  logic [5:0] cfg_shift;
  logic wt_valid, wt_ready, feat_valid, feat_ready, out_valid, out_ready, out_last;
  logic [SW-1:0] wt_data;
  logic [7:0] feat_data, out_data;
  logic busy, ev_stall, ev_pixel;
  int checks = 0, failures = 0;
  int stalls = 0, pixels_ev = 0, zeros = 0, clips = 0, layers = 0;
  int wts[$], feats[$], exp_out[$];
  int got = 0, lasts = 0;

  network_layer #(.N_PE(N_PE), .P(P), .ARCH(ARCH), .W_IN(9), .FEAT_W(8), .ACC_W(32), .WBUF_DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ev_stall) stalls++;
    if (ev_pixel) pixels_ev++;
    if (out_valid && out_ready) begin
      int e;
      e = exp_out.pop_front();
      check(int'(out_data) == e, $sformatf("output %0d = %0d, expected %0d", got, out_data, e));
      check(out_last == (exp_out.size() == 0), "out_last placement");
      if (out_last) lasts++;
      got++;
    end
  end

  task automatic run_layer(int neurons, int groups, int pixels);
    longint sums[$];
    longint mx;
    int lam, sh, nw, nf;
    wts.delete();
    feats.delete();
    for (int k = 0; k < neurons * groups * P; k++) wts.push_back(int'($urandom_range(15)));
    for (int k = 0; k < pixels * groups * P; k++) feats.push_back(int'($urandom_range(255)));
    mx = 1;
    for (int px = 0; px < pixels; px++)
      for (int n = 0; n < neurons; n++) begin
        longint s;
        s = 0;
        for (int k = 0; k < groups * P; k++)
          s += longint'(coef(ARCH, wts[n * groups * P + k])) * feats[px * groups * P + k];
        sums.push_back(s);
        if (s > mx) mx = s;
      end
    lam = int'($urandom_range(255, 100));
    sh = 0;
    while (((mx * lam) >> sh) > 400) sh++;
    foreach (sums[k]) begin
      int e;
      e = requant(sums[k], lam, sh);
      if (e == 0) zeros++;
      if (e == 255) clips++;
      exp_out.push_back(e);
    end
    @(negedge clk);
    cfg_start = 1'b1;
    cfg_groups = 5'(groups);
    cfg_neurons = 3'(neurons);
    cfg_pixels = 24'(pixels);
    cfg_scale = 8'(lam);
    cfg_shift = 6'(sh);
    @(negedge clk);
    cfg_start = 1'b0;
    nw = 0;
    nf = 0;
    fork
      while (nw < wts.size()) begin
        wt_valid = $urandom_range(3) != 0;
        wt_data = SW'(wts[nw]);
        @(posedge clk);
        if (wt_valid && wt_ready) nw++;
        @(negedge clk);
      end
      while (nf < feats.size()) begin
        feat_valid = $urandom_range(3) != 0;
        feat_data = 8'(feats[nf]);
        @(posedge clk);
        if (feat_valid && feat_ready) nf++;
        @(negedge clk);
      end
    join
    wt_valid = 1'b0;
    feat_valid = 1'b0;
    wait (exp_out.size() == 0);
    repeat (3) @(negedge clk);
    check(!busy, "busy after the layer");
    layers++;
  endtask

  always @(negedge clk) out_ready = $urandom_range(2) != 0;

  initial begin
    cfg_start = 0; cfg_groups = 0; cfg_neurons = 0; cfg_pixels = 0; cfg_scale = 0; cfg_shift = 0;
    wt_valid = 0; wt_data = 0; feat_valid = 0; feat_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_layer(6, 3, 5);
    check(pixels_ev == 5, $sformatf("pixel events %0d", pixels_ev));
    run_layer(4, 7, 4);
    check(pixels_ev == 9, $sformatf("pixel events %0d", pixels_ev));
    check(lasts == 2, "two out_last");
    check(stalls > 0, "no stall happened");
    check(zeros > 0, "no ReLU zero");
    check(clips > 0, "no clipped output");
    check(layers == 2, "two layers");
    $display("stalls=%0d zeros=%0d clips=%0d", stalls, zeros, clips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

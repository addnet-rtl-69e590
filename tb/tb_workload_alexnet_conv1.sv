// tb_workload_alexnet_conv1: the first AlexNet convolution layer on the
// loopback accelerator built with 4-Add multipliers (8-bit weight indices,
// 207 coefficients), since the first layer needs the finer coefficient set.
//
// The accelerator has 96 PEs (one per conv1 output channel) and runs the
// reduced-kernel conv1 of the AlexNet variant: 7x7x3 = 147 weights per
// channel, stride 2, over a 224x224x3 input. The input is a random 8-bit
// image; the testbench cuts the receptive-field windows of two output
// pixels out of it in (row, column, channel) order with zero padding of 3
// (the padding is this testbench's choice) and streams them in. Weight
// indices are random 8-bit values.
// Every output byte is compared with requant(ReLU(sum coef(w) * x)), and the
// performance registers with the beat and pixel counts.
module tb_workload_alexnet_conv1;
  import tb_coef_pkg::*;
  localparam int N_PE = 96, P = 1, ARCH = 4, WBUF = 4096;
  localparam int SW = 2 * ARCH, IPB = 256 / SW, FPB = 30;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic s_axis_in_tvalid, s_axis_in_tready, s_axis_wt_tvalid, s_axis_wt_tready;
  logic [255:0] s_axis_in_tdata, s_axis_wt_tdata, m_axis_out_tdata;
  logic m_axis_out_tvalid, m_axis_out_tready, m_axis_out_tlast;
  logic cfg_start;
  logic [$clog2(WBUF):0] cfg_groups;
  logic [$clog2(N_PE + 1)-1:0] cfg_neurons;
  logic [23:0] cfg_pixels;
  logic [7:0] cfg_scale;
  logic [5:0] cfg_shift;
  logic reg_rd_en;
  logic [2:0] reg_addr;
  logic [31:0] reg_rd_data;
  logic busy;
  int checks = 0, failures = 0;
  int in_bp = 0, out_bp = 0, partial_beats = 0, zeros = 0, clips = 0, layers = 0, stalls = 0;
  int wts[$], feats[$], exp_out[$], got_out[$];
  logic [255:0] wbeats[$], fbeats[$];
  int out_beats = 0, tlasts = 0;
  int in_gap = 1;

  addnet_accel_top #(.N_PE(N_PE), .ARCH(ARCH)) dut (.*);

  always #2 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (s_axis_in_tvalid && !s_axis_in_tready) in_bp++;
    if (m_axis_out_tvalid && !m_axis_out_tready) out_bp++;
    if (m_axis_out_tvalid && m_axis_out_tready) begin
      int nb;
      out_beats++;
      nb = (exp_out.size() < 32) ? exp_out.size() : 32;
      for (int k = 0; k < 32; k++) begin
        if (k < nb) begin
          int e;
          e = exp_out.pop_front();
          got_out.push_back(int'(m_axis_out_tdata[8*k +: 8]));
          check(int'(m_axis_out_tdata[8*k +: 8]) == e,
                $sformatf("output byte %0d = %0d, expected %0d", got_out.size() - 1, m_axis_out_tdata[8*k +: 8], e));
        end else begin
          check(m_axis_out_tdata[8*k +: 8] == 8'd0, "fill byte not zero");
        end
      end
      check(m_axis_out_tlast == (exp_out.size() == 0), "tlast placement");
      if (m_axis_out_tlast) begin
        tlasts++;
        if (nb < 32) partial_beats++;
      end
    end
  end

  always @(negedge clk) m_axis_out_tready = $urandom_range(3) != 0;

  task automatic read_reg(int a, output int v);
    @(negedge clk);
    reg_rd_en = 1'b1;
    reg_addr = 3'(a);
    @(negedge clk);
    reg_rd_en = 1'b0;
    v = int'(reg_rd_data);
  endtask

  // inputs: feature list of one layer; weights drawn here
  task automatic run_layer(int neurons, int groups, int pixels, int inputs[$]);
    longint sums[$];
    longint mx;
    int lam, sh, nwb, nfb, v;
    wts.delete();
    wbeats.delete();
    fbeats.delete();
    for (int k = 0; k < neurons * groups * P; k++) wts.push_back(int'($urandom_range((1 << SW) - 1)));
    mx = 1;
    for (int px = 0; px < pixels; px++)
      for (int n = 0; n < neurons; n++) begin
        longint s;
        s = 0;
        for (int k = 0; k < groups * P; k++)
          s += longint'(coef(ARCH, wts[n * groups * P + k])) * inputs[px * groups * P + k];
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
    // pack DMA beats
    for (int k = 0; k < wts.size(); k += IPB) begin
      logic [255:0] b;
      b = '0;
      for (int j = 0; j < IPB && k + j < wts.size(); j++) b[SW*j +: SW] = SW'(wts[k + j]);
      wbeats.push_back(b);
    end
    for (int k = 0; k < inputs.size(); k += FPB) begin
      logic [255:0] b;
      b = '0;
      for (int j = 0; j < FPB && k + j < inputs.size(); j++) b[24*(j/3) + 8*(j%3) +: 8] = 8'(inputs[k + j]);
      fbeats.push_back(b);
    end
    @(negedge clk);
    cfg_start = 1'b1;
    cfg_groups = ($clog2(WBUF) + 1)'(groups);
    cfg_neurons = ($clog2(N_PE + 1))'(neurons);
    cfg_pixels = 24'(pixels);
    cfg_scale = 8'(lam);
    cfg_shift = 6'(sh);
    @(negedge clk);
    cfg_start = 1'b0;
    nwb = 0;
    nfb = 0;
    fork
      while (nwb < wbeats.size()) begin
        s_axis_wt_tvalid = $urandom_range(3) != 0;
        s_axis_wt_tdata = wbeats[nwb];
        @(posedge clk);
        if (s_axis_wt_tvalid && s_axis_wt_tready) nwb++;
        @(negedge clk);
        if (nwb == wbeats.size()) s_axis_wt_tvalid = 1'b0;
      end
      while (nfb < fbeats.size()) begin
        s_axis_in_tvalid = $urandom_range(3) >= in_gap;
        s_axis_in_tdata = fbeats[nfb];
        @(posedge clk);
        if (s_axis_in_tvalid && s_axis_in_tready) nfb++;
        @(negedge clk);
        if (nfb == fbeats.size()) s_axis_in_tvalid = 1'b0;
      end
    join
    s_axis_wt_tvalid = 1'b0;
    s_axis_in_tvalid = 1'b0;
    wait (exp_out.size() == 0);
    repeat (5) @(negedge clk);
    check(!busy, "busy after the layer");
    read_reg(1, v);
    check(v == fbeats.size(), $sformatf("input beat counter %0d", v));
    read_reg(2, v);
    check(v == wbeats.size(), $sformatf("weight beat counter %0d", v));
    read_reg(3, v);
    check(v == (neurons * pixels + 31) / 32, $sformatf("output beat counter %0d", v));
    read_reg(5, v);
    check(v == pixels, $sformatf("pixel counter %0d", v));
    read_reg(4, v);
    stalls += v;
    layers++;
  endtask

  // receptive-field windows of output pixels (oy, ox) of a k x k convolution
  // with stride st over an h x h x c map stored row-major with channel last
  task automatic windows(int h, int c, int k, int st, int pad, int oys[$], int oxs[$],
                         int img[$], output int win[$]);
    win.delete();
    foreach (oys[p]) begin
      for (int ky = 0; ky < k; ky++)
        for (int kx = 0; kx < k; kx++)
          for (int ch = 0; ch < c; ch++) begin
            int iy, ix;
            iy = st * oys[p] + ky - pad;
            ix = st * oxs[p] + kx - pad;
            if (iy < 0 || ix < 0 || iy >= h || ix >= h) win.push_back(0);
            else win.push_back(img[(iy * h + ix) * c + ch]);
          end
    end
  endtask

  task automatic conv_layer(string name, int neurons, int h, int c, int k, int st, int pad);
    int img[$];
    int win[$];
    int oys[$];
    int oxs[$];
    int chk0;
    img.delete();
    for (int q = 0; q < h * h * c; q++) img.push_back(int'($urandom_range(255)));
    oys = '{0, (h - 1) / (2 * st)};
    oxs = '{1, (h - 1) / st};
    windows(h, c, k, st, pad, oys, oxs, img, win);
    chk0 = checks;
    run_layer(neurons, k * k * c, 2, win);
    $display("%s: %0d channels x %0d weights, 2 pixels, %0d checks", name, neurons, k * k * c,
             checks - chk0);
    got_out.delete();
  endtask

  initial begin
    s_axis_in_tvalid = 0; s_axis_in_tdata = 0; s_axis_wt_tvalid = 0; s_axis_wt_tdata = 0;
    cfg_start = 0; cfg_groups = 0; cfg_neurons = 0; cfg_pixels = 0; cfg_scale = 0; cfg_shift = 0;
    reg_rd_en = 0; reg_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    in_gap = 0;
    conv_layer("conv1", 96, 224, 3, 7, 2, 3);
    check(layers == 1, "one layer");
    check(tlasts == layers, "one tlast per layer");
    $display("layers=%0d stalls=%0d in_bp=%0d out_bp=%0d zeros=%0d clips=%0d",
             layers, stalls, in_bp, out_bp, zeros, clips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

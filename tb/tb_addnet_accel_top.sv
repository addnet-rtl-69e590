// tb_addnet_accel_top: end-to-end test of the accelerator at reduced
// size (40 PEs of P = 2 2-Add multipliers, 64-word weight buffers, 16-word
// stream buffers), running two layers in loopback.
//
// The testbench plays the host and the DMA engines. For each layer it
// draws random weight indices and 8-bit inputs, packs them into 256-bit DMA
// beats (indices 256/b per beat, 3 features per 24-bit word and 10 words per
// beat, unused bits zero), pulses cfg_start and streams both with random
// valid while taking the output beats with random ready. Each output byte
// (32 per beat) is compared with the reference model
// requant(ReLU(sum coef(w) * f), lambda, shift); lambda is random and shift
// is chosen so that some outputs clip. tlast must mark the final beat. The
// performance registers (beats, pixels, stalls) are read back and compared.
// Mechanisms counted, each required at least once: feature stall while
// the previous pixel is fanned out, input back-pressure from a full
// buffer, output back-pressure, a partial last output beat, ReLU zeros,
// clipped outputs, and (where two layers run) reconfiguration with the
// output of the first layer looped back as the input of the second.
module tb_addnet_accel_top;
  import tb_coef_pkg::*;
  localparam int N_PE = 40, P = 2, ARCH = 2, WBUF = 64;
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

  addnet_accel_top #(.N_PE(N_PE), .P(P), .ARCH(ARCH), .WBUF_DEPTH(WBUF), .BUF_DEPTH(16)) dut (.*);

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
    for (int k = 0; k < neurons * groups * P; k++) wts.push_back(int'($urandom_range(15)));
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

  initial begin
    int x0[$];
    int x1[$];
    s_axis_in_tvalid = 0; s_axis_in_tdata = 0; s_axis_wt_tvalid = 0; s_axis_wt_tdata = 0;
    cfg_start = 0; cfg_groups = 0; cfg_neurons = 0; cfg_pixels = 0; cfg_scale = 0; cfg_shift = 0;
    reg_rd_en = 0; reg_addr = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // layer 1: 40 neurons, 15 groups of 2, 6 pixels
    for (int k = 0; k < 6 * 15 * P; k++) x0.push_back(int'($urandom_range(255)));
    in_gap = 0;
    run_layer(40, 15, 6, x0);
    // layer 2: the 6 x 40 outputs of layer 1 come back as input (1x1 convolution)
    x1 = got_out;
    got_out.delete();
    in_gap = 1;
    run_layer(37, 20, 6, x1);
    check(layers == 2, "two layers");
    check(stalls > 0, "no feature stall");
    check(in_bp > 0, "no input back-pressure");
    check(out_bp > 0, "no output back-pressure");
    check(partial_beats > 0, "no partial output beat");
    check(zeros > 0, "no ReLU zero");
    check(clips > 0, "no clipped output");
    check(tlasts == layers, "one tlast per layer");
    $display("layers=%0d stalls=%0d in_bp=%0d out_bp=%0d partial=%0d zeros=%0d clips=%0d outputs=%0d",
             layers, stalls, in_bp, out_bp, partial_beats, zeros, clips, got_out.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

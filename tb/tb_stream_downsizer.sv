// tb_stream_downsizer: two instances, 256 -> 24 bits (10 words per beat,
// top 16 bits dropped) and 24 -> 8 bits (3 words per beat). Random beats
// are offered with random valid; the output is taken with random ready.
// Every output word must be the next slice of the beats sent, least
// significant first. With ready held high the 24->8 instance must deliver
// one word per cycle (no bubble between beats).
module tb_stream_downsizer;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic a_iv, a_ir, a_ov, a_or;
  logic [255:0] a_id;
  logic [23:0] a_od;
  logic b_iv, b_ir, b_ov, b_or;
  logic [23:0] b_id;
  logic [7:0] b_od;
  int checks = 0, failures = 0;
  logic [23:0] a_exp[$];
  logic [7:0] b_exp[$];
  int a_sent = 0, b_sent = 0, b_run = 0, b_full_rate = 0;

  stream_downsizer #(.IN_W(256), .OUT_W(24)) dut_a (.clk(clk), .rst_n(rst_n), .clear(1'b0),
    .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id), .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));
  stream_downsizer #(.IN_W(24), .OUT_W(8)) dut_b (.clk(clk), .rst_n(rst_n), .clear(1'b0),
    .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id), .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (a_iv && a_ir) begin
      for (int k = 0; k < 10; k++) a_exp.push_back(a_id[24*k +: 24]);
      a_sent++;
    end
    if (b_iv && b_ir) begin
      for (int k = 0; k < 3; k++) b_exp.push_back(b_id[8*k +: 8]);
      b_sent++;
    end
    if (a_ov && a_or) check(a_od == a_exp.pop_front(), "256->24 word");
    if (b_ov && b_or) check(b_od == b_exp.pop_front(), "24->8 word");
    // full-rate phase: every cycle must deliver a word
    if (b_sent >= 400 && b_sent < 500) begin
      b_full_rate++;
      if (b_full_rate > 4) check(b_ov, "24->8 bubble at full rate");
    end
  end

  always @(negedge clk) begin
    if (!(a_iv && !a_ir)) begin
      a_iv = rst_n && a_sent < 200 && $urandom_range(1);
      for (int k = 0; k < 8; k++) a_id[32*k +: 32] = $urandom;
    end
    a_or = $urandom_range(3) != 0;
    if (b_sent >= 400 && b_sent < 500) begin
      b_iv = 1'b1;
      b_or = 1'b1;
      if (b_ir || !b_iv) b_id = 24'($urandom);
    end else begin
      if (!(b_iv && !b_ir)) begin
        b_iv = rst_n && b_sent < 800 && $urandom_range(1);
        b_id = 24'($urandom);
      end
      b_or = $urandom_range(3) != 0;
    end
  end

  initial begin
    a_iv = 0; b_iv = 0; a_id = 0; b_id = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (a_sent == 200 && b_sent == 800);
    repeat (40) @(posedge clk);
    check(a_exp.size() == 0 && b_exp.size() == 0, "words left over");
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

// tb_fan_in_p2s: 10 activation buffers are loaded with random values and a
// start pulse is given; the unit must stream buffers 0..count-1 in order
// under random ready, mark the last with out_last, pulse done once after
// it, and stay idle otherwise. Repeated with different counts, including 1
// and the full 10.
module tb_fan_in_p2s;
  localparam int N = 10;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start, out_valid, out_ready, out_last, busy, done;
  logic [3:0] count;
  logic [15:0] act [N];
  logic [15:0] out_data;
  int checks = 0, failures = 0, idx = 0, dones = 0;

  fan_in_p2s #(.N(N), .W(16)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (done) dones++;
    if (out_valid && out_ready) begin
      check(out_data == act[idx], $sformatf("PE %0d value", idx));
      check(out_last == (idx == int'(count) - 1), "out_last");
      idx++;
    end
  end

  initial begin
    int counts[5] = '{10, 1, 4, 10, 7};
    start = 0; count = 0; out_ready = 0;
    foreach (act[i]) act[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (counts[c]) begin
      @(negedge clk);
      foreach (act[i]) act[i] = 16'($urandom);
      count = 4'(counts[c]);
      idx = 0;
      dones = 0;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      check(busy, "busy after start");
      while (busy) begin
        out_ready = $urandom_range(1);
        @(negedge clk);
      end
      out_ready = 1'b0;
      @(negedge clk);
      check(idx == counts[c], $sformatf("%0d of %0d values", idx, counts[c]));
      check(dones == 1, "one done pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

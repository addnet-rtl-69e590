// tb_stream_upsizer: gathers 8-bit words into 4-lane words with random
// valid and ready. Every 7th word is marked last, which must close a
// partial group with zero-filled upper lanes and out_last set. The expected
// groups are formed in the testbench from the words sent.
module tb_stream_upsizer;
  logic clk = 1'b0;
  logic clear = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [7:0] in_data;
  logic [3:0][7:0] out_data;
  int checks = 0, failures = 0, sent = 0, partial = 0;
  logic [32:0] exp_q[$];
  logic [3:0][7:0] cur;
  int lane = 0;

  stream_upsizer #(.W(8), .N(4)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      cur[lane] = in_data;
      lane++;
      if (lane == 4 || in_last) begin
        if (lane < 4) partial++;
        exp_q.push_back({in_last, cur});
        cur = '0;
        lane = 0;
      end
      sent++;
    end
    if (out_valid && out_ready) begin
      logic [32:0] e;
      e = exp_q.pop_front();
      check({out_last, out_data} == e, $sformatf("group %h exp %h", {out_last, out_data}, e));
    end
  end

  always @(negedge clk) begin
    if (!(in_valid && !in_ready)) begin
      in_valid = rst_n && sent < 1000 && $urandom_range(3) != 0;
      in_data = 8'($urandom);
      in_last = (sent % 7) == 6;
    end
    out_ready = $urandom_range(2) != 0;
  end

  initial begin
    in_valid = 0; in_data = 0; in_last = 0; cur = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (sent == 1000);
    repeat (20) @(posedge clk);
    check(exp_q.size() == 0, "groups missing");
    check(partial > 0, "no partial group");
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

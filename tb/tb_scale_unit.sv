// tb_scale_unit: random non-negative sums, scales and shifts (including
// shift 0 and values that clip at 255) go through the unit under random
// ready; each output must equal the reference requantization
// min(255, floor(v*lambda / 2^shift + 1/2)) and keep its last flag.
module tb_scale_unit;
  import tb_coef_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic [31:0] in_data;
  logic [7:0] lambda, out_data;
  logic [5:0] shift;
  int checks = 0, failures = 0, sent = 0, clipped = 0;
  int exp_q[$];

  scale_unit #(.IN_W(32), .OUT_W(8)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      int e;
      e = requant(longint'(in_data), int'(lambda), int'(shift));
      if (e == 255) clipped++;
      exp_q.push_back({e, 1'b0} | int'(in_last));
      sent++;
    end
    if (out_valid && out_ready) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if ({out_data, out_last} != 9'(e)) begin
        failures++;
        if (failures < 10) $display("FAIL out %0d exp %0d", out_data, e >> 1);
      end
    end
  end

  always @(negedge clk) begin
    if (!(in_valid && !in_ready)) begin
      in_valid = rst_n && sent < 3000 && $urandom_range(3) != 0;
      in_data = ($urandom_range(1) != 0) ? 32'($urandom_range(5000)) : 32'($urandom >> $urandom_range(31));
      lambda = 8'($urandom);
      shift = 6'($urandom_range(20));
      in_last = $urandom_range(1);
    end
    out_ready = $urandom_range(3) != 0;
  end

  initial begin
    in_valid = 0; in_data = 0; lambda = 0; shift = 0; in_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (sent == 3000);
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || clipped == 0) begin
      failures++;
      $display("FAIL %0d missing, %0d clipped", exp_q.size(), clipped);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

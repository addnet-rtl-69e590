// tb_addnet_mult: checks that the wrapper builds the multiplier named by
// ARCH. Instances for ARCH = 2, 3, 4 (combinational) and ARCH = 4 pipelined
// get random activations and indices; products are compared with the
// reference coefficient model, the pipelined one 3 cycles later.
module tb_addnet_mult;
  import tb_coef_pkg::*;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [8:0] x;
  logic [7:0] s;
  logic signed [16:0] y2;
  logic signed [18:0] y3;
  logic signed [20:0] y4, y4p;
  int checks = 0, failures = 0;
  int q[$];

  addnet_mult #(.ARCH(2)) d2 (.clk(clk), .rst_n(rst_n), .x(x), .s(s[3:0]), .y(y2));
  addnet_mult #(.ARCH(3)) d3 (.clk(clk), .rst_n(rst_n), .x(x), .s(s[5:0]), .y(y3));
  addnet_mult #(.ARCH(4)) d4 (.clk(clk), .rst_n(rst_n), .x(x), .s(s), .y(y4));
  addnet_mult #(.ARCH(4), .PIPELINE(1'b1)) d4p (.clk(clk), .rst_n(rst_n), .x(x), .s(s), .y(y4p));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    x = '0;
    s = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 1003; n++) begin
      @(negedge clk);
      if (n >= 3) begin
        int e;
        e = q.pop_front();
        check(int'(y4p) == e, $sformatf("pipelined 4-Add y=%0d exp=%0d", y4p, e));
      end
      x = 9'($urandom);
      s = 8'($urandom);
      #1;
      check(int'(y2) == coef(2, int'(s[3:0])) * int'(x), "2-Add");
      check(int'(y3) == coef(3, int'(s[5:0])) * int'(x), "3-Add");
      check(int'(y4) == coef(4, int'(s)) * int'(x), "4-Add");
      q.push_back(coef(4, int'(s)) * int'(x));
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

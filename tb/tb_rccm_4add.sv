// tb_rccm_4add: self-checking testbench of the 4add multiplier.
//
// 1. Coefficient set: with x = 1 every select value is applied and the
//    products are collected; the distinct magnitudes must be exactly the
//    published optimized set below and the number of distinct signed
//    coefficients must be 207.
// 2. Products: for every select value and a sweep of activations the
//    combinational instance must give coef(s) * x, where coef() is an
//    arithmetic model of the configuration table written independently of
//    the RTL structure.
// 3. Pipelined instance: the same stream of (x, s) must come out 3 cycles
//    later, one result per cycle.
module tb_rccm_4add;
  localparam int W_IN = 9;
  localparam int PW   = W_IN + 12;
  localparam int SW   = 8;
  localparam int LAT  = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic signed [W_IN-1:0] x;
  logic [SW-1:0] s;
  logic signed [PW-1:0] y_c, y_p;
  int checks = 0, failures = 0;

  rccm_4add #(.W_IN(W_IN), .PIPELINE(1'b0)) dut_c (.clk(clk), .rst_n(rst_n), .x(x), .s(s), .y(y_c));
  rccm_4add #(.W_IN(W_IN), .PIPELINE(1'b1)) dut_p (.clk(clk), .rst_n(rst_n), .x(x), .s(s), .y(y_p));

  always #5 clk = ~clk;

  function automatic int coef(int sel);
    int a1, a2, a3;
    int t1[4] = '{2, 3, 9, -7};   // {1,2,8,-8} + 1
    int t2[4] = '{3, 4, 10, 0};   // {1,2,8,-2} + 2
    a1 = t1[sel & 3];
    a2 = t2[(sel >> 2) & 3];
    case ((sel >> 4) & 3)
      0: a3 = a1 + 8 * a2;
      1: a3 = 2 * a1 + 8 * a2;
      2: a3 = 8 * a1 + 8 * a2;
      default: a3 = -a1 + 8 * a2;
    endcase
    case ((sel >> 6) & 3)
      0: return -a3 + 2;
      1: return -8 * a3 + 2;
      2: return a3 - 2;
      default: return 8 * a3 - 2;
    endcase
  endfunction

  int table_mag[] = '{0, 1, 2, 4, 5, 7, 8, 9, 11, 13, 14, 15, 16, 18, 19, 20, 21, 22, 23, 24, 25, 26, 27, 28, 29, 30, 31, 32, 33, 34, 36, 37, 38, 39, 40, 46, 48, 54, 58, 64, 69, 70, 71, 74, 75, 76, 78, 80, 81, 82, 84, 85, 87, 94, 96, 102, 114, 118, 126, 134, 142, 150, 166, 174, 182, 190, 194, 198, 206, 214, 222, 230, 238, 246, 258, 262, 270, 278, 286, 302, 310, 318, 326, 334, 382, 398, 446, 450, 526, 566, 574, 582, 614, 622, 654, 662, 670, 686, 694, 710, 766, 782, 830, 1214};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  int exp_q[$];

  initial begin
    bit seen_mag[int];
    bit seen_val[int];
    x = '0;
    s = '0;
    // coefficient set
    for (int i = 0; i < 2 ** SW; i++) begin
      s = SW'(i);
      x = 1;
      #1;
      seen_val[int'(y_c)] = 1'b1;
      seen_mag[(y_c < 0) ? -int'(y_c) : int'(y_c)] = 1'b1;
    end
    check(seen_val.num() == 207, $sformatf("distinct coefficients %0d, expected 207", seen_val.num()));
    check(seen_mag.num() == table_mag.size(), $sformatf("distinct magnitudes %0d", seen_mag.num()));
    foreach (table_mag[k]) check(seen_mag.exists(table_mag[k]), $sformatf("magnitude %0d missing", table_mag[k]));
    // products, combinational
    for (int i = 0; i < 2 ** SW; i++) begin
      for (int v = -256; v < 256; v += 7) begin
        s = SW'(i);
        x = W_IN'(v);
        #1;
        check(int'(y_c) == coef(i) * v, $sformatf("s=%0d x=%0d y=%0d exp=%0d", i, v, y_c, coef(i) * v));
      end
    end
    // pipelined
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 400 + LAT; n++) begin
      @(negedge clk);
      if (n >= LAT) begin
        int e;
        e = exp_q.pop_front();
        check(int'(y_p) == e, $sformatf("pipelined y=%0d exp=%0d", y_p, e));
      end
      if (n < 400) begin
        int si, xv;
        si = int'($urandom_range(2 ** SW - 1));
        xv = int'($urandom_range(511)) - 256;
        s = SW'(si);
        x = W_IN'(xv);
      end else begin
        s = '0;
        x = '0;
      end
      exp_q.push_back(coef(int'(s)) * int'(x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_addnet_pe: checks one PE with P = 2 pipelined 3-Add multipliers.
// Random weight indices are loaded into G buffer words; then dot products
// of G groups of random 8-bit features are issued back to back (with random
// idle cycles, and the next dot product starting right after the previous
// one). Each result must equal ReLU(sum coef(s) * x) from the reference model
// and must appear, with act_valid, exactly LATENCY = 5 cycles after the cycle
// in which its last group was issued. Both signs of the sum are exercised.
module tb_addnet_pe;
  import tb_coef_pkg::*;
  localparam int ARCH = 3, P = 2, DEPTH = 16, G = 5, LAT = 5;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic wr_en;
  logic [3:0] wr_addr;
  logic [P-1:0][5:0] wr_data;
  logic in_valid, in_first, in_last;
  logic [3:0] in_addr;
  logic [P-1:0][8:0] in_x;
  logic act_valid;
  logic [31:0] act;
  int checks = 0, failures = 0, cyc = 0, negatives = 0;
  int wmem [G][P];
  longint exp_q[$];
  int when_q[$];

  addnet_pe #(.ARCH(ARCH), .P(P), .W_IN(9), .ACC_W(32), .WBUF_DEPTH(DEPTH), .PIPELINE(1'b1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) if (rst_n) begin
    if (act_valid) begin
      longint e;
      int w;
      checks += 2;
      e = exp_q.pop_front();
      w = when_q.pop_front();
      if (act !== 32'(e)) begin
        failures++;
        $display("FAIL act %0d exp %0d", act, e);
      end
      if (cyc != w + LAT) begin
        failures++;
        $display("FAIL latency %0d (cyc %0d issued %0d)", cyc - w, cyc, w);
      end
    end
  end

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0;
    in_valid = 0; in_first = 0; in_last = 0; in_addr = 0; in_x = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 40; pass++) begin
      // new weights every 10 dot products
      if (pass % 10 == 0) begin
        for (int g = 0; g < G; g++) begin
          @(negedge clk);
          in_valid = 1'b0;
          wr_en = 1'b1;
          wr_addr = 4'(g);
          for (int i = 0; i < P; i++) begin
            wmem[g][i] = int'($urandom_range(63));
            wr_data[i] = 6'(wmem[g][i]);
          end
        end
        @(negedge clk);
        wr_en = 1'b0;
      end
      begin
        longint sum;
        sum = 0;
        for (int g = 0; g < G; g++) begin
          @(negedge clk);
          in_valid = 1'b1;
          in_first = (g == 0);
          in_last = (g == G - 1);
          in_addr = 4'(g);
          for (int i = 0; i < P; i++) begin
            int xv;
            xv = int'($urandom_range(255));
            in_x[i] = 9'(xv);
            sum += longint'(coef(ARCH, wmem[g][i])) * xv;
          end
          if (g == G - 1) begin
            if (sum < 0) negatives++;
            exp_q.push_back(sum < 0 ? 0 : sum);
            when_q.push_back(cyc);
          end
          if ($urandom_range(3) == 0) begin
            @(negedge clk);
            in_valid = 1'b0;
          end
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || negatives == 0) begin
      failures++;
      $display("FAIL %0d results missing, %0d negative sums", exp_q.size(), negatives);
    end
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

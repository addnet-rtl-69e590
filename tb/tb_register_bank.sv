// tb_register_bank: drives random event patterns for 500 cycles while
// counting them in the testbench, then reads every register through the
// slave port (one-cycle read latency) and compares. Also checks the ID and
// status registers and that clear zeroes the counters.
module tb_register_bank;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clear, busy, ev_in_beat, ev_wt_beat, ev_out_beat, ev_stall, ev_pixel, rd_en;
  logic [2:0] rd_addr;
  logic [31:0] rd_data;
  int checks = 0, failures = 0;
  int cnt[6];

  register_bank dut (.*);

  always #5 clk = ~clk;

  task automatic read_check(int a, int exp);
    @(negedge clk);
    rd_en = 1'b1;
    rd_addr = 3'(a);
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (rd_data != 32'(exp)) begin
      failures++;
      $display("FAIL reg %0d = %0d, exp %0d", a, rd_data, exp);
    end
  endtask

  initial begin
    {clear, busy, ev_in_beat, ev_wt_beat, ev_out_beat, ev_stall, ev_pixel, rd_en} = '0;
    rd_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk);
      clear = 1'b1;
      foreach (cnt[i]) cnt[i] = 0;
      @(negedge clk);
      clear = 1'b0;
      for (int n = 0; n < 500; n++) begin
        {busy, ev_in_beat, ev_wt_beat, ev_out_beat, ev_stall, ev_pixel} = 6'($urandom);
        cnt[0] += int'(busy); cnt[1] += int'(ev_in_beat); cnt[2] += int'(ev_wt_beat);
        cnt[3] += int'(ev_out_beat); cnt[4] += int'(ev_stall); cnt[5] += int'(ev_pixel);
        @(negedge clk);
      end
      {ev_in_beat, ev_wt_beat, ev_out_beat, ev_stall, ev_pixel} = '0;
      busy = 1'b0;
      for (int a = 0; a < 6; a++) read_check(a, cnt[a]);
      read_check(6, 32'hADD0_0002);
      busy = 1'b1;
      read_check(7, 1);
      cnt[0] += 2;
      busy = 1'b0;
    end
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    read_check(1, 0);
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

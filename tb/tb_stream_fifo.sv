// tb_stream_fifo: pushes a numbered sequence through a 16-deep FIFO with
// random valid on the input and random ready on the output. Checks order
// and contents, that the FIFO reports full (in_ready low) and refuses only
// when it holds DEPTH words, that level matches the testbench's count, and
// that every word comes out.
module tb_stream_fifo;
  localparam int W = 12, DEPTH = 16, NWORDS = 3000;
  logic clk = 1'b0;
  logic clear = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [4:0] level;
  int checks = 0, failures = 0, sent = 0, got = 0, full_seen = 0, occ = 0;

  stream_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    check(int'(level) == occ, $sformatf("level %0d, expected %0d", level, occ));
    check(in_ready == (occ < DEPTH), "in_ready vs occupancy");
    if (!in_ready) full_seen++;
    if (out_valid && out_ready) begin
      check(out_data == W'(got * 7 + 3), $sformatf("word %0d: %h", got, out_data));
      got++;
    end
    if (in_valid && in_ready) sent++;
    occ = occ + int'(in_valid && in_ready) - int'(out_valid && out_ready);
  end

  always @(negedge clk) begin
    in_valid  = rst_n && (sent < NWORDS) && ($urandom_range(3) != 0);
    in_data   = W'(sent * 7 + 3);
    out_ready = ($urandom_range(99) < ((got < 1500) ? 40 : 90));
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (got == NWORDS);
    repeat (3) @(posedge clk);
    check(full_seen > 0, "FIFO never became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

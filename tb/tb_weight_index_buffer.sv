// tb_weight_index_buffer: writes random words to random addresses while
// reading others, and checks that each read returns, one cycle later, the
// last value written to that address (shadow array in the testbench).
module tb_weight_index_buffer;
  localparam int WIDTH = 8, DEPTH = 64;
  logic clk = 1'b0;
  logic wr_en, rd_en;
  logic [5:0] wr_addr, rd_addr;
  logic [WIDTH-1:0] wr_data, rd_data;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  weight_index_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    wr_en = 1'b0;
    rd_en = 1'b0;
    wr_addr = '0;
    rd_addr = '0;
    wr_data = '0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_addr = 6'(i);
      wr_data = 8'($urandom);
      shadow[i] = wr_data;
    end
    for (int n = 0; n < 1000; n++) begin
      logic [5:0] ra;
      logic [WIDTH-1:0] exp;
      @(negedge clk);
      ra = 6'($urandom);
      rd_en = 1'b1;
      rd_addr = ra;
      wr_en = $urandom_range(1);
      wr_addr = 6'($urandom);
      if (wr_addr == ra) wr_addr = ra + 1'b1;
      wr_data = 8'($urandom);
      exp = shadow[ra];
      if (wr_en) shadow[wr_addr] = wr_data;
      @(negedge clk);
      wr_en = 1'b0;
      rd_en = 1'b0;
      checks++;
      if (rd_data !== exp) begin
        failures++;
        $display("FAIL addr %0d got %h exp %h", ra, rd_data, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

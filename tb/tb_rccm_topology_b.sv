// tb_rccm_topology_b: checks base Topology B with the output-stage table
// (-A1+B1, -A2+B1, A1-B1, A2-B1) and with a table that uses the zero inputs
// (A1 alone, -B1 alone, A2+B1, -A1-B1), on random signed operands, against
// an arithmetic model modulo 2^W.
module tb_rccm_topology_b;
  import addnet_pkg::*;
  localparam int W = 12;
  localparam sigma_b_t SIGMA_ALT = '{
    '{src: SRC_A1,   neg_a: 1'b0, b_on: 1'b0, neg_b: 1'b0},
    '{src: SRC_ZERO, neg_a: 1'b0, b_on: 1'b1, neg_b: 1'b1},
    '{src: SRC_A2,   neg_a: 1'b0, b_on: 1'b1, neg_b: 1'b0},
    '{src: SRC_A1,   neg_a: 1'b1, b_on: 1'b1, neg_b: 1'b1}};
  logic [W-1:0] a1, a2, b1, y0, y1;
  logic [1:0] s;
  int checks = 0, failures = 0;

  rccm_topology_b #(.W(W), .SIGMA(SIGMA_B))   dut0 (.a1(a1), .a2(a2), .b1(b1), .s(s), .y(y0));
  rccm_topology_b #(.W(W), .SIGMA(SIGMA_ALT)) dut1 (.a1(a1), .a2(a2), .b1(b1), .s(s), .y(y1));

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] e0, e1;
      a1 = W'($urandom); a2 = W'($urandom); b1 = W'($urandom);
      s = 2'(n);
      #1;
      case (s)
        2'd0: begin e0 = b1 - a1; e1 = a1; end
        2'd1: begin e0 = b1 - a2; e1 = -b1; end
        2'd2: begin e0 = a1 - b1; e1 = a2 + b1; end
        default: begin e0 = a2 - b1; e1 = -a1 - b1; end
      endcase
      checks += 2;
      if (y0 !== e0) begin failures++; $display("FAIL t0 s=%0d y=%h e=%h", s, y0, e0); end
      if (y1 !== e1) begin failures++; $display("FAIL t1 s=%0d y=%h e=%h", s, y1, e1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

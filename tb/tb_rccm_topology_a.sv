// tb_rccm_topology_a: checks base Topology A with two operation tables.
// Instance 0 uses the 2-Add first-stage table (A1+B1, A2+B1, A3+B1, B1),
// instance 1 the 4-Add first-stage table (..., -A3+B1). Random signed
// operands are applied for every select code and the result is compared with
// an arithmetic model modulo 2^W.
module tb_rccm_topology_a;
  import addnet_pkg::*;
  localparam int W = 12;
  logic [W-1:0] a1, a2, a3, b1, y0, y1;
  logic [1:0] s;
  int checks = 0, failures = 0;

  rccm_topology_a #(.W(W), .SIGMA(SIGMA_2ADD_AI)) dut0 (.a1(a1), .a2(a2), .a3(a3), .b1(b1), .s(s), .y(y0));
  rccm_topology_a #(.W(W), .SIGMA(SIGMA_4ADD_AI)) dut1 (.a1(a1), .a2(a2), .a3(a3), .b1(b1), .s(s), .y(y1));

  initial begin
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] e0, e1;
      a1 = W'($urandom); a2 = W'($urandom); a3 = W'($urandom); b1 = W'($urandom);
      s = 2'(n);
      #1;
      case (s)
        2'd0: begin e0 = a1 + b1; e1 = a1 + b1; end
        2'd1: begin e0 = a2 + b1; e1 = a2 + b1; end
        2'd2: begin e0 = a3 + b1; e1 = a3 + b1; end
        default: begin e0 = b1; e1 = b1 - a3; end
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

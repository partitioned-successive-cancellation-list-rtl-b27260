// tb_polar_encoder: random and unit-vector inputs of a 16-bit transform,
// compared with x_k = XOR of u_m over all m that contain the bits of k
// (the rows of the Kronecker power of [1 0; 1 1]); the P(8,4) frame of
// the paper's encoding example is checked too.
module tb_polar_encoder;
  import pscl_ref_pkg::*;
  localparam int NE = 16;
  int checks = 0, failures = 0;
  logic [NE-1:0] u, x;

  polar_encoder #(.NE(NE)) dut (.u(u), .x(x));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    for (int it = 0; it < 2000; it++) begin
      bit_da ub = new[NE];
      bit_da xb;
      u = (it < NE) ? (NE'(1) << it) : NE'($urandom);
      for (int i = 0; i < NE; i++) ub[i] = u[i];
      xb = encode(ub);
      #1;
      for (int i = 0; i < NE; i++) begin
        checks++;
        if (x[i] != xb[i]) failures++;
      end
    end
    // u_0..u_7 = 0,0,0,1,0,1,1,1 (u3,u5,u6,u7 = 1): x = u G^(x)3
    u = 16'b0000_0000_1110_1000;
    #1;
    checks++;
    // x0 = u3^u5^u6^u7 = 0, x1 = u3^u5^u7 = 1, x2 = u3^u6^u7 = 1, x3 = u3^u7 = 0,
    // x4 = u5^u6^u7 = 1, x5 = u5^u7 = 0, x6 = u6^u7 = 0, x7 = u7 = 1
    if (x[7:0] != 8'b1001_0110) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

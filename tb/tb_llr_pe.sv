// tb_llr_pe: checks the f and g rules of one processing element against
// integer arithmetic, over all input pairs of a 6-bit LLR and both betas.
module tb_llr_pe;
  import pscl_pkg::*;
  localparam int QA = 6;
  int checks = 0, failures = 0;
  llr_op_e op;
  logic signed [QA-1:0] a, b, y;
  logic beta;

  llr_pe #(.QA(QA)) dut (.op(op), .a(a), .b(b), .beta(beta), .y(y));

  function automatic int sat(int v);
    return v > 31 ? 31 : (v < -31 ? -31 : v);
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    for (int ia = -32; ia < 32; ia++)
      for (int ib = -32; ib < 32; ib++)
        for (int k = 0; k < 3; k++) begin
          int exp_v, ma, mb;
          a = QA'(ia); b = QA'(ib);
          op = (k == 0) ? OP_F : OP_G;
          beta = (k == 2);
          #1;
          ma = ia < 0 ? -ia : ia;
          mb = ib < 0 ? -ib : ib;
          if (k == 0) begin
            exp_v = sat(ma < mb ? ma : mb);
            if ((ia < 0) ^ (ib < 0)) exp_v = -exp_v;
          end else begin
            exp_v = sat(beta ? ib - ia : ib + ia);
          end
          checks++;
          if (int'(y) != exp_v) begin
            failures++;
            if (failures < 10) $display("mismatch op=%0d a=%0d b=%0d beta=%0d y=%0d exp=%0d",
                                        k, ia, ib, beta, y, exp_v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

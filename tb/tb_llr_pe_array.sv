// tb_llr_pe_array: random parent rows at every output level, for f and g;
// each valid lane is compared with the f/g rules applied to the LLR pair it
// must take (row_a/row_b for wide nodes, two halves of row_a for narrow ones).
module tb_llr_pe_array;
  import pscl_pkg::*;
  localparam int QA = 6, PE = 8;
  int checks = 0, failures = 0;
  llr_op_e op;
  logic [4:0] s_out;
  logic [PE-1:0][QA-1:0] row_a, row_b, row_y;
  logic [PE-1:0] beta_row;

  llr_pe_array #(.QA(QA), .PE(PE)) dut (.op(op), .s_out(s_out), .row_a(row_a),
    .row_b(row_b), .beta_row(beta_row), .row_y(row_y));

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
    for (int it = 0; it < 2000; it++) begin
      int lanes;
      row_a = {PE{6'(0)}};
      for (int i = 0; i < PE; i++) begin
        row_a[i] = QA'($urandom);
        row_b[i] = QA'($urandom);
      end
      beta_row = PE'($urandom);
      op = llr_op_e'($urandom % 2);
      s_out = 5'($urandom % 6);
      #1;
      lanes = (s_out >= 3) ? PE : (1 << s_out);
      for (int i = 0; i < lanes; i++) begin
        int ia, ib, exp_v;
        ia = int'($signed(row_a[i]));
        ib = (s_out >= 3) ? int'($signed(row_b[i])) : int'($signed(row_a[i + (1 << s_out)]));
        if (op == OP_F) begin
          int ma = ia < 0 ? -ia : ia, mb = ib < 0 ? -ib : ib;
          exp_v = sat(ma < mb ? ma : mb);
          if ((ia < 0) ^ (ib < 0)) exp_v = -exp_v;
        end else begin
          exp_v = sat(beta_row[i] ? ib - ia : ib + ia);
        end
        checks++;
        if (int'($signed(row_y[i])) != exp_v) begin
          failures++;
          if (failures < 10) $display("lane %0d s=%0d op=%0d y=%0d exp=%0d", i, s_out, op,
                                      $signed(row_y[i]), exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

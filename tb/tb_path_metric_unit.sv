// tb_path_metric_unit: every LLR with random metrics (including values near
// saturation), frozen and active flags; metrics and validity are compared
// with Eq. 5 computed in integers.
module tb_path_metric_unit;
  localparam int QA = 6, QPM = 8;
  int checks = 0, failures = 0;
  logic signed [QA-1:0] alpha;
  logic [QPM-1:0] pm_in, pm0, pm1;
  logic frozen, active, valid0, valid1;

  path_metric_unit #(.QA(QA), .QPM(QPM)) dut (.alpha(alpha), .pm_in(pm_in), .frozen(frozen),
    .active(active), .pm0(pm0), .pm1(pm1), .valid0(valid0), .valid1(valid1));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    for (int it = 0; it < 4000; it++) begin
      int a, p, e0, e1;
      a = int'($urandom % 63) - 31;
      p = (it % 4 == 0) ? 255 - int'($urandom % 40) : int'($urandom % 256);
      alpha = QA'(a); pm_in = QPM'(p);
      frozen = 1'($urandom); active = 1'($urandom);
      #1;
      e0 = p + ((a < 0) ? -a : 0);
      e1 = p + ((a > 0) ? a : 0);
      if (e0 > 255) e0 = 255;
      if (e1 > 255) e1 = 255;
      checks += 4;
      if (int'(pm0) != e0) failures++;
      if (int'(pm1) != e1) failures++;
      if (valid0 != active) failures++;
      if (valid1 != (active && !frozen)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

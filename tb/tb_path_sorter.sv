// tb_path_sorter: random candidate sets (many ties, some invalid) for L = 4;
// the slots are compared with a selection sort over (valid, metric, index).
module tb_path_sorter;
  localparam int L = 4, QPM = 8;
  int checks = 0, failures = 0;
  logic [2*L-1:0][QPM-1:0] cand_pm;
  logic [2*L-1:0] cand_valid;
  logic [L-1:0][2:0] slot_cand;
  logic [L-1:0] slot_valid;

  path_sorter #(.L(L), .QPM(QPM)) dut (.cand_pm(cand_pm), .cand_valid(cand_valid),
    .slot_cand(slot_cand), .slot_valid(slot_valid));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    for (int it = 0; it < 3000; it++) begin
      bit taken [2*L];
      for (int c = 0; c < 2*L; c++) begin
        cand_pm[c] = QPM'($urandom % 12);
        cand_valid[c] = ($urandom % 4) != 0;
        taken[c] = 0;
      end
      #1;
      for (int r = 0; r < L; r++) begin
        int best = -1;
        for (int c = 0; c < 2*L; c++) begin
          if (taken[c]) continue;
          if (best < 0) best = c;
          else if (cand_valid[c] && !cand_valid[best]) best = c;
          else if (cand_valid[c] == cand_valid[best] && cand_pm[c] < cand_pm[best]) best = c;
        end
        taken[best] = 1;
        checks += 2;
        if (slot_valid[r] != cand_valid[best]) failures++;
        if (cand_valid[best] && int'(slot_cand[r]) != best) begin
          failures++;
          if (failures < 10) $display("slot %0d got %0d exp %0d", r, slot_cand[r], best);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

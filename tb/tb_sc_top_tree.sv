// tb_sc_top_tree: loads random channel LLRs into a 64-bit-frame SC tree cut
// into four partitions, computes each partition root, reads it back through
// the root ports and compares it with the reference SC walk (f and g rules,
// partial sums from the previously committed partitions, which are random
// bit vectors here). The update cycle count of every root is checked.
module tb_sc_top_tree;
  import pscl_pkg::*;
  import pscl_ref_pkg::*;
  localparam int N = 64, P = 4, QA = 6, PE = 4, NP = N / P;
  localparam int CROWS = N / PE, RROWS = NP / PE;
  int checks = 0, failures = 0;
  int cnt_g = 0;

  logic clk = 0, rst_n = 0;
  logic load_valid = 0;
  logic [3:0] load_row = 0;
  logic [PE-1:0][QA-1:0] load_data;
  logic part_start = 0, part_ready, busy, beta_commit = 0;
  logic [1:0] part_idx = 0;
  logic [NP-1:0] beta_x = 0;
  logic [1:0] root_raddr_a = 0, root_raddr_b = 0;
  logic [PE-1:0][QA-1:0] root_rdata_a, root_rdata_b;

  sc_top_tree #(.N(N), .P(P), .QA(QA), .PE(PE)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 50; fr++) begin
      int_da llr = new[N];
      bit_da u = new[N];
      for (int i = 0; i < N; i++) llr[i] = int'($urandom % 63) - 31;
      for (int r = 0; r < CROWS; r++) begin
        @(negedge clk);
        load_valid = 1;
        load_row = 4'(r);
        for (int k = 0; k < PE; k++) load_data[k] = QA'(llr[r * PE + k]);
      end
      @(negedge clk);
      load_valid = 0;
      for (int p = 0; p < P; p++) begin
        int_da expv = descend(llr, u, 0, p * NP, NP, QA);
        int cyc = 0;
        @(negedge clk);
        part_start = 1;
        part_idx = 2'(p);
        @(negedge clk);
        part_start = 0;
        while (!part_ready) begin
          @(negedge clk);
          cyc++;
        end
        checks++;
        if (cyc != tree_cycles(6, 4, p, PE)) begin
          failures++;
          $display("partition %0d: %0d cycles, expected %0d", p, cyc, tree_cycles(6, 4, p, PE));
        end
        if (p > 0) cnt_g++;
        for (int r = 0; r < RROWS; r++) begin
          root_raddr_a = 2'(r);
          root_raddr_b = 2'(RROWS - 1 - r);
          #1;
          for (int k = 0; k < PE; k++) begin
            checks += 2;
            if (int'($signed(root_rdata_a[k])) != expv[r * PE + k]) failures++;
            if (int'($signed(root_rdata_b[k])) != expv[(RROWS - 1 - r) * PE + k]) failures++;
          end
        end
        // the partition returns random bits; commit their encoding
        begin
          bit_da up = new[NP];
          bit_da xp;
          for (int i = 0; i < NP; i++) begin
            up[i] = 1'($urandom);
            u[p * NP + i] = up[i];
          end
          xp = encode_fast(up);
          for (int i = 0; i < NP; i++) beta_x[i] = xp[i];
        end
        @(negedge clk);
        beta_commit = 1;
        @(negedge clk);
        beta_commit = 0;
      end
    end
    checks++;
    if (cnt_g == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

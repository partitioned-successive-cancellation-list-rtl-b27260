// tb_partial_sum_update: random bit sequences are fed leaf by leaf through a
// 4-level partial-sum store (LEAF_W = 1) and a 2-level store with 4-bit
// leaves; after every leaf each level must hold the polar encoding of the
// most recent finished left-child block of that level.
module tb_partial_sum_update;
  import pscl_ref_pkg::*;
  localparam int LV = 4, LV2 = 2, W2 = 4;
  int checks = 0, failures = 0;
  logic [(1<<LV)-2:0] beta, beta_next;
  logic [LV-1:0] idx;
  logic leaf;
  logic [W2*3-1:0] beta2, beta2_next;
  logic [LV2-1:0] idx2;
  logic [W2-1:0] leaf2;

  partial_sum_update #(.LEVELS(LV), .LEAF_W(1)) dut (.beta_in(beta), .idx(idx), .leaf(leaf),
    .beta_out(beta_next));
  partial_sum_update #(.LEVELS(LV2), .LEAF_W(W2)) dut2 (.beta_in(beta2), .idx(idx2),
    .leaf(leaf2), .beta_out(beta2_next));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected content of level k after leaves 0..j, in bits of width w*2^k
  function automatic bit_da expect_lvl(bit_da u, int j, int k, int w, output bit known);
    int sz = w * (1 << k);
    int m = (j + 1) >> k;
    int blk = (m % 2 == 1) ? m - 1 : m - 2;
    bit_da seg = new[sz];
    known = (blk >= 0);
    if (known) for (int i = 0; i < sz; i++) seg[i] = u[blk * sz + i];
    return encode(seg);
  endfunction

  task automatic run_test();
    beta = '0; beta2 = '0;
    for (int fr = 0; fr < 200; fr++) begin
      bit_da u = new[1 << LV];
      bit_da u2 = new[W2 << LV2];
      for (int j = 0; j < (1 << LV); j++) begin
        u[j] = 1'($urandom);
        idx = LV'(j); leaf = u[j];
        #1;
        beta = beta_next;
        for (int k = 0; k < LV; k++) begin
          bit known;
          bit_da e = expect_lvl(u, j, k, 1, known);
          if (known) for (int i = 0; i < (1 << k); i++) begin
            checks++;
            if (beta[(1 << k) - 1 + i] != e[i]) failures++;
          end
        end
      end
      for (int j = 0; j < (1 << LV2); j++) begin
        for (int i = 0; i < W2; i++) u2[j * W2 + i] = 1'($urandom);
        idx2 = LV2'(j);
        for (int i = 0; i < W2; i++) leaf2[i] = u2[j * W2 + i];
        #1;
        beta2 = beta2_next;
        for (int k = 0; k < LV2; k++) begin
          bit known;
          bit_da e = expect_lvl(u2, j, k, W2, known);
          // the leaves of dut2 are already codewords: compare with the
          // encoding of the leaf-level codewords' concatenation
          if (known) begin
            bit_da seg = new[W2 << k];
            bit_da enc_seg;
            int m = (j + 1) >> k;
            int blk = (m % 2 == 1) ? m - 1 : m - 2;
            for (int i = 0; i < (W2 << k); i++) seg[i] = 0;
            // build the info-like vector whose per-leaf encodings are the leaves
            for (int q = 0; q < (1 << k); q++) begin
              bit_da lf = new[W2];
              for (int i = 0; i < W2; i++) lf[i] = u2[(blk * (1 << k) + q) * W2 + i];
              lf = encode(lf); // inverse of encode is encode itself
              for (int i = 0; i < W2; i++) seg[q * W2 + i] = lf[i];
            end
            enc_seg = encode(seg);
            for (int i = 0; i < (W2 << k); i++) begin
              checks++;
              if (beta2[W2 * ((1 << k) - 1) + i] != enc_seg[i]) failures++;
            end
            if (e.size() == 0) failures++;
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

// Body shared by the end-to-end testbenches of pscl_decoder. The including
// module defines N, P, L, QA, QPM, PE, CW, POLY, K, NP, NL, NPL, FRAMES, SNR0,
// SNR_STEP, SNR_N, REQUIRE_RARE (1: a CRC choice other than the best path and a
// partition without a passing path must each occur at least once) (frame f is sent at Eb/N0 = SNR0 + SNR_STEP * (f mod SNR_N)),
// the signals below, the instance dut of pscl_decoder connected to them and a
// task finish_bench() called with the final counts in checks and failures.
  int cnt_g = 0, cnt_pruned = 0, cnt_nonbest = 0, cnt_crcfail = 0, cnt_shared = 0;
  int cnt_correct = 0;

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (dut.u_tree.running && dut.u_tree.op == OP_G) cnt_g++;
    if (dut.u_list.state == 2'd1 && 32'(dut.u_list.lev) + 1 < NPL)
      for (int l = 0; l < L; l++)
        if (dut.u_list.active[l] && int'(dut.u_list.ptr[l][dut.u_list.lev + 1]) != l)
          cnt_shared++;
  end

  initial begin
    repeat (FRAMES * 20 * N + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    bit_da frz = construct(N, K, 2.0);
    int exp_cyc = 0;
    for (int p = 0; p < P; p++)
      exp_cyc += tree_cycles(NL, NPL, p, PE) + list_cycles(NPL, PE) + 6;
    $display("frame decoding time: %0d cycles (formula)", exp_cyc);
    for (int i = 0; i < N; i++) frozen[i] = frz[i];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < FRAMES; fr++) begin
      bit_da u = make_message(frz, P, CW, POLY);
      bit_da x = encode_fast(u);
      real snr = SNR0 + SNR_STEP * real'(fr % SNR_N);
      int_da llr = channel(x, snr, real'(K) / real'(N), 0, QA);
      bit_da uref, okref;
      int cyc = 0;
      stat_pruned = 0; stat_nonbest = 0; stat_crcfail = 0;
      uref = pscl_decode(llr, frz, P, L, QA, QPM, CW, POLY, okref);
      cnt_pruned += stat_pruned;
      cnt_nonbest += stat_nonbest;
      cnt_crcfail += stat_crcfail;
      for (int r = 0; r < N / PE; r++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        llr_valid = 1;
        for (int k = 0; k < PE; k++) llr_row[k] = QA'(llr[r * PE + k]);
      end
      @(negedge clk);
      llr_valid = 0;
      cyc = 0;
      while (!out_valid) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        $display("frame %0d: %0d cycles, expected %0d", fr, cyc, exp_cyc);
      end
      begin
        bit same = 1, right = 1;
        for (int i = 0; i < N; i++) begin
          if (u_hat[i] != uref[i]) same = 0;
          if (u_hat[i] != u[i]) right = 0;
        end
        for (int p = 0; p < P; p++) begin
          checks++;
          if (crc_ok[p] != okref[p]) failures++;
        end
        checks++;
        if (!same) begin
          failures++;
          $display("frame %0d differs from reference", fr);
        end
        if (right) cnt_correct++;
      end
    end
    $display("g_updates=%0d pruned=%0d nonbest=%0d crcfail=%0d shared=%0d correct=%0d of %0d",
             cnt_g, cnt_pruned, cnt_nonbest, cnt_crcfail, cnt_shared, cnt_correct, FRAMES);
    checks += 6;
    if (cnt_g == 0) failures++;
    if (cnt_pruned == 0) failures++;
    if (REQUIRE_RARE && cnt_nonbest == 0) failures++;
    if (REQUIRE_RARE && cnt_crcfail == 0) failures++;
    if (cnt_shared == 0) failures++;
    if (cnt_correct == 0) failures++;
    finish_bench();
  endtask

  initial run_test();

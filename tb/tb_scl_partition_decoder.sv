// tb_scl_partition_decoder: a 32-bit partition with list size 4, 4 lanes and
// a 4-bit CRC. Root LLRs come from noisy BPSK transmissions of codewords whose
// last four information bits hold the CRC, at Eb/N0 from -1 to 4 dB. The
// chosen bits and the CRC flag are compared with the bit-exact reference list
// decoder, and the decoding time with the cycle formula. The run must see
// pruning of the list, a CRC-chosen path other than the best one, a CRC
// failure and lazily shared LLR memories.
module tb_scl_partition_decoder;
  import pscl_pkg::*;
  import pscl_ref_pkg::*;
  localparam int NP = 32, L = 4, QA = 6, QPM = 8, PE = 4, CW = 4, POLY = 4'h3;
  localparam int RROWS = NP / PE;
  int checks = 0, failures = 0;
  int cnt_pruned = 0, cnt_nonbest = 0, cnt_crcfail = 0, cnt_shared = 0, cnt_correct = 0;

  logic clk = 0, rst_n = 0, start = 0;
  logic [NP-1:0] frozen;
  logic [2:0] root_raddr_a, root_raddr_b;
  logic [PE-1:0][QA-1:0] root_rdata_a, root_rdata_b;
  logic busy, done, crc_ok;
  logic [NP-1:0] u_sel;
  logic [1:0] sel_slot;
  logic [PE-1:0][QA-1:0] root_rows [RROWS];

  scl_partition_decoder #(.NP(NP), .L(L), .QA(QA), .QPM(QPM), .PE(PE), .CRC_W(CW),
                          .CRC_POLY(4'(POLY))) dut (.*);

  assign root_rdata_a = root_rows[root_raddr_a];
  assign root_rdata_b = root_rows[root_raddr_b];

  always #5 clk = ~clk;

  // a path reads an LLR row that another path wrote (lazy copy in use)
  always @(posedge clk)
    if (dut.state == 2'd1 && 32'(dut.lev) + 1 < 5)
      for (int l = 0; l < L; l++)
        if (dut.active[l] && int'(dut.ptr[l][dut.lev + 1]) != l) cnt_shared++;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    bit_da frz = construct(NP, 16, 2.0);
    for (int i = 0; i < NP; i++) frozen[i] = frz[i];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int fr = 0; fr < 300; fr++) begin
      bit_da u = make_message(frz, 1, CW, POLY);
      bit_da x = encode_fast(u);
      real snr = -1.0 + real'(fr % 6);
      int_da llr = channel(x, snr, 0.5, 0, QA);
      bit_da uref;
      bit ok_ref;
      int cyc = 0;
      for (int r = 0; r < RROWS; r++)
        for (int k = 0; k < PE; k++) root_rows[r][k] = QA'(llr[r * PE + k]);
      stat_pruned = 0; stat_nonbest = 0; stat_crcfail = 0;
      uref = scl_partition(llr, frz, L, QA, QPM, CW, POLY, ok_ref);
      cnt_pruned += stat_pruned;
      cnt_nonbest += stat_nonbest;
      cnt_crcfail += stat_crcfail;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks += 3;
      if (crc_ok != ok_ref) failures++;
      if (cyc != list_cycles(5, PE) + 1) begin
        failures++;
        $display("frame %0d: %0d cycles, expected %0d", fr, cyc, list_cycles(5, PE) + 1);
      end
      begin
        bit same = 1, right = 1;
        for (int i = 0; i < NP; i++) begin
          if (u_sel[i] != uref[i]) same = 0;
          if (u_sel[i] != u[i]) right = 0;
        end
        if (!same) begin
          failures++;
          if (failures < 5) $display("frame %0d differs from reference", fr);
        end
        if (right) cnt_correct++;
      end
    end
    $display("pruned=%0d nonbest=%0d crcfail=%0d shared=%0d correct=%0d",
             cnt_pruned, cnt_nonbest, cnt_crcfail, cnt_shared, cnt_correct);
    checks += 4;
    if (cnt_pruned == 0) failures++;
    if (cnt_nonbest == 0) failures++;
    if (cnt_crcfail == 0) failures++;
    if (cnt_shared == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

// tb_pscl_decoder: end-to-end test of the PSCL decoder at N = 256, four
// partitions, list size 2, 8 lanes and CRC-8 per partition. Frames are random
// messages with per-partition CRCs, polar encoded, sent as BPSK over AWGN at
// Eb/N0 from 0 to 3.5 dB, quantised to 6-bit integer LLRs and
// streamed in. The decoded bits and per-partition CRC flags are compared with
// the bit-exact reference decoder and the decoding time with the cycle
// formula. The run counts, and requires at least once: a g update above the
// partitions, list pruning, a CRC choice other than the best path, a partition
// whose CRC no path passes, LLR rows shared between paths, and a frame
// decoded without error.
module tb_pscl_decoder;
  import pscl_pkg::*;
  import pscl_ref_pkg::*;
  localparam int N = 256, P = 4, L = 2, QA = 6, QPM = 8, PE = 8, CW = 8, POLY = 8'h2F;
  localparam int K = 128, NP = N / P, NL = 8, NPL = 6, FRAMES = 160, SNR_N = 8;
  localparam bit REQUIRE_RARE = 1'b1;
  localparam real SNR0 = 0.0, SNR_STEP = 0.5;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] frozen;
  logic llr_valid = 0;
  logic [PE-1:0][QA-1:0] llr_row;
  logic in_ready, out_valid;
  logic [N-1:0] u_hat;
  logic [P-1:0] crc_ok;

  pscl_decoder #(.N(N), .P(P), .L(L), .QA(QA), .QPM(QPM), .PE(PE), .CRC_W(CW),
                 .CRC_POLY(CW'(POLY))) dut (.*);

  task automatic finish_bench();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  `include "tb_pscl_run.svh"
endmodule

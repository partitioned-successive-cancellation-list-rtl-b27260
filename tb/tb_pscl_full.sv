// tb_pscl_full: the PSCL decoder with all parameters at their defaults, the
// PSCL(4,2)-CRC8 decoder of a rate-1/2 polar code of length 2048 (K = 1024,
// four partitions of 512 bits, list size 2, 64 lanes, 6-bit LLRs, 8-bit path
// metrics). The code is built for Eb/N0 = 2 dB. Frames at 0.75, 1.25, 1.75 and 2.25 dB
// are decoded and checked bit by bit against the reference decoder, with the
// decoding time checked against the cycle formula; the mechanism counters of
// the shared body must each fire at least once.
module tb_pscl_full;
  import pscl_pkg::*;
  import pscl_ref_pkg::*;
  localparam int N = 2048, P = 4, L = 2, QA = 6, QPM = 8, PE = 64, CW = 8, POLY = 8'h2F;
  localparam int K = 1024, NP = N / P, NL = 11, NPL = 9, FRAMES = 64, SNR_N = 4;
  localparam bit REQUIRE_RARE = 1'b1;
  localparam real SNR0 = 0.75, SNR_STEP = 0.5;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] frozen;
  logic llr_valid = 0;
  logic [PE-1:0][QA-1:0] llr_row;
  logic in_ready, out_valid;
  logic [N-1:0] u_hat;
  logic [P-1:0] crc_ok;

  pscl_decoder dut (.*);

  task automatic finish_bench();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  `include "tb_pscl_run.svh"
endmodule

// pscl_frame_bench: a parameterised end-to-end bench of pscl_decoder, for
// testbenches that run several decoder configurations. It decodes FRAMES
// noisy frames of a code of length N with K information bits (built for
// 2 dB), compares each with the bit-exact reference decoder and the cycle
// formula, requires the common decoder mechanisms (and, with REQUIRE_RARE, the
// rare CRC outcomes) to occur at least once, and then
// raises done with its check and failure counts.
module pscl_frame_bench
  import pscl_pkg::*;
  import pscl_ref_pkg::*;
#(
  parameter int  N = 2048, P = 2, L = 2, PE = 64, CW = 16, POLY = 16'h755B, K = 1024,
  parameter int  FRAMES = 16, SNR_N = 4,
  parameter real SNR0 = 1.0, SNR_STEP = 0.5,
  parameter bit  REQUIRE_RARE = 1'b0
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int QA = 6, QPM = 8, NP = N / P, NL = $clog2(N), NPL = $clog2(NP);

  logic clk = 0, rst_n = 0;
  logic [N-1:0] frozen;
  logic llr_valid = 0;
  logic [PE-1:0][QA-1:0] llr_row;
  logic in_ready, out_valid;
  logic [N-1:0] u_hat;
  logic [P-1:0] crc_ok;

  pscl_decoder #(.N(N), .P(P), .L(L), .QA(QA), .QPM(QPM), .PE(PE), .CRC_W(CW),
                 .CRC_POLY(CW'(POLY))) dut (.*);

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
  end

  task automatic finish_bench();
    done = 1'b1;
  endtask

  `include "tb_pscl_run.svh"
endmodule

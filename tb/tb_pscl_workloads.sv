// tb_pscl_workloads: the two other PSCL configurations the paper evaluates on
// the rate-1/2 polar code of length 2048, run on re-parameterised decoders:
// PSCL(2,2)-CRC16 (two 1024-bit partitions, list size 2, CRC-16 polynomial
// 0x755B) and PSCL(4,4)-CRC8 (four 512-bit partitions, list size 4, CRC-8
// 0x2F). Each decodes noisy frames (0.75 to 1.5 dB and 1 to 2.5 dB), bit-exact against the
// reference decoder and cycle-exact against the timing formula. The rare CRC outcomes are
// counted but not required here; the other end-to-end testbenches require them.
module tb_pscl_workloads;
  logic done_a, done_b;
  int   checks_a, failures_a, checks_b, failures_b;

  pscl_frame_bench #(.N(2048), .P(2), .L(2), .PE(64), .CW(16), .POLY(16'h755B), .K(1024),
                     .FRAMES(24), .SNR0(0.75), .SNR_STEP(0.25), .SNR_N(4)) bench_2_2 (.done(done_a), .checks(checks_a), .failures(failures_a));
  pscl_frame_bench #(.N(2048), .P(4), .L(4), .PE(64), .CW(8), .POLY(8'h2F), .K(1024),
                     .FRAMES(16)) bench_4_4 (.done(done_b), .checks(checks_b), .failures(failures_b));

  initial begin
    #100ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b + 1);
    $finish;
  end

  initial begin
    wait (done_a && done_b);
    $display("PSCL(2,2)-CRC16: checks=%0d failures=%0d", checks_a, failures_a);
    $display("PSCL(4,4)-CRC8:  checks=%0d failures=%0d", checks_b, failures_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks_a + checks_b, failures_a + failures_b);
    $finish;
  end
endmodule

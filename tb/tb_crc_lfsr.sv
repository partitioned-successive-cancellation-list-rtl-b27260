// tb_crc_lfsr: random messages are shifted bit by bit through the CRC step;
// the remainder is compared with polynomial long division, and shifting the
// message followed by its CRC must give a zero remainder.
module tb_crc_lfsr;
  import pscl_ref_pkg::*;
  localparam int W = 8;
  localparam logic [W-1:0] POLY = 8'h2F;
  int checks = 0, failures = 0;
  logic [W-1:0] crc_in, crc_out;
  logic bit_in;

  crc_lfsr #(.W(W), .POLY(POLY)) dut (.crc_in(crc_in), .bit_in(bit_in), .crc_out(crc_out));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_test();
    for (int it = 0; it < 300; it++) begin
      int n = 1 + int'($urandom % 60);
      bit_da msg = new[n];
      int exp_r;
      crc_in = '0;
      for (int i = 0; i < n; i++) begin
        msg[i] = 1'($urandom);
        bit_in = msg[i];
        #1;
        crc_in = crc_out;
      end
      exp_r = crc_rem(msg, W, int'(POLY));
      checks++;
      if (int'(crc_in) != exp_r) failures++;
      // append the CRC: remainder must become zero
      for (int k = W - 1; k >= 0; k--) begin
        bit_in = 1'(exp_r >> k);
        #1;
        crc_in = crc_out;
      end
      checks++;
      if (crc_in != '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial run_test();
endmodule

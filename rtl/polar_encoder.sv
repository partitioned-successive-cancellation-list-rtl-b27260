// polar_encoder: polar transform x = u * G^(x)n over GF(2), G = [1 0; 1 1].
//
// Built as n = log2(NE) butterfly stages (paper, Eq. 1 and Fig. 1): at stage k
// every bit i with bit k of i clear becomes x[i] ^ x[i + 2^k], the other bits
// pass. Bit i of u and x is vector bit i. In the decoder it re-encodes the
// candidate chosen for a partition, which gives the partial sums that
// partition returns to the SC tree above it. Purely combinational. The last
// output bit equals the last input bit (the transform's last row is a unit
// vector), so that output is a plain wire.
module polar_encoder #(
  parameter int unsigned NE = 512
) (
  input  logic [NE-1:0] u,
  output logic [NE-1:0] x
);
  localparam int unsigned NL = $clog2(NE);

  logic [NL:0][NE-1:0] stage;

  assign stage[0] = u;
  for (genvar k = 0; k < NL; k++) begin : g_stage
    for (genvar i = 0; i < NE; i++) begin : g_bit
      if (((i >> k) & 1) == 0) begin : g_xor
        assign stage[k+1][i] = stage[k][i] ^ stage[k][i + (1 << k)];
      end else begin : g_pass
        assign stage[k+1][i] = stage[k][i];
      end
    end
  end
  assign x = stage[NL];
endmodule

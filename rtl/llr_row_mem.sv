// llr_row_mem: LLR memory of ROWS rows, each WIDTH bits (PE LLRs).
//
// One synchronous write port and two asynchronous read ports. The two read
// ports deliver the two parent rows a PE-array update needs in the same cycle
// (alpha[i] and alpha[i + 2^(s-1)]). Written as a register array; a
// multi-port SRAM or latch array could replace it. Contents are not reset: a
// row is always written before the decoder reads it.
module llr_row_mem #(
  parameter int unsigned ROWS  = 12,
  parameter int unsigned WIDTH = 384
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [(ROWS > 1 ? $clog2(ROWS) : 1)-1:0]  waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [(ROWS > 1 ? $clog2(ROWS) : 1)-1:0]  raddr_a,
  output logic [WIDTH-1:0]         rdata_a,
  input  logic [(ROWS > 1 ? $clog2(ROWS) : 1)-1:0]  raddr_b,
  output logic [WIDTH-1:0]         rdata_b
);
  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule

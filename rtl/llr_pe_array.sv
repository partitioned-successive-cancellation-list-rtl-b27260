// llr_pe_array: PE lanes that update one memory row of a tree node per cycle.
//
// The parent node (level s_out + 1) is read as rows of PE LLRs. When the output
// node is at least one row wide (s_out >= log2 PE), lane i takes a = row_a[i]
// and b = row_b[i], where row_b is the row 2^s_out LLRs after row_a. When the
// output node is narrower than a row, the whole parent sits in row_a and lane i
// takes a = row_a[i], b = row_a[i + 2^s_out]; lanes at or above 2^s_out produce
// don't-care values. beta_row[i] is the left-child partial sum of lane i (used
// by g only). This semi-parallel row organisation follows the list decoder
// architecture the paper builds on; the paper itself does not detail it.
// Purely combinational.
module llr_pe_array
  import pscl_pkg::*;
#(
  parameter int unsigned QA = 6,
  parameter int unsigned PE = 64
) (
  input  llr_op_e                    op,
  input  logic [4:0]                 s_out,     // level of the node produced
  input  logic [PE-1:0][QA-1:0]      row_a,
  input  logic [PE-1:0][QA-1:0]      row_b,
  input  logic [PE-1:0]              beta_row,
  output logic [PE-1:0][QA-1:0]      row_y
);
  localparam int unsigned PEL = $clog2(PE);

  logic [PE-1:0][QA-1:0] lane_a, lane_b;

  always_comb begin
    for (int unsigned i = 0; i < PE; i++) begin
      lane_a[i] = row_a[i];
      if (s_out >= 5'(PEL)) begin
        lane_b[i] = row_b[i];
      end else begin
        lane_b[i] = row_a[(i + (32'd1 << s_out)) % PE];
      end
    end
  end

  for (genvar i = 0; i < PE; i++) begin : g_lane
    llr_pe #(.QA(QA)) u_pe (
      .op   (op),
      .a    (lane_a[i]),
      .b    (lane_b[i]),
      .beta (beta_row[i]),
      .y    (row_y[i])
    );
  end
endmodule

// sc_top_tree: the single-copy SC part of the PSCL decoder tree.
//
// The paper's PSCL decoder (Sec. 3.1, Figs. 3 and 4) applies the plain SC
// rules to the levels of the tree above the partitions and keeps one copy of
// their LLRs and partial sums. This block holds the channel LLRs (level NL),
// the LLRs of levels NPL..NL-1 (level NPL is the root of the partition being
// decoded) and the partial sums of the finished left subtrees above the
// partitions.
//
// Loading: while idle, load_valid writes one row of PE channel LLRs per cycle,
// rows in order (LLR k of the frame is lane k mod PE of row k / PE).
// part_start with part_idx = p computes the root LLRs of partition p: for
// p = 0, f updates from level NL down to NPL; for p > 0, a g update at level
// NPL + ctz(p) using the stored partial sums, then f updates down to NPL. One
// row per cycle; part_ready pulses when the root is complete. beta_commit with
// the re-encoded codeword of partition p stores its partial sums (Eq. 4).
// When idle, the root level is readable through the root_* ports.
// The row organisation and the own PE array (rather than sharing the list
// decoder's lanes) are this design's choices.
module sc_top_tree
  import pscl_pkg::*;
#(
  parameter int unsigned N   = 2048,
  parameter int unsigned P   = 4,
  parameter int unsigned QA  = 6,
  parameter int unsigned PE  = 64,
  localparam int unsigned NP    = N / P,
  localparam int unsigned NL    = $clog2(N),
  localparam int unsigned NPL   = $clog2(NP),
  localparam int unsigned PL    = $clog2(P),
  localparam int unsigned PEL   = $clog2(PE),
  localparam int unsigned CROWS = level_rows(NL, PEL),
  localparam int unsigned RROWS = level_rows(NPL, PEL),
  localparam int unsigned CAW   = (CROWS > 1) ? $clog2(CROWS) : 1,
  localparam int unsigned RAW   = (RROWS > 1) ? $clog2(RROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // channel LLR load
  input  logic                    load_valid,
  input  logic [CAW-1:0]          load_row,
  input  logic [PE-1:0][QA-1:0]   load_data,
  // partition root computation
  input  logic                    part_start,
  input  logic [PL-1:0]           part_idx,
  output logic                    part_ready,
  output logic                    busy,
  // partial sums returned by a finished partition
  input  logic                    beta_commit,
  input  logic [NP-1:0]           beta_x,
  // root level read ports
  input  logic [RAW-1:0]          root_raddr_a,
  input  logic [RAW-1:0]          root_raddr_b,
  output logic [PE-1:0][QA-1:0]   root_rdata_a,
  output logic [PE-1:0][QA-1:0]   root_rdata_b
);
  localparam int unsigned ROWS = rows_total(NPL, NL, PEL);
  localparam int unsigned AW   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned BW   = NP * (P - 1);

  logic                  running;
  logic [4:0]            lev;      // level being produced
  logic [NL-1:0]         chunk;
  llr_op_e               op;
  logic [PL-1:0]         pidx;
  logic [BW-1:0]         beta;     // level k of the top subtree: NP*2^k bits at NP*(2^k-1)
  logic [BW-1:0]         beta_next;

  logic [AW-1:0]         raddr_a, raddr_b, waddr;
  logic                  we;
  logic [PE*QA-1:0]      wdata;
  logic [PE-1:0][QA-1:0] rdata_a, rdata_b, pe_out;
  logic [PE-1:0]         beta_row;
  logic [BW+PE-1:0]      beta_pad;
  int unsigned           src_row;

  llr_row_mem #(.ROWS(ROWS), .WIDTH(PE*QA)) u_mem (
    .clk     (clk),
    .we      (we),
    .waddr   (waddr),
    .wdata   (wdata),
    .raddr_a (raddr_a),
    .rdata_a (rdata_a),
    .raddr_b (raddr_b),
    .rdata_b (rdata_b)
  );

  always_comb begin
    src_row  = level_base(32'(lev) + 1, NPL, PEL) + 32'(chunk);
    if (running) begin
      raddr_a = AW'(src_row);
      raddr_b = (32'(lev) >= PEL) ? AW'(src_row + level_rows(32'(lev), PEL)) : AW'(src_row);
    end else begin
      raddr_a = AW'(32'(root_raddr_a));
      raddr_b = AW'(32'(root_raddr_b));
    end
    if (running) begin
      we    = 1'b1;
      waddr = AW'(level_base(32'(lev), NPL, PEL) + 32'(chunk));
      wdata = pe_out;
    end else begin
      we    = load_valid;
      waddr = AW'(level_base(NL, NPL, PEL) + 32'(load_row));
      wdata = load_data;
    end
    // partial sums of the left sibling at level lev, this row's lanes
    beta_pad = (BW+PE)'(beta);
    beta_row = PE'(beta_pad >> (NP * ((32'd1 << (32'(lev) - NPL)) - 1) + 32'(chunk) * PE));
  end

  assign root_rdata_a = rdata_a;
  assign root_rdata_b = rdata_b;

  llr_pe_array #(.QA(QA), .PE(PE)) u_pes (
    .op       (op),
    .s_out    (lev),
    .row_a    (rdata_a),
    .row_b    (rdata_b),
    .beta_row (beta_row),
    .row_y    (pe_out)
  );

  partial_sum_update #(.LEVELS(PL), .LEAF_W(NP)) u_psu (
    .beta_in  (beta),
    .idx      (pidx),
    .leaf     (beta_x),
    .beta_out (beta_next)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      lev        <= '0;
      chunk      <= '0;
      op         <= OP_F;
      pidx       <= '0;
      part_ready <= 1'b0;
    end else begin
      part_ready <= 1'b0;
      if (!running && part_start) begin
        running <= 1'b1;
        pidx    <= part_idx;
        chunk   <= '0;
        if (part_idx == '0) begin
          lev <= 5'(NL - 1);
          op  <= OP_F;
        end else begin
          lev <= 5'(NPL + ctz(32'(part_idx), PL));
          op  <= OP_G;
        end
      end else if (running) begin
        if (32'(chunk) == level_rows(32'(lev), PEL) - 1) begin
          chunk <= '0;
          op    <= OP_F;
          if (32'(lev) == NPL) begin
            running    <= 1'b0;
            part_ready <= 1'b1;
          end else begin
            lev <= lev - 1'b1;
          end
        end else begin
          chunk <= chunk + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (beta_commit) beta <= beta_next;
  end

  assign busy = running;

  a_no_load_while_running: assert property (@(posedge clk) disable iff (!rst_n)
    running |-> !load_valid);
  a_no_commit_while_running: assert property (@(posedge clk) disable iff (!rst_n)
    running |-> !beta_commit);
endmodule

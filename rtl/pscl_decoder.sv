// pscl_decoder: partitioned successive-cancellation list (PSCL) decoder for
// polar codes, top level.
//
// A polar code of length N is decoded on its SC tree. The tree is cut into P
// partitions (subtrees of NP = N/P leaves at level log2(NP)). Above the
// partitions plain SC decoding is used (sc_top_tree, one copy of the LLRs and
// partial sums). Each partition is decoded by CRC-aided SCL with list size L
// (scl_partition_decoder); only the candidate chosen with the partition's CRC
// leaves it, so the L-fold list memory is needed for one partition only and is
// reused by the next one. This structure is the paper's (Sec. 3.1, Figs. 3
// and 4); the sequencing below is this design's.
//
// Operation:
//  1. While idle (in_ready = 1) the frame's channel LLRs arrive as N/PE rows of
//     PE LLRs (llr_valid, llr_row in order; positive LLR favours bit 0). The
//     cycle that delivers the last row starts decoding.
//  2. For p = 0..P-1: sc_top_tree computes the root LLRs of partition p; the
//     list decoder decodes it; the chosen bits are written to u_hat and
//     re-encoded (polar_encoder) into the partial sums that sc_top_tree needs
//     for the following partitions.
//  3. out_valid pulses for one cycle; u_hat (all N bits, frozen bits 0) and
//     crc_ok (one flag per partition: a candidate passed its CRC) stay valid
//     until the next frame finishes.
// frozen (1 = frozen bit) must stay stable from the first LLR row to
// out_valid. The last CRC_W information bits of each partition are expected
// to hold the CRC of that partition's other information bits. The list
// decoder also reports which list slot it chose (list_slot); that status is
// not needed here and is left unused, so lint reports it as an unused signal.
//
// Defaults: N = 2048, P = 4, L = 2, Q_alpha = 6, Q_PM = 8, CRC-8 per partition,
// the PSCL(4,2)-CRC8 configuration of the paper. PE = 64 lanes per path is
// this design's choice (the paper gives none).
module pscl_decoder
  import pscl_pkg::*;
#(
  parameter int unsigned       N        = 2048,
  parameter int unsigned       P        = 4,
  parameter int unsigned       L        = 2,
  parameter int unsigned       QA       = 6,
  parameter int unsigned       QPM      = 8,
  parameter int unsigned       PE       = 64,
  parameter int unsigned       CRC_W    = 8,
  parameter logic [CRC_W-1:0]  CRC_POLY = 8'h2F,
  localparam int unsigned      NP       = N / P,
  localparam int unsigned      PL       = $clog2(P),
  localparam int unsigned      CROWS    = level_rows($clog2(N), $clog2(PE)),
  localparam int unsigned      CAW      = (CROWS > 1) ? $clog2(CROWS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N-1:0]           frozen,
  input  logic                   llr_valid,
  input  logic [PE-1:0][QA-1:0]  llr_row,
  output logic                   in_ready,
  output logic                   out_valid,
  output logic [N-1:0]           u_hat,
  output logic [P-1:0]           crc_ok
);
  localparam int unsigned NPL   = $clog2(NP);
  localparam int unsigned RROWS = level_rows(NPL, $clog2(PE));
  localparam int unsigned RAW   = (RROWS > 1) ? $clog2(RROWS) : 1;

  typedef enum logic [2:0] {T_LOAD, T_ROOT, T_ROOT_WAIT, T_LIST, T_LIST_WAIT, T_COMMIT} top_state_e;

  top_state_e            state;
  logic [CAW-1:0]        load_row;
  logic [PL-1:0]         part;

  logic                  part_start, part_ready, tree_busy;
  logic                  list_start, list_busy, list_done, list_crc_ok;
  logic [NP-1:0]         list_u, list_x;
  logic [$clog2(L)-1:0]  list_slot;
  logic [RAW-1:0]        root_raddr_a, root_raddr_b;
  logic [PE-1:0][QA-1:0] root_rdata_a, root_rdata_b;
  logic                  beta_commit;

  sc_top_tree #(.N(N), .P(P), .QA(QA), .PE(PE)) u_tree (
    .clk          (clk),
    .rst_n        (rst_n),
    .load_valid   (llr_valid && state == T_LOAD),
    .load_row     (load_row),
    .load_data    (llr_row),
    .part_start   (part_start),
    .part_idx     (part),
    .part_ready   (part_ready),
    .busy         (tree_busy),
    .beta_commit  (beta_commit),
    .beta_x       (list_x),
    .root_raddr_a (root_raddr_a),
    .root_raddr_b (root_raddr_b),
    .root_rdata_a (root_rdata_a),
    .root_rdata_b (root_rdata_b)
  );

  scl_partition_decoder #(
    .NP(NP), .L(L), .QA(QA), .QPM(QPM), .PE(PE), .CRC_W(CRC_W), .CRC_POLY(CRC_POLY)
  ) u_list (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (list_start),
    .frozen       (frozen[part*NP +: NP]),
    .root_raddr_a (root_raddr_a),
    .root_raddr_b (root_raddr_b),
    .root_rdata_a (root_rdata_a),
    .root_rdata_b (root_rdata_b),
    .busy         (list_busy),
    .done         (list_done),
    .u_sel        (list_u),
    .crc_ok       (list_crc_ok),
    .sel_slot     (list_slot)
  );

  // partial sums of the chosen candidate = its polar codeword
  polar_encoder #(.NE(NP)) u_enc (
    .u (list_u),
    .x (list_x)
  );

  assign in_ready    = (state == T_LOAD);
  assign part_start  = (state == T_ROOT);
  assign list_start  = (state == T_LIST);
  assign beta_commit = (state == T_COMMIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_LOAD;
      load_row  <= '0;
      part      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        T_LOAD: if (llr_valid) begin
          load_row <= load_row + 1'b1;
          if (32'(load_row) == CROWS - 1) begin
            load_row <= '0;
            part     <= '0;
            state    <= T_ROOT;
          end
        end
        T_ROOT:      state <= T_ROOT_WAIT;
        T_ROOT_WAIT: if (part_ready) state <= T_LIST;
        T_LIST:      state <= T_LIST_WAIT;
        T_LIST_WAIT: if (list_done) state <= T_COMMIT;
        T_COMMIT: begin
          if (32'(part) == P - 1) begin
            out_valid <= 1'b1;
            state     <= T_LOAD;
          end else begin
            part  <= part + 1'b1;
            state <= T_ROOT;
          end
        end
        default: state <= T_LOAD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == T_COMMIT) begin
      u_hat[part*NP +: NP] <= list_u;
      crc_ok[part]         <= list_crc_ok;
    end
  end

  a_tree_idle_during_list: assert property (@(posedge clk) disable iff (!rst_n)
    list_busy |-> !tree_busy);
endmodule

// scl_partition_decoder: CRC-aided successive-cancellation list (SCL) decoder
// for one partition of the PSCL decoder.
//
// A partition is a subtree of NP = 2^NPL leaves. Its root LLRs (level NPL) are
// computed once by the SC tree above and read from outside through the two
// root_* read ports. Inside the partition L list paths are decoded in lock
// step, as in the paper (Sec. 3.1): SCL on the partition, then one candidate
// leaves it, selected with the help of a CRC.
//
// Per bit j the controller walks the tree: a g update at the level where bit j
// leaves the path of bit j-1 (trailing zeros of j), then f updates down to
// level 1, one memory row (PE LLRs) per cycle and path (state RUN). The
// decision cycle (state DECIDE) computes the leaf LLR of every path from level
// 1, extends every path with u = 0 and u = 1 (u = 0 only for a frozen bit),
// updates the path metrics (Eq. 5), keeps the L best candidates sorted by
// metric, and for each surviving slot copies its parent's metric, CRC
// remainder, decided bits, partial sums and LLR-memory pointers.
//
// LLR memories: each path owns one row memory for levels 1..NPL-1. Paths do
// not copy LLRs when a path is cloned; a pointer table gives, per path and
// level, which path's memory holds the valid LLRs. A path always writes its
// own memory and then points to it. Since all paths work in lock step, all
// memories are read at the same row address and a crossbar picks each path's
// source by pointer. This lazy-copy scheme comes from the list decoder
// architecture the paper modifies; its details here are this design's own.
//
// After the last bit (state SELECT) the lowest (best-metric) slot whose CRC
// remainder is zero is chosen, or slot 0 if none passes, as the paper states.
// Its bits appear on u_sel with crc_ok, and done pulses for one cycle.
//
// Timing: bit j > 0 costs sum over levels s = 1..ctz(j) of max(1, 2^s/PE)
// update cycles plus one decision cycle; bit 0 costs the same with all levels
// 1..NPL-1. SELECT adds one cycle. start is taken in IDLE only; frozen must be
// stable until done.
module scl_partition_decoder
  import pscl_pkg::*;
#(
  parameter int unsigned   NP       = 512,
  parameter int unsigned   L        = 2,
  parameter int unsigned   QA       = 6,
  parameter int unsigned   QPM      = 8,
  parameter int unsigned   PE       = 64,
  parameter int unsigned   CRC_W    = 8,
  parameter logic [CRC_W-1:0] CRC_POLY = 8'h2F,
  // derived
  localparam int unsigned  NPL      = $clog2(NP),
  localparam int unsigned  PEL      = $clog2(PE),
  localparam int unsigned  RROWS    = level_rows(NPL, PEL),
  localparam int unsigned  RAW      = (RROWS > 1) ? $clog2(RROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [NP-1:0]           frozen,
  // root LLR memory (level NPL) read ports
  output logic [RAW-1:0]          root_raddr_a,
  output logic [RAW-1:0]          root_raddr_b,
  input  logic [PE-1:0][QA-1:0]   root_rdata_a,
  input  logic [PE-1:0][QA-1:0]   root_rdata_b,
  // result
  output logic                    busy,
  output logic                    done,
  output logic [NP-1:0]           u_sel,
  output logic                    crc_ok,
  output logic [$clog2(L)-1:0]    sel_slot
);
  localparam int unsigned PROWS = rows_total(1, NPL - 1, PEL);
  localparam int unsigned PAW   = (PROWS > 1) ? $clog2(PROWS) : 1;
  localparam int unsigned LW    = $clog2(L);
  localparam int unsigned BW    = NP - 1;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DECIDE, S_SELECT} state_e;

  state_e              state;
  logic [NPL-1:0]      j;          // bit being decoded
  logic [4:0]          lev;        // level of the node being produced
  logic [NPL-1:0]      chunk;      // row within that node
  llr_op_e             op;

  // per-path state
  logic [L-1:0][NPL-1:0][LW-1:0] ptr;
  logic [L-1:0][QPM-1:0]         pm;
  logic [L-1:0]                  active;
  logic [L-1:0][CRC_W-1:0]       crc;
  logic [L-1:0][BW-1:0]          beta;
  logic [L-1:0][NP-1:0]          ubits;

  // ---------------------------------------------------------------- datapath
  logic [PAW-1:0]                mem_raddr_a, mem_raddr_b, mem_waddr;
  logic                          mem_we;
  logic [L-1:0][PE-1:0][QA-1:0]  mem_rdata_a, mem_rdata_b;
  logic [L-1:0][PE-1:0][QA-1:0]  src_a, src_b, pe_out;
  logic [L-1:0][PE-1:0]          beta_row;
  llr_op_e                       pe_op;
  logic                          src_is_root;
  int unsigned                   src_row;

  always_comb begin
    src_is_root  = (32'(lev) + 1 == NPL);
    src_row      = src_is_root ? 32'(chunk) : level_base(32'(lev) + 1, 1, PEL) + 32'(chunk);
    mem_raddr_a  = PAW'(src_row);
    mem_raddr_b  = (32'(lev) >= PEL) ? PAW'(src_row + level_rows(32'(lev), PEL)) : PAW'(src_row);
    root_raddr_a = RAW'(chunk);
    root_raddr_b = (32'(lev) >= PEL) ? RAW'(32'(chunk) + level_rows(32'(lev), PEL)) : RAW'(chunk);
    mem_waddr    = PAW'(level_base(32'(lev), 1, PEL) + 32'(chunk));
    mem_we       = (state == S_RUN);
    pe_op        = (state == S_DECIDE) ? (j[0] ? OP_G : OP_F) : op;
  end

  for (genvar l = 0; l < L; l++) begin : g_path
    logic [BW+PE-1:0] beta_pad;

    llr_row_mem #(.ROWS(PROWS), .WIDTH(PE*QA)) u_mem (
      .clk     (clk),
      .we      (mem_we),
      .waddr   (mem_waddr),
      .wdata   (pe_out[l]),
      .raddr_a (mem_raddr_a),
      .rdata_a (mem_rdata_a[l]),
      .raddr_b (mem_raddr_b),
      .rdata_b (mem_rdata_b[l])
    );

    // crossbar: the source rows of path l come from the root or from the
    // memory its pointer names for the source level
    always_comb begin
      if (src_is_root) begin
        src_a[l] = root_rdata_a;
        src_b[l] = root_rdata_b;
      end else begin
        src_a[l] = mem_rdata_a[ptr[l][lev+1]];
        src_b[l] = mem_rdata_b[ptr[l][lev+1]];
      end
      beta_pad    = (BW+PE)'(beta[l]);
      beta_row[l] = PE'(beta_pad >> (((32'd1 << lev) - 1) + 32'(chunk) * PE));
    end

    llr_pe_array #(.QA(QA), .PE(PE)) u_pes (
      .op       (pe_op),
      .s_out    (lev),
      .row_a    (src_a[l]),
      .row_b    (src_b[l]),
      .beta_row (beta_row[l]),
      .row_y    (pe_out[l])
    );
  end

  // ------------------------------------------------------- decision datapath
  logic [2*L-1:0][QPM-1:0]       cand_pm;
  logic [2*L-1:0]                cand_valid;
  logic [L-1:0][$clog2(2*L)-1:0] slot_cand;
  logic [L-1:0]                  slot_valid;
  logic [L-1:0][CRC_W-1:0]       crc_next0, crc_next1;
  logic [L-1:0][LW-1:0]          slot_parent;
  logic [L-1:0]                  slot_bit;
  logic [L-1:0][BW-1:0]          beta_next;

  for (genvar l = 0; l < L; l++) begin : g_pm
    path_metric_unit #(.QA(QA), .QPM(QPM)) u_pmu (
      .alpha  (pe_out[l][0]),
      .pm_in  (pm[l]),
      .frozen (frozen[j]),
      .active (active[l]),
      .pm0    (cand_pm[2*l]),
      .pm1    (cand_pm[2*l+1]),
      .valid0 (cand_valid[2*l]),
      .valid1 (cand_valid[2*l+1])
    );
    crc_lfsr #(.W(CRC_W), .POLY(CRC_POLY)) u_crc0 (
      .crc_in (crc[l]), .bit_in (1'b0), .crc_out (crc_next0[l]));
    crc_lfsr #(.W(CRC_W), .POLY(CRC_POLY)) u_crc1 (
      .crc_in (crc[l]), .bit_in (1'b1), .crc_out (crc_next1[l]));
  end

  path_sorter #(.L(L), .QPM(QPM)) u_sort (
    .cand_pm    (cand_pm),
    .cand_valid (cand_valid),
    .slot_cand  (slot_cand),
    .slot_valid (slot_valid)
  );

  for (genvar r = 0; r < L; r++) begin : g_slot
    assign slot_parent[r] = LW'(slot_cand[r] >> 1);
    assign slot_bit[r]    = slot_cand[r][0];
    partial_sum_update #(.LEVELS(NPL), .LEAF_W(1)) u_psu (
      .beta_in  (beta[slot_parent[r]]),
      .idx      (j),
      .leaf     (slot_bit[r]),
      .beta_out (beta_next[r])
    );
  end

  // CRC-aided selection at the end of the partition
  logic [LW-1:0] pick;
  logic          pick_ok;
  always_comb begin
    pick    = '0;
    pick_ok = 1'b0;
    for (int r = L - 1; r >= 0; r--)
      if (active[r] && crc[r] == '0) begin
        pick    = LW'(r);
        pick_ok = 1'b1;
      end
  end

  // ---------------------------------------------------------------- control
  logic [NPL-1:0] j_next;
  int unsigned    t_next;
  assign j_next = j + 1'b1;
  assign t_next = ctz(32'(j_next), NPL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      j     <= '0;
      lev   <= '0;
      chunk <= '0;
      op    <= OP_F;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          j     <= '0;
          lev   <= 5'(NPL - 1);
          chunk <= '0;
          op    <= OP_F;
        end
        S_RUN: begin
          if (32'(chunk) == level_rows(32'(lev), PEL) - 1) begin
            chunk <= '0;
            op    <= OP_F;
            if (lev == 5'd1) begin
              lev   <= '0;
              state <= S_DECIDE;
            end else begin
              lev <= lev - 1'b1;
            end
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        S_DECIDE: begin
          if (&j) begin
            state <= S_SELECT;
          end else begin
            j <= j_next;
            if (t_next != 0) begin
              lev   <= 5'(t_next);
              op    <= OP_G;
              chunk <= '0;
              state <= S_RUN;
            end
          end
        end
        S_SELECT: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // per-path state: written by the update and decision cycles
  always_ff @(posedge clk) begin
    if (state == S_IDLE && start) begin
      for (int l = 0; l < L; l++) begin
        pm[l]     <= '0;
        active[l] <= (l == 0);
        crc[l]    <= '0;
        ubits[l]  <= '0;
        beta[l]   <= '0;
        ptr[l]    <= '0;
      end
    end else if (state == S_RUN) begin
      for (int l = 0; l < L; l++) ptr[l][lev] <= LW'(l);
    end else if (state == S_DECIDE) begin
      for (int r = 0; r < L; r++) begin
        pm[r]     <= slot_bit[r] ? cand_pm[2*slot_parent[r]+1] : cand_pm[2*slot_parent[r]];
        active[r] <= slot_valid[r];
        if (frozen[j])
          crc[r] <= crc[slot_parent[r]];
        else
          crc[r] <= slot_bit[r] ? crc_next1[slot_parent[r]] : crc_next0[slot_parent[r]];
        ubits[r]    <= ubits[slot_parent[r]];
        ubits[r][j] <= slot_bit[r];
        beta[r]     <= beta_next[r];
        ptr[r]      <= ptr[slot_parent[r]];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state == S_SELECT) begin
      u_sel    <= ubits[pick];
      crc_ok   <= pick_ok;
      sel_slot <= pick;
    end
  end

  assign busy = (state != S_IDLE);

  // at least one path survives every decision
  a_list_nonempty: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_DECIDE |-> slot_valid[0]);

endmodule

// pgmdp_store_queue: program-ordered store queue (SQ) with store-to-load
// forwarding.
//
// Stores enter at dispatch in program order (up to NLANE per cycle) and are
// named by their queue position (pos, counted modulo 2*SQ_ENTRIES).  A store
// executes when its address and data are known (one store per cycle).  An
// executing load searches the SQ backwards from its own position for the
// youngest older store that has executed and overlaps it; unresolved older
// stores are ignored (the speculation that the MDP polices):
//   * fwd_hit   - that store covers every byte of the load: data forwarded;
//   * fwd_stall - it overlaps only part of the load: the load must retry
//                 later (this design's choice for partial overlap);
//   * neither   - the load reads the cache.
// After commit (commit_cnt stores per cycle, oldest first) stores drain to
// the data cache one per cycle through a valid/ready port and free their
// entry.  A flush drops every store from flush_pos onwards.
//
// Addresses are split into a doubleword address and a byte mask; accesses
// are assumed naturally aligned (they do not cross a doubleword).  Store data
// is kept in doubleword byte lanes; fwd_data is shifted down to the load's
// offset (extension is left to the load unit).
//
// For dependence tracking the SQ exports, per entry, whether it holds a store
// that has not yet executed (pend), and its head and tail positions.
//
// Timing: alloc, execute, commit, drain and flush update state at the clock
// edge; the forwarding search and ex_pc are combinational.  A store executing
// in the same cycle as a load search is not seen by that search; the load
// queue's violation check covers that case.  Entry flags are reset; entry
// payloads are not (they are read only while valid).  Lint notes that rst_n
// is used both as an asynchronous reset and in the assertion's disable
// condition; that is intended.
module pgmdp_store_queue
  import pgmdp_pkg::*;
#(
  parameter int unsigned SQ_ENTRIES = SQ_ENTRIES_DEF,
  parameter int unsigned NLANE      = DISPATCH_W_DEF,
  localparam int unsigned POS_W = $clog2(2 * SQ_ENTRIES),
  localparam int unsigned CNT_W = $clog2(SQ_ENTRIES + 1),
  localparam int unsigned LC_W  = $clog2(NLANE + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocation at dispatch
  input  logic              alloc_valid [NLANE],
  input  logic [PC_W-1:0]   alloc_pc    [NLANE],
  output logic [POS_W-1:0]  head_pos,
  output logic [POS_W-1:0]  tail_pos,
  output logic [CNT_W-1:0]  free_cnt,
  // store execution
  input  logic              ex_valid,
  input  logic [POS_W-1:0]  ex_pos,
  input  logic [ADDR_W-1:0] ex_addr,
  input  logic [1:0]        ex_size,
  input  logic [DATA_W-1:0] ex_data,
  output logic [PC_W-1:0]   ex_pc,
  // load forwarding search
  input  logic              ld_valid,
  input  logic [POS_W-1:0]  ld_sqpos,   // first store younger than the load
  input  logic [ADDR_W-1:0] ld_addr,
  input  logic [1:0]        ld_size,
  output logic              fwd_hit,
  output logic              fwd_stall,
  output logic [POS_W-1:0]  fwd_pos,
  output logic [DATA_W-1:0] fwd_data,
  // commit and drain
  input  logic [LC_W-1:0]   commit_cnt,
  output logic              dc_wr_valid,
  input  logic              dc_wr_ready,
  output logic [ADDR_W-1:0] dc_wr_addr,   // doubleword aligned
  output logic [7:0]        dc_wr_mask,
  output logic [DATA_W-1:0] dc_wr_data,
  // flush
  input  logic              flush_valid,
  input  logic [POS_W-1:0]  flush_pos,
  // per-entry state for dependence tracking
  output logic [SQ_ENTRIES-1:0] pend
);

  localparam int unsigned N2    = 2 * SQ_ENTRIES;
  localparam int unsigned IDX_W = $clog2(SQ_ENTRIES);

  // Payload of an entry (no reset: only meaningful while the entry is valid).
  typedef struct packed {
    logic [PC_W-1:0]       pc;
    logic [ADDR_W-4:0]     dw;     // doubleword address
    logic [7:0]            mask;
    logic [DATA_W-1:0]     data;
  } sq_entry_t;

  sq_entry_t             q [SQ_ENTRIES];
  logic [SQ_ENTRIES-1:0] v_q, x_q, c_q;      // valid, executed, committed
  logic [SQ_ENTRIES-1:0] v_n, x_n, c_n;
  logic [POS_W-1:0]      head_q, tail_q, cmt_q;

  assign head_pos = head_q;
  assign tail_pos = tail_q;
  assign free_cnt = CNT_W'(SQ_ENTRIES - pos_dist(tail_q, head_q, N2));

  assign pend = v_q & ~x_q;

  // Entry indices of the head, tail and commit pointers, and each entry's
  // distance from them (its age, and its rank among newly allocated or newly
  // committed entries).
  logic [IDX_W-1:0] hidx, tidx, cidx, exi;
  logic [IDX_W-1:0] age  [SQ_ENTRIES];
  logic [IDX_W-1:0] tage [SQ_ENTRIES];
  logic [IDX_W-1:0] cage [SQ_ENTRIES];
  assign hidx = IDX_W'(pos_idx(head_q, SQ_ENTRIES));
  assign tidx = IDX_W'(pos_idx(tail_q, SQ_ENTRIES));
  assign cidx = IDX_W'(pos_idx(cmt_q, SQ_ENTRIES));
  assign exi  = IDX_W'(pos_idx(ex_pos, SQ_ENTRIES));

  always_comb
    for (int e = 0; e < SQ_ENTRIES; e++) begin
      age[e]  = IDX_W'(pos_dist(e, hidx, SQ_ENTRIES));
      tage[e] = IDX_W'(pos_dist(e, tidx, SQ_ENTRIES));
      cage[e] = IDX_W'(pos_dist(e, cidx, SQ_ENTRIES));
    end

  assign ex_pc = q[exi].pc;

  // ---- forwarding search ----------------------------------------------------
  always_comb begin
    logic [IDX_W:0]   ld_d;
    logic [IDX_W-1:0] best_a, best_e;
    logic             found;
    logic [7:0]       lmask;
    lmask     = byte_mask(ld_addr[2:0], ld_size);
    ld_d      = (IDX_W+1)'(pos_dist(ld_sqpos, head_q, N2));
    found     = 1'b0;
    best_a    = '0;
    best_e    = '0;
    fwd_pos   = '0;
    fwd_hit   = 1'b0;
    fwd_stall = 1'b0;
    fwd_data  = '0;
    for (int e = 0; e < SQ_ENTRIES; e++) begin
      if ({1'b0, age[e]} < ld_d && v_q[e] && x_q[e] &&
          q[e].dw == ld_addr[ADDR_W-1:3] && (q[e].mask & lmask) != 8'h00 &&
          (!found || age[e] > best_a)) begin
        found  = 1'b1;
        best_a = age[e];
        best_e = IDX_W'(e);
      end
    end
    if (ld_valid && found) begin
      fwd_pos  = POS_W'(pos_add(head_q, best_a, N2));
      if ((q[best_e].mask & lmask) == lmask) begin
        fwd_hit  = 1'b1;
        fwd_data = q[best_e].data >> {ld_addr[2:0], 3'b000};
      end else begin
        fwd_stall = 1'b1;
      end
    end
  end

  // ---- drain ------------------------------------------------------------------
  assign dc_wr_valid = v_q[hidx] && c_q[hidx];
  assign dc_wr_addr  = {q[hidx].dw, 3'b000};
  assign dc_wr_mask  = q[hidx].mask;
  assign dc_wr_data  = q[hidx].data;

  // ---- allocation: lane of each newly allocated entry ----------------------------
  int unsigned      n_alloc;
  logic [IDX_W-1:0] rank  [NLANE];
  logic             aw    [SQ_ENTRIES];
  logic [LC_W-1:0]  asel  [SQ_ENTRIES];

  always_comb begin
    n_alloc = 0;
    for (int l = 0; l < NLANE; l++) begin
      rank[l] = IDX_W'(n_alloc);
      if (alloc_valid[l]) n_alloc++;
    end
    for (int e = 0; e < SQ_ENTRIES; e++) begin
      aw[e]   = !flush_valid && int'(tage[e]) < n_alloc;
      asel[e] = '0;
      for (int l = 0; l < NLANE; l++)
        if (alloc_valid[l] && rank[l] == tage[e]) asel[e] = LC_W'(l);
    end
  end

  // ---- next state of the per-entry flags ---------------------------------------------
  logic [IDX_W:0] fd;
  assign fd = (IDX_W+1)'(pos_dist(flush_pos, head_q, N2));

  always_comb begin
    v_n = v_q;
    x_n = x_q;
    c_n = c_q;
    if (ex_valid) x_n[exi] = 1'b1;
    for (int e = 0; e < SQ_ENTRIES; e++)
      if ({1'b0, cage[e]} < (IDX_W+1)'(commit_cnt)) c_n[e] = 1'b1;
    if (dc_wr_valid && dc_wr_ready) begin
      v_n[hidx] = 1'b0;
      c_n[hidx] = 1'b0;
    end
    for (int e = 0; e < SQ_ENTRIES; e++) begin
      if (flush_valid && {1'b0, age[e]} >= fd) v_n[e] = 1'b0;
      if (aw[e]) begin
        v_n[e] = 1'b1;
        x_n[e] = 1'b0;
        c_n[e] = 1'b0;
      end
    end
  end

  // ---- state update -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q <= '0;
      tail_q <= '0;
      cmt_q  <= '0;
      v_q    <= '0;
      x_q    <= '0;
      c_q    <= '0;
    end else begin
      v_q    <= v_n;
      x_q    <= x_n;
      c_q    <= c_n;
      cmt_q  <= POS_W'(pos_add(cmt_q, commit_cnt, N2));
      if (dc_wr_valid && dc_wr_ready) head_q <= POS_W'(pos_add(head_q, 1, N2));
      if (flush_valid) tail_q <= flush_pos;
      else             tail_q <= POS_W'(pos_add(tail_q, n_alloc, N2));
    end
  end

  always_ff @(posedge clk) begin
    for (int e = 0; e < SQ_ENTRIES; e++) begin
      if (ex_valid && exi == IDX_W'(e)) begin
        q[e].dw   <= ex_addr[ADDR_W-1:3];
        q[e].mask <= byte_mask(ex_addr[2:0], ex_size);
        q[e].data <= ex_data << {ex_addr[2:0], 3'b000};
      end
      if (aw[e]) q[e].pc <= alloc_pc[asel[e]];
    end
  end

  // Allocation never overruns the free entries.
  property p_no_overrun;
    @(posedge clk) disable iff (!rst_n)
      !flush_valid |-> (n_alloc <= int'(free_cnt));
  endproperty
  a_no_overrun: assert property (p_no_overrun);

endmodule

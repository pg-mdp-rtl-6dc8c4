// pgmdp_load_queue: program-ordered load queue (LQ) with predicted-dependence
// tracking and memory order violation detection.
//
// Loads enter at dispatch in program order (up to NLANE per cycle).  Each
// entry records the load's PC, whether it is a PG-MDP labeled load, its
// store queue position sqpos (the position the next younger store gets, so
// every store at an earlier position is older than the load) and up to
// LFST_SLOTS predicted store dependences (SQ positions from the MDP).
//
// Dependence wait.  dep_ready[e] tells the issue logic that entry e may
// issue as far as memory dependences go: every predicted store has executed,
// or has left the store queue, or is not older than the load (a stale
// prediction).  Labeled loads carry no predictions and are ready at once.
//
// Execution.  One load per cycle executes (ex_*), together with the result
// of its store queue search (fwd_hit/fwd_pos/fwd_stall).  A load whose search
// hit a partial overlap (fwd_stall) is not marked executed.  A load that was
// predicted dependent but did not take its data from one of its predicted
// stores counts as a false dependence (false_dep pulse).
//
// Violation.  When a store executes (st_*), the LQ is searched for younger
// loads that have already executed, overlap the store, and took their data
// from the cache or from a store older than this one (a forwarding store
// that has since drained from the SQ counts as older).  The load executing in
// the same cycle is included.  The oldest such load is reported one cycle
// later on viol_*: its LQ position, PC, labeled bit, its sqpos (to flush the
// younger stores), and the store's PC for MDP training.  The squash itself is
// done by the core through flush_valid/flush_pos.
//
// Loads leave at commit (commit_cnt per cycle, oldest first).  State updates
// at the clock edge; dep_ready and ex_sqpos are combinational.  Entry flags
// are reset; entry payloads are not (they are read only while valid).
// Lint notes that rst_n is used both as an asynchronous reset and in the
// assertion's disable condition; that is intended.
module pgmdp_load_queue
  import pgmdp_pkg::*;
#(
  parameter int unsigned LQ_ENTRIES = LQ_ENTRIES_DEF,
  parameter int unsigned SQ_ENTRIES = SQ_ENTRIES_DEF,
  parameter int unsigned NLANE      = DISPATCH_W_DEF,
  parameter int unsigned LFST_SLOTS = LFST_SLOTS_DEF,
  localparam int unsigned POS_W  = $clog2(2 * LQ_ENTRIES),
  localparam int unsigned SPOS_W = $clog2(2 * SQ_ENTRIES),
  localparam int unsigned CNT_W  = $clog2(LQ_ENTRIES + 1),
  localparam int unsigned LC_W   = $clog2(NLANE + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocation at dispatch
  input  logic              alloc_valid   [NLANE],
  input  logic [PC_W-1:0]   alloc_pc      [NLANE],
  input  logic              alloc_labeled [NLANE],
  input  logic [SPOS_W-1:0] alloc_sqpos   [NLANE],
  input  logic [LFST_SLOTS-1:0] alloc_dep_v [NLANE],
  input  logic [SPOS_W-1:0] alloc_dep_tag [NLANE][LFST_SLOTS],
  output logic [POS_W-1:0]  head_pos,
  output logic [POS_W-1:0]  tail_pos,
  output logic [CNT_W-1:0]  free_cnt,
  // store queue state
  input  logic [SPOS_W-1:0] sq_head,
  input  logic [SPOS_W-1:0] sq_tail,
  input  logic [SQ_ENTRIES-1:0] sq_pend,
  output logic [LQ_ENTRIES-1:0] dep_ready,
  // load execution
  input  logic              ex_valid,
  input  logic [POS_W-1:0]  ex_pos,
  input  logic [ADDR_W-1:0] ex_addr,
  input  logic [1:0]        ex_size,
  output logic [SPOS_W-1:0] ex_sqpos,
  input  logic              fwd_hit,
  input  logic              fwd_stall,
  input  logic [SPOS_W-1:0] fwd_pos,
  output logic              false_dep,
  // store execution (violation search)
  input  logic              st_valid,
  input  logic [SPOS_W-1:0] st_pos,
  input  logic [ADDR_W-1:0] st_addr,
  input  logic [1:0]        st_size,
  input  logic [PC_W-1:0]   st_pc,
  output logic              viol_valid,
  output logic [POS_W-1:0]  viol_pos,
  output logic [PC_W-1:0]   viol_ld_pc,
  output logic              viol_labeled,
  output logic [SPOS_W-1:0] viol_sqpos,
  output logic [PC_W-1:0]   viol_st_pc,
  // commit and flush
  input  logic [LC_W-1:0]   commit_cnt,
  input  logic              flush_valid,
  input  logic [POS_W-1:0]  flush_pos
);

  localparam int unsigned N2    = 2 * LQ_ENTRIES;
  localparam int unsigned SN2   = 2 * SQ_ENTRIES;
  localparam int unsigned IDX_W = $clog2(LQ_ENTRIES);

  // Payload of an entry (no reset: only meaningful while the entry is valid).
  typedef struct packed {
    logic                             labeled;
    logic [PC_W-1:0]                  pc;
    logic [SPOS_W-1:0]                sqpos;
    logic [LFST_SLOTS-1:0]            dep_v;
    logic [LFST_SLOTS-1:0][SPOS_W-1:0] dep_tag;
    logic [ADDR_W-4:0]                dw;
    logic [7:0]                       mask;
    logic                             fwd_v;
    logic [SPOS_W-1:0]                fwd_pos;
  } lq_entry_t;

  lq_entry_t             q [LQ_ENTRIES];
  logic [LQ_ENTRIES-1:0] v_q, x_q;   // valid, executed
  logic [LQ_ENTRIES-1:0] v_n, x_n;
  logic [POS_W-1:0]      head_q, tail_q;

  assign head_pos = head_q;
  assign tail_pos = tail_q;
  assign free_cnt = CNT_W'(LQ_ENTRIES - pos_dist(tail_q, head_q, N2));

  // Entry indices of head, tail and the executing load; each entry's age
  // (distance from the head) and rank among newly allocated entries.
  logic [IDX_W-1:0] hidx, tidx, ex_e;
  logic [IDX_W-1:0] age  [LQ_ENTRIES];
  logic [IDX_W-1:0] tage [LQ_ENTRIES];
  assign hidx = IDX_W'(pos_idx(head_q, LQ_ENTRIES));
  assign tidx = IDX_W'(pos_idx(tail_q, LQ_ENTRIES));
  assign ex_e = IDX_W'(pos_idx(ex_pos, LQ_ENTRIES));

  always_comb
    for (int e = 0; e < LQ_ENTRIES; e++) begin
      age[e]  = IDX_W'(pos_dist(e, hidx, LQ_ENTRIES));
      tage[e] = IDX_W'(pos_dist(e, tidx, LQ_ENTRIES));
    end

  assign ex_sqpos = q[ex_e].sqpos;

  // A predicted store still holds the load back if it lies between the SQ
  // head and the load's own position and has not executed.
  function automatic logic waits_on(logic [SPOS_W-1:0] tag,
                                    logic [SPOS_W-1:0] ldpos);
    int unsigned td, ld, live;
    td   = pos_dist(tag, sq_head, SN2);
    ld   = pos_dist(ldpos, sq_head, SN2);
    live = pos_dist(sq_tail, sq_head, SN2);
    return (td < ld) && (td < live) && sq_pend[pos_idx(tag, SQ_ENTRIES)];
  endfunction

  always_comb begin
    for (int e = 0; e < LQ_ENTRIES; e++) begin
      dep_ready[e] = v_q[e];
      for (int k = 0; k < LFST_SLOTS; k++)
        if (q[e].dep_v[k] && waits_on(q[e].dep_tag[k], q[e].sqpos))
          dep_ready[e] = 1'b0;
    end
  end

  // ---- false dependence --------------------------------------------------------
  always_comb begin
    logic from_pred;
    from_pred = 1'b0;
    for (int k = 0; k < LFST_SLOTS; k++)
      if (q[ex_e].dep_v[k] && fwd_hit && q[ex_e].dep_tag[k] == fwd_pos)
        from_pred = 1'b1;
    false_dep = ex_valid && !fwd_stall && (q[ex_e].dep_v != '0) && !from_pred;
  end

  // ---- violation search ----------------------------------------------------------
  // Every entry is checked in parallel; the match with the smallest age wins.
  logic              vfound;
  logic [IDX_W-1:0]  vbest, vbest_a;
  always_comb begin
    int unsigned sd, live, fd;
    logic        execd, fv;
    logic [SPOS_W-1:0] fp;
    logic [ADDR_W-4:0] dw;
    logic [7:0]  m, smask;
    smask   = byte_mask(st_addr[2:0], st_size);
    sd      = pos_dist(st_pos, sq_head, SN2);
    live    = pos_dist(sq_tail, sq_head, SN2);
    vfound  = 1'b0;
    vbest   = '0;
    vbest_a = '0;
    for (int e = 0; e < LQ_ENTRIES; e++) begin
      if (ex_valid && !fwd_stall && ex_e == IDX_W'(e)) begin
        execd = 1'b1;
        dw    = ex_addr[ADDR_W-1:3];
        m     = byte_mask(ex_addr[2:0], ex_size);
        fv    = fwd_hit;
        fp    = fwd_pos;
      end else begin
        execd = x_q[e];
        dw    = q[e].dw;
        m     = q[e].mask;
        fv    = q[e].fwd_v;
        fp    = q[e].fwd_pos;
      end
      fd = pos_dist(fp, sq_head, SN2);
      if (st_valid && v_q[e] && execd &&
          sd < pos_dist(q[e].sqpos, sq_head, SN2) &&
          dw == st_addr[ADDR_W-1:3] && (m & smask) != 8'h00 &&
          (!fv || fd < sd || fd >= live) &&
          (!vfound || age[e] < vbest_a)) begin
        vfound  = 1'b1;
        vbest   = IDX_W'(e);
        vbest_a = age[e];
      end
    end
  end

  // ---- allocation: lane of each newly allocated entry ----------------------------
  int unsigned      n_alloc;
  logic [IDX_W-1:0] rank [NLANE];
  logic             aw   [LQ_ENTRIES];
  logic [LC_W-1:0]  asel [LQ_ENTRIES];

  always_comb begin
    n_alloc = 0;
    for (int l = 0; l < NLANE; l++) begin
      rank[l] = IDX_W'(n_alloc);
      if (alloc_valid[l]) n_alloc++;
    end
    for (int e = 0; e < LQ_ENTRIES; e++) begin
      aw[e]   = !flush_valid && int'(tage[e]) < n_alloc;
      asel[e] = '0;
      for (int l = 0; l < NLANE; l++)
        if (alloc_valid[l] && rank[l] == tage[e]) asel[e] = LC_W'(l);
    end
  end

  // ---- next state of the per-entry flags ---------------------------------------------
  logic [IDX_W:0] fl_d;
  assign fl_d = (IDX_W+1)'(pos_dist(flush_pos, head_q, N2));

  always_comb begin
    v_n = v_q;
    x_n = x_q;
    if (ex_valid && !fwd_stall) x_n[ex_e] = 1'b1;
    for (int e = 0; e < LQ_ENTRIES; e++) begin
      if ({1'b0, age[e]} < (IDX_W+1)'(commit_cnt)) v_n[e] = 1'b0;
      if (flush_valid && {1'b0, age[e]} >= fl_d)   v_n[e] = 1'b0;
      if (aw[e]) begin
        v_n[e] = 1'b1;
        x_n[e] = 1'b0;
      end
    end
  end

  // ---- state update ----------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head_q     <= '0;
      tail_q     <= '0;
      v_q        <= '0;
      x_q        <= '0;
      viol_valid <= 1'b0;
    end else begin
      v_q        <= v_n;
      x_q        <= x_n;
      viol_valid <= vfound && !flush_valid;
      head_q     <= POS_W'(pos_add(head_q, commit_cnt, N2));
      if (flush_valid) tail_q <= flush_pos;
      else             tail_q <= POS_W'(pos_add(tail_q, n_alloc, N2));
    end
  end

  // Violation details (qualified by viol_valid) and entry payloads.
  always_ff @(posedge clk) begin
    if (vfound) begin
      viol_pos     <= POS_W'(pos_add(head_q, vbest_a, N2));
      viol_ld_pc   <= q[vbest].pc;
      viol_labeled <= q[vbest].labeled;
      viol_sqpos   <= q[vbest].sqpos;
      viol_st_pc   <= st_pc;
    end
    for (int e = 0; e < LQ_ENTRIES; e++) begin
      if (ex_valid && !fwd_stall && ex_e == IDX_W'(e)) begin
        q[e].dw      <= ex_addr[ADDR_W-1:3];
        q[e].mask    <= byte_mask(ex_addr[2:0], ex_size);
        q[e].fwd_v   <= fwd_hit;
        q[e].fwd_pos <= fwd_pos;
      end
      if (aw[e]) begin
        q[e].labeled <= alloc_labeled[asel[e]];
        q[e].pc      <= alloc_pc[asel[e]];
        q[e].sqpos   <= alloc_sqpos[asel[e]];
        q[e].dep_v   <= alloc_labeled[asel[e]] ? '0 : alloc_dep_v[asel[e]];
        for (int s = 0; s < LFST_SLOTS; s++)
          q[e].dep_tag[s] <= alloc_dep_tag[asel[e]][s];
        q[e].fwd_v   <= 1'b0;
      end
    end
  end

  // A flush must not be asked to keep more than is in flight.
  a_flush_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    flush_valid |-> pos_dist(flush_pos, head_q, N2) <= pos_dist(tail_q, head_q, N2));

endmodule

// pgmdp_mdu: memory dependence unit of a small out-of-order core with
// profile-guided memory dependence prediction (PG-MDP).
//
// The unit sits between decode/dispatch and the load/store pipes.  Each cycle
// a dispatch group of up to DISPATCH_W instructions arrives in program order:
//   1. pgmdp_label_decoder classifies every lane (ordinary load, labeled
//      load, store, other);
//   2. pgmdp_port_limiter accepts the in-order prefix that fits the MDP read
//      ports (labeled loads need none) and the LQ/SQ space; the rest stalls;
//   3. accepted stores and ordinary loads query pgmdp_store_sets (XS Store
//      Sets); stores record their SQ position there, ordinary loads get the
//      SQ positions of the stores they must wait for.  Labeled loads skip the
//      predictor completely;
//   4. loads enter pgmdp_load_queue, stores pgmdp_store_queue.
// dep_ready[] tells the issue logic which LQ entries have no outstanding
// predicted store.  Executing loads search the SQ for forwarding; executing
// stores search the LQ for memory order violations.  A violation is reported
// on viol_* (the core squashes from the load onward by driving flush_*) and
// trains the predictor, unless the load is labeled: then the squash still
// happens but no predictor entry is made.
//
// The rest of the core (fetch, rename, ROB, issue queue, execution units,
// caches) is outside this unit; its hand-offs are the ports below.
//
// Timing: dispatch acceptance, predictor lookup, LQ/SQ positions, forwarding
// results and dep_ready are combinational in the cycle they are asked for;
// state changes at the clock edge; viol_* is registered (one cycle after the
// store executes).  Performance counters count queries, labeled loads,
// violations (all and labeled), false dependences, port stalls and clears.
//
// The low three bits of dc_wr_addr are constant zero (the store queue
// drains whole doublewords with a byte mask); the load queue's head position
// is not needed here and is left unconnected.
module pgmdp_mdu
  import pgmdp_pkg::*;
#(
  parameter int unsigned DISPATCH_W   = DISPATCH_W_DEF,
  parameter int unsigned MDP_PORTS    = MDP_PORTS_DEF,
  parameter int unsigned LQ_ENTRIES   = LQ_ENTRIES_DEF,
  parameter int unsigned SQ_ENTRIES   = SQ_ENTRIES_DEF,
  parameter int unsigned SSIT_ENTRIES = SSIT_ENTRIES_DEF,
  parameter int unsigned LFST_ENTRIES = LFST_ENTRIES_DEF,
  parameter int unsigned LFST_SLOTS   = LFST_SLOTS_DEF,
  parameter int unsigned CLEAR_PERIOD = CLEAR_PERIOD_DEF,
  parameter logic [6:0]  LABEL_OPCODE = 7'b0001011,
  localparam int unsigned LPOS_W = $clog2(2 * LQ_ENTRIES),
  localparam int unsigned SPOS_W = $clog2(2 * SQ_ENTRIES),
  localparam int unsigned LC_W   = $clog2(DISPATCH_W + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // dispatch
  input  disp_lane_t            disp      [DISPATCH_W],
  input  logic                  backend_ready,
  output logic [DISPATCH_W-1:0] disp_accept,
  output mem_class_e            disp_cls    [DISPATCH_W],
  output logic [LPOS_W-1:0]     disp_lq_pos [DISPATCH_W],
  output logic [SPOS_W-1:0]     disp_sq_pos [DISPATCH_W],
  output logic [1:0]            disp_size   [DISPATCH_W],
  output logic                  disp_unsigned [DISPATCH_W],
  output logic                  disp_port_stall,
  output logic                  disp_cap_stall,
  // issue: loads free of predicted store dependences (by LQ entry index)
  output logic [LQ_ENTRIES-1:0] dep_ready,
  // load pipe
  input  logic                  ld_valid,
  input  logic [LPOS_W-1:0]     ld_pos,
  input  logic [ADDR_W-1:0]     ld_addr,
  input  logic [1:0]            ld_size,
  output logic                  ld_fwd_hit,
  output logic                  ld_fwd_stall,
  output logic [DATA_W-1:0]     ld_fwd_data,
  // store pipe
  input  logic                  st_valid,
  input  logic [SPOS_W-1:0]     st_pos,
  input  logic [ADDR_W-1:0]     st_addr,
  input  logic [1:0]            st_size,
  input  logic [DATA_W-1:0]     st_data,
  // memory order violation (to the core's squash logic)
  output logic                  viol_valid,
  output logic [LPOS_W-1:0]     viol_lq_pos,
  output logic [SPOS_W-1:0]     viol_sq_pos,
  output logic [PC_W-1:0]       viol_pc,
  output logic                  viol_labeled,
  // commit and squash
  input  logic [LC_W-1:0]       commit_ld,
  input  logic [LC_W-1:0]       commit_st,
  input  logic                  flush_valid,
  input  logic [LPOS_W-1:0]     flush_lq_pos,
  input  logic [SPOS_W-1:0]     flush_sq_pos,
  // committed stores to the data cache
  output logic                  dc_wr_valid,
  input  logic                  dc_wr_ready,
  output logic [ADDR_W-1:0]     dc_wr_addr,
  output logic [7:0]            dc_wr_mask,
  output logic [DATA_W-1:0]     dc_wr_data,
  // performance counters
  output logic [31:0]           cnt_mdp_queries,
  output logic [31:0]           cnt_load_queries,
  output logic [31:0]           cnt_labeled_loads,
  output logic [31:0]           cnt_violations,
  output logic [31:0]           cnt_labeled_viol,
  output logic [31:0]           cnt_false_deps,
  output logic [31:0]           cnt_port_stalls,
  output logic [31:0]           cnt_clears
);

  localparam int unsigned LQC_W = $clog2(LQ_ENTRIES + 1);
  localparam int unsigned SQC_W = $clog2(SQ_ENTRIES + 1);

  // ---- decode --------------------------------------------------------------
  logic [DISPATCH_W-1:0] lane_valid;

  for (genvar i = 0; i < DISPATCH_W; i++) begin : g_dec
    assign lane_valid[i] = disp[i].valid;
    pgmdp_label_decoder #(.LABEL_OPCODE(LABEL_OPCODE)) u_dec (
      .instr(disp[i].instr), .cls(disp_cls[i]),
      .size(disp_size[i]), .is_unsigned(disp_unsigned[i])
    );
  end

  // ---- port limiter --------------------------------------------------------
  logic [LQC_W-1:0]      lq_free;
  logic [SQC_W-1:0]      sq_free;
  logic [DISPATCH_W-1:0] query;
  logic [LC_W-1:0]       n_queries;
  logic                  port_stall, cap_stall;

  pgmdp_port_limiter #(
    .DISPATCH_W(DISPATCH_W), .MDP_PORTS(MDP_PORTS),
    .LQ_ENTRIES(LQ_ENTRIES), .SQ_ENTRIES(SQ_ENTRIES)
  ) u_ports (
    .backend_ready, .lane_valid, .lane_cls(disp_cls),
    .lq_free, .sq_free,
    .accept(disp_accept), .query, .n_queries, .port_stall, .cap_stall
  );

  // ---- queue positions of the accepted lanes ---------------------------------
  logic [LPOS_W-1:0] lq_tail;
  logic [SPOS_W-1:0] sq_tail, sq_head;
  logic              lane_is_ld [DISPATCH_W];
  logic              lane_is_st [DISPATCH_W];
  logic              lane_lbl   [DISPATCH_W];
  logic              lane_query [DISPATCH_W];
  logic [PC_W-1:0]   lane_pc    [DISPATCH_W];

  always_comb begin
    int unsigned nl, ns;
    nl = 0;
    ns = 0;
    for (int i = 0; i < DISPATCH_W; i++) begin
      lane_is_ld[i] = disp_accept[i] &&
                      (disp_cls[i] == MC_LOAD || disp_cls[i] == MC_LD_LBL);
      lane_is_st[i] = disp_accept[i] && disp_cls[i] == MC_STORE;
      lane_lbl[i]   = disp_cls[i] == MC_LD_LBL;
      lane_query[i] = query[i];
      lane_pc[i]    = disp[i].pc;
      disp_lq_pos[i] = LPOS_W'(pos_add(lq_tail, nl, 2 * LQ_ENTRIES));
      disp_sq_pos[i] = SPOS_W'(pos_add(sq_tail, ns, 2 * SQ_ENTRIES));
      if (lane_is_ld[i]) nl++;
      if (lane_is_st[i]) ns++;
    end
  end

  // ---- predictor -------------------------------------------------------------
  logic [LFST_SLOTS-1:0] dep_v   [DISPATCH_W];
  logic [SPOS_W-1:0]     dep_tag [DISPATCH_W][LFST_SLOTS];
  logic                  lq_viol_valid, lq_viol_labeled;
  logic [PC_W-1:0]       lq_viol_ld_pc, lq_viol_st_pc;
  logic                  train_fire, train_skip_lbl, clear_pulse;

  pgmdp_store_sets #(
    .NLANE(DISPATCH_W), .SSIT_ENTRIES(SSIT_ENTRIES),
    .LFST_ENTRIES(LFST_ENTRIES), .LFST_SLOTS(LFST_SLOTS),
    .CLEAR_PERIOD(CLEAR_PERIOD), .TAG_W(SPOS_W)
  ) u_mdp (
    .clk, .rst_n,
    .lane_query, .lane_cls(disp_cls), .lane_pc, .lane_tag(disp_sq_pos),
    .dep_valid(dep_v), .dep_tag,
    .st_exec_valid(st_valid), .st_exec_tag(st_pos),
    .viol_valid(lq_viol_valid), .viol_labeled(lq_viol_labeled),
    .viol_ld_pc(lq_viol_ld_pc), .viol_st_pc(lq_viol_st_pc),
    .train_fire, .train_skip_lbl, .clear_pulse
  );

  // ---- store queue -------------------------------------------------------------
  logic [SPOS_W-1:0]     ld_sqpos, fwd_pos;
  logic [PC_W-1:0]       st_pc;
  logic [SQ_ENTRIES-1:0] sq_pend;

  pgmdp_store_queue #(.SQ_ENTRIES(SQ_ENTRIES), .NLANE(DISPATCH_W)) u_sq (
    .clk, .rst_n,
    .alloc_valid(lane_is_st), .alloc_pc(lane_pc),
    .head_pos(sq_head), .tail_pos(sq_tail), .free_cnt(sq_free),
    .ex_valid(st_valid), .ex_pos(st_pos), .ex_addr(st_addr),
    .ex_size(st_size), .ex_data(st_data), .ex_pc(st_pc),
    .ld_valid, .ld_sqpos, .ld_addr, .ld_size,
    .fwd_hit(ld_fwd_hit), .fwd_stall(ld_fwd_stall), .fwd_pos,
    .fwd_data(ld_fwd_data),
    .commit_cnt(commit_st),
    .dc_wr_valid, .dc_wr_ready, .dc_wr_addr, .dc_wr_mask, .dc_wr_data,
    .flush_valid, .flush_pos(flush_sq_pos),
    .pend(sq_pend)
  );

  // ---- load queue --------------------------------------------------------------
  logic false_dep;

  pgmdp_load_queue #(
    .LQ_ENTRIES(LQ_ENTRIES), .SQ_ENTRIES(SQ_ENTRIES),
    .NLANE(DISPATCH_W), .LFST_SLOTS(LFST_SLOTS)
  ) u_lq (
    .clk, .rst_n,
    .alloc_valid(lane_is_ld), .alloc_pc(lane_pc), .alloc_labeled(lane_lbl),
    .alloc_sqpos(disp_sq_pos), .alloc_dep_v(dep_v), .alloc_dep_tag(dep_tag),
    .head_pos(), .tail_pos(lq_tail), .free_cnt(lq_free),
    .sq_head, .sq_tail, .sq_pend, .dep_ready,
    .ex_valid(ld_valid), .ex_pos(ld_pos), .ex_addr(ld_addr), .ex_size(ld_size),
    .ex_sqpos(ld_sqpos),
    .fwd_hit(ld_fwd_hit), .fwd_stall(ld_fwd_stall), .fwd_pos,
    .false_dep,
    .st_valid, .st_pos, .st_addr, .st_size, .st_pc,
    .viol_valid(lq_viol_valid), .viol_pos(viol_lq_pos),
    .viol_ld_pc(lq_viol_ld_pc), .viol_labeled(lq_viol_labeled),
    .viol_sqpos(viol_sq_pos), .viol_st_pc(lq_viol_st_pc),
    .commit_cnt(commit_ld), .flush_valid, .flush_pos(flush_lq_pos)
  );

  assign viol_valid   = lq_viol_valid;
  assign viol_pc      = lq_viol_ld_pc;
  assign viol_labeled = lq_viol_labeled;

  // ---- performance counters ----------------------------------------------------
  int unsigned n_ld_query, n_ld_lbl;
  always_comb begin
    n_ld_query = 0;
    n_ld_lbl   = 0;
    for (int i = 0; i < DISPATCH_W; i++) begin
      if (query[i] && disp_cls[i] == MC_LOAD) n_ld_query++;
      if (lane_is_ld[i] && lane_lbl[i])       n_ld_lbl++;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_mdp_queries   <= '0;
      cnt_load_queries  <= '0;
      cnt_labeled_loads <= '0;
      cnt_violations    <= '0;
      cnt_labeled_viol  <= '0;
      cnt_false_deps    <= '0;
      cnt_port_stalls   <= '0;
      cnt_clears        <= '0;
    end else begin
      cnt_mdp_queries   <= cnt_mdp_queries + 32'(n_queries);
      cnt_load_queries  <= cnt_load_queries + n_ld_query;
      cnt_labeled_loads <= cnt_labeled_loads + n_ld_lbl;
      cnt_violations    <= cnt_violations + 32'(train_fire || train_skip_lbl);
      cnt_labeled_viol  <= cnt_labeled_viol + 32'(train_skip_lbl);
      cnt_false_deps    <= cnt_false_deps + 32'(false_dep);
      cnt_port_stalls   <= cnt_port_stalls + 32'(port_stall);
      cnt_clears        <= cnt_clears + 32'(clear_pulse);
    end
  end

  assign disp_port_stall = port_stall;
  assign disp_cap_stall  = cap_stall;

endmodule

// pgmdp_mdu_driver: core model that runs a loop program through the memory
// dependence unit, end to end, and checks every committed load value.
//
// The model stands in for the rest of an out-of-order core: a ROB (ROB
// entries), in-order dispatch of up to W instructions per cycle, loads issued when the
// unit reports them free of predicted dependences (1-3 cycles after
// dispatch), stores whose address resolves late (1-12 cycles, in any order),
// in-order commit of up to W per cycle, squash and refetch from the load on
// a memory order violation, and a data cache with random back-pressure.
//
// The loop body (11 instructions, fixed PCs) mixes the cases PG-MDP cares
// about: two labeled streaming loads (as in an averaging kernel), a store to
// a streaming destination, a store/load pair on one address (a true
// dependence the predictor must learn), a load whose PC aliases that load's
// SSIT entry but reads unrelated data (false dependence), a mislabeled load
// that sometimes reads the stored address (violation of a labeled load), and
// a byte store followed by a doubleword load (partial overlap).
//
// Every committed load value is compared with a sequential execution of the
// same program.  The mechanisms the unit implements are counted and each
// must occur at least once.  With FULL=1 the unit is instantiated with all
// its default parameters; otherwise the parameters W, LQN, SQN, SSITN, LFSTN,
// PORTS and CLEARP configure it.  A port stall is required only when there
// are fewer ports than lanes, a labeled-load violation only when LABELS=1
// (LABELS=0 encodes the labeled loads as ordinary loads: the baseline without
// profile labels), and a cyclic clear only when REQ_CLEAR=1, so the run must
// then be long enough (N_ITER) to reach CLEAR_PERIOD queries.  REQ_MECH=0
// keeps only the correctness checks (for configuration sweeps).  With
// STANDALONE=0 the model sets done instead of ending the simulation, so that
// several configurations can run side by side.
module pgmdp_mdu_driver
  import pgmdp_pkg::*;
#(
  parameter bit          FULL       = 1'b0,   // unit with no parameter overrides
  parameter int unsigned N_ITER     = 400,
  parameter int unsigned MAX_CYC    = 200000,
  // unit configuration when FULL=0
  parameter int          W          = DISPATCH_W_DEF,
  parameter int          LQN        = LQ_ENTRIES_DEF,
  parameter int          SQN        = SQ_ENTRIES_DEF,
  parameter int          SSITN      = SSIT_ENTRIES_DEF,
  parameter int          LFSTN      = LFST_ENTRIES_DEF,
  parameter int          PORTS      = MDP_PORTS_DEF,
  parameter int          CLEARP     = CLEAR_PERIOD_DEF,
  parameter int          ROB        = 128,
  parameter bit          LABELS     = 1'b1,   // 0: profile labels not applied
  parameter bit          REQ_CLEAR  = 1'b1,   // a cyclic clear must happen
  parameter bit          REQ_MECH   = 1'b1,   // every mechanism must happen
  parameter bit          STANDALONE = 1'b1    // 0: set done instead of $finish
);

  localparam int LPW = $clog2(2 * LQN), SPW = $clog2(2 * SQN), LCW = $clog2(W + 1);
  localparam int BODY = 11;

  logic                  clk = 0, rst_n = 0;
  disp_lane_t            disp [W];
  logic                  backend_ready;
  logic [W-1:0]          disp_accept;
  mem_class_e            disp_cls [W];
  logic [LPW-1:0]        disp_lq_pos [W];
  logic [SPW-1:0]        disp_sq_pos [W];
  logic [1:0]            disp_size [W];
  logic                  disp_unsigned [W];
  logic                  disp_port_stall, disp_cap_stall;
  logic [LQN-1:0]        dep_ready;
  logic                  ld_valid;
  logic [LPW-1:0]        ld_pos;
  logic [ADDR_W-1:0]     ld_addr;
  logic [1:0]            ld_size;
  logic                  ld_fwd_hit, ld_fwd_stall;
  logic [DATA_W-1:0]     ld_fwd_data;
  logic                  st_valid;
  logic [SPW-1:0]        st_pos;
  logic [ADDR_W-1:0]     st_addr;
  logic [1:0]            st_size;
  logic [DATA_W-1:0]     st_data;
  logic                  viol_valid, viol_labeled;
  logic [LPW-1:0]        viol_lq_pos;
  logic [SPW-1:0]        viol_sq_pos;
  logic [PC_W-1:0]       viol_pc;
  logic [LCW-1:0]        commit_ld, commit_st;
  logic                  flush_valid;
  logic [LPW-1:0]        flush_lq_pos;
  logic [SPW-1:0]        flush_sq_pos;
  logic                  dc_wr_valid, dc_wr_ready;
  logic [ADDR_W-1:0]     dc_wr_addr;
  logic [7:0]            dc_wr_mask;
  logic [DATA_W-1:0]     dc_wr_data;
  logic [31:0]           cnt_mdp_queries, cnt_load_queries, cnt_labeled_loads,
                         cnt_violations, cnt_labeled_viol, cnt_false_deps,
                         cnt_port_stalls, cnt_clears;

  if (FULL) begin : g_full
    pgmdp_mdu dut (.*);
  end else begin : g_small
    pgmdp_mdu #(
      .DISPATCH_W(W), .MDP_PORTS(PORTS), .LQ_ENTRIES(LQN), .SQ_ENTRIES(SQN),
      .SSIT_ENTRIES(SSITN), .LFST_ENTRIES(LFSTN), .CLEAR_PERIOD(CLEARP)
    ) dut (.*);
  end

  always #5 clk = ~clk;

  // ---- program ---------------------------------------------------------------
  localparam logic [47:0] SRC1 = 48'h1_0000, SRC2 = 48'h2_0000, DST = 48'h3_0000,
                          XADR = 48'h4_0000, ZADR = 48'h5_0000, WADR = 48'h6_0000;
  localparam logic [47:0] PCB = 48'h1000;

  typedef enum int {K_ALU, K_LD, K_LBL, K_ST} kind_e;
  typedef struct {
    kind_e       kind;
    logic [47:0] pc;
    logic [31:0] instr;
    logic [47:0] addr;
    logic [1:0]  size;
    logic [63:0] data;
    logic [63:0] ref_val;
  } op_t;

  op_t prog [];

  function automatic logic [63:0] init_mem(logic [44:0] dw);
    return {dw[31:0], 32'h0} ^ (64'(dw) * 64'h9E37_79B9_7F4A_7C15);
  endfunction

  function automatic logic [63:0] szmask(logic [1:0] s);
    return (s == 3) ? '1 : ((64'd1 << (8 << s)) - 1);
  endfunction

  function automatic logic [31:0] enc(kind_e k, logic [1:0] sz);
    case (k)
      K_LD:    return {12'd8, 5'd2, 1'b0, sz, 5'd10, 7'h03};
      K_LBL:   return {12'd8, 5'd2, 1'b0, sz, 5'd10, LABELS ? 7'h0b : 7'h03};
      K_ST:    return {7'd0, 5'd10, 5'd2, 1'b0, sz, 5'd8, 7'h23};
      default: return 32'h0000_0013;
    endcase
  endfunction

  logic [63:0] refmem [logic [44:0]];
  logic [63:0] tbmem  [logic [44:0]];

  function automatic logic [63:0] rd_ref(logic [44:0] dw);
    return refmem.exists(dw) ? refmem[dw] : init_mem(dw);
  endfunction

  function automatic logic [63:0] rd_tb(logic [44:0] dw);
    return tbmem.exists(dw) ? tbmem[dw] : init_mem(dw);
  endfunction

  task automatic build();
    int n;
    n = N_ITER * BODY;
    prog = new[n];
    for (int i = 0; i < N_ITER; i++)
      for (int k = 0; k < BODY; k++) begin
        op_t o;
        o.pc = PCB + 48'(4 * k);
        o.size = 2'd3;
        o.data = {16'(i), 16'(k), 32'hC0DE_0000 | 32'(i)};
        o.addr = '0;
        case (k)
          0:  begin o.kind = K_LBL; o.addr = SRC1 + 48'(8 * (i % 16)); end
          1:  begin o.kind = K_LBL; o.addr = SRC2 + 48'(8 * (i % 16)); end
          3:  begin o.kind = K_ST;  o.addr = DST + 48'(8 * (i % 8)); end
          4:  begin o.kind = K_ST;  o.addr = XADR; end
          5:  begin o.kind = K_LD;  o.addr = XADR; end
          6:  begin o.kind = K_LD;  o.addr = ZADR + 48'(8 * (i % 4));
                    o.pc = (PCB + 48'(4 * 5)) ^ 48'h0204; end   // SSIT alias of slot 5
          7:  begin o.kind = K_LBL;
                    o.addr = (i % 4 == 0) ? XADR : SRC1 + 48'(8 * ((i + 3) % 16)); end
          8:  begin o.kind = K_ST;  o.addr = WADR + 48'(i % 8); o.size = 2'd0; end
          9:  begin o.kind = K_LD;  o.addr = WADR; end
          default: o.kind = K_ALU;
        endcase
        o.instr = enc(o.kind, o.size);
        prog[i * BODY + k] = o;
      end
    // sequential reference
    for (int p = 0; p < n; p++) begin
      logic [44:0] dw; logic [63:0] v, m;
      dw = prog[p].addr[47:3];
      m  = szmask(prog[p].size) << (8 * prog[p].addr[2:0]);
      v  = rd_ref(dw);
      if (prog[p].kind == K_ST)
        refmem[dw] = (v & ~m) | ((prog[p].data << (8 * prog[p].addr[2:0])) & m);
      else if (prog[p].kind != K_ALU)
        prog[p].ref_val = (v >> (8 * prog[p].addr[2:0])) & szmask(prog[p].size);
    end
  endtask

  // ---- core model --------------------------------------------------------------
  typedef struct {
    int             p;
    kind_e          kind;
    logic [LPW-1:0] lqp;
    logic [SPW-1:0] sqp;
    logic           done;
    logic [63:0]    val;
    int             rdy;
  } rob_t;

  rob_t rob [$];
  bit   trace = $test$plusargs("trace");
  int   fetch, committed, cyc;
  int   checks = 0, failures = 0;
  bit   done = 1'b0;
  int   n_port_stall = 0, n_cap_stall = 0, n_dep_wait = 0, n_fwd = 0,
        n_partial = 0, n_viol = 0, n_lbl_viol = 0, n_false = 0, n_drain = 0,
        n_lbl = 0, n_clear = 0;

  task automatic finish();
    checks++;
    if (committed != N_ITER * BODY) begin
      failures++; $display("FAIL committed %0d of %0d", committed, N_ITER * BODY);
    end
    // hardware counters against the model's own counts
    checks++;
    if (cnt_violations != 32'(n_viol) || cnt_labeled_viol != 32'(n_lbl_viol)) begin
      failures++; $display("FAIL violation counters %0d/%0d vs %0d/%0d", cnt_violations,
                           cnt_labeled_viol, n_viol, n_lbl_viol);
    end
    checks++;
    if ((LABELS && cnt_labeled_loads == 0) || (!LABELS && cnt_labeled_loads != 0) ||
        cnt_load_queries == 0) failures++;
    n_false = int'(cnt_false_deps);
    n_clear = int'(cnt_clears);
    $display("cycles %0d committed %0d IPC x100 %0d", cyc, committed, committed * 100 / cyc);
    $display("mechanisms: port_stall %0d cap_stall %0d dep_wait %0d fwd %0d partial %0d",
             n_port_stall, n_cap_stall, n_dep_wait, n_fwd, n_partial);
    $display("            violations %0d (labeled %0d) false_deps %0d drains %0d clears %0d",
             n_viol, n_lbl_viol, n_false, n_drain, n_clear);
    $display("counters:   mdp_queries %0d load_queries %0d labeled_loads %0d",
             cnt_mdp_queries, cnt_load_queries, cnt_labeled_loads);
    begin
      int must [8];
      must = '{n_cap_stall, n_dep_wait, n_fwd, n_partial, n_viol, LABELS ? n_lbl_viol : 1,
               n_false, n_drain};
      if (REQ_MECH) foreach (must[i]) begin
        checks++;
        if (must[i] == 0) begin failures++; $display("FAIL mechanism %0d never happened", i); end
      end
      if (!LABELS) begin
        checks++;
        if (n_lbl_viol != 0) begin failures++; $display("FAIL labeled violation without labels"); end
      end
      if (REQ_CLEAR) begin
        checks++;
        if (n_clear == 0) begin failures++; $display("FAIL no clear"); end
      end
      if (REQ_MECH && PORTS < W) begin
        checks++;
        if (n_port_stall == 0) begin failures++; $display("FAIL no port stall"); end
      end
    end
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    done = 1'b1;
  endtask

  initial begin
    repeat (MAX_CYC) @(posedge clk);
    if (!done) begin   // a finished run is not timed out
      failures++;
      $display("FAIL watchdog after %0d cycles, committed %0d", MAX_CYC, committed);
      if (rob.size() > 0)
        $display("  oldest: #%0d kind %s done %b lq %0d sq %0d dep_ready %b", rob[0].p,
                 rob[0].kind.name(), rob[0].done, rob[0].lqp, rob[0].sqp, dep_ready);
      if (STANDALONE) begin
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
      done = 1'b1;
    end
  end

  always @(posedge clk)
    if (rst_n && dc_wr_valid && dc_wr_ready) begin
      logic [63:0] v, m;
      for (int b = 0; b < 8; b++) m[8*b +: 8] = {8{dc_wr_mask[b]}};
      v = rd_tb(dc_wr_addr[47:3]);
      tbmem[dc_wr_addr[47:3]] = (v & ~m) | (dc_wr_data & m);
      n_drain++;
    end

  initial begin
    build();
    fetch = 0; committed = 0; cyc = 0;
    for (int l = 0; l < W; l++) disp[l] = '0;
    backend_ready = 0; ld_valid = 0; ld_pos = 0; ld_addr = 0; ld_size = 0;
    st_valid = 0; st_pos = 0; st_addr = 0; st_size = 0; st_data = 0;
    commit_ld = 0; commit_st = 0; flush_valid = 0; flush_lq_pos = 0; flush_sq_pos = 0;
    dc_wr_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (committed < N_ITER * BODY) begin
      int ld_i, st_i, nacc, ncl, ncs, nret;
      logic ld_done; logic [63:0] ld_val;
      @(negedge clk);
      cyc++;
      ld_valid = 0; st_valid = 0; flush_valid = 0; commit_ld = 0; commit_st = 0;
      for (int l = 0; l < W; l++) disp[l].valid = 0;
      dc_wr_ready = ($urandom_range(0, 3) != 0);
      if (viol_valid) begin
        // squash from the violating load and refetch it
        int k;
        n_viol++;
        if (viol_labeled) n_lbl_viol++;
        k = -1;
        foreach (rob[r]) if (rob[r].kind inside {K_LD, K_LBL} && rob[r].lqp == viol_lq_pos && k < 0) k = r;
        checks++;
        if (k < 0) begin failures++; $display("FAIL violation for unknown load"); end
        else begin
          checks++;
          if (viol_pc != prog[rob[k].p].pc) begin failures++; $display("FAIL viol_pc"); end
          fetch = rob[k].p;
          while (rob.size() > k) void'(rob.pop_back());
        end
        flush_valid = 1; flush_lq_pos = viol_lq_pos; flush_sq_pos = viol_sq_pos;
        @(posedge clk);
        continue;
      end
      // dispatch
      backend_ready = (rob.size() + W <= ROB);
      for (int l = 0; l < W; l++)
        if (fetch + l < N_ITER * BODY) begin
          disp[l].valid = 1; disp[l].pc = prog[fetch + l].pc; disp[l].instr = prog[fetch + l].instr;
        end
      // load issue: a load past its delay whose dependences are clear,
      // usually the oldest, sometimes a younger one
      ld_i = -1;
      foreach (rob[r])
        if (rob[r].kind inside {K_LD, K_LBL} && !rob[r].done && cyc >= rob[r].rdy) begin
          if (!dep_ready[pos_idx(rob[r].lqp, LQN)]) n_dep_wait++;
          else if (ld_i < 0 || $urandom_range(0, 3) == 0) ld_i = r;
        end
      if (ld_i >= 0) begin
        op_t o;
        o = prog[rob[ld_i].p];
        ld_valid = 1; ld_pos = rob[ld_i].lqp; ld_addr = o.addr; ld_size = o.size;
      end
      // store execute: a random store whose address has resolved
      st_i = -1;
      foreach (rob[r])
        if (st_i < 0 && rob[r].kind == K_ST && !rob[r].done && cyc >= rob[r].rdy &&
            $urandom_range(0, 1) == 0) st_i = r;
      if (st_i >= 0) begin
        op_t o;
        o = prog[rob[st_i].p];
        st_valid = 1; st_pos = rob[st_i].sqp; st_addr = o.addr; st_size = o.size; st_data = o.data;
      end
      // commit
      ncl = 0; ncs = 0; nret = 0;
      for (int r = 0; r < rob.size() && r < W; r++) begin
        if (!rob[r].done) break;
        nret++;
        if (rob[r].kind inside {K_LD, K_LBL}) begin
          ncl++;
          checks++;
          if (rob[r].val !== prog[rob[r].p].ref_val) begin
            failures++;
            $display("FAIL cyc %0d load #%0d (slot %0d) value %h expected %h", cyc, rob[r].p,
                     rob[r].p % BODY, rob[r].val, prog[rob[r].p].ref_val);
          end
        end
        if (rob[r].kind == K_ST) ncs++;
      end
      commit_ld = LCW'(ncl); commit_st = LCW'(ncs);
      #1;
      if (disp_port_stall) n_port_stall++;
      if (disp_cap_stall) n_cap_stall++;
      ld_done = 0; ld_val = '0;
      if (ld_i >= 0) begin
        op_t o;
        o = prog[rob[ld_i].p];
        if (ld_fwd_stall) n_partial++;
        else begin
          ld_done = 1;
          if (ld_fwd_hit) begin n_fwd++; ld_val = ld_fwd_data & szmask(o.size); end
          else ld_val = (rd_tb(o.addr[47:3]) >> (8 * o.addr[2:0])) & szmask(o.size);
        end
      end
      nacc = 0;
      for (int l = 0; l < W; l++) if (disp_accept[l]) nacc++;
      if (trace)
        $display("cyc %0d fetch %0d rob %0d acc %b ld %b/%0d stall %b hit %b st %b/%0d dc %b cl %0d cs %0d",
                 cyc, fetch, rob.size(), disp_accept, ld_valid, ld_pos, ld_fwd_stall,
                 ld_fwd_hit, st_valid, st_pos, dc_wr_valid, ncl, ncs);
      @(posedge clk);
      // model update
      if (ld_i >= 0 && ld_done) begin rob[ld_i].done = 1; rob[ld_i].val = ld_val; end
      if (st_i >= 0) rob[st_i].done = 1;
      for (int r = 0; r < nret; r++) begin void'(rob.pop_front()); committed++; end
      for (int l = 0; l < nacc; l++) begin
        rob_t e;
        e.p = fetch + l; e.kind = prog[fetch + l].kind; e.done = (e.kind == K_ALU);
        e.lqp = disp_lq_pos[l]; e.sqp = disp_sq_pos[l]; e.val = '0;
        if (e.kind == K_LBL) n_lbl++;
        // the store to the shared address resolves late, so younger loads
        // can overtake it
        e.rdy = cyc + ((e.kind == K_ST) ? ((e.p % BODY == 4) ? $urandom_range(8, 30)
                                                              : $urandom_range(1, 12))
                                         : $urandom_range(1, 3));
        rob.push_back(e);
      end
      fetch += nacc;
    end
    repeat (40) @(posedge clk);
    finish();
  end
endmodule

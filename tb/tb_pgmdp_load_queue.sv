// tb_pgmdp_load_queue: self-checking directed test of the load queue.
// Checks, with an 8-entry LQ and an 8-entry SQ whose state the test drives:
//   * a load waits for its predicted store until that store executes;
//   * labeled loads and stale predictions (stores not older than the load)
//     never hold a load back;
//   * a load predicted dependent that reads the cache counts as a false
//     dependence, one that forwards from its predicted store does not;
//   * an older store hitting an executed load reports a violation one cycle
//     later with the load's position, PC, label and SQ position and the
//     store's PC; younger stores, non-overlapping stores and loads that
//     forwarded from a younger store do not; a load executing in the same
//     cycle as the store is caught; the oldest of several loads is reported;
//     a load whose forwarding store has drained counts as reading memory;
//   * commit and flush free entries.
module tb_pgmdp_load_queue;
  import pgmdp_pkg::*;

  localparam int N = 8, SN = 8, L = 2, S = 2, PW = 4, SPW = 4;
  logic              clk = 0, rst_n = 0;
  logic              alloc_valid [L], alloc_labeled [L];
  logic [PC_W-1:0]   alloc_pc [L];
  logic [SPW-1:0]    alloc_sqpos [L];
  logic [S-1:0]      alloc_dep_v [L];
  logic [SPW-1:0]    alloc_dep_tag [L][S];
  logic [PW-1:0]     head_pos, tail_pos;
  logic [3:0]        free_cnt;
  logic [SPW-1:0]    sq_head = 0, sq_tail = 0;
  logic [SN-1:0]     sq_pend = 0;
  logic [N-1:0]      dep_ready;
  logic              ex_valid = 0;
  logic [PW-1:0]     ex_pos = 0;
  logic [ADDR_W-1:0] ex_addr = 0;
  logic [1:0]        ex_size = 0;
  logic [SPW-1:0]    ex_sqpos;
  logic              fwd_hit = 0, fwd_stall = 0;
  logic [SPW-1:0]    fwd_pos = 0;
  logic              false_dep;
  logic              st_valid = 0;
  logic [SPW-1:0]    st_pos = 0;
  logic [ADDR_W-1:0] st_addr = 0;
  logic [1:0]        st_size = 0;
  logic [PC_W-1:0]   st_pc = 0;
  logic              viol_valid, viol_labeled;
  logic [PW-1:0]     viol_pos;
  logic [PC_W-1:0]   viol_ld_pc, viol_st_pc;
  logic [SPW-1:0]    viol_sqpos;
  logic [1:0]        commit_cnt = 0;
  logic              flush_valid = 0;
  logic [PW-1:0]     flush_pos = 0;
  int checks = 0, failures = 0;

  pgmdp_load_queue #(.LQ_ENTRIES(N), .SQ_ENTRIES(SN), .NLANE(L), .LFST_SLOTS(S)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic idle_alloc();
    for (int l = 0; l < L; l++) begin
      alloc_valid[l] = 0; alloc_labeled[l] = 0; alloc_pc[l] = 0; alloc_sqpos[l] = 0;
      alloc_dep_v[l] = 0; alloc_dep_tag[l] = '{0, 0};
    end
  endtask

  // allocate one load on lane 0
  task automatic alloc(logic [PC_W-1:0] pc, logic lbl, logic [SPW-1:0] sqpos,
                       logic [S-1:0] dv, logic [SPW-1:0] t0, logic [SPW-1:0] t1);
    @(negedge clk);
    alloc_valid[0] = 1; alloc_pc[0] = pc; alloc_labeled[0] = lbl; alloc_sqpos[0] = sqpos;
    alloc_dep_v[0] = dv; alloc_dep_tag[0] = '{t0, t1};
    @(posedge clk); #1 idle_alloc();
  endtask

  task automatic ld_exec(logic [PW-1:0] pos, logic [ADDR_W-1:0] a, logic hit,
                         logic [SPW-1:0] fp, logic exp_false, string what);
    @(negedge clk);
    ex_valid = 1; ex_pos = pos; ex_addr = a; ex_size = 3; fwd_hit = hit; fwd_pos = fp;
    #1 chk(false_dep == exp_false, {what, ": false_dep"});
    @(posedge clk); #1 ex_valid = 0; fwd_hit = 0;
  endtask

  task automatic st_exec(logic [SPW-1:0] pos, logic [ADDR_W-1:0] a,
                         logic [PC_W-1:0] pc, logic exp_v, logic [PW-1:0] exp_pos,
                         string what);
    @(negedge clk);
    st_valid = 1; st_pos = pos; st_addr = a; st_size = 3; st_pc = pc;
    @(posedge clk); #1 st_valid = 0;
    chk(viol_valid == exp_v, {what, ": viol_valid"});
    if (exp_v) chk(viol_pos == exp_pos && viol_st_pc == pc, {what, ": viol_pos/st_pc"});
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle_alloc();
    #12 rst_n = 1;
    // SQ holds stores at positions 0..3, all pending
    sq_head = 0; sq_tail = 4; sq_pend = 8'b0000_1111;
    alloc(48'hA0, 0, 4'd2, 2'b01, 4'd1, 4'd0);   // L0 waits on store 1
    alloc(48'hA4, 1, 4'd3, 2'b01, 4'd1, 4'd0);   // L1 labeled: no wait
    alloc(48'hA8, 0, 4'd2, 2'b10, 4'd0, 4'd3);   // L2: stale prediction (3 is younger)
    #1;
    chk(dep_ready[0] == 0, "L0 waits for store 1");
    chk(dep_ready[1] == 1, "labeled load ready");
    chk(dep_ready[2] == 1, "stale prediction ignored");
    chk(free_cnt == 5 && tail_pos == 3, "free count after 3 allocs");
    sq_pend[1] = 0;
    #1 chk(dep_ready[0] == 1, "L0 ready after store 1 executed");
    // L0 read the cache although predicted: false dependence
    ld_exec(4'd0, 48'h100, 0, 0, 1, "L0 cache");
    chk(ex_sqpos == 4'd2, "ex_sqpos");
    // store 2 (younger than L0) to the same address: no violation
    st_exec(4'd2, 48'h100, 48'hB2, 0, 0, "younger store");
    // store 1 (older) to another doubleword: no violation
    st_exec(4'd1, 48'h200, 48'hB1, 0, 0, "other address");
    // store 0 (older) to L0's address: violation
    st_exec(4'd0, 48'h104 & ~48'h7, 48'hB0, 1, 4'd0, "older store");
    chk(viol_ld_pc == 48'hA0 && viol_sqpos == 4'd2 && !viol_labeled, "violation record");
    // labeled L1 forwards from store 2 (fwd_pos=2); store 1 to same address: no violation
    ld_exec(4'd1, 48'h300, 1, 4'd2, 0, "L1 forwarded");
    st_exec(4'd1, 48'h300, 48'hB1, 0, 0, "source younger than store");
    // L2 forwards from its predicted store 3?  Its sqpos is 2, so use store 1:
    // prediction tag 3 is not the source -> false dependence
    ld_exec(4'd2, 48'h400, 1, 4'd1, 1, "L2 forwarded from other store");
    // new load predicted on store 1 forwards from store 1: no false dependence
    alloc(48'hAC, 0, 4'd3, 2'b01, 4'd1, 4'd0);   // L3
    ld_exec(4'd3, 48'h500, 1, 4'd1, 0, "L3 forwarded from predicted store");
    // labeled load hit by an older store: violation flagged as labeled
    alloc(48'hB4, 1, 4'd3, 2'b00, 4'd0, 4'd0);   // L4
    ld_exec(4'd4, 48'h600, 0, 0, 0, "L4 cache");
    st_exec(4'd2, 48'h600, 48'hC2, 1, 4'd4, "labeled load violation");
    chk(viol_labeled == 1 && viol_ld_pc == 48'hB4, "labeled violation record");
    // same-cycle load and store execution
    alloc(48'hB8, 0, 4'd3, 2'b00, 4'd0, 4'd0);   // L5
    @(negedge clk);
    ex_valid = 1; ex_pos = 4'd5; ex_addr = 48'h700; fwd_hit = 0;
    st_valid = 1; st_pos = 4'd0; st_addr = 48'h700; st_pc = 48'hD0;
    @(posedge clk); #1 ex_valid = 0; st_valid = 0;
    chk(viol_valid && viol_pos == 4'd5, "same-cycle violation");
    // two loads hit: the oldest is reported
    st_exec(4'd0, 48'h600, 48'hD1, 1, 4'd4, "oldest of L4");
    alloc(48'hBC, 0, 4'd3, 2'b00, 4'd0, 4'd0);   // L6
    ld_exec(4'd6, 48'h100, 0, 0, 0, "L6 cache");
    st_exec(4'd1, 48'h100, 48'hD2, 1, 4'd0, "L0 older than L6");
    // commit two, flush from L4
    @(negedge clk); commit_cnt = 2; @(posedge clk); #1 commit_cnt = 0;
    chk(head_pos == 2 && free_cnt == 3, "commit");
    @(negedge clk); flush_valid = 1; flush_pos = 4'd4; @(posedge clk); #1 flush_valid = 0;
    chk(tail_pos == 4 && free_cnt == 6, "flush");
    #1 chk(dep_ready[4] == 0 && dep_ready[5] == 0 && dep_ready[2] == 1, "flushed entries gone");
    // L3 forwarded from store 1, which has since drained (SQ head now 2):
    // an older store 2 to L3's address is still a violation
    sq_head = 2; sq_tail = 4; sq_pend = 8'b0000_1100;
    st_exec(4'd2, 48'h500, 48'hD3, 1, 4'd3, "source store drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

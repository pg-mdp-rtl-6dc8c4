// tb_pgmdp_store_sets: self-checking test of the XS Store Sets predictor with
// the PG-MDP training rule.  Directed scenarios:
//   * untrained loads are predicted independent;
//   * a violation (load A, store B) makes A wait for the next B;
//   * a violation whose load is labeled squashes but trains nothing;
//   * a new load joining B's set, and merging of two existing sets;
//   * a lane without a query (a labeled load) gets no prediction;
//   * an executed store no longer holds loads back;
//   * the cyclic clear after CLEAR_PERIOD queries forgets everything; it
//     comes on exactly the cycle the query count reaches the period, and
//     lanes without a query (labeled loads) do not count.
module tb_pgmdp_store_sets;
  import pgmdp_pkg::*;

  localparam int L = 2, TW = 6, CP = 64;
  logic            clk = 0, rst_n = 0;
  logic            lane_query [L];
  mem_class_e      lane_cls [L];
  logic [PC_W-1:0] lane_pc [L];
  logic [TW-1:0]   lane_tag [L];
  logic [1:0]      dep_valid [L];
  logic [TW-1:0]   dep_tag [L][2];
  logic            st_exec_valid = 0;
  logic [TW-1:0]   st_exec_tag = 0;
  logic            viol_valid = 0, viol_labeled = 0;
  logic [PC_W-1:0] viol_ld_pc = 0, viol_st_pc = 0;
  logic            train_fire, train_skip_lbl, clear_pulse;
  int checks = 0, failures = 0, n_clear = 0;

  pgmdp_store_sets #(.NLANE(L), .CLEAR_PERIOD(CP), .TAG_W(TW)) dut (.*);

  always #5 clk = ~clk;
  // The clear must come on the cycle in which the number of queries since the
  // last clear reaches CLEAR_PERIOD.
  int qcnt = 0;
  always @(posedge clk)
    if (rst_n) begin
      int n;
      n = qcnt;
      for (int i = 0; i < L; i++) if (lane_query[i]) n++;
      if (clear_pulse) begin
        n_clear++;
        checks++;
        if (n < CP || n >= CP + L) begin
          failures++; $display("FAIL clear after %0d queries", n);
        end
        qcnt = 0;
      end else begin
        checks++;
        if (n >= CP) begin failures++; $display("FAIL no clear at %0d queries", n); end
        qcnt = n;
      end
    end

  localparam logic [PC_W-1:0] PA = 48'h1000, PB = 48'h1010, PC = 48'h1024,
                              PD = 48'h1038, PE = 48'h1044, PF = 48'h1058,
                              PG = 48'h1060, PH = 48'h1070;

  task automatic idle();
    for (int i = 0; i < L; i++) begin
      lane_query[i] = 0; lane_cls[i] = MC_NONE; lane_pc[i] = 0; lane_tag[i] = 0;
    end
  endtask

  task automatic violate(logic [PC_W-1:0] ld, logic [PC_W-1:0] st, logic lbl,
                         logic exp_fire);
    @(negedge clk);
    viol_valid = 1; viol_ld_pc = ld; viol_st_pc = st; viol_labeled = lbl;
    #1 checks++;
    if (train_fire !== exp_fire || train_skip_lbl !== (lbl)) begin
      failures++; $display("FAIL violate fire=%b skip=%b", train_fire, train_skip_lbl);
    end
    @(posedge clk); #1 viol_valid = 0;
  endtask

  task automatic store(logic [PC_W-1:0] pc, logic [TW-1:0] tag);
    @(negedge clk);
    lane_query[0] = 1; lane_cls[0] = MC_STORE; lane_pc[0] = pc; lane_tag[0] = tag;
    @(posedge clk); #1 idle();
  endtask

  // load on lane 0; expect the given tag (or none if exp_any = 0)
  task automatic load(logic [PC_W-1:0] pc, logic exp_any, logic [TW-1:0] exp_tag,
                      logic q = 1, string what = "");
    logic hit;
    @(negedge clk);
    lane_query[0] = q; lane_cls[0] = q ? MC_LOAD : MC_LD_LBL; lane_pc[0] = pc;
    #1 hit = 0;
    for (int k = 0; k < 2; k++) if (dep_valid[0][k] && dep_tag[0][k] == exp_tag) hit = 1;
    checks++;
    if (exp_any ? !hit : (dep_valid[0] != 0)) begin
      failures++; $display("FAIL %s: dep_valid=%b tags %0d %0d", what, dep_valid[0],
                           dep_tag[0][0], dep_tag[0][1]);
    end
    @(posedge clk); #1 idle();
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle();
    #12 rst_n = 1;
    load(PA, 0, 0, 1, "untrained");
    violate(PA, PB, 0, 1);
    store(PB, 6'd5);
    load(PA, 1, 6'd5, 1, "trained pair");
    // same-cycle: store on lane 0, load on lane 1
    @(negedge clk);
    lane_query[0] = 1; lane_cls[0] = MC_STORE; lane_pc[0] = PB; lane_tag[0] = 6'd6;
    lane_query[1] = 1; lane_cls[1] = MC_LOAD;  lane_pc[1] = PA;
    #1 checks++;
    if (!((dep_valid[1][0] && dep_tag[1][0] == 6) || (dep_valid[1][1] && dep_tag[1][1] == 6))) begin
      failures++; $display("FAIL same-group store not seen");
    end
    @(posedge clk); #1 idle();
    // labeled violation creates nothing
    violate(PC, PD, 1, 0);
    store(PD, 6'd7);
    load(PC, 0, 0, 1, "labeled violation trained");
    // a labeled lane never queries
    store(PB, 6'd8);
    load(PA, 0, 0, 0, "labeled lane got prediction");
    // E joins B's set
    violate(PE, PB, 0, 1);
    store(PB, 6'd9);
    load(PE, 1, 6'd9, 1, "join set");
    // two sets merge: G/H in their own set, then A (B's set) with H
    violate(PG, PH, 0, 1);
    violate(PA, PH, 0, 1);
    store(PH, 6'd10);
    load(PA, 1, 6'd10, 1, "merge");
    // executed store frees the slot
    store(PB, 6'd11);
    @(negedge clk); st_exec_valid = 1; st_exec_tag = 6'd10;
    @(posedge clk); #1 st_exec_valid = 0;
    load(PE, 1, 6'd11, 1, "one slot left");
    @(negedge clk); st_exec_valid = 1; st_exec_tag = 6'd11;
    @(posedge clk); #1 st_exec_valid = 0;
    load(PE, 0, 6'd11, 1, "executed store");
    // cyclic clear
    for (int i = 0; i < CP; i++) store(PF, 6'd12);
    checks++;
    if (n_clear == 0) begin failures++; $display("FAIL no clear"); end
    store(PB, 6'd13);
    load(PA, 0, 0, 1, "after clear");
    // loads without a query (labeled) do not advance the clear counter
    begin
      int c0;
      c0 = n_clear;
      for (int i = 0; i < 2 * CP; i++) load(PA, 0, 0, 0, "labeled lane");
      checks++;
      if (n_clear != c0) begin failures++; $display("FAIL labeled loads caused a clear"); end
      for (int i = 0; i < CP; i++) store(PF, 6'd14);
      checks++;
      if (n_clear != c0 + 1) begin failures++; $display("FAIL second clear missing"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

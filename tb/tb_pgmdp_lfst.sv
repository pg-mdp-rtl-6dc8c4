// tb_pgmdp_lfst: self-checking test of the multi-slot Last Fetched Store
// Table.  Random dispatch groups of loads and stores over a few SSIDs are
// replayed lane by lane in a reference model (free slot first, otherwise the
// oldest slot is replaced), including same-group store-to-load visibility,
// invalidation by executing stores and the cyclic clear.  Each load's
// predicted dependences must match the model as a set of SQ positions.
module tb_pgmdp_lfst;
  import pgmdp_pkg::*;

  localparam int E = 64, S = 2, L = 6, TW = 6;
  logic          clk = 0, rst_n = 0, clear = 0;
  logic          lane_ld [L], lane_st [L];
  logic [5:0]    lane_ssid [L];
  logic [TW-1:0] lane_tag [L];
  logic [S-1:0]  dep_valid [L];
  logic [TW-1:0] dep_tag [L][S];
  logic          inv_valid = 0;
  logic [TW-1:0] inv_tag = 0;
  int checks = 0, failures = 0, n_multi = 0, n_bypass = 0;

  // reference: per entry, list of tags ordered oldest first
  int            mcount [E];
  logic [TW-1:0] mtag   [E][S];

  pgmdp_lfst #(.LFST_ENTRIES(E), .LFST_SLOTS(S), .TAG_W(TW), .NLANE(L)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic has(int e, logic [TW-1:0] t);
    for (int k = 0; k < mcount[e]; k++) if (mtag[e][k] == t) return 1;
    return 0;
  endfunction

  task automatic mput(int e, logic [TW-1:0] t);
    if (mcount[e] == S) begin
      for (int k = 0; k < S - 1; k++) mtag[e][k] = mtag[e][k+1];
      mcount[e]--;
    end
    mtag[e][mcount[e]] = t;
    mcount[e]++;
  endtask

  task automatic minv(logic [TW-1:0] t);
    for (int e = 0; e < E; e++)
      for (int k = 0; k < mcount[e]; k++)
        if (mtag[e][k] == t) begin
          for (int j = k; j < mcount[e] - 1; j++) mtag[e][j] = mtag[e][j+1];
          mcount[e]--;
          break;
        end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [TW-1:0] next_tag;
    next_tag = 0;
    for (int e = 0; e < E; e++) mcount[e] = 0;
    for (int i = 0; i < L; i++) begin
      lane_ld[i] = 0; lane_st[i] = 0; lane_ssid[i] = 0; lane_tag[i] = 0;
    end
    #12 rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int seen_st;
      @(negedge clk);
      seen_st = 0;
      for (int i = 0; i < L; i++) begin
        int c;
        c = $urandom_range(0, 2);
        lane_ld[i]   = (c == 0);
        lane_st[i]   = (c == 1);
        lane_ssid[i] = 6'($urandom_range(0, 3));
        lane_tag[i]  = next_tag;
        if (lane_st[i]) next_tag++;
      end
      inv_valid = ($urandom_range(0, 1) == 0);
      inv_tag   = next_tag - TW'($urandom_range(1, 6));
      clear     = (t % 1000 == 999);
      #1;
      // walk lanes in program order through the model (writes are visible
      // to later lanes of the same group)
      for (int i = 0; i < L; i++) begin
        int e;
        e = lane_ssid[i];
        if (lane_ld[i]) begin
          int nv;
          logic ok;
          nv = 0; ok = 1;
          for (int k = 0; k < S; k++)
            if (dep_valid[i][k]) begin
              nv++;
              if (!has(e, dep_tag[i][k])) ok = 0;
            end
          if (nv != mcount[e]) ok = 0;
          if (nv > 1) n_multi++;
          for (int j = 0; j < i; j++) if (lane_st[j] && lane_ssid[j] == lane_ssid[i]) n_bypass++;
          checks++;
          if (!ok) begin
            failures++;
            $display("FAIL t=%0d lane %0d ssid %0d: %0d deps, model %0d", t, i, e, nv, mcount[e]);
          end
        end
        if (lane_st[i]) mput(e, lane_tag[i]);
      end
      @(posedge clk);
      #1;
      if (clear) for (int e = 0; e < E; e++) mcount[e] = 0;
      else if (inv_valid) begin
        // entries written this cycle keep their written value
        logic wr [E];
        for (int e = 0; e < E; e++) wr[e] = 0;
        for (int i = 0; i < L; i++) if (lane_st[i]) wr[lane_ssid[i]] = 1;
        for (int e = 0; e < E; e++)
          if (!wr[e])
            for (int k = 0; k < mcount[e]; k++)
              if (mtag[e][k] == inv_tag) begin
                for (int j = k; j < mcount[e] - 1; j++) mtag[e][j] = mtag[e][j+1];
                mcount[e]--;
                break;
              end
      end
    end
    checks++;
    if (n_multi == 0 || n_bypass == 0) failures++;
    $display("loads with 2 predicted stores: %0d, same-group bypasses: %0d", n_multi, n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

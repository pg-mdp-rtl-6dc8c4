// tb_pgmdp_store_queue: self-checking random test of the store queue.
// An 8-entry SQ with 2 allocation lanes is driven with random allocation,
// execution (two doublewords, all access sizes), commits, drains with random
// cache back-pressure and flushes.  A reference model of the queue gives the
// expected forwarding result of every random load search (youngest older
// executed overlapping store: full cover forwards, partial cover stalls,
// unexecuted and younger stores ignored) and the expected drain order.
module tb_pgmdp_store_queue;
  import pgmdp_pkg::*;

  localparam int N = 8, L = 2, N2 = 2 * N, PW = 4;
  logic              clk = 0, rst_n = 0;
  logic              alloc_valid [L];
  logic [PC_W-1:0]   alloc_pc [L];
  logic [PW-1:0]     head_pos, tail_pos;
  logic [3:0]        free_cnt;
  logic              ex_valid;
  logic [PW-1:0]     ex_pos;
  logic [ADDR_W-1:0] ex_addr;
  logic [1:0]        ex_size;
  logic [DATA_W-1:0] ex_data;
  logic [PC_W-1:0]   ex_pc;
  logic              ld_valid;
  logic [PW-1:0]     ld_sqpos;
  logic [ADDR_W-1:0] ld_addr;
  logic [1:0]        ld_size;
  logic              fwd_hit, fwd_stall;
  logic [PW-1:0]     fwd_pos;
  logic [DATA_W-1:0] fwd_data;
  logic [1:0]        commit_cnt;
  logic              dc_wr_valid, dc_wr_ready;
  logic [ADDR_W-1:0] dc_wr_addr;
  logic [7:0]        dc_wr_mask;
  logic [DATA_W-1:0] dc_wr_data;
  logic              flush_valid;
  logic [PW-1:0]     flush_pos;
  logic [N-1:0]      pend;

  int checks = 0, failures = 0, n_hit = 0, n_stall = 0, n_drain = 0, n_flush = 0;

  // model, indexed by position
  int          mh, mt, mc;
  logic        mexec [N2];
  logic [44:0] mdw [N2];
  logic [7:0]  mmask [N2];
  logic [63:0] mdata [N2];
  logic [PC_W-1:0] mpc [N2];

  pgmdp_store_queue #(.SQ_ENTRIES(N), .NLANE(L)) dut (.*);

  always #5 clk = ~clk;

  function automatic int madd(int p, int k); return (p + k) % N2; endfunction
  function automatic int mdist(int p, int h); return (p - h + N2) % N2; endfunction
  function automatic logic [7:0] bm(int off, int sz);
    return 8'(((1 << (1 << sz)) - 1) << off);
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mh = 0; mt = 0; mc = 0;
    alloc_valid = '{0, 0}; alloc_pc = '{0, 0};
    ex_valid = 0; ex_pos = 0; ex_addr = 0; ex_size = 0; ex_data = 0;
    ld_valid = 0; ld_sqpos = 0; ld_addr = 0; ld_size = 0;
    commit_cnt = 0; dc_wr_ready = 0; flush_valid = 0; flush_pos = 0;
    #12 rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int cnt, nfree, na, live;
      @(negedge clk);
      live  = mdist(mt, mh);
      nfree = N - live;
      // --- load search against the model
      ld_valid = 1;
      ld_sqpos = PW'(madd(mh, $urandom_range(0, live)));
      ld_size  = 2'($urandom_range(0, 3));
      ld_addr  = {45'($urandom_range(0, 1)), 3'(($urandom_range(0, 7) >> ld_size) << ld_size)};
      #1;
      begin
        int best; logic found; logic [7:0] lm;
        found = 0; best = 0;
        lm = bm(ld_addr[2:0], ld_size);
        for (int d = 0; d < mdist(ld_sqpos, mh); d++) begin
          int p; p = madd(mh, d);
          if (mexec[p] && mdw[p] == ld_addr[47:3] && (mmask[p] & lm) != 0) begin
            found = 1; best = p;
          end
        end
        checks++;
        if (!found) begin
          if (fwd_hit || fwd_stall) begin failures++; $display("FAIL t=%0d spurious fwd", t); end
        end else if ((mmask[best] & lm) == lm) begin
          n_hit++;
          if (!fwd_hit || fwd_pos != PW'(best) ||
              ((fwd_data ^ (mdata[best] >> (8 * ld_addr[2:0]))) & ((64'd1 << (8 << ld_size)) - 1 | {64{ld_size == 3}})) != 0) begin
            failures++; $display("FAIL t=%0d fwd hit=%b pos=%0d exp %0d", t, fwd_hit, fwd_pos, best);
          end
        end else begin
          n_stall++;
          if (!fwd_stall || fwd_hit) begin failures++; $display("FAIL t=%0d expected stall", t); end
        end
      end
      // --- drain check
      checks++;
      if (dc_wr_valid !== (mh != mc)) begin
        failures++; $display("FAIL t=%0d dc_wr_valid=%b", t, dc_wr_valid);
      end else if (dc_wr_valid && (dc_wr_addr[47:3] != mdw[mh] || dc_wr_mask != mmask[mh]
                                   || (dc_wr_data & {{8{mmask[mh][7]}}, {8{mmask[mh][6]}}, {8{mmask[mh][5]}}, {8{mmask[mh][4]}},
                                                     {8{mmask[mh][3]}}, {8{mmask[mh][2]}}, {8{mmask[mh][1]}}, {8{mmask[mh][0]}}})
                                      != (mdata[mh] & {{8{mmask[mh][7]}}, {8{mmask[mh][6]}}, {8{mmask[mh][5]}}, {8{mmask[mh][4]}},
                                                       {8{mmask[mh][3]}}, {8{mmask[mh][2]}}, {8{mmask[mh][1]}}, {8{mmask[mh][0]}}}))) begin
        failures++; $display("FAIL t=%0d drain data", t);
      end
      checks++;
      if (free_cnt != 4'(nfree) || tail_pos != PW'(mt) || head_pos != PW'(mh)) begin
        failures++; $display("FAIL t=%0d pointers", t);
      end
      dc_wr_ready = ($urandom_range(0, 2) != 0);
      // --- commit: only executed stores in order
      cnt = 0;
      while (cnt < L && mc != mt && mexec[madd(mc, cnt)] && madd(mc, cnt) != mt
             && $urandom_range(0, 1)) cnt++;
      commit_cnt = 2'(cnt);
      // --- execute one unexecuted store
      ex_valid = 0;
      for (int d = 0; d < live; d++) begin
        int p; p = madd(mh, d);
        if (!mexec[p] && $urandom_range(0, 2) == 0 && !ex_valid) begin
          ex_valid = 1;
          ex_pos   = PW'(p);
          ex_size  = 2'($urandom_range(0, 3));
          ex_addr  = {45'($urandom_range(0, 1)), 3'(($urandom_range(0, 7) >> ex_size) << ex_size)};
          ex_data  = {$urandom(), $urandom()};
        end
      end
      #1;
      if (ex_valid) begin
        checks++;
        if (ex_pc != mpc[ex_pos]) begin failures++; $display("FAIL ex_pc"); end
      end
      // --- flush or alloc
      flush_valid = ($urandom_range(0, 40) == 0);
      if (flush_valid) begin
        int lo, k;
        lo = mdist(madd(mc, cnt), mh);
        k = $urandom_range(lo, live);
        flush_pos = PW'(madd(mh, k));
        alloc_valid = '{0, 0};
      end else begin
        na = $urandom_range(0, (nfree < L) ? nfree : L);
        for (int l = 0; l < L; l++) begin
          alloc_valid[l] = (l < na);
          alloc_pc[l] = {$urandom(), $urandom()};
        end
      end
      @(posedge clk);
      // --- update the model
      if (ex_valid) begin
        mexec[ex_pos] = 1; mdw[ex_pos] = ex_addr[47:3];
        mmask[ex_pos] = bm(ex_addr[2:0], ex_size);
        mdata[ex_pos] = ex_data << (8 * ex_addr[2:0]);
      end
      mc = madd(mc, cnt);
      if (dc_wr_valid && dc_wr_ready) begin mh = madd(mh, 1); n_drain++; end
      if (flush_valid) begin mt = flush_pos; n_flush++; end
      else for (int l = 0; l < L; l++)
        if (alloc_valid[l]) begin mexec[mt] = 0; mpc[mt] = alloc_pc[l]; mt = madd(mt, 1); end
    end
    checks++;
    if (n_hit == 0 || n_stall == 0 || n_drain == 0 || n_flush == 0) failures++;
    $display("forwards %0d, partial stalls %0d, drains %0d, flushes %0d", n_hit, n_stall, n_drain, n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

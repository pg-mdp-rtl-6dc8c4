// tb_pgmdp_mdu_ports: MDP read-port sweep, with and without profile labels.
//
// Twelve copies of the memory dependence unit run the same loop program side
// by side, each under its own core model (pgmdp_mdu_driver): 1 to 6 MDP read
// ports, once with the profile-labeled loads encoded as labeled loads and once
// encoded as ordinary loads (the baseline predictor).  Every run checks all
// its committed load values as usual.  The sweep then checks the effects that
// labeling is meant to have on this loop:
//   * fewer MDP queries in every port configuration (3 of the 9 loads and
//     stores of the loop body are labeled);
//   * fewer false dependences over the sweep: in the baseline the sometimes
//     dependent load is trained into the store set and then waits also when
//     it reads unrelated data;
//   * fewer dispatch stalls for lack of a port with 1 to 4 ports.
// It prints cycles, IPC, queries, false dependences and port stalls per
// configuration.  Cycle counts are printed but not compared: in this short
// loop they are bound by the single load pipe and the late stores as much as
// by the ports, and labeled-load violations add refetches.  Sizes are the unit's defaults apart from the port count and
// a short clear period (2000 queries) so that clears happen in a short run.
module tb_pgmdp_mdu_ports;
  import pgmdp_pkg::*;

  localparam int NP = 6, NI = 300;

  int cyc   [NP][2], chk [NP][2], fail [NP][2];
  int qry   [NP][2], fdep [NP][2], pstall [NP][2], ncom [NP][2];
  bit fin   [NP][2];

  for (genvar p = 0; p < NP; p++) begin : g_p
    for (genvar l = 0; l < 2; l++) begin : g_l
      pgmdp_mdu_driver #(
        .N_ITER(NI), .PORTS(p + 1), .CLEARP(2000), .LABELS(l == 1),
        .REQ_MECH(1'b0), .REQ_CLEAR(1'b0), .STANDALONE(1'b0)
      ) u_drv ();
      always_comb begin
        fin[p][l]    = u_drv.done;
        cyc[p][l]    = u_drv.cyc;
        ncom[p][l]   = u_drv.committed;
        chk[p][l]    = u_drv.checks;
        fail[p][l]   = u_drv.failures;
        qry[p][l]    = int'(u_drv.cnt_mdp_queries);
        fdep[p][l]   = int'(u_drv.cnt_false_deps);
        pstall[p][l] = int'(u_drv.cnt_port_stalls);
      end
    end
  end

  int checks = 0, failures = 0;

  initial begin
    #5_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_done();
    foreach (fin[p, l]) if (!fin[p][l]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int fd_base, fd_lbl;
    while (!all_done()) #1000;
    #1;
    fd_base = 0;
    fd_lbl  = 0;
    $display("ports labels  cycles  IPCx100  mdp_queries  false_deps  port_stalls");
    for (int p = 0; p < NP; p++)
      for (int l = 0; l < 2; l++) begin
        $display("%5d %6s %7d %8d %12d %11d %12d", p + 1, l ? "yes" : "no", cyc[p][l],
                 ncom[p][l] * 100 / cyc[p][l], qry[p][l], fdep[p][l], pstall[p][l]);
        checks   += chk[p][l];
        failures += fail[p][l];
        if (l) fd_lbl += fdep[p][l]; else fd_base += fdep[p][l];
      end
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (qry[p][1] >= qry[p][0]) begin
        failures++; $display("FAIL %0d ports: labels do not reduce MDP queries", p + 1);
      end
    end
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (pstall[p][1] >= pstall[p][0]) begin
        failures++; $display("FAIL %0d ports: labels do not reduce port stalls", p + 1);
      end
    end
    checks++;
    if (fd_lbl >= fd_base) begin
      failures++; $display("FAIL labels do not reduce false dependences (%0d vs %0d)", fd_lbl, fd_base);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

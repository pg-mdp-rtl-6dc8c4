// tb_pgmdp_mdu_medium: end-to-end test of the memory dependence unit sized
// for the larger (medium) core of the evaluation: 8-wide dispatch, an 85-entry
// load queue, a 66-entry store queue, an SSIT of 256 entries and an LFST of
// 128 entries of 2 slots, cleared every 125k queries, with one MDP read port
// per lane.  The core model uses a 256-entry ROB.  The run is long enough to
// reach a cyclic clear.  See pgmdp_mdu_driver for what is checked; this
// module waits for the core model to finish and reports its result.
module tb_pgmdp_mdu_medium;
  pgmdp_mdu_driver #(
    .N_ITER(25000), .MAX_CYC(2000000),
    .W(8), .LQN(85), .SQN(66), .SSITN(256), .LFSTN(128), .PORTS(8),
    .CLEARP(125000), .ROB(256), .STANDALONE(1'b0)
  ) u_drv ();

  initial begin
    while (!u_drv.done) #1000;
    $display("TB_RESULT checks=%0d failures=%0d", u_drv.checks, u_drv.failures);
    $finish;
  end
endmodule

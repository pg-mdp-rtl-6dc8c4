// tb_pgmdp_mdu: end-to-end test of the memory dependence unit with 2 MDP read
// ports and a short clear period, so that port stalls and predictor clears
// occur within a short run.  See pgmdp_mdu_driver for what is checked.
module tb_pgmdp_mdu;
  pgmdp_mdu_driver #(.FULL(1'b0), .N_ITER(400), .PORTS(2), .CLEARP(2000)) u_drv ();
endmodule

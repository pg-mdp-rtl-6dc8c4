// tb_pgmdp_mdu_full: end-to-end run of the memory dependence unit with every
// parameter at its default (small-core sizes, 6 MDP ports, clear every 125k
// queries).  25000 loop iterations (275k instructions) are enough for more
// than one cyclic clear.  See pgmdp_mdu_driver for what is checked.
module tb_pgmdp_mdu_full;
  pgmdp_mdu_driver #(.FULL(1'b1), .N_ITER(25000), .MAX_CYC(2000000)) u_drv ();
endmodule

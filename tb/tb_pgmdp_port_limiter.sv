// tb_pgmdp_port_limiter: self-checking test of the MDP read-port limiter.
// Random dispatch groups (6 lanes, 3 MDP ports) with random LQ/SQ space are
// checked against a reference count: the accepted lanes must be the longest
// prefix whose stores plus unlabeled loads fit in the ports and whose loads
// and stores fit in the queues.  Labeled loads must never use a port.
module tb_pgmdp_port_limiter;
  import pgmdp_pkg::*;

  localparam int W = 6, P = 3;
  logic          backend_ready;
  logic [W-1:0]  lane_valid, accept, query;
  mem_class_e    lane_cls [W];
  logic [5:0]    lq_free;
  logic [4:0]    sq_free;
  logic [2:0]    n_queries;
  logic          port_stall, cap_stall;
  int checks = 0, failures = 0, n_port_stall = 0, n_lbl_pass = 0;

  pgmdp_port_limiter #(.DISPATCH_W(W), .MDP_PORTS(P)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int nv, ports, lds, sts, exp_n, exp_q;
      logic exp_ps;
      nv = $urandom_range(0, W);
      for (int i = 0; i < W; i++) begin
        lane_valid[i] = (i < nv);
        lane_cls[i]   = mem_class_e'($urandom_range(0, 3));
      end
      backend_ready = ($urandom_range(0, 9) != 0);
      lq_free = 6'($urandom_range(0, 8));
      sq_free = 5'($urandom_range(0, 8));
      #1;
      // reference
      exp_n = 0; ports = 0; lds = 0; sts = 0; exp_ps = 0; exp_q = 0;
      if (backend_ready)
        for (int i = 0; i < nv; i++) begin
          int np, nl, ns;
          np = ports + ((lane_cls[i] == MC_LOAD || lane_cls[i] == MC_STORE) ? 1 : 0);
          nl = lds + ((lane_cls[i] == MC_LOAD || lane_cls[i] == MC_LD_LBL) ? 1 : 0);
          ns = sts + ((lane_cls[i] == MC_STORE) ? 1 : 0);
          if (np > P) exp_ps = 1;
          if (np > P || nl > lq_free || ns > sq_free) break;
          ports = np; lds = nl; sts = ns; exp_n++;
        end
      checks++;
      if (accept !== W'((1 << exp_n) - 1)) begin
        failures++;
        $display("FAIL t=%0d accept=%b expected %0d lanes", t, accept, exp_n);
      end
      checks++;
      if (n_queries != 3'(ports) || port_stall != exp_ps) begin
        failures++;
        $display("FAIL t=%0d n_queries=%0d exp %0d port_stall=%b", t, n_queries, ports, port_stall);
      end
      for (int i = 0; i < W; i++)
        if (accept[i] && lane_cls[i] == MC_LD_LBL) begin
          checks++;
          n_lbl_pass++;
          if (query[i]) failures++;
        end
      if (port_stall) n_port_stall++;
    end
    checks++;
    if (n_port_stall == 0 || n_lbl_pass == 0) failures++;
    $display("port stalls %0d, labeled loads accepted %0d", n_port_stall, n_lbl_pass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

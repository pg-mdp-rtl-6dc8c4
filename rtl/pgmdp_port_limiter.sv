// pgmdp_port_limiter: dispatch-group limiter for a finite number of MDP read
// ports, with load/store queue capacity checks.
//
// Each cycle up to DISPATCH_W instructions arrive in program order.  Every
// store and every ordinary load needs one MDP read port; a PG-MDP labeled
// load needs none, which is how labeling reduces port pressure.  The limiter
// accepts the longest in-order prefix of the group for which
//   * MDP queries do not exceed MDP_PORTS,
//   * loads (labeled or not) fit in the free load queue entries,
//   * stores fit in the free store queue entries,
//   * the rest of the back end is ready (backend_ready).
// Lanes after the first blocked lane wait for the next cycle (dispatch
// stall).  The port budget is refilled every cycle, i.e. MDP queries are
// taken to complete within the cycle, as in the paper's read-port model.
//
// Interface: combinational, zero latency.  accept[] is a prefix mask of the
// valid lanes.  port_stall is raised when a valid lane was blocked and a
// missing MDP port was among the reasons; cap_stall likewise for LQ/SQ space.
module pgmdp_port_limiter
  import pgmdp_pkg::*;
#(
  parameter int unsigned DISPATCH_W = DISPATCH_W_DEF,
  parameter int unsigned MDP_PORTS  = MDP_PORTS_DEF,
  parameter int unsigned LQ_ENTRIES = LQ_ENTRIES_DEF,
  parameter int unsigned SQ_ENTRIES = SQ_ENTRIES_DEF,
  localparam int unsigned LQC_W = $clog2(LQ_ENTRIES + 1),
  localparam int unsigned SQC_W = $clog2(SQ_ENTRIES + 1),
  localparam int unsigned CNT_W = $clog2(DISPATCH_W + 1)
) (
  input  logic                  backend_ready,
  input  logic [DISPATCH_W-1:0] lane_valid,
  input  mem_class_e            lane_cls [DISPATCH_W],
  input  logic [LQC_W-1:0]      lq_free,
  input  logic [SQC_W-1:0]      sq_free,
  output logic [DISPATCH_W-1:0] accept,
  output logic [DISPATCH_W-1:0] query,       // accepted lane uses an MDP port
  output logic [CNT_W-1:0]      n_queries,
  output logic                  port_stall,
  output logic                  cap_stall
);

  always_comb begin
    int unsigned ports, loads, stores;
    logic blocked, need_port, is_ld, is_st, no_port, no_cap;
    ports      = 0;
    loads      = 0;
    stores     = 0;
    blocked    = !backend_ready;
    accept     = '0;
    query      = '0;
    port_stall = 1'b0;
    cap_stall  = 1'b0;
    for (int i = 0; i < DISPATCH_W; i++) begin
      is_ld     = (lane_cls[i] == MC_LOAD) || (lane_cls[i] == MC_LD_LBL);
      is_st     = (lane_cls[i] == MC_STORE);
      need_port = (lane_cls[i] == MC_LOAD) || is_st;
      no_port   = need_port && (ports + 1 > MDP_PORTS);
      no_cap    = (is_ld && (loads + 1 > int'(lq_free))) ||
                  (is_st && (stores + 1 > int'(sq_free)));
      if (lane_valid[i] && !blocked) begin
        if (no_port || no_cap) begin
          blocked    = 1'b1;
          port_stall = no_port;
          cap_stall  = no_cap;
        end else begin
          accept[i] = 1'b1;
          query[i]  = need_port;
          if (need_port) ports++;
          if (is_ld) loads++;
          if (is_st) stores++;
        end
      end else if (lane_valid[i]) begin
        blocked = 1'b1;
      end
    end
    n_queries = CNT_W'(ports);
  end

endmodule

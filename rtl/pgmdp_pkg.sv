// pgmdp_pkg: types, default sizes and helper functions shared by the
// memory dependence unit of a small out-of-order core that uses
// profile-guided memory dependence prediction (PG-MDP).
//
// The default sizes are those of the "small" core configuration: a 6-wide
// dispatch, a 41-entry load queue, a 26-entry store queue, and an XS Store
// Sets predictor with a 128-entry SSIT, a 64-entry LFST of 2 slots per entry,
// cleared every 125k memory operations.  Address and data widths, and the
// number of MDP read ports, are this design's own choices.
//
// Queue positions.  The load and store queues identify entries by a
// "position" that counts modulo 2*N for an N-entry queue (N need not be a
// power of two).  The entry index is pos mod N; the extra range acts as a
// wrap bit, so the age of two positions can be compared by their distance
// from the queue head.  The helpers take int unsigned arguments so that one
// set serves queues of every size; callers pass narrower positions, which are
// zero-extended (lint reports this widening; it is intended).
package pgmdp_pkg;

  // Small-core defaults (Table of simulated core parameters).
  localparam int unsigned DISPATCH_W_DEF   = 6;
  localparam int unsigned LQ_ENTRIES_DEF   = 41;
  localparam int unsigned SQ_ENTRIES_DEF   = 26;
  localparam int unsigned SSIT_ENTRIES_DEF = 128;
  localparam int unsigned LFST_ENTRIES_DEF = 64;
  localparam int unsigned LFST_SLOTS_DEF   = 2;
  localparam int unsigned CLEAR_PERIOD_DEF = 125000;
  // Unconstrained ports: one per dispatch lane (the main configuration
  // models no port limit).
  localparam int unsigned MDP_PORTS_DEF    = 6;

  // Design choices (not given by the paper).
  localparam int unsigned PC_W   = 48;   // virtual address width of a PC
  localparam int unsigned ADDR_W = 48;   // virtual data address width
  localparam int unsigned DATA_W = 64;   // one doubleword per access

  // Class of a dispatched instruction as seen by the memory dependence unit.
  typedef enum logic [1:0] {
    MC_NONE    = 2'd0,   // not a memory operation
    MC_LOAD    = 2'd1,   // ordinary load: queries the MDP
    MC_LD_LBL  = 2'd2,   // PG-MDP labeled load: bypasses the MDP
    MC_STORE   = 2'd3    // store: queries and updates the MDP
  } mem_class_e;

  // One decoded dispatch lane.
  typedef struct packed {
    logic              valid;
    logic [PC_W-1:0]   pc;
    logic [31:0]       instr;
  } disp_lane_t;

  // (pos + k) mod n2, for pos < n2 and k <= n2.
  function automatic int unsigned pos_add(int unsigned pos, int unsigned k,
                                          int unsigned n2);
    int unsigned s;
    s = pos + k;
    return (s >= n2) ? s - n2 : s;
  endfunction

  // Distance of pos from head, modulo n2.
  function automatic int unsigned pos_dist(int unsigned pos, int unsigned head,
                                           int unsigned n2);
    return (pos >= head) ? pos - head : pos + n2 - head;
  endfunction

  // Entry index of a position in an n-entry queue.
  function automatic int unsigned pos_idx(int unsigned pos, int unsigned n);
    return (pos >= n) ? pos - n : pos;
  endfunction

  // Byte mask of an access of 2**size bytes at the low 3 address bits.
  function automatic logic [7:0] byte_mask(logic [2:0] off, logic [1:0] size);
    logic [7:0] m;
    case (size)
      2'd0:    m = 8'h01;
      2'd1:    m = 8'h03;
      2'd2:    m = 8'h0f;
      default: m = 8'hff;
    endcase
    return m << off;
  endfunction

endpackage

// pgmdp_lfst: Last Fetched Store Table (LFST) with multiple slots per entry,
// as in the XiangShan variant of Store Sets ("XS Store Sets").
//
// The LFST is indexed by store set ID (SSID).  Each entry holds LFST_SLOTS
// slots; a slot is a valid bit and the store queue position (TAG_W bits) of
// a recently dispatched store of that set.  With several slots, one load can
// be made to wait for more than one store of its set.
//
//   * A dispatched store with a valid SSID writes its SQ position into its
//     entry: into an invalid slot if there is one, otherwise into the slot
//     the entry's replacement pointer names (the oldest).  The pointer then
//     moves past the written slot.
//   * A dispatched load with a valid SSID reads all valid slots of its entry:
//     these are the stores it is predicted to depend on.
//   * When a store executes, slots holding its position are invalidated, so
//     later loads do not wait for it.
//   * clear invalidates every slot (the cyclic clear).
//
// The NLANE lanes of one dispatch group are handled in program order within
// the cycle: a load sees the stores of earlier lanes of the same group.
// Stores are not themselves made to wait for earlier stores of their set
// (the slots exist so that a set may hold several in-flight stores); this is
// this design's choice.
//
// Interface: lookups are combinational (results in the dispatch cycle);
// table updates happen at the next clock edge.  If a store executes in the
// same cycle as a dispatch writes its entry, the entry keeps the written
// value; a stale slot then costs at most a check against the store queue,
// which reports the store as executed.  Reset and clear invalidate all.
// The bypass loop reads post[j] of earlier lanes (j < i) in the same
// always_comb that writes post[i]; lint flags the order of the array as a
// whole, but no lane reads a value written after it, so no state is implied.
module pgmdp_lfst
  import pgmdp_pkg::*;
#(
  parameter int unsigned LFST_ENTRIES = LFST_ENTRIES_DEF,
  parameter int unsigned LFST_SLOTS   = LFST_SLOTS_DEF,
  parameter int unsigned TAG_W        = $clog2(2 * SQ_ENTRIES_DEF),
  parameter int unsigned NLANE        = DISPATCH_W_DEF,
  localparam int unsigned SSID_W = $clog2(LFST_ENTRIES),
  localparam int unsigned PTR_W  = (LFST_SLOTS > 1) ? $clog2(LFST_SLOTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // dispatch lanes, in program order
  input  logic              lane_ld   [NLANE],   // load with valid SSID
  input  logic              lane_st   [NLANE],   // store with valid SSID
  input  logic [SSID_W-1:0] lane_ssid [NLANE],
  input  logic [TAG_W-1:0]  lane_tag  [NLANE],   // store's SQ position
  output logic [LFST_SLOTS-1:0] dep_valid [NLANE],
  output logic [TAG_W-1:0]  dep_tag   [NLANE][LFST_SLOTS],
  // store execution
  input  logic              inv_valid,
  input  logic [TAG_W-1:0]  inv_tag
);

  typedef struct packed {
    logic [LFST_SLOTS-1:0]           v;
    logic [LFST_SLOTS-1:0][TAG_W-1:0] tag;
    logic [PTR_W-1:0]                ptr;
  } entry_t;

  entry_t tab_q [LFST_ENTRIES];
  entry_t pre   [NLANE];   // entry value as seen by lane i
  entry_t post  [NLANE];   // entry value after store lane i

  function automatic entry_t put(entry_t e, logic [TAG_W-1:0] t);
    entry_t r;
    int unsigned s;
    r = e;
    s = int'(e.ptr);
    for (int k = LFST_SLOTS - 1; k >= 0; k--)
      if (!e.v[k]) s = k;
    r.v[s]   = 1'b1;
    r.tag[s] = t;
    r.ptr    = PTR_W'((s + 1 >= LFST_SLOTS) ? 0 : s + 1);
    return r;
  endfunction

  always_comb begin
    for (int i = 0; i < NLANE; i++) begin
      pre[i] = tab_q[lane_ssid[i]];
      for (int j = 0; j < i; j++)
        if (lane_st[j] && lane_ssid[j] == lane_ssid[i]) pre[i] = post[j];
      post[i] = put(pre[i], lane_tag[i]);
      dep_valid[i] = lane_ld[i] ? pre[i].v : '0;
      for (int k = 0; k < LFST_SLOTS; k++) dep_tag[i][k] = pre[i].tag[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < LFST_ENTRIES; e++) tab_q[e] <= '0;
    end else if (clear) begin
      for (int e = 0; e < LFST_ENTRIES; e++) tab_q[e].v <= '0;
    end else begin
      if (inv_valid)
        for (int e = 0; e < LFST_ENTRIES; e++)
          for (int k = 0; k < LFST_SLOTS; k++)
            if (tab_q[e].tag[k] == inv_tag) tab_q[e].v[k] <= 1'b0;
      for (int i = 0; i < NLANE; i++)
        if (lane_st[i]) tab_q[lane_ssid[i]] <= post[i];
    end
  end

endmodule

// pgmdp_store_sets: XS Store Sets memory dependence predictor (MDP) with the
// PG-MDP rule for labeled loads.
//
// Made of an SSIT (PC -> store set ID) and a multi-slot LFST (store set ID ->
// SQ positions of the last dispatched stores of the set).  Per dispatch lane:
//   * a store that queries looks up its SSID; if valid, it records its SQ
//     position in the LFST;
//   * an ordinary load that queries looks up its SSID; if valid, the valid
//     LFST slots are its predicted store dependences;
//   * a PG-MDP labeled load does not query (query=0 on its lane): it gets no
//     prediction and always issues as soon as its operands are ready.
//
// Training.  On a memory order violation between a load and a store the
// classic Store Sets rules assign both PCs one SSID: a fresh one (from a
// round-robin allocation counter, this design's choice) if neither has one,
// the existing one if one has, and the smaller of the two if both have one
// (the merge winner is this design's choice).  A violation whose load is
// labeled still causes the usual squash outside this block, but creates no
// entry: train_skip_lbl pulses instead of train_fire.
//
// Cyclic clear.  Every CLEAR_PERIOD MDP queries (125k in the paper's small
// core) both tables are invalidated.  Counting queries rather than all
// fetched memory operations is this design's choice: labeled loads never
// reach the predictor.
//
// Timing: lookups are combinational within the dispatch cycle (the paper
// likewise takes MDP queries to return within the cycle); table writes,
// training and clear take effect at the next clock edge.
module pgmdp_store_sets
  import pgmdp_pkg::*;
#(
  parameter int unsigned NLANE        = DISPATCH_W_DEF,
  parameter int unsigned SSIT_ENTRIES = SSIT_ENTRIES_DEF,
  parameter int unsigned LFST_ENTRIES = LFST_ENTRIES_DEF,
  parameter int unsigned LFST_SLOTS   = LFST_SLOTS_DEF,
  parameter int unsigned CLEAR_PERIOD = CLEAR_PERIOD_DEF,
  parameter int unsigned TAG_W        = $clog2(2 * SQ_ENTRIES_DEF),
  localparam int unsigned SSID_W = $clog2(LFST_ENTRIES),
  localparam int unsigned CLR_W  = $clog2(CLEAR_PERIOD + NLANE + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // dispatch lookup
  input  logic              lane_query [NLANE],  // lane holds an MDP query
  input  mem_class_e        lane_cls   [NLANE],
  input  logic [PC_W-1:0]   lane_pc    [NLANE],
  input  logic [TAG_W-1:0]  lane_tag   [NLANE],  // SQ position of a store
  output logic [LFST_SLOTS-1:0] dep_valid [NLANE],
  output logic [TAG_W-1:0]  dep_tag    [NLANE][LFST_SLOTS],
  // store execution (frees LFST slots)
  input  logic              st_exec_valid,
  input  logic [TAG_W-1:0]  st_exec_tag,
  // training from a memory order violation
  input  logic              viol_valid,
  input  logic              viol_labeled,
  input  logic [PC_W-1:0]   viol_ld_pc,
  input  logic [PC_W-1:0]   viol_st_pc,
  output logic              train_fire,
  output logic              train_skip_lbl,
  output logic              clear_pulse
);

  localparam int unsigned NREAD = NLANE + 2;

  logic [PC_W-1:0]   rd_pc    [NREAD];
  logic              rd_valid [NREAD];
  logic [SSID_W-1:0] rd_ssid  [NREAD];
  logic              wr_en    [2];
  logic [PC_W-1:0]   wr_pc    [2];
  logic [SSID_W-1:0] wr_ssid  [2];

  logic              lf_ld   [NLANE];
  logic              lf_st   [NLANE];
  logic [SSID_W-1:0] lf_ssid [NLANE];

  logic [CLR_W-1:0]  clr_cnt_q;
  logic [SSID_W-1:0] alloc_q;
  logic              clear;

  always_comb begin
    for (int i = 0; i < NLANE; i++) rd_pc[i] = lane_pc[i];
    rd_pc[NLANE]     = viol_ld_pc;
    rd_pc[NLANE + 1] = viol_st_pc;
  end

  pgmdp_ssit #(
    .SSIT_ENTRIES(SSIT_ENTRIES), .SSID_W(SSID_W), .NREAD(NREAD), .NWRITE(2)
  ) u_ssit (
    .clk, .rst_n, .clear,
    .rd_pc, .rd_valid, .rd_ssid,
    .wr_en, .wr_pc, .wr_ssid
  );

  always_comb begin
    for (int i = 0; i < NLANE; i++) begin
      lf_ld[i]   = lane_query[i] && lane_cls[i] == MC_LOAD  && rd_valid[i];
      lf_st[i]   = lane_query[i] && lane_cls[i] == MC_STORE && rd_valid[i];
      lf_ssid[i] = rd_ssid[i];
    end
  end

  pgmdp_lfst #(
    .LFST_ENTRIES(LFST_ENTRIES), .LFST_SLOTS(LFST_SLOTS), .TAG_W(TAG_W),
    .NLANE(NLANE)
  ) u_lfst (
    .clk, .rst_n, .clear,
    .lane_ld(lf_ld), .lane_st(lf_st), .lane_ssid(lf_ssid), .lane_tag,
    .dep_valid, .dep_tag,
    .inv_valid(st_exec_valid), .inv_tag(st_exec_tag)
  );

  // ---- training ------------------------------------------------------------
  logic              ld_v, st_v;
  logic [SSID_W-1:0] ld_s, st_s, win;

  assign ld_v = rd_valid[NLANE];
  assign ld_s = rd_ssid[NLANE];
  assign st_v = rd_valid[NLANE + 1];
  assign st_s = rd_ssid[NLANE + 1];

  always_comb begin
    train_fire     = viol_valid && !viol_labeled;
    train_skip_lbl = viol_valid &&  viol_labeled;
    if (ld_v && st_v) win = (ld_s < st_s) ? ld_s : st_s;
    else if (ld_v)    win = ld_s;
    else if (st_v)    win = st_s;
    else              win = alloc_q;
    wr_pc[0]   = viol_ld_pc;
    wr_pc[1]   = viol_st_pc;
    wr_ssid[0] = win;
    wr_ssid[1] = win;
    wr_en[0]   = train_fire && !(ld_v && ld_s == win);
    wr_en[1]   = train_fire && !(st_v && st_s == win);
  end

  // ---- cyclic clear ---------------------------------------------------------
  int unsigned n_query;
  always_comb begin
    n_query = 0;
    for (int i = 0; i < NLANE; i++) if (lane_query[i]) n_query++;
    clear = (int'(clr_cnt_q) + n_query >= CLEAR_PERIOD);
  end
  assign clear_pulse = clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clr_cnt_q <= '0;
      alloc_q   <= '0;
    end else begin
      clr_cnt_q <= clear ? '0 : CLR_W'(int'(clr_cnt_q) + n_query);
      if (train_fire && !ld_v && !st_v) alloc_q <= alloc_q + 1'b1;
    end
  end

endmodule

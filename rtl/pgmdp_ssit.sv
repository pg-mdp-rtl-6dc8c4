// pgmdp_ssit: Store Set ID Table (SSIT) of the Store Sets predictor.
//
// A direct-mapped, PC-indexed table of SSIT_ENTRIES entries, each a valid bit
// and a store set ID (SSID) that indexes the LFST.  A load or store whose PC
// maps to a valid entry belongs to that store set; an invalid entry means
// "predicted independent".  There is no tag, so unrelated PCs that hash to the
// same entry share its SSID: this aliasing is the source of the false
// dependencies that PG-MDP removes by keeping labeled loads out of the table.
//
// Index hash (this design's choice): two IDX_W-bit fields of the PC above
// bit 0 are XOR-folded, pc[1 +: IDX_W] ^ pc[1+IDX_W +: IDX_W].
//
// Interface: NREAD combinational read ports (PC in, valid/SSID out in the
// same cycle).  NWRITE write ports take effect at the next clock edge; on two
// writes to one entry the higher-numbered port wins.  clear invalidates every
// entry at the clock edge (the Store Sets cyclic clear) and overrides writes
// in that cycle.  Reset clears the table.
module pgmdp_ssit
  import pgmdp_pkg::*;
#(
  parameter int unsigned SSIT_ENTRIES = SSIT_ENTRIES_DEF,
  parameter int unsigned SSID_W       = $clog2(LFST_ENTRIES_DEF),
  parameter int unsigned NREAD        = DISPATCH_W_DEF,
  parameter int unsigned NWRITE       = 2,
  localparam int unsigned IDX_W = $clog2(SSIT_ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [PC_W-1:0]   rd_pc    [NREAD],
  output logic              rd_valid [NREAD],
  output logic [SSID_W-1:0] rd_ssid  [NREAD],
  input  logic              wr_en    [NWRITE],
  input  logic [PC_W-1:0]   wr_pc    [NWRITE],
  input  logic [SSID_W-1:0] wr_ssid  [NWRITE]
);

  logic              valid_q [SSIT_ENTRIES];
  logic [SSID_W-1:0] ssid_q  [SSIT_ENTRIES];

  function automatic logic [IDX_W-1:0] idx_of(logic [PC_W-1:0] pc);
    return pc[1 +: IDX_W] ^ pc[1 + IDX_W +: IDX_W];
  endfunction

  always_comb begin
    for (int r = 0; r < NREAD; r++) begin
      rd_valid[r] = valid_q[idx_of(rd_pc[r])];
      rd_ssid[r]  = ssid_q[idx_of(rd_pc[r])];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < SSIT_ENTRIES; e++) valid_q[e] <= 1'b0;
    end else if (clear) begin
      for (int e = 0; e < SSIT_ENTRIES; e++) valid_q[e] <= 1'b0;
    end else begin
      for (int w = 0; w < NWRITE; w++)
        if (wr_en[w]) valid_q[idx_of(wr_pc[w])] <= 1'b1;
    end
  end

  // SSIDs are only meaningful while valid; no reset needed.
  always_ff @(posedge clk) begin
    for (int w = 0; w < NWRITE; w++)
      if (wr_en[w]) ssid_q[idx_of(wr_pc[w])] <= wr_ssid[w];
  end

endmodule

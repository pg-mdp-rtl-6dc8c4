// pgmdp_label_decoder: memory-operation pre-decode for PG-MDP.
//
// PG-MDP marks loads that a profile found to be memory independent with an
// alternate opcode.  This decoder tells such labeled loads apart from
// ordinary loads and stores so that the dispatch stage can let them skip the
// memory dependence predictor (MDP).  It is the only decode logic PG-MDP
// adds.
//
// Encoding (RISC-V, as the paper suggests for that ISA): a labeled load is a
// standard integer LOAD (I-type, opcode 0000011) mirrored onto one of the
// major custom opcodes, keeping the I-type layout and funct3 width field.
// Which custom opcode is used is this design's choice: custom-0 (0001011) by
// default, set by LABEL_OPCODE.  Floating-point loads (LOAD-FP) are treated
// as ordinary loads; stores are STORE and STORE-FP.
//
// Interface: purely combinational, one instruction word in; out come the
// class (mem_class_e), log2 of the access size in bytes, and whether a load
// sign-extends.  Zero latency.
module pgmdp_label_decoder
  import pgmdp_pkg::*;
#(
  parameter logic [6:0] LABEL_OPCODE = 7'b0001011
) (
  input  logic [31:0] instr,
  output mem_class_e  cls,
  output logic [1:0]  size,
  output logic        is_unsigned
);

  localparam logic [6:0] OP_LOAD     = 7'b0000011;
  localparam logic [6:0] OP_LOAD_FP  = 7'b0000111;
  localparam logic [6:0] OP_STORE    = 7'b0100011;
  localparam logic [6:0] OP_STORE_FP = 7'b0100111;

  logic [6:0] opcode;
  logic [2:0] funct3;

  assign opcode = instr[6:0];
  assign funct3 = instr[14:12];

  always_comb begin
    cls         = MC_NONE;
    size        = funct3[1:0];
    is_unsigned = funct3[2];
    if (opcode == OP_LOAD || opcode == LABEL_OPCODE) begin
      // LB LH LW LD LBU LHU LWU; funct3 = 111 is reserved.
      if (funct3 != 3'b111)
        cls = (opcode == LABEL_OPCODE) ? MC_LD_LBL : MC_LOAD;
    end else if (opcode == OP_LOAD_FP) begin
      // FLW, FLD
      if (funct3 == 3'b010 || funct3 == 3'b011) cls = MC_LOAD;
      is_unsigned = 1'b1;
    end else if (opcode == OP_STORE) begin
      // SB SH SW SD
      if (!funct3[2]) cls = MC_STORE;
    end else if (opcode == OP_STORE_FP) begin
      if (funct3 == 3'b010 || funct3 == 3'b011) cls = MC_STORE;
    end
    if (cls == MC_NONE) begin
      size        = 2'd0;
      is_unsigned = 1'b0;
    end
  end

endmodule

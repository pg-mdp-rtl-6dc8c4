// tb_pgmdp_label_decoder: self-checking test of the PG-MDP label decoder.
// Walks every opcode/funct3 pair of interest plus random instruction words
// and compares the class and size with a table written out here: integer
// LOAD, the mirrored labeled load on custom-0, LOAD-FP, STORE, STORE-FP and
// everything else.
module tb_pgmdp_label_decoder;
  import pgmdp_pkg::*;

  logic [31:0] instr;
  mem_class_e  cls;
  logic [1:0]  size;
  logic        is_unsigned;
  int checks = 0, failures = 0;

  pgmdp_label_decoder dut (.instr, .cls, .size, .is_unsigned);

  function automatic mem_class_e expect_cls(logic [31:0] w);
    logic [2:0] f3;
    f3 = w[14:12];
    case (w[6:0])
      7'h03: return (f3 == 3'd7) ? MC_NONE : MC_LOAD;
      7'h0b: return (f3 == 3'd7) ? MC_NONE : MC_LD_LBL;
      7'h07: return (f3 == 3'd2 || f3 == 3'd3) ? MC_LOAD : MC_NONE;
      7'h23: return (f3 <= 3'd3) ? MC_STORE : MC_NONE;
      7'h27: return (f3 == 3'd2 || f3 == 3'd3) ? MC_STORE : MC_NONE;
      default: return MC_NONE;
    endcase
  endfunction

  task automatic check(logic [31:0] w);
    mem_class_e e;
    instr = w;
    #1;
    e = expect_cls(w);
    checks++;
    if (cls !== e) begin
      failures++;
      $display("FAIL instr=%h cls=%s expected %s", w, cls.name(), e.name());
    end
    if (e != MC_NONE) begin
      checks++;
      if (size !== w[13:12]) begin
        failures++;
        $display("FAIL instr=%h size=%0d", w, size);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0] ops [6] = '{7'h03, 7'h0b, 7'h07, 7'h23, 7'h27, 7'h13};
    foreach (ops[o])
      for (int f = 0; f < 8; f++)
        check({$urandom()} & 32'hffff8f80 | {17'd0, 3'(f), 5'd0, ops[o]});
    // ld a0, 8(sp) and its labeled twin
    check(32'h00813503);
    check(32'h0081350b);
    checks++;
    instr = 32'h0081350b; #1;
    if (cls != MC_LD_LBL || size != 2'd3) failures++;
    for (int i = 0; i < 2000; i++) check($urandom());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pgmdp_ssit: self-checking test of the Store Set ID Table.
// Random writes through two ports (port 1 wins on a collision) and random
// reads through six ports are compared with a reference table using the
// documented XOR-folded PC index.  Also checks that two PCs with the same
// index alias (share the SSID), that the cyclic clear empties the table and
// that a clear overrides a write in the same cycle.
module tb_pgmdp_ssit;
  import pgmdp_pkg::*;

  localparam int N = 128, R = 6;
  logic            clk = 0, rst_n = 0, clear = 0;
  logic [PC_W-1:0] rd_pc [R];
  logic            rd_valid [R];
  logic [5:0]      rd_ssid [R];
  logic            wr_en [2];
  logic [PC_W-1:0] wr_pc [2];
  logic [5:0]      wr_ssid [2];
  int checks = 0, failures = 0;

  logic       mv [N];
  logic [5:0] ms [N];

  pgmdp_ssit #(.SSIT_ENTRIES(N), .SSID_W(6), .NREAD(R), .NWRITE(2)) dut (.*);

  always #5 clk = ~clk;

  function automatic int idx(logic [PC_W-1:0] pc);
    return int'(pc[7:1] ^ pc[14:8]);
  endfunction

  function automatic logic [PC_W-1:0] rpc();
    return {$urandom(), $urandom()} & 48'h0000_0000_7ffe;
  endfunction

  task automatic check_reads();
    for (int r = 0; r < R; r++) rd_pc[r] = rpc();
    #1;
    for (int r = 0; r < R; r++) begin
      checks++;
      if (rd_valid[r] !== mv[idx(rd_pc[r])] ||
          (mv[idx(rd_pc[r])] && rd_ssid[r] !== ms[idx(rd_pc[r])])) begin
        failures++;
        $display("FAIL pc=%h v=%b ssid=%0d exp v=%b ssid=%0d", rd_pc[r], rd_valid[r],
                 rd_ssid[r], mv[idx(rd_pc[r])], ms[idx(rd_pc[r])]);
      end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < N; e++) mv[e] = 0;
    wr_en = '{0, 0};
    wr_pc = '{0, 0};
    wr_ssid = '{0, 0};
    for (int r = 0; r < R; r++) rd_pc[r] = '0;
    #12 rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      check_reads();
      for (int w = 0; w < 2; w++) begin
        wr_en[w]   = ($urandom_range(0, 2) == 0);
        wr_pc[w]   = rpc();
        wr_ssid[w] = 6'($urandom());
      end
      if (t % 7 == 0) wr_pc[1] = wr_pc[0];
      clear = (t == 1500);
      @(posedge clk);
      #1;
      if (clear) for (int e = 0; e < N; e++) mv[e] = 0;
      else for (int w = 0; w < 2; w++)
        if (wr_en[w]) begin mv[idx(wr_pc[w])] = 1; ms[idx(wr_pc[w])] = wr_ssid[w]; end
      wr_en = '{0, 0};
      clear = 0;
    end
    // aliasing: pc and pc ^ {idx bits moved} share an entry
    @(negedge clk);
    wr_en[0] = 1; wr_pc[0] = 48'h0000_0000_0104; wr_ssid[0] = 6'd42;
    @(posedge clk); #1 wr_en[0] = 0;
    rd_pc[0] = 48'h0000_0000_0104 ^ 48'h0000_0000_8102; // same folded index
    #1 checks++;
    if (!(rd_valid[0] && rd_ssid[0] == 6'd42)) begin failures++; $display("FAIL alias"); end
    // clear
    @(negedge clk); clear = 1; @(posedge clk); #1 clear = 0;
    for (int e = 0; e < N; e++) mv[e] = 0;
    for (int k = 0; k < 20; k++) check_reads();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

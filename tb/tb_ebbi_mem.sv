// tb_ebbi_mem: self-checking test of the banked EBBI stack memory.
//
// A small instance (3 pairs, 5 banks, 32 words) is first cleared through the
// clear port, then driven each cycle with one random access kind: a pixel
// write into one bank of one pair, a parallel read of all banks of two
// distinct pairs at per-bank addresses, or a clear of a random set of pairs
// at one address. A reference array [pair][bank][address] follows the same
// accesses; every read must return, one clock later, the reference word of
// each bank of each pair in the requested order (slot 0 first).
// Timing: inputs change on the falling edge; read data is checked in the
// following cycle, after that cycle's new inputs (including a new rd_pair)
// have been applied, since the data must not depend on them.
`timescale 1ns/1ps
module tb_ebbi_mem;
  localparam int NP = 3, NR = 2, NB = 5, DEPTH = 32, DW = 8, AW = 5, PW = 2, BW = 3;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, clr_en = 0;
  logic [PW-1:0] wr_pair = '0; logic [BW-1:0] wr_bank = '0;
  logic [AW-1:0] wr_addr = '0, clr_addr = '0; logic [DW-1:0] wr_mask = '0;
  logic [NB-1:0][AW-1:0] rd_addr = '0;
  logic [NR-1:0][PW-1:0] rd_pair = '0;
  logic [NR-1:0][NB-1:0][DW-1:0] rd_data;
  logic [NP-1:0] clr_pairs = '0;
  logic [DW-1:0] ref_mem [NP][NB][DEPTH];
  logic [NR-1:0][NB-1:0][DW-1:0] exp_d;
  int checks = 0, failures = 0;

  ebbi_mem #(.N_PAIR(NP), .N_RD(NR), .NB(NB), .DEPTH(DEPTH), .DW(DW)) dut (.*);

  always #5 clk = ~clk;
  initial begin #2_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    int op, p0, p1;
    bit was_rd;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      clr_en = 1; clr_pairs = '1; clr_addr = AW'(a);
      for (int p = 0; p < NP; p++) for (int b = 0; b < NB; b++) ref_mem[p][b][a] = '0;
      @(negedge clk);
    end
    clr_en = 0;
    was_rd = 0;
    for (int n = 0; n < 6000; n++) begin
      op = $urandom_range(0, 9);
      wr_en = 0; rd_en = 0; clr_en = 0;
      // the read-pair inputs change every cycle, read or not
      p0 = $urandom_range(0, NP - 1); p1 = (p0 + $urandom_range(1, NP - 1)) % NP;
      rd_pair[0] = PW'(p0); rd_pair[1] = PW'(p1);
      if (op < 4) begin
        wr_en = 1; wr_pair = PW'($urandom_range(0, NP - 1)); wr_bank = BW'($urandom_range(0, NB - 1));
        wr_addr = AW'($urandom_range(0, DEPTH - 1)); wr_mask = DW'(1 << $urandom_range(0, DW - 1));
      end else if (op < 8) begin
        rd_en = 1;
        for (int b = 0; b < NB; b++) rd_addr[b] = AW'($urandom_range(0, DEPTH - 1));
      end else if (op < 9) begin
        clr_en = 1; clr_pairs = NP'($urandom_range(1, (1 << NP) - 1)); clr_addr = AW'($urandom_range(0, DEPTH - 1));
      end
      #1;
      // data of the previous cycle's read, seen while the new inputs apply
      if (was_rd) check(rd_data == exp_d, $sformatf("read data %h exp %h", rd_data, exp_d));
      was_rd = rd_en;
      if (rd_en) for (int k = 0; k < NR; k++) for (int b = 0; b < NB; b++)
        exp_d[k][b] = ref_mem[rd_pair[k]][b][rd_addr[b]];
      @(negedge clk);
      if (wr_en) ref_mem[wr_pair][wr_bank][wr_addr] |= wr_mask;
      if (clr_en) for (int p = 0; p < NP; p++) if (clr_pairs[p]) for (int b = 0; b < NB; b++) ref_mem[p][b][clr_addr] = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

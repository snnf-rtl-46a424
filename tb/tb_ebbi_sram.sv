// tb_ebbi_sram: self-checking test of the masked-write, synchronous-read
// SRAM bank.
//
// A 64-word instance is driven with random reads, masked writes and idle
// cycles. A reference array in the testbench applies the same masked writes;
// every read must return the reference word one clock later, and rdata must
// hold its value over writes and idle cycles. All words are written with a
// full mask first, so no unknown contents are ever read.
// Timing: inputs change on the falling edge, outputs are checked on the
// following falling edge.
`timescale 1ns/1ps
module tb_ebbi_sram;
  localparam int DEPTH = 64, DW = 8, AW = 6;
  logic clk = 0, cs = 0, we = 0;
  logic [DW-1:0] wmask = '0, wdata = '0, rdata;
  logic [AW-1:0] addr = '0;
  int checks = 0, failures = 0;
  logic [DW-1:0] ref_mem [DEPTH];
  logic [DW-1:0] exp_q;

  ebbi_sram #(.DEPTH(DEPTH), .DW(DW), .AW(AW)) dut (.clk, .cs, .we, .wmask, .addr, .wdata, .rdata);

  always #5 clk = ~clk;
  initial begin #1_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    int op;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      cs = 1; we = 1; wmask = '1; addr = AW'(a); wdata = DW'($urandom); ref_mem[a] = wdata;
      @(negedge clk);
    end
    cs = 1; we = 0; addr = 0; @(negedge clk); exp_q = ref_mem[0];
    for (int n = 0; n < 4000; n++) begin
      op = $urandom_range(0, 9);
      addr = AW'($urandom_range(0, DEPTH - 1));
      wdata = DW'($urandom); wmask = DW'($urandom);
      if (op < 4) begin cs = 1; we = 0; end
      else if (op < 8) begin cs = 1; we = 1; end
      else begin cs = 0; we = $urandom_range(0, 1); end
      @(negedge clk);
      if (cs && we) ref_mem[addr] = (ref_mem[addr] & ~wmask) | (wdata & wmask);
      if (cs && !we) exp_q = ref_mem[addr];
      check(rdata == exp_q, $sformatf("rdata %h exp %h", rdata, exp_q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

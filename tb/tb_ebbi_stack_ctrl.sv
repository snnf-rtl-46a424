// tb_ebbi_stack_ctrl: self-checking test of the EBBI stack round robin and
// its clear engine, on a small instance (3 pairs, 2 read pairs, 20-word
// banks, T_E = 100 time units, N_E = 10 events).
//
// A stream of event commits with random timestamp steps is driven through
// all three trigger modes, with idle cycles, a held event whenever the
// controller reports a rotation due while the previous wipe is running (as
// the filter's controller does; an event being committed is never idle),
// and mem_init pulses at random times. A
// cycle model of the paper's round-robin procedure predicts, every cycle:
// the rotation condition (elapsed time >= T_E and/or count + 1 >= N_E), the
// active pair (0, 2, 1, 0, ...), the read pairs (oldest first), and the
// clear engine's enable, pair set and address (all pairs for DEPTH cycles
// after reset and mem_init, the freed pair for DEPTH cycles after each
// rotation). Rotations by each trigger, stalls and re-initialisations are
// counted and must all occur.
`timescale 1ns/1ps
module tb_ebbi_stack_ctrl;
  import snnf_pkg::*;
  localparam int NP = 3, NR = 2, DEPTH = 20, TE = 100, NE = 10, AW = 5, PW = 2;
  logic clk = 0, rst_n = 0, mem_init = 0, idle = 1, ev_commit = 0;
  trig_mode_e trig_mode = TRIG_TIME;
  logic [31:0] ev_t = '0;
  logic trans_due, trans_pulse, clear_busy, init_busy, clr_en;
  logic [PW-1:0] active_ptr; logic [NR-1:0][PW-1:0] rd_pair;
  logic [NP-1:0] clr_pairs; logic [AW-1:0] clr_addr;
  int checks = 0, failures = 0;
  int n_rot [3]; int n_stall = 0, n_init = 0;
  // model state
  int act, clr, cnt, sweep; longint tst; bit first, irun, ipend, cbusy, pulse;

  ebbi_stack_ctrl #(.N_PAIR(NP), .N_RD(NR), .DEPTH(DEPTH), .T_E(TE), .NE(NE)) dut (.*);

  always #5 clk = ~clk;
  initial begin #10_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic bit due_m();
    bit th = !first && ((ev_t - 32'(tst)) >= TE);
    bit ch = (cnt + 1 >= NE);
    return (trig_mode == TRIG_TIME) ? th : (trig_mode == TRIG_COUNT) ? ch : (th || ch);
  endfunction

  initial begin
    longint tnow = 1000;
    bit d;
    act = 0; clr = NP - 1; cnt = 0; sweep = 0; tst = 0; first = 1; irun = 1; ipend = 0; cbusy = 0; pulse = 0;
    n_rot = '{0, 0, 0};
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      if (n % 2500 == 0) trig_mode = trig_mode_e'((n / 2500) % 3);
      mem_init = ($urandom_range(0, 2999) == 0);
      if ($urandom_range(0, 9) < 6 && !irun) begin
        tnow += ($urandom_range(0, 9) == 0) ? $urandom_range(0, 250) : $urandom_range(0, 12);
        ev_t = 32'(tnow);
        ev_commit = 1;
      end else ev_commit = 0;
      idle = !ev_commit && ($urandom_range(0, 3) != 0);   // no commit when idle
      #1;
      d = due_m();
      if (ev_commit && d && cbusy) begin ev_commit = 0; n_stall++; #1; end  // held, as the controller does
      // comparisons before the edge
      check(trans_due == d, $sformatf("trans_due %b exp %b", trans_due, d));
      check(int'(active_ptr) == act, $sformatf("active %0d exp %0d", active_ptr, act));
      for (int k = 0; k < NR; k++) check(int'(rd_pair[k]) == (act + NR - 1 - k) % NP, "rd_pair");
      check(clr_en == (irun || cbusy), "clr_en");
      check(clr_pairs == (irun ? NP'('1) : cbusy ? NP'(1 << clr) : NP'(0)), "clr_pairs");
      if (irun || cbusy) check(int'(clr_addr) == sweep, "clr_addr");
      check(init_busy == (irun || ipend), "init_busy");
      check(clear_busy == cbusy, "clear_busy");
      check(trans_pulse == pulse, "trans_pulse");
      // model update at the edge
      pulse = 0;
      if (mem_init) ipend = 1;
      if (irun || cbusy) begin
        if (sweep == DEPTH - 1) begin sweep = 0; irun = 0; cbusy = 0; end else sweep++;
      end else if (ipend && idle) begin
        ipend = 0; irun = 1; sweep = 0; act = 0; clr = NP - 1; cnt = 0; first = 1; n_init++;
      end
      if (ev_commit && !irun) begin
        if (first) tst = ev_t;
        first = 0;
        if (d) begin
          act = clr; clr = (clr + NP - 1) % NP; cnt = 0; tst = ev_t; cbusy = 1; sweep = 0; pulse = 1;
          n_rot[int'(trig_mode)]++;
        end else cnt++;
      end
      @(negedge clk);
    end
    $display("rotations time=%0d count=%0d either=%0d stalls=%0d inits=%0d", n_rot[0], n_rot[1], n_rot[2], n_stall, n_init);
    check(n_rot[0] > 0 && n_rot[1] > 0 && n_rot[2] > 0 && n_stall > 0 && n_init > 0, "all mechanisms seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_snnf_fsm: self-checking test of the event sequencer.
//
// Events are offered with random gaps and random fields and held until
// accepted. The network's y_valid is produced by a delay line that fires a
// random 1..6 cycles after each snn_load, so the controller's wait is
// exercised with several lengths, including the real one. init_busy,
// clear_busy and trans_due are driven randomly so that accepts are blocked
// during initialisation and the address cycle stalls on a running wipe.
// A phase model predicts every cycle: event_ready (idle, or waiting with
// y_valid, and not initialising), stall, ag_en/wr_en (address cycle without
// stall), rd_en, rd_second, cap_a, ev_commit (second read cycle), snn_load,
// idle, and the latched event fields. Back-to-back accepts, stalls and
// blocked accepts are counted and must occur.
`timescale 1ns/1ps
module tb_snnf_fsm;
  import snnf_pkg::*;
  logic clk = 0, rst_n = 0, event_valid = 0, pol_in = 0;
  logic [8:0] x_in = '0, y_in = '0; logic [31:0] t_in = '0;
  logic [8:0] ev_x, ev_y; logic [31:0] ev_t; logic ev_pol;
  logic init_busy = 0, clear_busy = 0, trans_due = 0, y_valid = 0;
  logic event_ready, idle, ag_en, wr_en, rd_en, rd_second, cap_a, ev_commit, snn_load, stall;
  int checks = 0, failures = 0, n_b2b = 0, n_stall = 0, n_block = 0, n_acc = 0;
  int ph, ydly;            // model: 0 idle 1 addr 2 rda 3 rdb 4 load 5 wait
  logic [8:0] mx, my; logic [31:0] mt; logic mp;

  snnf_fsm dut (.*);

  always #5 clk = ~clk;
  initial begin #10_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s (phase %0d)", $time, what, ph); end
  endtask

  initial begin
    bit rdy, stl, acc;
    ph = 0; ydly = -1; mx = 0; my = 0; mt = 0; mp = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 40000; n++) begin
      if (!event_valid && $urandom_range(0, 2) != 0) begin
        event_valid = 1; x_in = 9'($urandom); y_in = 9'($urandom); t_in = $urandom; pol_in = $urandom_range(0, 1);
      end
      init_busy  = ($urandom_range(0, 19) == 0);
      clear_busy = $urandom_range(0, 1);
      trans_due  = ($urandom_range(0, 3) == 0);
      y_valid    = (ydly == 0);
      #1;
      stl = (ph == 1) && trans_due && clear_busy;
      rdy = !init_busy && (ph == 0 || (ph == 5 && y_valid));
      acc = event_valid && rdy;
      check(event_ready == rdy, "event_ready");
      check(stall == stl, "stall");
      check(ag_en == (ph == 1 && !stl) && wr_en == ag_en, "ag_en/wr_en");
      check(rd_en == (ph == 2 || ph == 3) && rd_second == (ph == 3), "rd_en/rd_second");
      check(cap_a == (ph == 3) && ev_commit == (ph == 3), "cap_a/ev_commit");
      check(snn_load == (ph == 4) && idle == (ph == 0), "snn_load/idle");
      if (ph != 0) check(ev_x == mx && ev_y == my && ev_t == mt && ev_pol == mp, "latched fields");
      if (stl) n_stall++;
      if (event_valid && init_busy && (ph == 0)) n_block++;
      if (acc && ph == 5) n_b2b++;
      // model update at the edge
      if (ydly >= 0) ydly--;
      if (ph == 4) ydly = $urandom_range(0, 5);
      case (ph)
        0: if (acc) ph = 1;
        1: if (!stl) ph = 2;
        2: ph = 3;
        3: ph = 4;
        4: ph = 5;
        5: if (y_valid) ph = acc ? 1 : 0;
        default: ;
      endcase
      if (acc) begin mx = x_in; my = y_in; mt = t_in; mp = pol_in; n_acc++; end
      @(negedge clk);
      if (acc) event_valid = 0;
    end
    $display("accepted=%0d back_to_back=%0d stall_cycles=%0d blocked=%0d", n_acc, n_b2b, n_stall, n_block);
    check(n_b2b > 0 && n_stall > 0 && n_block > 0, "all cases seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

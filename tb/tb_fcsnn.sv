// tb_fcsnn: self-checking test of the spiking network pipeline at its
// default size (2 time steps, 50-30-1, 8-bit weights, 12-bit membranes).
//
// Random weights for both layers are loaded through the shared weight port
// (w_layer 0: FC1 entry j*50+i, 1: FC2 entry j). Events of two random binary
// input vectors are then offered whenever in_ready allows, with random gaps,
// including back-to-back events every 2 cycles. A reference model computes,
// per event, FC1 currents per time step, the LIF update (reset at the first
// step, v - v>>>3 leak, saturation, threshold 64, hard reset after a spike)
// and the FC2 weighted spike sum of the last step. Every y_valid must bring
// the next expected score, N_RD + 2 clock edges after the loading edge, and
// the last-step hidden spikes must match.
`timescale 1ns/1ps
module tb_fcsnn;
  import snnf_pkg::*;
  localparam int NR = 2, NIN = 50, NH = 30, WAW = 11;
  logic clk = 0, rst_n = 0, w_we = 0, w_layer = 0, in_valid = 0;
  logic [WAW-1:0] w_addr = '0; logic signed [7:0] w_data = '0;
  logic [NR-1:0][NIN-1:0] in_vec = '0;
  logic in_ready, y_valid;
  logic signed [12:0] y_score;
  logic [NH-1:0] spikes;
  int w1 [NH][NIN]; int w2 [NH];
  typedef struct { int score; logic [NH-1:0] spk; longint cyc; } exp_t;
  exp_t expq [$];
  longint cyc = 0;
  int checks = 0, failures = 0, n_out = 0;

  fcsnn dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic exp_t model(input logic [NR-1:0][NIN-1:0] vin);
    int v [NH]; bit s [NH]; int c; exp_t e;
    for (int j = 0; j < NH; j++) begin v[j] = 0; s[j] = 0; end
    for (int k = 0; k < NR; k++) for (int j = 0; j < NH; j++) begin
      c = 0; for (int i = 0; i < NIN; i++) if (vin[k][i]) c += w1[j][i];
      if (k == 0 || s[j]) v[j] = 0; else v[j] = v[j] - (v[j] >>> 3);
      v[j] += c;
      if (v[j] > 2047) v[j] = 2047; if (v[j] < -2048) v[j] = -2048;
      s[j] = (v[j] >= 64);
    end
    e.score = 0;
    for (int j = 0; j < NH; j++) begin e.spk[j] = s[j]; if (s[j]) e.score += w2[j]; end
    return e;
  endfunction

  // output monitor (falling edge: values registered at the last rising edge)
  always @(negedge clk) if (rst_n && y_valid) begin
    exp_t e;
    if (expq.size() == 0) check(0, "unexpected output");
    else begin
      e = expq.pop_front();
      check(y_score == e.score, $sformatf("score %0d exp %0d", y_score, e.score));
      check(spikes == e.spk, "last-step hidden spikes");
      check(cyc - e.cyc == NR + 2, $sformatf("latency %0d", cyc - e.cyc));
      n_out++;
    end
  end

  initial begin
    exp_t e;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int j = 0; j < NH; j++) for (int i = 0; i < NIN; i++) begin
      w1[j][i] = $urandom_range(0, 255) - 128;
      w_we = 1; w_layer = 0; w_addr = WAW'(j * NIN + i); w_data = 8'(w1[j][i]); @(negedge clk);
    end
    for (int j = 0; j < NH; j++) begin
      w2[j] = $urandom_range(0, 255) - 128;
      w_we = 1; w_layer = 1; w_addr = WAW'(j); w_data = 8'(w2[j]); @(negedge clk);
    end
    w_we = 0;
    for (int n = 0; n < 3000; n++) begin
      for (int k = 0; k < NR; k++) for (int i = 0; i < NIN; i++) in_vec[k][i] = ($urandom_range(0, 5) == 0);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      e = model(in_vec); e.cyc = cyc + 1;
      expq.push_back(e);
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 1) * $urandom_range(0, 4)) @(negedge clk);
    end
    repeat (10) @(negedge clk);
    check(expq.size() == 0 && n_out == 3000, "all events scored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

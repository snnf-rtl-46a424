// tb_snnf_denoise: workload test of the whole filter at its default size
// (346 x 260 sensor, two EBBI pairs, 25 ms windows): signal mixed with
// background-activity noise, as in the driving-plus-shot-noise evaluation,
// but with a synthetic scene because recorded data cannot be bundled.
//
// Scene: a vertical edge, 150 rows high, moving right at 1 pixel per ms,
// emits positive events at random rows of its current column (or one
// column behind), 0.17 events per microsecond in all. Noise: uniformly
// random pixels and polarities at about 5.6 Hz per pixel (0.5 events per
// microsecond over the sensor). 100 ms of events are sent, about 67,000.
//
// The network is given hand-set weights that make it a local density
// detector (trained weights are not available): every FC1 weight is
// 6 + (j mod 5) for hidden neuron j except the weights of the event's own
// pixel, which are 0; every FC2 weight is 4; the decision threshold is 80,
// so an event is signal when at least 20 hidden neurons fire in the last
// time step. After the first window (warm-up, the stack starts empty) the
// testbench counts signal events kept and noise events removed. Noise that
// lands inside the trail the edge left in the two stored windows (rows of the
// edge, up to 52 columns behind it) has real neighbours and is counted apart;
// the test fails if fewer than 95 % of the other, isolated noise events are
// removed or fewer than 75 % of the signal events are kept. It also checks
// that every event gets exactly one decision, in order, that the window
// rotated at least three times, and that the event rate is one event per
// 9 cycles.
`timescale 1ns/1ps
module tb_snnf_denoise;
  import snnf_pkg::*;

  localparam int W = SENSOR_W, H = SENSOR_H, NIN = 2 * PATCH_N * PATCH_N, NH = N_HIDDEN;
  localparam int CENTRE = (PATCH_N / 2) * PATCH_N + PATCH_N / 2;   // c = d = 2
  localparam longint T_END = 100_000;                              // us
  localparam longint T_WARM = T_E_US;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      reset_n = 1'b0;
  logic                      event_valid = 1'b0, event_ready;
  logic [XW-1:0]             x_addr = '0;
  logic [YW-1:0]             y_addr = '0;
  logic                      pol = 1'b0;
  logic [TW-1:0]             t = '0;
  logic                      mem_init = 1'b0;
  logic signed [SCORE_W-1:0] threshold = SCORE_W'(80);
  trig_mode_e                trig_mode = TRIG_TIME;
  logic                      w_we = 1'b0, w_layer = 1'b0;
  logic [10:0]               w_addr = '0;
  logic signed [WGT_W-1:0]   w_data = '0;
  logic                      output_valid, signal_noise_n;
  logic signed [SCORE_W-1:0] out_score;
  logic [XW-1:0]             out_x;
  logic [YW-1:0]             out_y;
  logic                      out_pol;
  logic [TW-1:0]             out_t;
  logic                      init_busy, stall, stack_rotate;

  snnf_top dut (
    .clk, .reset_n,
    .event_valid, .event_ready, .x_addr, .y_addr, .pol, .t,
    .mem_init, .threshold, .trig_mode,
    .w_we, .w_layer, .w_addr, .w_data,
    .output_valid, .signal_noise_n, .out_score, .out_x, .out_y, .out_pol, .out_t,
    .init_busy, .stall, .stack_rotate
  );

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ---------------- decisions ----------------
  typedef struct { int x; int y; longint t; bit sig; bit trail; } ev_t;
  ev_t sent [$];
  int n_sig = 0, n_sig_kept = 0, n_noise = 0, n_noise_removed = 0, n_out = 0, n_rot = 0;
  int n_trail = 0, n_trail_removed = 0;
  longint first_acc = -1, last_acc = 0; int n_acc = 0;

  always @(posedge clk) if (reset_n && stack_rotate) n_rot++;

  always @(posedge clk) if (reset_n && output_valid) begin
    ev_t e;
    if (sent.size() == 0) check(0, "decision without an event");
    else begin
      e = sent.pop_front();
      check(out_x == XW'(e.x) && out_y == YW'(e.y) && out_t == TW'(e.t), "decision order");
      n_out++;
      if (e.t >= T_WARM) begin
        if (e.sig) begin n_sig++; if (signal_noise_n) n_sig_kept++; end
        else if (e.trail) begin n_trail++; if (!signal_noise_n) n_trail_removed++; end
        else begin n_noise++; if (!signal_noise_n) n_noise_removed++; end
      end
    end
  end

  task automatic send(input int x, input int y, input bit p, input longint tt, input bit sig);
    int edge_x = 20 + int'(tt / 1000);
    @(negedge clk);
    event_valid = 1'b1; x_addr = XW'(x); y_addr = YW'(y); pol = p; t = TW'(tt);
    @(posedge clk);
    while (!event_ready) @(posedge clk);
    if (first_acc < 0) first_acc = cyc;
    last_acc = cyc; n_acc++;
    sent.push_back('{x:x, y:y, t:tt, sig:sig,
                     trail:(y >= 53 && y <= 206 && x >= edge_x - 52 && x <= edge_x + 2)});
    #1 event_valid = 1'b0;
  endtask

  initial begin
    longint tnow = 0;
    int ex;
    repeat (3) @(negedge clk);
    reset_n = 1'b1;
    // density-detector weights
    for (int j = 0; j < NH; j++) begin
      for (int i = 0; i < NIN; i++) begin
        @(negedge clk);
        w_we = 1'b1; w_layer = 1'b0; w_addr = 11'(j * NIN + i);
        w_data = (i == CENTRE || i == PATCH_N * PATCH_N + CENTRE) ? '0 : WGT_W'(6 + j % 5);
      end
    end
    for (int j = 0; j < NH; j++) begin
      @(negedge clk);
      w_we = 1'b1; w_layer = 1'b1; w_addr = 11'(j); w_data = WGT_W'(4);
    end
    @(negedge clk) w_we = 1'b0;

    while (tnow < T_END) begin
      tnow += $urandom_range(0, 3);                 // 0.67 events per us in all
      if ($urandom_range(0, 99) < 25) begin         // signal: 0.17 per us
        ex = 20 + int'(tnow / 1000) - $urandom_range(0, 1);
        send(ex, $urandom_range(55, 204), 1'b1, tnow, 1'b1);
      end else begin                                // noise: 0.5 per us
        send($urandom_range(0, W - 1), $urandom_range(0, H - 1), $urandom_range(0, 1), tnow, 1'b0);
      end
    end
    repeat (20) @(negedge clk);

    $display("events=%0d rotations=%0d after warm-up: signal kept %0d/%0d, noise removed %0d/%0d",
             n_acc, n_rot, n_sig_kept, n_sig, n_noise_removed, n_noise);
    $display("noise inside the edge trail removed %0d/%0d", n_trail_removed, n_trail);
    $display("event rate: %0d cycles for %0d events", last_acc - first_acc, n_acc - 1);
    check(n_out == n_acc && sent.size() == 0, "one decision per event");
    check(n_rot >= 3, "time windows rotated");
    check(last_acc - first_acc == longint'(N_EBBI + 7) * (n_acc - 1), "one event per 9 cycles");
    check(n_sig > 1000 && n_noise > 1000, "enough events of both kinds");
    check(n_noise_removed * 100 >= n_noise * 95, "at least 95 % of the isolated noise removed");
    check(n_sig_kept * 100 >= n_sig * 75, "at least 75 % of the signal kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

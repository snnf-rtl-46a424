// tb_snnf_top: end-to-end test of the whole filter at its default size
// (346 x 260 sensor, two EBBI pairs in use, 30 hidden neurons).
//
// Random weights are loaded through the weight port, then events are sent
// through the valid/ready handshake: mostly clustered around the previous
// event, some scattered, some on the image border. A reference model kept
// in this file - the stack as a list of full-size binary images ordered by
// age, the zero-padded 5x5 patch of the paper's procedure, the LIF network
// equations and the threshold - predicts the score, the decision and the
// echoed event fields of every event. The testbench also checks the 9-cycle
// latency of every event and the 9-cycle spacing of back-to-back events.
//
// Phases: time-window rotation (with two forced back-to-back rotations that
// must stall on the running wipe), a mem_init restart, event-count rotation
// at N_E = 30,000 events, and the mode where either trigger rotates. Each
// mechanism is counted and must occur.
`timescale 1ns/1ps
module tb_snnf_top;
  import snnf_pkg::*;

  localparam int W   = SENSOR_W;
  localparam int H   = SENSOR_H;
  localparam int NR  = N_EBBI;
  localparam int NP  = N_EBBI + 1;
  localparam int NH  = N_HIDDEN;
  localparam int NN  = PATCH_N;
  localparam int NIN = 2 * NN * NN;
  localparam int LAT = N_EBBI + 7;        // 1 + 2 + (N_EBBI + 3) + 1 cycles
  localparam int LEAK_SHIFT = 3;          // top defaults
  localparam int VTH = 64;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      reset_n;
  logic                      event_valid, event_ready;
  logic [XW-1:0]             x_addr;
  logic [YW-1:0]             y_addr;
  logic                      pol;
  logic [TW-1:0]             t;
  logic                      mem_init;
  logic signed [SCORE_W-1:0] threshold;
  trig_mode_e                trig_mode;
  logic                      w_we, w_layer;
  logic [10:0]               w_addr;
  logic signed [WGT_W-1:0]   w_data;
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

  // mechanism counters
  int n_rot_time = 0, n_rot_count = 0, n_rot_either = 0, n_stall_ev = 0;
  int n_init = 0, n_border = 0, n_signal = 0, n_noise = 0, n_b2b = 0;
  int n_spike_reset = 0, n_sat = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  // ---------------- watchdog ----------------
  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int w1 [NH][NIN];
  int w2 [NH];
  bit img [NP][2][H][W];     // storage slots; age_slot[a] = slot of age a
  int age_slot [NP];         // age 0 = active, NP-1 = the cleared one
  bit m_first;
  longint unsigned m_tstart;
  int m_count;

  typedef struct {
    int x, y, p; longint unsigned t;
    int score; bit sig; longint acc_cyc;
  } exp_t;
  exp_t expq[$];

  function automatic void model_reset();
    for (int s = 0; s < NP; s++) begin
      age_slot[s] = s;
      for (int q = 0; q < 2; q++)
        for (int yy = 0; yy < H; yy++)
          for (int xx = 0; xx < W; xx++) img[s][q][yy][xx] = 1'b0;
    end
    m_first = 1'b1; m_count = 0; m_tstart = 0;
  endfunction

  function automatic void model_rotate();
    int cleared_slot = age_slot[NP-1];
    for (int a = NP-1; a > 0; a--) age_slot[a] = age_slot[a-1];
    age_slot[0] = cleared_slot;            // was cleared: new active
    // the oldest image becomes the new cleared one
    for (int q = 0; q < 2; q++)
      for (int yy = 0; yy < H; yy++)
        for (int xx = 0; xx < W; xx++) img[age_slot[NP-1]][q][yy][xx] = 1'b0;
  endfunction

  // Process one event exactly as the paper's procedures do; returns score.
  function automatic int model_event(input int x, input int y, input int p,
                                     input longint unsigned t_us, input trig_mode_e mode,
                                     output bit rotated);
    int x_vec [NR][NIN];
    int v [NH]; bit s [NH];
    int score;
    bit time_hit, count_hit;
    // step 1: set the pixel in the active pair (index 0 positive, 1 negative)
    img[age_slot[0]][p ? 0 : 1][y][x] = 1'b1;
    // patch extraction, oldest pair first
    for (int k = 0; k < NR; k++) begin
      int slot = age_slot[NR-1-k];
      for (int dx = -NN/2; dx <= NN/2; dx++)
        for (int dy = -NN/2; dy <= NN/2; dy++) begin
          int xx = x + dx, yy = y + dy;
          int idx = (dx + NN/2) * NN + (dy + NN/2);
          bit in_img = (xx >= 0 && xx < W && yy >= 0 && yy < H);
          x_vec[k][idx]         = in_img ? int'(img[slot][0][yy][xx]) : 0;
          x_vec[k][NN*NN + idx] = in_img ? int'(img[slot][1][yy][xx]) : 0;
        end
    end
    // network
    score = 0;
    for (int j = 0; j < NH; j++) begin v[j] = 0; s[j] = 0; end
    for (int k = 0; k < NR; k++) begin
      for (int j = 0; j < NH; j++) begin
        int cur = 0, vp;
        for (int i = 0; i < NIN; i++) if (x_vec[k][i] != 0) cur += w1[j][i];
        if (k == 0 || s[j]) begin
          vp = 0;
          if (k != 0) n_spike_reset++;
        end else vp = v[j] - (v[j] >>> LEAK_SHIFT);
        vp = vp + cur;
        if (vp > 2047) begin vp = 2047; n_sat++; end
        if (vp < -2048) begin vp = -2048; n_sat++; end
        v[j] = vp;
        s[j] = (vp >= VTH);
      end
    end
    for (int j = 0; j < NH; j++) if (s[j]) score += w2[j];
    // step 2/3: count and rotation
    if (m_first) m_tstart = t_us;
    time_hit  = !m_first && ((t_us - m_tstart) >= T_E_US);
    count_hit = (m_count + 1) >= N_E;
    m_first = 1'b0;
    rotated = (mode == TRIG_TIME)  ? time_hit :
              (mode == TRIG_COUNT) ? count_hit : (time_hit || count_hit);
    if (rotated) begin
      model_rotate();
      m_count = 0;
      m_tstart = t_us;
    end else m_count++;
    return score;
  endfunction

  // ---------------- output monitor ----------------
  // Only one event is in flight, so the cycles it spent held by a stall are
  // counted since its acceptance and added to the expected latency. A
  // back-to-back event is accepted one edge before the previous decision is
  // seen here, so that event's count is kept in held_prev.
  longint last_acc = -100;
  int     held = 0, held_prev = 0;
  bit     in_flight = 0, b2b = 0;
  always @(posedge clk) begin
    exp_t e;
    if (reset_n && output_valid) begin
      if (expq.size() == 0) check(0, "output without an event");
      else begin
        e = expq.pop_front();
        check(out_x == XW'(e.x) && out_y == YW'(e.y) && out_pol == e.p[0] && out_t == TW'(e.t),
              $sformatf("event fields: got (%0d,%0d,%0d,%0d) exp (%0d,%0d,%0d,%0d)",
                        out_x, out_y, out_pol, out_t, e.x, e.y, e.p, e.t));
        check(out_score == SCORE_W'(e.score),
              $sformatf("score at (%0d,%0d): got %0d exp %0d", e.x, e.y, out_score, e.score));
        check(signal_noise_n == e.sig, "decision");
        // registered LAT edges after the accepting edge, so seen here one
        // edge later
        check(cyc - e.acc_cyc == LAT + (b2b ? held_prev : held) + 1,
              $sformatf("latency %0d, expected %0d", cyc - e.acc_cyc - 1,
                        LAT + (b2b ? held_prev : held)));
        if (e.sig) n_signal++; else n_noise++;
      end
      in_flight = b2b;
      b2b = 0;
    end
    if (reset_n && stall) held++;
    if (reset_n && event_valid && event_ready) begin
      if (cyc - last_acc == LAT) n_b2b++;
      last_acc = cyc;
      if (in_flight) begin held_prev = held; b2b = 1; end
      in_flight = 1;
      held = 0;
    end
  end

  always @(posedge clk) if (reset_n && stall && !$past(stall)) n_stall_ev++;

  // ---------------- stimulus ----------------
  int px = 100, py = 100;
  longint unsigned tnow = 1000;

  task automatic send_event(input int x, input int y, input int p, input longint unsigned tt);
    bit rot;
    int sc;
    @(negedge clk);
    event_valid = 1'b1; x_addr = XW'(x); y_addr = YW'(y); pol = p[0]; t = TW'(tt);
    @(posedge clk);
    while (!event_ready) @(posedge clk);
    // accepted at this edge
    sc = model_event(x, y, p, tt, trig_mode, rot);
    expq.push_back('{x:x, y:y, p:p, t:tt, score:sc, sig:(sc >= int'(threshold)), acc_cyc:cyc});
    if (rot) begin
      if (trig_mode == TRIG_TIME) n_rot_time++;
      else if (trig_mode == TRIG_COUNT) n_rot_count++;
      else n_rot_either++;
    end
    if (x < 2 || y < 2 || x > W-3 || y > H-3) n_border++;
    #1 event_valid = 1'b0;
  endtask

  task automatic random_event(input int max_dt);
    int r = $urandom_range(0, 99);
    if (r < 75) begin
      px = px + $urandom_range(0, 6) - 3;
      py = py + $urandom_range(0, 6) - 3;
    end else if (r < 90) begin
      px = $urandom_range(0, W-1);
      py = $urandom_range(0, H-1);
    end else begin
      px = ($urandom_range(0, 1) != 0) ? $urandom_range(0, 2) : W - 1 - $urandom_range(0, 2);
      py = ($urandom_range(0, 1) != 0) ? $urandom_range(0, 2) : H - 1 - $urandom_range(0, 2);
    end
    if (px < 0) px = 0;
    if (px > W-1) px = W-1;
    if (py < 0) py = 0;
    if (py > H-1) py = H-1;
    tnow += $urandom_range(0, max_dt);
    send_event(px, py, $urandom_range(0, 1), tnow);
  endtask

  task automatic wait_drain();
    while (expq.size() != 0) @(posedge clk);
  endtask

  initial begin
    reset_n = 1'b0; event_valid = 1'b0; x_addr = '0; y_addr = '0; pol = 1'b0; t = '0;
    mem_init = 1'b0; threshold = '0; trig_mode = TRIG_TIME;
    w_we = 1'b0; w_layer = 1'b0; w_addr = '0; w_data = '0;
    model_reset();
    repeat (3) @(posedge clk);
    #1 reset_n = 1'b1;

    // weights: loaded while the stack is being wiped
    for (int j = 0; j < NH; j++)
      for (int i = 0; i < NIN; i++) begin
        w1[j][i] = $urandom_range(0, 60) - 10;
        @(negedge clk);
        w_we = 1'b1; w_layer = 1'b0; w_addr = 11'(j * NIN + i); w_data = WGT_W'(w1[j][i]);
      end
    for (int j = 0; j < NH; j++) begin
      w2[j] = $urandom_range(0, 127) - 64;
      @(negedge clk);
      w_we = 1'b1; w_layer = 1'b1; w_addr = 11'(j); w_data = WGT_W'(w2[j]);
    end
    @(negedge clk) w_we = 1'b0;
    check(init_busy == 1'b1 && event_ready == 1'b0, "stack wipe running after reset");
    n_init++;
    while (init_busy) @(posedge clk);
    threshold = 13'sd20;

    // ---- phase A: time-window rotation ----
    trig_mode = TRIG_TIME;
    for (int n = 0; n < 4000; n++) begin
      random_event(40);
      if (n == 1500 || n == 2500) begin
        // two rotations in quick succession: the second must wait for the wipe
        tnow += T_E_US; random_event(0);
        tnow += T_E_US; random_event(0);
      end
    end
    wait_drain();

    // ---- restart through mem_init ----
    @(negedge clk) mem_init = 1'b1;
    @(negedge clk) mem_init = 1'b0;
    @(posedge clk);
    check(init_busy == 1'b1, "mem_init starts a wipe");
    while (init_busy) @(posedge clk);
    model_reset();
    n_init++;

    // ---- phase B: event-count rotation ----
    trig_mode = TRIG_COUNT;
    for (int n = 0; n < N_E + 500; n++) random_event(2);
    wait_drain();

    // ---- phase C: either trigger ----
    trig_mode = TRIG_EITHER;
    for (int n = 0; n < 300; n++) begin
      random_event(20);
      if (n == 100) tnow += T_E_US;
    end
    wait_drain();
    repeat (20) @(posedge clk);

    $display("mechanisms: rot_time=%0d rot_count=%0d rot_either=%0d stalls=%0d inits=%0d border=%0d",
             n_rot_time, n_rot_count, n_rot_either, n_stall_ev, n_init, n_border);
    $display("            signal=%0d noise=%0d back_to_back=%0d spike_resets=%0d saturations=%0d",
             n_signal, n_noise, n_b2b, n_spike_reset, n_sat);
    check(n_rot_time   >= 3, "time-window rotation happened");
    check(n_rot_count  >= 1, "event-count rotation happened");
    check(n_rot_either >= 1, "either-trigger rotation happened");
    check(n_stall_ev   >= 2, "stall on running wipe happened");
    check(n_init       >= 2, "stack wipe after reset and mem_init");
    check(n_border     >= 10, "zero-padded border patches");
    check(n_signal     >= 10, "signal decisions");
    check(n_noise      >= 10, "noise decisions");
    check(n_b2b        >= 100, "back-to-back events every 9 cycles");
    check(n_spike_reset >= 1, "hard reset after a spike");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

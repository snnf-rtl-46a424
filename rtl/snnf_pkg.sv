// snnf_pkg: sizes, types and helper functions shared by the SNN-based
// near-sensor noise filter (SNNF).
//
// The filter keeps a short history of a dynamic vision sensor's events as
// 1-bit event-based binary images (EBBIs), cuts a 5x5 neighbourhood around each
// new event out of that history and lets a one-hidden-layer spiking network
// decide whether the event is signal or background-activity noise.
//
// Values that follow the paper: sensor 346 x 260, patch 5x5, two EBBI pairs in
// use (three stored), 30 hidden LIF neurons, 8-bit weights, 12-bit membrane
// potentials, five memory banks, four pixels per bank word and polarity,
// T_e = 25 ms, N_e = 30,000 (the best event-count setting).
// Own choices: timestamps are 32-bit microseconds, the FC2 score is 13 bits
// (the widest value 30 signed 8-bit weights can sum to), and the leak and
// hidden threshold constants below.
package snnf_pkg;

  // ---------------- sensor and patch ----------------
  localparam int unsigned SENSOR_W = 346;  // pixels per row
  localparam int unsigned SENSOR_H = 260;  // rows
  localparam int unsigned XW       = 9;    // x coordinate width
  localparam int unsigned YW       = 9;    // y coordinate width
  localparam int unsigned TW       = 32;   // timestamp width (microseconds)
  localparam int unsigned PATCH_N  = 5;    // n, patch is n x n

  // ---------------- EBBI stack ----------------
  localparam int unsigned N_EBBI   = 2;    // pairs read for every event
  localparam int unsigned T_E_US   = 25_000; // fixed time window, 25 ms
  localparam int unsigned N_E      = 30_000; // fixed event-count window

  // ---------------- memory banks ----------------
  localparam int unsigned N_MEM    = 5;    // banks per EBBI pair (= PATCH_N)
  localparam int unsigned PIX_PER_WORD = 4; // pixels per word and polarity
  localparam int unsigned WORD_BITS    = 2 * PIX_PER_WORD; // {neg, pos}

  // ---------------- network ----------------
  localparam int unsigned N_HIDDEN = 30;
  localparam int unsigned WGT_W    = 8;    // signed weights
  localparam int unsigned MEM_W    = 12;   // signed membrane potential
  localparam int unsigned SCORE_W  = 13;   // signed FC2 score / threshold

  // Trigger of an EBBI transition (Algorithm 1 tests both conditions; the
  // configuration the paper adopts uses the time window only).
  typedef enum logic [1:0] {
    TRIG_TIME   = 2'd0,
    TRIG_COUNT  = 2'd1,
    TRIG_EITHER = 2'd2
  } trig_mode_e;

  // Ceiling division, used for bank geometry.
  function automatic int unsigned cdiv(input int unsigned a, input int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Minimum bits to index n items (at least 1).
  function automatic int unsigned idx_w(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage

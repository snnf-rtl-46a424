// snnf_top: SNN-based near-sensor background-activity noise filter for a
// dynamic vision sensor.
//
// Every incoming event (x, y, polarity, timestamp) is first written into the
// active pair of a stack of 1-bit event images (one image per polarity, one
// pair per time window). Then the 5x5 neighbourhood of the event is read from
// the N_EBBI most recent pairs through five row-interleaved memory banks in
// two cycles, flattened to one 50-bit vector per pair, and fed, oldest pair
// first, as N_EBBI time steps through a 50-30-1 spiking network (FC1, leaky
// integrate-and-fire neurons, linear FC2). The score of the last time step is
// compared with `threshold`; signal_noise_n = 1 marks a signal event, 0 noise.
// Every T_E (25 ms of event time) the stack rotates and the oldest pair is
// wiped in the background.
//
// Blocks: snnf_fsm (sequencing), addr_gen (stage 1), ebbi_mem with its 15
// ebbi_sram banks, ebbi_stack_ctrl (rotation and wiping), patch_extract
// (stage 2 selection), fcsnn (stage 3) and classifier (stage 4).
//
// Interface:
//   event_valid/event_ready  handshake; an event is taken at a clock edge
//                            where both are high. event_ready is low for
//                            about 4,500 cycles after reset or mem_init while
//                            the stack is wiped, and while an event is in
//                            flight.
//   x_addr, y_addr, pol, t   event; pol = 1 positive, t in microseconds.
//   mem_init                 pulse: wipe the stack and restart the windows.
//   threshold                signed decision threshold on the FC2 score.
//   trig_mode                window trigger: time (default use), event
//                            count, or either.
//   w_we/w_layer/w_addr/w_data  load the trained weights (w_layer 0: FC1,
//                            address j*50+i; 1: FC2, address j).
//   output_valid             one cycle per event, 9 clock edges after the
//                            edge that accepted it; with it signal_noise_n,
//                            the score and the event's fields.
// Throughput: one event per 9 cycles (N_EBBI = 2).
//
// Follows the paper: architecture, sizes, latency and the top-level port
// names that its FPGA diagram prints (clk, reset_n, event_valid, pol,
// x_addr, y_addr, threshold, mem_init, output_valid, signal_noise_n). Own
// choices: event_ready, the timestamp input, the weight-load port, the
// trigger-mode input and the extra outputs.
module snnf_top
  import snnf_pkg::*;
#(
  parameter int unsigned W          = SENSOR_W,
  parameter int unsigned H          = SENSOR_H,
  parameter int unsigned NEBBI      = N_EBBI,
  parameter int unsigned NHID       = N_HIDDEN,
  parameter int unsigned T_E        = T_E_US,
  parameter int unsigned NE         = N_E,
  parameter int unsigned LEAK_SHIFT = 3,
  parameter logic signed [MEM_W-1:0] VTH_HIDDEN = MEM_W'(64),
  // derived
  parameter int unsigned N_PAIR = NEBBI + 1,
  parameter int unsigned NIN    = 2 * PATCH_N * PATCH_N,
  parameter int unsigned WPR    = cdiv(W, PIX_PER_WORD),
  parameter int unsigned DEPTH  = cdiv(H, N_MEM) * WPR,
  parameter int unsigned WAW    = idx_w(NIN * NHID)
) (
  input  logic                      clk,
  input  logic                      reset_n,
  // event input
  input  logic                      event_valid,
  output logic                      event_ready,
  input  logic [XW-1:0]             x_addr,
  input  logic [YW-1:0]             y_addr,
  input  logic                      pol,
  input  logic [TW-1:0]             t,
  // configuration
  input  logic                      mem_init,
  input  logic signed [SCORE_W-1:0] threshold,
  input  trig_mode_e                trig_mode,
  input  logic                      w_we,
  input  logic                      w_layer,
  input  logic [WAW-1:0]            w_addr,
  input  logic signed [WGT_W-1:0]   w_data,
  // decision output
  output logic                      output_valid,
  output logic                      signal_noise_n,
  output logic signed [SCORE_W-1:0] out_score,
  output logic [XW-1:0]             out_x,
  output logic [YW-1:0]             out_y,
  output logic                      out_pol,
  output logic [TW-1:0]             out_t,
  output logic                      init_busy,
  output logic                      stall,        // event held: previous wipe still running
  output logic                      stack_rotate  // the EBBI stack rotated (one cycle)
);

  localparam int unsigned AW  = idx_w(DEPTH);
  localparam int unsigned PW  = idx_w(N_PAIR);
  localparam int unsigned BW  = idx_w(N_MEM);
  localparam int unsigned OW  = idx_w(PIX_PER_WORD);
  localparam int unsigned DW  = WORD_BITS;

  // ---------------- controller ----------------
  logic [XW-1:0] ev_x;
  logic [YW-1:0] ev_y;
  logic [TW-1:0] ev_t;
  logic          ev_pol;
  logic          idle, ag_en, wr_en, rd_en, rd_second, cap_a, ev_commit, snn_load;
  logic          clear_busy, trans_due, y_valid;

  snnf_fsm u_fsm (
    .clk, .rst_n(reset_n),
    .event_valid, .event_ready,
    .x_in(x_addr), .y_in(y_addr), .t_in(t), .pol_in(pol),
    .ev_x, .ev_y, .ev_t, .ev_pol,
    .init_busy, .clear_busy, .trans_due, .y_valid,
    .idle, .ag_en, .wr_en, .rd_en, .rd_second, .cap_a, .ev_commit, .snn_load, .stall
  );

  // ---------------- stage 1: address generation ----------------
  logic [BW-1:0]              wr_bank;
  logic [AW-1:0]              wr_addr;
  logic [DW-1:0]              wr_mask;
  logic [N_MEM-1:0][AW-1:0]   rd_addr_a, rd_addr_b;
  logic [PATCH_N-1:0][BW-1:0] row_bank;
  logic [PATCH_N-1:0]         row_ok, col_ok;
  logic [OW-1:0]              col_off;

  addr_gen #(.W(W), .H(H), .WPR(WPR), .DEPTH(DEPTH)) u_addr (
    .clk, .rst_n(reset_n), .en(ag_en),
    .x(ev_x), .y(ev_y), .pol(ev_pol),
    .wr_bank, .wr_addr, .wr_mask,
    .rd_addr_a, .rd_addr_b, .row_bank, .row_ok, .col_ok, .col_off
  );

  // ---------------- EBBI stack control ----------------
  logic [PW-1:0]             active_ptr;
  logic [NEBBI-1:0][PW-1:0]  rd_pair;
  logic                      clr_en;
  logic [N_PAIR-1:0]         clr_pairs;
  logic [AW-1:0]             clr_addr;

  ebbi_stack_ctrl #(.N_PAIR(N_PAIR), .N_RD(NEBBI), .DEPTH(DEPTH), .T_E(T_E), .NE(NE)) u_stack (
    .clk, .rst_n(reset_n),
    .mem_init, .idle, .trig_mode, .ev_t, .ev_commit,
    .trans_due, .trans_pulse(stack_rotate), .active_ptr, .rd_pair,
    .clear_busy, .init_busy, .clr_en, .clr_pairs, .clr_addr
  );

  // ---------------- parallel memory banks ----------------
  logic [NEBBI-1:0][N_MEM-1:0][DW-1:0] rd_data, word_a_q;

  ebbi_mem #(.N_PAIR(N_PAIR), .N_RD(NEBBI), .DEPTH(DEPTH)) u_mem (
    .clk, .rst_n(reset_n),
    .wr_en, .wr_pair(active_ptr), .wr_bank, .wr_addr, .wr_mask,
    .rd_en, .rd_addr(rd_second ? rd_addr_b : rd_addr_a), .rd_pair, .rd_data,
    .clr_en, .clr_pairs, .clr_addr
  );

  always_ff @(posedge clk or negedge reset_n) begin
    if (!reset_n)   word_a_q <= '0;
    else if (cap_a) word_a_q <= rd_data;
  end

  // ---------------- stage 2: patch selection ----------------
  logic [NEBBI-1:0][NIN-1:0] patch_vec;

  patch_extract #(.N_RD(NEBBI)) u_patch (
    .word_a(word_a_q), .word_b(rd_data),
    .row_bank, .row_ok, .col_ok, .col_off,
    .vec(patch_vec)
  );

  // ---------------- stage 3: spiking network ----------------
  logic signed [SCORE_W-1:0] y_score;
  logic                      snn_ready;

  fcsnn #(.N_RD(NEBBI), .NIN(NIN), .NH(NHID), .LEAK_SHIFT(LEAK_SHIFT),
          .VTH(VTH_HIDDEN), .WAW(WAW)) u_snn (
    .clk, .rst_n(reset_n),
    .w_we, .w_layer, .w_addr, .w_data,
    .in_valid(snn_load), .in_vec(patch_vec), .in_ready(snn_ready),
    .y_valid, .y_score, .spikes()
  );

  // ---------------- stage 4: decision ----------------
  classifier u_cls (
    .clk, .rst_n(reset_n),
    .y_valid, .y_score, .threshold,
    .ev_x, .ev_y, .ev_t, .ev_pol,
    .out_valid(output_valid), .signal_noise_n, .out_score,
    .out_x, .out_y, .out_t, .out_pol
  );

  // The schedule never loads the network before it has drained.
  a_snn_ready: assert property (@(posedge clk) disable iff (!reset_n)
    snn_load |-> snn_ready)
    else $error("snnf_top: network input buffer still busy");

endmodule

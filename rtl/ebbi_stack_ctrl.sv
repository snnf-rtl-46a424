// ebbi_stack_ctrl: round-robin management of the EBBI stack.
//
// The stack holds N_PAIR = N_EBBI+1 EBBI pairs: one active pair that collects
// new events, N_EBBI-1 older pairs, and one cleared pair kept ready for reuse.
// Each committed event is counted. When the time window T_E has elapsed since
// the window began, or N_E events have been counted (which of the two is
// selected by trig_mode), the pairs rotate: the cleared pair becomes the
// active one, the oldest pair becomes the new cleared pair and is wiped, the
// count restarts and the window start takes the event's timestamp. This is
// the paper's round-robin procedure with 0-based pair numbers: active starts
// at 0, cleared at N_PAIR-1, and both step downwards modulo N_PAIR.
//
// Wiping is done by a clear engine that writes zeros to one address of every
// bank of the pair per cycle, DEPTH cycles in all. Only the cleared pair is
// touched, so events keep being processed meanwhile. If a second rotation
// falls due before the wipe is over, trans_due together with clear_busy tells
// the controller to hold the event until it is. After reset, and whenever
// mem_init is pulsed (taken once the controller reports idle), all pairs are
// wiped at once and init_busy is high.
//
// rd_pair lists the N_RD = N_EBBI pairs read for a patch, oldest first, the
// active pair last; this is the order of the network's time steps.
//
// Interface timing: trans_due is combinational from ev_t, trig_mode and the
// internal counters; ev_commit (one cycle) applies the count and, if due, the
// rotation at the next clock edge.
//
// Follows the paper: pointer arithmetic, both trigger conditions, window
// start taken from the first event and from each rotating event, clearing of
// the oldest pair. Own choices: wrap-safe modular time difference, the
// sequential clear engine and the stall when it is still busy, the start-up
// wipe and the trigger-mode input.
module ebbi_stack_ctrl
  import snnf_pkg::*;
#(
  parameter int unsigned N_PAIR = N_EBBI + 1,
  parameter int unsigned N_RD   = N_EBBI,
  parameter int unsigned DEPTH  = cdiv(SENSOR_H, N_MEM) * cdiv(SENSOR_W, PIX_PER_WORD),
  parameter int unsigned T_E    = T_E_US,
  parameter int unsigned NE     = N_E,
  parameter int unsigned TSW    = TW,
  parameter int unsigned AW     = idx_w(DEPTH),
  parameter int unsigned PW     = idx_w(N_PAIR),
  parameter int unsigned CW     = $clog2(NE + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     mem_init,   // request a wipe of the whole stack
  input  logic                     idle,       // no event in flight
  input  trig_mode_e               trig_mode,
  input  logic [TSW-1:0]           ev_t,       // timestamp of the current event
  input  logic                     ev_commit,  // current event written
  output logic                     trans_due,  // committing ev_t would rotate
  output logic                     trans_pulse,// a rotation happened (one cycle)
  output logic [PW-1:0]            active_ptr,
  output logic [N_RD-1:0][PW-1:0]  rd_pair,
  output logic                     clear_busy,
  output logic                     init_busy,  // wiping all pairs, or about to
  output logic                     clr_en,
  output logic [N_PAIR-1:0]        clr_pairs,
  output logic [AW-1:0]            clr_addr
);

  logic [PW-1:0]  clr_ptr;
  logic [CW-1:0]  ev_count;
  logic [TSW-1:0] t_start;
  logic           first_ev;    // no event since the last wipe
  logic           init_pend;
  logic           init_run;
  logic [AW-1:0]  sweep_addr;

  // ---------------- transition condition ----------------
  logic [TSW-1:0] elapsed;
  logic           time_hit, count_hit;
  always_comb begin
    elapsed   = first_ev ? '0 : (ev_t - t_start);   // modular: wrap-safe
    time_hit  = (elapsed >= TSW'(T_E));
    count_hit = ({1'b0, ev_count} + 1'b1) >= (CW + 1)'(NE);
    unique case (trig_mode)
      TRIG_TIME:   trans_due = time_hit;
      TRIG_COUNT:  trans_due = count_hit;
      TRIG_EITHER: trans_due = time_hit || count_hit;
      default:     trans_due = time_hit;
    endcase
  end

  function automatic logic [PW-1:0] dec_mod(input logic [PW-1:0] v);
    return (v == '0) ? PW'(N_PAIR - 1) : v - 1'b1;
  endfunction

  // ---------------- pointers, counters, clear engine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_ptr  <= '0;
      clr_ptr     <= PW'(N_PAIR - 1);
      ev_count    <= '0;
      t_start     <= '0;
      first_ev    <= 1'b1;
      init_run   <= 1'b1;     // wipe every pair after reset
      init_pend   <= 1'b0;
      clear_busy  <= 1'b0;
      sweep_addr  <= '0;
      trans_pulse <= 1'b0;
    end else begin
      trans_pulse <= 1'b0;
      if (mem_init) init_pend <= 1'b1;

      if (init_run || clear_busy) begin
        if (sweep_addr == AW'(DEPTH - 1)) begin
          sweep_addr <= '0;
          init_run  <= 1'b0;
          clear_busy <= 1'b0;
        end else begin
          sweep_addr <= sweep_addr + 1'b1;
        end
      end else if (init_pend && idle) begin
        // restart the whole stack, as after reset
        init_pend  <= 1'b0;
        init_run  <= 1'b1;
        sweep_addr <= '0;
        active_ptr <= '0;
        clr_ptr    <= PW'(N_PAIR - 1);
        ev_count   <= '0;
        first_ev   <= 1'b1;
      end

      if (ev_commit && !init_run) begin
        first_ev <= 1'b0;
        if (first_ev) t_start <= ev_t;
        if (trans_due) begin
          active_ptr  <= clr_ptr;
          clr_ptr     <= dec_mod(clr_ptr);
          ev_count    <= '0;
          t_start     <= ev_t;
          clear_busy  <= 1'b1;
          sweep_addr  <= '0;
          trans_pulse <= 1'b1;
        end else begin
          ev_count <= ev_count + 1'b1;
        end
      end
    end
  end

  // ---------------- outputs ----------------
  assign init_busy = init_run || init_pend;

  always_comb begin
    clr_en    = init_run || clear_busy;
    clr_addr  = sweep_addr;
    clr_pairs = '0;
    if (init_run)       clr_pairs = '1;
    else if (clear_busy) clr_pairs[clr_ptr] = 1'b1;
  end

  // Oldest read pair first: pair k was active (N_RD-1-k) rotations ago,
  // i.e. sits N_RD-1-k places above the active pair (pointers count down).
  always_comb begin
    for (int k = 0; k < N_RD; k++) begin
      rd_pair[k] = PW'((32'(active_ptr) + 32'(N_RD - 1 - k)) % N_PAIR);
    end
  end

  // The controller must not rotate while the previous wipe is running.
  a_no_rotate_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
    (ev_commit && !init_run && trans_due) |-> !clear_busy)
    else $error("ebbi_stack_ctrl: rotation requested while clearing");
  a_no_commit_during_init: assert property (@(posedge clk) disable iff (!rst_n)
    ev_commit |-> !init_run)
    else $error("ebbi_stack_ctrl: event committed during start-up wipe");

endmodule

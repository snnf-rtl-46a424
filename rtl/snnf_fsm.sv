// snnf_fsm: the controller that sequences one event through the filter.
//
// Events are handled one at a time, with a fixed schedule counted from the
// clock edge E0 at which event_valid && event_ready accepts an event (its
// coordinates, polarity and timestamp are latched then):
//   cycle 1  S_ADDR  address generation; the event's pixel is set in the
//                    active pair (wr_en) and the read addresses are
//                    registered (ag_en)
//   cycle 2  S_RDA   first read: all banks of the read pairs, words w0
//   cycle 3  S_RDB   second read: words w0+1; the first words are captured
//                    (cap_a); the event is committed to the stack controller,
//                    which may rotate the stack at the end of this cycle
//   cycle 4  S_LOAD  the patch vectors enter the network's input buffer
//   cycles 5..       S_WAIT until the network's score is valid
// With N_EBBI = 2 the score is valid in cycle 9 and the decision is
// registered at edge E9: 9 cycles per event. event_ready is high in S_IDLE
// and in the last S_WAIT cycle, so a following event can be accepted at E9
// and one event is filtered every 9 cycles.
// If the event would rotate the stack while the previous wipe is still
// running (trans_due && clear_busy), S_ADDR waits (stall) before writing.
// No event is accepted while the stack is being initialised.
//
// Follows the paper: FSM control of address generation, the two-cycle
// patch read and the network, 1 + 2 + (N_EBBI+3) + 1 = 9 cycles per event.
// Own choices: the ready handshake, the stall, the exact state encoding.
module snnf_fsm
  import snnf_pkg::*;
#(
  parameter int unsigned XBW = XW,
  parameter int unsigned YBW = YW,
  parameter int unsigned TSW = TW
) (
  input  logic            clk,
  input  logic            rst_n,
  // event input
  input  logic            event_valid,
  output logic            event_ready,
  input  logic [XBW-1:0]  x_in,
  input  logic [YBW-1:0]  y_in,
  input  logic [TSW-1:0]  t_in,
  input  logic            pol_in,
  // latched event
  output logic [XBW-1:0]  ev_x,
  output logic [YBW-1:0]  ev_y,
  output logic [TSW-1:0]  ev_t,
  output logic            ev_pol,
  // status from the stack controller and the network
  input  logic            init_busy,
  input  logic            clear_busy,
  input  logic            trans_due,
  input  logic            y_valid,
  // control
  output logic            idle,
  output logic            ag_en,
  output logic            wr_en,
  output logic            rd_en,
  output logic            rd_second,   // 0: words w0, 1: words w0+1
  output logic            cap_a,
  output logic            ev_commit,
  output logic            snn_load,
  output logic            stall
);

  typedef enum logic [2:0] {
    S_IDLE = 3'd0,
    S_ADDR = 3'd1,
    S_RDA  = 3'd2,
    S_RDB  = 3'd3,
    S_LOAD = 3'd4,
    S_WAIT = 3'd5
  } state_e;

  state_e state, state_n;
  logic   accept;

  assign event_ready = !init_busy &&
                       ((state == S_IDLE) || ((state == S_WAIT) && y_valid));
  assign accept      = event_valid && event_ready;

  always_comb begin
    idle      = (state == S_IDLE);
    stall     = (state == S_ADDR) && trans_due && clear_busy;
    ag_en     = (state == S_ADDR) && !stall;
    wr_en     = ag_en;
    rd_en     = (state == S_RDA) || (state == S_RDB);
    rd_second = (state == S_RDB);
    cap_a     = (state == S_RDB);
    ev_commit = (state == S_RDB);
    snn_load  = (state == S_LOAD);

    state_n = state;
    unique case (state)
      S_IDLE: if (accept) state_n = S_ADDR;
      S_ADDR: if (!stall) state_n = S_RDA;
      S_RDA:  state_n = S_RDB;
      S_RDB:  state_n = S_LOAD;
      S_LOAD: state_n = S_WAIT;
      S_WAIT: if (y_valid) state_n = accept ? S_ADDR : S_IDLE;
      default: state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      ev_x   <= '0;
      ev_y   <= '0;
      ev_t   <= '0;
      ev_pol <= 1'b0;
    end else begin
      state <= state_n;
      if (accept) begin
        ev_x   <= x_in;
        ev_y   <= y_in;
        ev_t   <= t_in;
        ev_pol <= pol_in;
      end
    end
  end

  // An accepted event must stay put until it is taken.
  a_valid_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (event_valid && !event_ready) |=> event_valid)
    else $error("snnf_fsm: event_valid dropped before it was accepted");

endmodule

// classifier: final stage, signal/noise decision.
//
// When the network's score of the last time step arrives (y_valid), it is
// compared with the programmable threshold: y >= threshold marks the event
// as signal (signal_noise_n = 1), otherwise as noise (0). The decision is
// registered together with the event's coordinates, polarity and timestamp,
// so out_valid rises one clock after y_valid and stays high for one cycle.
// The threshold is a signed SCORE_W-bit value; sweeping it trades true
// signal rate against false positives.
//
// Follows the paper: comparison y >= V_th, decision output alongside the
// event coordinates and timestamp, one cycle. The port names signal_noise_n
// and threshold[12:0] are those of the paper's FPGA top-level diagram; the
// polarity convention of signal_noise_n (1 = signal) is an own choice.
module classifier
  import snnf_pkg::*;
#(
  parameter int unsigned SW  = SCORE_W,
  parameter int unsigned XBW = XW,
  parameter int unsigned YBW = YW,
  parameter int unsigned TSW = TW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  y_valid,
  input  logic signed [SW-1:0]  y_score,
  input  logic signed [SW-1:0]  threshold,
  input  logic [XBW-1:0]        ev_x,
  input  logic [YBW-1:0]        ev_y,
  input  logic [TSW-1:0]        ev_t,
  input  logic                  ev_pol,
  output logic                  out_valid,
  output logic                  signal_noise_n,
  output logic signed [SW-1:0]  out_score,
  output logic [XBW-1:0]        out_x,
  output logic [YBW-1:0]        out_y,
  output logic [TSW-1:0]        out_t,
  output logic                  out_pol
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid      <= 1'b0;
      signal_noise_n <= 1'b0;
      out_score      <= '0;
      out_x          <= '0;
      out_y          <= '0;
      out_t          <= '0;
      out_pol        <= 1'b0;
    end else begin
      out_valid <= y_valid;
      if (y_valid) begin
        signal_noise_n <= (y_score >= threshold);
        out_score      <= y_score;
        out_x          <= ev_x;
        out_y          <= ev_y;
        out_t          <= ev_t;
        out_pol        <= ev_pol;
      end
    end
  end

endmodule

// fcsnn: the fully connected spiking network as a five-stage pipeline.
//
//   1. input buffer  - takes the N_RD patch vectors of one event at once
//                      (in_valid) and feeds them to FC1 one per cycle, oldest
//                      first, marking the first and the last time step;
//   2. FC1           - 50 binary inputs to 30 currents (fc1_layer);
//   3. LIF           - membrane update and spikes (lif_layer);
//   4./5. FC2 and output buffer - weighted spike sum, registered
//                      (fc2_layer); the score of the last time step is the
//                      network output.
// Time steps overlap: while step 1 is in the LIF stage step 2 is in FC1.
// An event occupies N_RD + 3 cycles: counting the edge that loads the input
// buffer as the first, the (N_RD + 3)-th edge registers the score and raises
// y_valid (the 5th for N_RD = 2).
// A new event may be loaded once the previous one has left the buffer
// (N_RD cycles later).
//
// Weights are written through one port: w_layer = 0 selects FC1 (address
// j*50 + i), w_layer = 1 selects FC2 (address j).
//
// Follows the paper: the five stages, their order, the overlap of time steps
// and the N_EBBI + 3 cycle count. Own choice: the weight-load port.
module fcsnn
  import snnf_pkg::*;
#(
  parameter int unsigned N_RD       = N_EBBI,
  parameter int unsigned NIN        = 2 * PATCH_N * PATCH_N,
  parameter int unsigned NH         = N_HIDDEN,
  parameter int unsigned WW         = WGT_W,
  parameter int unsigned VW         = MEM_W,
  parameter int unsigned SW         = SCORE_W,
  parameter int unsigned LEAK_SHIFT = 3,
  parameter logic signed [VW-1:0] VTH = VW'(64),
  parameter int unsigned WAW        = idx_w(NIN * NH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       w_we,
  input  logic                       w_layer,
  input  logic [WAW-1:0]             w_addr,
  input  logic signed [WW-1:0]       w_data,
  input  logic                       in_valid,
  input  logic [N_RD-1:0][NIN-1:0]   in_vec,
  output logic                       in_ready,
  output logic                       y_valid,
  output logic signed [SW-1:0]       y_score,
  output logic [NH-1:0]              spikes      // hidden spikes, last step
);

  localparam int unsigned CUR_W = WW + $clog2(NIN) + 1;
  localparam int unsigned KW    = idx_w(N_RD + 1);

  // ---------------- stage 1: input buffer ----------------
  logic [N_RD-1:0][NIN-1:0] buf_q;
  logic [KW-1:0]            step;
  logic                     issuing;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q   <= '0;
      step    <= '0;
      issuing <= 1'b0;
    end else if (in_valid && in_ready) begin
      buf_q   <= in_vec;
      step    <= '0;
      issuing <= 1'b1;
    end else if (issuing) begin
      if (step == KW'(N_RD - 1)) issuing <= 1'b0;
      step <= step + 1'b1;
    end
  end

  assign in_ready = !issuing || (step == KW'(N_RD - 1));

  logic           s1_valid, s1_first, s1_last;
  logic [NIN-1:0] s1_vec;
  assign s1_valid = issuing;
  assign s1_first = issuing && (step == '0);
  assign s1_last  = issuing && (step == KW'(N_RD - 1));
  assign s1_vec   = buf_q[step];

  // ---------------- stage 2: FC1 ----------------
  logic                      s2_valid, s2_first, s2_last;
  logic [NH-1:0][CUR_W-1:0]  s2_cur;

  fc1_layer #(.NIN(NIN), .NH(NH), .WW(WW), .CUR_W(CUR_W), .WAW(WAW)) u_fc1 (
    .clk, .rst_n,
    .w_we     (w_we && !w_layer),
    .w_addr   (w_addr),
    .w_data   (w_data),
    .in_valid (s1_valid),
    .in_first (s1_first),
    .in_last  (s1_last),
    .in_vec   (s1_vec),
    .out_valid(s2_valid),
    .out_first(s2_first),
    .out_last (s2_last),
    .cur      (s2_cur)
  );

  // ---------------- stage 3: LIF ----------------
  logic                   s3_valid, s3_last;
  logic [NH-1:0]          s3_spk;

  lif_layer #(.NH(NH), .CUR_W(CUR_W), .VW(VW), .LEAK_SHIFT(LEAK_SHIFT), .VTH(VTH)) u_lif (
    .clk, .rst_n,
    .in_valid (s2_valid),
    .in_first (s2_first),
    .in_last  (s2_last),
    .cur      (s2_cur),
    .out_valid(s3_valid),
    .out_last (s3_last),
    .spk      (s3_spk),
    .vmem     ()
  );

  // ---------------- stages 4/5: FC2 + output buffer ----------------
  logic s4_valid, s4_last;

  fc2_layer #(.NH(NH), .WW(WW), .SW(SW), .WAW(idx_w(NH))) u_fc2 (
    .clk, .rst_n,
    .w_we     (w_we && w_layer && (int'(w_addr) < int'(NH))),
    .w_addr   (w_addr[idx_w(NH)-1:0]),
    .w_data   (w_data),
    .in_valid (s3_valid),
    .in_last  (s3_last),
    .spk      (s3_spk),
    .out_valid(s4_valid),
    .out_last (s4_last),
    .score    (y_score)
  );

  assign y_valid = s4_valid && s4_last;

  // hidden spikes of the final time step, for observation
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  spikes <= '0;
    else if (s3_valid && s3_last) spikes <= s3_spk;
  end

endmodule

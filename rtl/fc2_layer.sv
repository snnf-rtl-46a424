// fc2_layer: the single linear output neuron of the spiking network.
//
// It sums the signed weights of the hidden neurons that spiked in the
// current time step:  y = sum_j w2[j] * s_j.  As the spikes are binary this
// is an adder tree of selected weights. SW bits hold NH * 2^(WW-1) in either
// sign (13 bits for 30 weights of 8 bits, the width of the threshold input
// of the filter).
//
// Weights sit in a register file written through w_we / w_addr / w_data and
// reset to zero.
//
// Timing: one pipeline stage. The score of every time step is registered
// with out_valid; out_last marks the score of the final time step, which is
// the one the classifier uses. This register is the output buffer of the
// network pipeline.
//
// Follows the paper: linear, non-spiking readout of the hidden spikes, 8-bit
// weights. Own choice: weights loaded at run time (the paper builds trained
// weights into the hardware).
module fc2_layer
  import snnf_pkg::*;
#(
  parameter int unsigned NH  = N_HIDDEN,
  parameter int unsigned WW  = WGT_W,
  parameter int unsigned SW  = SCORE_W,
  parameter int unsigned WAW = idx_w(NH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  w_we,
  input  logic [WAW-1:0]        w_addr,
  input  logic signed [WW-1:0]  w_data,
  input  logic                  in_valid,
  input  logic                  in_last,
  input  logic [NH-1:0]         spk,
  output logic                  out_valid,
  output logic                  out_last,
  output logic signed [SW-1:0]  score
);

  logic [NH-1:0][WW-1:0] w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w <= '0;
    end else if (w_we && (int'(w_addr) < int'(NH))) begin
      w[w_addr] <= w_data;
    end
  end

  logic signed [SW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int j = 0; j < NH; j++) begin
      if (spk[j]) sum = sum + SW'($signed(w[j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      score     <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_last;
      if (in_valid) score <= sum;
    end
  end

endmodule

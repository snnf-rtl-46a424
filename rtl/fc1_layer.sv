// fc1_layer: first fully connected layer of the spiking network.
//
// The input is a binary vector of NIN = 2*n*n = 50 patch pixels; each of the
// NH = 30 hidden neurons receives the sum of the signed weights of the
// pixels that are 1:  I_j = sum_i w1[j][i] * x_i.  Because x_i is 0 or 1 the
// products are only selections, so the layer is 30 adder trees without
// multipliers. The sum is exact: CUR_W bits hold NIN * 2^(WW-1) in either
// sign.
//
// Weights live in a register file written through w_we / w_addr / w_data
// (address j*NIN + i) and reset to zero.
//
// Timing: one pipeline stage. in_valid/in_first/in_last and in_vec are taken
// at a clock edge and the currents appear with out_valid/out_first/out_last
// after it.
//
// Follows the paper: 50 inputs, 30 neurons, 8-bit quantized weights,
// accumulation instead of multiplication, one cycle. Own choice: the paper
// builds its trained weights into the hardware; lacking them, this layer
// loads weights at run time.
module fc1_layer
  import snnf_pkg::*;
#(
  parameter int unsigned NIN   = 2 * PATCH_N * PATCH_N,
  parameter int unsigned NH    = N_HIDDEN,
  parameter int unsigned WW    = WGT_W,
  parameter int unsigned CUR_W = WW + $clog2(NIN) + 1,
  parameter int unsigned WAW   = idx_w(NIN * NH)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight load
  input  logic                         w_we,
  input  logic [WAW-1:0]               w_addr,
  input  logic signed [WW-1:0]         w_data,
  // activation stream
  input  logic                         in_valid,
  input  logic                         in_first,
  input  logic                         in_last,
  input  logic [NIN-1:0]               in_vec,
  output logic                         out_valid,
  output logic                         out_first,
  output logic                         out_last,
  output logic [NH-1:0][CUR_W-1:0] cur  // two's complement
);

  // weight register file, flat: entry j*NIN + i
  logic [NIN*NH-1:0][WW-1:0] w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w <= '0;
    end else if (w_we && (int'(w_addr) < int'(NIN * NH))) begin
      w[w_addr] <= w_data;
    end
  end

  logic [NH-1:0][CUR_W-1:0] sum;
  always_comb begin
    for (int j = 0; j < NH; j++) begin
      sum[j] = '0;
      for (int i = 0; i < NIN; i++) begin
        if (in_vec[i]) sum[j] = sum[j] + CUR_W'($signed(w[j*NIN + i]));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      cur       <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      if (in_valid) cur <= sum;
    end
  end

endmodule

// lif_layer: the hidden layer of leaky integrate-and-fire neurons.
//
// Per time step each neuron j updates its membrane potential as
//     V_j <- leak(V_j) * (1 - s_j) + I_j ,   s_j <- (V_j >= VTH)
// where I_j is the current from FC1 and s_j the spike of the previous step
// (hard reset: a neuron that fired starts again from zero). The leak factor
// beta is 1 - 2^-LEAK_SHIFT, applied as V - (V >>> LEAK_SHIFT), so no
// multiplier is needed. The new potential saturates to the signed MEM_W-bit
// range. On the first time step of an event (in_first) the potentials and
// spikes of the previous event are ignored, i.e. every event starts from
// rest.
//
// Timing: one pipeline stage. The currents are taken with in_valid at a
// clock edge; the spikes, the new potentials and the valid/last flags appear
// after it. Successive time steps may arrive on successive cycles.
//
// Follows the paper: the LIF update with leak, hard reset and threshold, the
// 12-bit membrane, one cycle per time step. Own choices: the paper gives
// neither beta nor the hidden threshold (they are trained); LEAK_SHIFT and
// VTH are parameters here, the membrane saturates rather than wraps, and the
// state is cleared between events.
module lif_layer
  import snnf_pkg::*;
#(
  parameter int unsigned NH         = N_HIDDEN,
  parameter int unsigned CUR_W      = WGT_W + $clog2(2 * PATCH_N * PATCH_N) + 1,
  parameter int unsigned VW         = MEM_W,
  parameter int unsigned LEAK_SHIFT = 3,                 // beta = 0.875
  parameter logic signed [VW-1:0] VTH = VW'(64)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_first,
  input  logic                    in_last,
  input  logic [NH-1:0][CUR_W-1:0] cur,     // two's complement currents
  output logic                    out_valid,
  output logic                    out_last,
  output logic [NH-1:0]           spk,
  output logic [NH-1:0][VW-1:0]   vmem      // two's complement potentials
);

  localparam int VMAX = (1 <<< (VW - 1)) - 1;
  localparam int VMIN = -(1 <<< (VW - 1));

  logic [NH-1:0][VW-1:0] v_next;
  logic [NH-1:0]         s_next;

  always_comb begin
    int vp, acc;
    for (int j = 0; j < NH; j++) begin
      vp  = int'($signed(vmem[j]));
      if (in_first || spk[j]) vp = 0;          // new event / hard reset
      else                    vp = vp - (vp >>> LEAK_SHIFT);
      acc = vp + int'($signed(cur[j]));
      if (acc > VMAX) acc = VMAX;
      if (acc < VMIN) acc = VMIN;
      v_next[j] = VW'(acc);
      s_next[j] = (acc >= int'(VTH));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem      <= '0;
      spk       <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_last;
      if (in_valid) begin
        vmem <= v_next;
        spk  <= s_next;
      end
    end
  end

endmodule

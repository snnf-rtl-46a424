// tb_lif_layer: self-checking test of the layer of 30 leaky
// integrate-and-fire neurons at its default settings (12-bit membrane,
// beta = 1 - 1/8, threshold 64, hard reset).
//
// Random sequences of input currents are applied, grouped into events of
// 1..4 time steps (in_first on the first), with idle cycles between some
// steps. The reference model keeps each neuron's potential and spike:
//   v = (first or spiked) ? 0 : v - (v >>> 3);  v += I;  saturate to 12 bits;
//   spike = v >= 64.
// Currents cover the full 15-bit range so that saturation occurs. The
// potentials and spikes are checked one clock after every valid step.
`timescale 1ns/1ps
module tb_lif_layer;
  import snnf_pkg::*;
  localparam int NH = 30, CW = 15, VW = 12;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0;
  logic [NH-1:0][CW-1:0] cur = '0;
  logic out_valid, out_last;
  logic [NH-1:0] spk;
  logic [NH-1:0][VW-1:0] vmem;
  int v [NH]; bit s [NH];
  int checks = 0, failures = 0, n_sat = 0, n_spk = 0;

  lif_layer dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    int steps, c, big;
    for (int j = 0; j < NH; j++) begin v[j] = 0; s[j] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int e = 0; e < 1500; e++) begin
      steps = $urandom_range(1, 4);
      big = ($urandom_range(0, 9) == 0);
      for (int st = 0; st < steps; st++) begin
        in_valid = 1; in_first = (st == 0); in_last = (st == steps - 1);
        for (int j = 0; j < NH; j++) begin
          c = big ? $urandom_range(0, 32767) - 16384 : $urandom_range(0, 200) - 80;
          cur[j] = CW'(c);
          if (in_first || s[j]) v[j] = 0; else v[j] = v[j] - (v[j] >>> 3);
          v[j] += c;
          if (v[j] > 2047) begin v[j] = 2047; n_sat++; end
          if (v[j] < -2048) begin v[j] = -2048; n_sat++; end
          s[j] = (v[j] >= 64);
          if (s[j]) n_spk++;
        end
        @(negedge clk);
        check(out_valid && out_last == in_last, "flags");
        for (int j = 0; j < NH; j++)
          check($signed(vmem[j]) == v[j] && spk[j] == s[j],
                $sformatf("neuron %0d: v %0d s %0d exp v %0d s %0d", j, $signed(vmem[j]), spk[j], v[j], s[j]));
        if ($urandom_range(0, 3) == 0) begin
          in_valid = 0; in_first = 0; @(negedge clk);
          check(!out_valid, "idle step");
        end
      end
    end
    check(n_sat > 0 && n_spk > 0, "saturation and spikes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

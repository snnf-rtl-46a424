// tb_fc1_layer: self-checking test of the first fully connected layer
// (50 binary inputs, 30 neurons, 8-bit weights) at its default size.
//
// Random signed weights are loaded through the weight port (entry j*50+i),
// including the extreme values -128 and 127, and an out-of-range address
// that must be ignored. Random binary vectors (sparse, dense, all ones) are
// then applied with random first/last flags; one clock later every current
// must equal the integer sum of the weights of the active inputs and the
// flags must be delayed by one cycle. A cycle without in_valid must keep the
// currents.
`timescale 1ns/1ps
module tb_fc1_layer;
  import snnf_pkg::*;
  localparam int NIN = 50, NH = 30, CW = 15, WAW = 11;
  logic clk = 0, rst_n = 0, w_we = 0, in_valid = 0, in_first = 0, in_last = 0;
  logic [WAW-1:0] w_addr = '0; logic signed [7:0] w_data = '0;
  logic [NIN-1:0] in_vec = '0;
  logic out_valid, out_first, out_last;
  logic [NH-1:0][CW-1:0] cur, keep;
  int wt [NH][NIN];
  int checks = 0, failures = 0;

  fc1_layer dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    int s, m;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int j = 0; j < NH; j++) for (int i = 0; i < NIN; i++) begin
      m = $urandom_range(0, 19);
      wt[j][i] = (m == 0) ? -128 : (m == 1) ? 127 : $urandom_range(0, 255) - 128;
      w_we = 1; w_addr = WAW'(j * NIN + i); w_data = 8'(wt[j][i]);
      @(negedge clk);
    end
    w_addr = WAW'(NIN * NH); w_data = 8'd55; @(negedge clk);   // ignored
    w_we = 0;
    for (int n = 0; n < 3000; n++) begin
      m = $urandom_range(0, 9);
      for (int i = 0; i < NIN; i++) in_vec[i] = (m == 0) ? 1'b1 : (m < 4) ? ($urandom_range(0, 1) == 1) : ($urandom_range(0, 9) == 0);
      in_valid = ($urandom_range(0, 5) != 0); in_first = $urandom_range(0, 1); in_last = $urandom_range(0, 1);
      keep = cur;
      @(negedge clk);
      check(out_valid == in_valid && out_first == in_first && out_last == in_last, "flags");
      for (int j = 0; j < NH; j++) begin
        s = 0;
        for (int i = 0; i < NIN; i++) if (in_vec[i]) s += wt[j][i];
        if (in_valid) check($signed(cur[j]) == s, $sformatf("neuron %0d: %0d exp %0d", j, $signed(cur[j]), s));
        else          check(cur[j] == keep[j], "hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

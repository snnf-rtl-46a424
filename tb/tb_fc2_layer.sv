// tb_fc2_layer: self-checking test of the linear output neuron (30 spike
// inputs, 8-bit weights, 13-bit score) at its default size.
//
// Random weights, including -128 and 127, are loaded through the weight
// port; an out-of-range address must be ignored. Random spike vectors
// (including all ones with all weights at an extreme, which gives the score's
// extreme values) are applied; one clock later the score must equal the sum
// of the weights of the spiking neurons, with valid/last delayed by one
// cycle, and the score must hold over cycles without in_valid.
`timescale 1ns/1ps
module tb_fc2_layer;
  import snnf_pkg::*;
  localparam int NH = 30, WAW = 5;
  logic clk = 0, rst_n = 0, w_we = 0, in_valid = 0, in_last = 0;
  logic [WAW-1:0] w_addr = '0; logic signed [7:0] w_data = '0;
  logic [NH-1:0] spk = '0;
  logic out_valid, out_last;
  logic signed [12:0] score, keep;
  int wt [NH];
  int checks = 0, failures = 0;

  fc2_layer dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  task automatic load(input int mode);
    for (int j = 0; j < NH; j++) begin
      wt[j] = (mode == 1) ? -128 : (mode == 2) ? 127 : $urandom_range(0, 255) - 128;
      w_we = 1; w_addr = WAW'(j); w_data = 8'(wt[j]); @(negedge clk);
    end
    w_addr = WAW'(NH); w_data = 8'd1; @(negedge clk);   // out of range: ignored
    w_we = 0;
  endtask

  initial begin
    int s;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rnd = 0; rnd < 12; rnd++) begin
      load(rnd < 2 ? rnd + 1 : 0);
      for (int n = 0; n < 300; n++) begin
        spk = (n == 0) ? '1 : NH'($urandom);
        in_valid = (n == 0) || ($urandom_range(0, 4) != 0); in_last = $urandom_range(0, 1);
        keep = score;
        @(negedge clk);
        s = 0; for (int j = 0; j < NH; j++) if (spk[j]) s += wt[j];
        check(out_valid == in_valid && out_last == in_last, "flags");
        if (in_valid) check(score == s, $sformatf("score %0d exp %0d", score, s));
        else          check(score == keep, "hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

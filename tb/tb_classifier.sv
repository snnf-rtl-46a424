// tb_classifier: self-checking test of the decision stage.
//
// Random scores and thresholds over the whole signed 13-bit range, plus
// equal values and neighbours (score = threshold, threshold +/- 1), are
// applied with random event fields. When y_valid is high the registered
// outputs must show signal_noise_n = (score >= threshold), the score and
// the event fields one clock later; out_valid must follow y_valid.
`timescale 1ns/1ps
module tb_classifier;
  import snnf_pkg::*;
  logic clk = 0, rst_n = 0, y_valid = 0, ev_pol = 0;
  logic signed [12:0] y_score = '0, threshold = '0;
  logic [8:0] ev_x = '0, ev_y = '0; logic [31:0] ev_t = '0;
  logic out_valid, signal_noise_n, out_pol;
  logic signed [12:0] out_score;
  logic [8:0] out_x, out_y; logic [31:0] out_t;
  int checks = 0, failures = 0, n_sig = 0, n_eq = 0;

  classifier dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    int sc, th, m;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      th = $urandom_range(0, 8191) - 4096;
      m = $urandom_range(0, 3);
      sc = (m == 0) ? th : (m == 1) ? th + $urandom_range(0, 2) - 1 : $urandom_range(0, 8191) - 4096;
      if (sc > 4095) sc = 4095; if (sc < -4096) sc = -4096;
      y_score = 13'(sc); threshold = 13'(th); y_valid = ($urandom_range(0, 3) != 0);
      ev_x = 9'($urandom); ev_y = 9'($urandom); ev_t = $urandom; ev_pol = $urandom_range(0, 1);
      @(negedge clk);
      check(out_valid == y_valid, "out_valid");
      if (y_valid) begin
        check(signal_noise_n == (sc >= th), $sformatf("score %0d threshold %0d", sc, th));
        check(out_score == sc && out_x == ev_x && out_y == ev_y && out_t == ev_t && out_pol == ev_pol, "fields");
        if (sc >= th) n_sig++;
        if (sc == th) n_eq++;
      end
    end
    check(n_sig > 0 && n_eq > 0, "both decisions and the equal case seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_addr_gen: self-checking test of the address generator at the default
// 346 x 260 size.
//
// Random events, a share of them on or next to the image border, are
// applied. The write side (bank y mod 5, word (y/5)*87 + x/4, one-hot mask
// bit x mod 4, +4 for negative polarity) is checked in the same cycle; the
// read side is checked after the enabling clock edge: for every patch row d
// (y-2+d) its bank, whether it lies inside the image, the word addresses of
// words floor((x-2)/4) and the next one in that bank (clamped to the row),
// the inside flags of the patch columns, and the bit offset of column x-2.
// A disabled cycle must leave the read side unchanged.
`timescale 1ns/1ps
module tb_addr_gen;
  import snnf_pkg::*;
  localparam int W = SENSOR_W, H = SENSOR_H, NB = N_MEM, N = PATCH_N;
  localparam int WPR = (W + 3) / 4;
  localparam int AW = idx_w(cdiv(H, NB) * WPR), BW = idx_w(NB);
  logic clk = 0, rst_n = 0, en = 0, pol = 0;
  logic [XW-1:0] x = '0; logic [YW-1:0] y = '0;
  logic [BW-1:0] wr_bank; logic [AW-1:0] wr_addr; logic [7:0] wr_mask;
  logic [NB-1:0][AW-1:0] rd_addr_a, rd_addr_b;
  logic [N-1:0][BW-1:0] row_bank; logic [N-1:0] row_ok, col_ok; logic [1:0] col_off;
  int checks = 0, failures = 0;

  addr_gen dut (.*);

  always #5 clk = ~clk;
  initial begin #5_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    int xi, yi, w0, wa, wb, r, b;
    logic [NB-1:0][AW-1:0] keep_a;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      xi = ($urandom_range(0, 3) == 0) ? (($urandom_range(0, 1) == 1) ? $urandom_range(0, 3) : $urandom_range(W - 4, W - 1))
                                       : $urandom_range(0, W - 1);
      yi = ($urandom_range(0, 3) == 0) ? (($urandom_range(0, 1) == 1) ? $urandom_range(0, 3) : $urandom_range(H - 4, H - 1))
                                       : $urandom_range(0, H - 1);
      x = XW'(xi); y = YW'(yi); pol = $urandom_range(0, 1); en = ($urandom_range(0, 7) != 0);
      keep_a = rd_addr_a;
      #1;
      check(wr_bank == BW'(yi % NB), "wr_bank");
      check(wr_addr == AW'((yi / NB) * WPR + xi / 4), "wr_addr");
      check(wr_mask == 8'(1 << ((pol ? 0 : 4) + xi % 4)), "wr_mask");
      @(negedge clk);
      if (!en) begin check(rd_addr_a == keep_a, "hold when disabled"); continue; end
      w0 = (xi - 2 < 0) ? -1 : (xi - 2) / 4;
      wa = (w0 < 0) ? 0 : w0;
      wb = (w0 + 1 > WPR - 1) ? WPR - 1 : w0 + 1;
      check(col_off == 2'((xi - 2 + 4) % 4), $sformatf("col_off x=%0d", xi));
      for (int d = 0; d < N; d++) begin
        r = yi - 2 + d;
        b = (r + NB) % NB;
        check(row_bank[d] == BW'(b), $sformatf("row_bank d=%0d y=%0d", d, yi));
        check(row_ok[d] == (r >= 0 && r < H), "row_ok");
        check(col_ok[d] == (xi - 2 + d >= 0 && xi - 2 + d < W), "col_ok");
        if (r >= 0 && r < H) begin
          check(rd_addr_a[b] == AW'((r / NB) * WPR + wa), $sformatf("rd_addr_a x=%0d y=%0d d=%0d", xi, yi, d));
          check(rd_addr_b[b] == AW'((r / NB) * WPR + wb), $sformatf("rd_addr_b x=%0d y=%0d d=%0d", xi, yi, d));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

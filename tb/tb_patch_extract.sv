// tb_patch_extract: self-checking test of the patch selection logic.
//
// A random binary image pair (positive and negative, 40 x 23 pixels) is
// built for each of two read slots. For a random event position the
// testbench lays out the memory words as the banks would return them: for
// each patch row its bank (row mod 5) holds the word containing column x-2
// and the word after it (clamped to the row); banks of rows outside the
// image hold random words. The block's two 50-bit vectors must equal the
// zero-padded 5x5 patch taken directly from the image, flattened as the
// paper's procedure does: index c*5+d for column offset c and row offset d,
// positive pixels 0..24, negative pixels 25..49.
// Purely combinational; checked 1 time unit after the inputs change.
`timescale 1ns/1ps
module tb_patch_extract;
  import snnf_pkg::*;
  localparam int W = 40, H = 23, N = 5, NB = 5, NR = 2, WPR = (W + 3) / 4, NIN = 50;
  logic [NR-1:0][NB-1:0][7:0] word_a, word_b;
  logic [N-1:0][2:0] row_bank;
  logic [N-1:0] row_ok, col_ok;
  logic [1:0] col_off;
  logic [NR-1:0][NIN-1:0] vec, exp_v;
  bit img [NR][2][H][W];
  int checks = 0, failures = 0;

  patch_extract #(.N_RD(NR)) dut (.*);

  initial begin #10_000_000; $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic logic [7:0] word_of(int k, int r, int w);
    logic [7:0] v = '0;
    for (int i = 0; i < 4; i++) if (4 * w + i < W) begin
      v[i]     = img[k][1][r][4 * w + i];
      v[4 + i] = img[k][0][r][4 * w + i];
    end
    return v;
  endfunction

  initial begin
    int x, y, r, c, w0, wa, wb, xx;
    for (int n = 0; n < 3000; n++) begin
      if (n % 50 == 0)
        for (int k = 0; k < NR; k++) for (int p = 0; p < 2; p++)
          for (int yy = 0; yy < H; yy++) for (int q = 0; q < W; q++) img[k][p][yy][q] = ($urandom_range(0, 3) == 0);
      x = $urandom_range(0, W - 1); y = $urandom_range(0, H - 1);
      w0 = (x - 2 < 0) ? -1 : (x - 2) / 4;
      wa = (w0 < 0) ? 0 : w0;
      wb = (w0 + 1 > WPR - 1) ? WPR - 1 : w0 + 1;
      col_off = 2'((x + 2) % 4);
      for (int k = 0; k < NR; k++) for (int b = 0; b < NB; b++) begin
        word_a[k][b] = 8'($urandom); word_b[k][b] = 8'($urandom);
      end
      for (int d = 0; d < N; d++) begin
        r = y - 2 + d;
        row_bank[d] = 3'((r + NB) % NB);
        row_ok[d] = (r >= 0 && r < H);
        col_ok[d] = (x - 2 + d >= 0 && x - 2 + d < W);
        if (row_ok[d]) for (int k = 0; k < NR; k++) begin
          word_a[k][(r + NB) % NB] = word_of(k, r, wa);
          word_b[k][(r + NB) % NB] = word_of(k, r, wb);
        end
      end
      exp_v = '0;
      for (int k = 0; k < NR; k++) for (int cc = 0; cc < N; cc++) for (int d = 0; d < N; d++) begin
        xx = x - 2 + cc; r = y - 2 + d;
        if (xx >= 0 && xx < W && r >= 0 && r < H) begin
          exp_v[k][cc * N + d]         = img[k][1][r][xx];
          exp_v[k][N * N + cc * N + d] = img[k][0][r][xx];
        end
      end
      #1;
      check(vec == exp_v, $sformatf("x=%0d y=%0d: vec %h exp %h", x, y, vec, exp_v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

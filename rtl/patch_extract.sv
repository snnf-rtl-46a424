// patch_extract: stage 2 selection, turns the fetched bank words into the
// network's binary input vectors.
//
// For each of the N_RD read pairs the two read cycles deliver, per bank, two
// neighbouring words (word_a = w0, word_b = w0+1) of 4 pixels per polarity.
// Placed side by side they form an 8-pixel window per polarity whose bit
// col_off holds column x - n/2. Patch row d comes from bank row_bank[d];
// patch column c is window bit col_off + c. Pixels outside the image
// (row_ok / col_ok low) are zero, which is the zero padding of the patch.
//
// The n x n patch P[c][d] (c: column offset, d: row offset, as in the paper's
// patch-extraction procedure, P indexed by x offset first) is flattened
// row-major, index c*n + d, positive polarity in bits 0..n*n-1 and negative
// polarity in bits n*n..2*n*n-1. vec[k] is time step k (k = 0 oldest pair).
// Purely combinational; the network's input buffer registers the result.
//
// Follows the paper: 40 fetched bits per pair, 25 pixels selected per
// polarity, zero padding, flattening order of its procedure, positive before
// negative. Own choice: the word layout (see ebbi_sram).
module patch_extract
  import snnf_pkg::*;
#(
  parameter int unsigned N_RD = N_EBBI,
  parameter int unsigned N    = PATCH_N,
  parameter int unsigned NB   = N_MEM,
  parameter int unsigned PPW  = PIX_PER_WORD,
  parameter int unsigned BW   = idx_w(NB),
  parameter int unsigned OW   = idx_w(PPW),
  parameter int unsigned NIN  = 2 * N * N
) (
  input  logic [N_RD-1:0][NB-1:0][2*PPW-1:0] word_a,
  input  logic [N_RD-1:0][NB-1:0][2*PPW-1:0] word_b,
  input  logic [N-1:0][BW-1:0]               row_bank,
  input  logic [N-1:0]                       row_ok,
  input  logic [N-1:0]                       col_ok,
  input  logic [OW-1:0]                      col_off,
  output logic [N_RD-1:0][NIN-1:0]           vec
);

  always_comb begin
    logic [2*PPW-1:0] win_p, win_n;
    logic [2*PPW-1:0] wa, wb;
    vec = '0;
    for (int k = 0; k < N_RD; k++) begin
      for (int d = 0; d < N; d++) begin
        wa    = word_a[k][row_bank[d]];
        wb    = word_b[k][row_bank[d]];
        win_p = {wb[PPW-1:0],     wa[PPW-1:0]};
        win_n = {wb[2*PPW-1:PPW], wa[2*PPW-1:PPW]};
        for (int c = 0; c < N; c++) begin
          vec[k][c*N + d]       = row_ok[d] && col_ok[c] && win_p[int'(col_off) + c];
          vec[k][N*N + c*N + d] = row_ok[d] && col_ok[c] && win_n[int'(col_off) + c];
        end
      end
    end
  end

endmodule

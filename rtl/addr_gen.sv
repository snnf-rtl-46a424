// addr_gen: stage 1 of the filter, address generation for one event.
//
// From the event's coordinates it derives, in one cycle:
//   * the write access that sets the event's pixel in the active pair:
//     bank y mod NB, address (y / NB) * WPR + x / 4 and a one-hot bit mask,
//     bit x mod 4 for positive polarity, bit 4 + x mod 4 for negative
//     (combinational, used in the same cycle);
//   * the read addresses of the n x n patch for the two read cycles
//     (registered when en is high). Patch row d (0..n-1) is image row
//     y + d - n/2; it sits in bank (y + d - n/2) mod NB, so every bank gets
//     the address of the one patch row it holds. The patch columns
//     x - n/2 .. x + n/2 span at most two 4-pixel words, w0 = floor((x-n/2)/4)
//     and w0 + 1; cycle A reads w0, cycle B reads w0 + 1;
//   * the data needed to pick the patch out of the fetched words: bank of
//     each patch row, bit offset of column x - n/2 inside word w0, and which
//     patch rows and columns lie inside the sensor (the others are zero
//     padding).
// Addresses of rows or words outside the image are clamped into range; the
// masks make sure their data is never used.
//
// Follows the paper: one cycle, write and read addresses generated together
// and the second-cycle addresses precomputed. Own choice: bit layout and
// address arithmetic (the paper gives no bank address map).
module addr_gen
  import snnf_pkg::*;
#(
  parameter int unsigned W     = SENSOR_W,
  parameter int unsigned H     = SENSOR_H,
  parameter int unsigned N     = PATCH_N,
  parameter int unsigned NB    = N_MEM,
  parameter int unsigned PPW   = PIX_PER_WORD,
  parameter int unsigned WPR   = cdiv(W, PPW),          // words per image row
  parameter int unsigned DEPTH = cdiv(H, NB) * WPR,
  parameter int unsigned AW    = idx_w(DEPTH),
  parameter int unsigned BW    = idx_w(NB),
  parameter int unsigned OW    = idx_w(PPW)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,        // register the read-side outputs
  input  logic [XW-1:0]           x,
  input  logic [YW-1:0]           y,
  input  logic                    pol,       // 1 = positive, 0 = negative
  // write access (combinational)
  output logic [BW-1:0]           wr_bank,
  output logic [AW-1:0]           wr_addr,
  output logic [2*PPW-1:0]        wr_mask,
  // read side (registered)
  output logic [NB-1:0][AW-1:0]   rd_addr_a,
  output logic [NB-1:0][AW-1:0]   rd_addr_b,
  output logic [N-1:0][BW-1:0]    row_bank,  // bank holding patch row d
  output logic [N-1:0]            row_ok,    // patch row d inside the image
  output logic [N-1:0]            col_ok,    // patch column d inside the image
  output logic [OW-1:0]           col_off    // bit of column x-N/2 in word w0
);

  localparam int R = int'(N / 2);

  // ---------------- write access ----------------
  always_comb begin
    wr_bank = BW'(int'(y) % NB);
    wr_addr = AW'((int'(y) / NB) * WPR + int'(x) / PPW);
    wr_mask = '0;
    wr_mask[(pol ? 0 : PPW) + int'(x) % PPW] = 1'b1;
  end

  // ---------------- read addresses ----------------
  logic [NB-1:0][AW-1:0] a_d, b_d;
  logic [N-1:0][BW-1:0]  bank_d;
  logic [N-1:0]          rok_d, cok_d;
  logic [OW-1:0]         off_d;

  always_comb begin
    int xl, w0, wa, wb, yy, rr;
    xl = int'(x) - R;
    w0 = xl >>> $clog2(PPW);                 // floor division, xl may be < 0
    wa = (w0 < 0) ? 0 : w0;
    wb = (w0 + 1 > int'(WPR) - 1) ? int'(WPR) - 1 : w0 + 1;
    off_d = OW'(xl);                          // xl mod PPW (two's complement)
    a_d = '0;
    b_d = '0;
    for (int d = 0; d < N; d++) begin
      yy        = int'(y) + d - R;
      rok_d[d]  = (yy >= 0) && (yy < int'(H));
      bank_d[d] = BW'((int'(y) + d + int'(NB) - R) % NB);
      rr        = rok_d[d] ? yy / int'(NB) : 0;
      a_d[bank_d[d]] = AW'(rr * int'(WPR) + wa);
      b_d[bank_d[d]] = AW'(rr * int'(WPR) + wb);
    end
    for (int d = 0; d < N; d++) begin
      cok_d[d] = (xl + d >= 0) && (xl + d < int'(W));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_addr_a <= '0;
      rd_addr_b <= '0;
      row_bank  <= '0;
      row_ok    <= '0;
      col_ok    <= '0;
      col_off   <= '0;
    end else if (en) begin
      rd_addr_a <= a_d;
      rd_addr_b <= b_d;
      row_bank  <= bank_d;
      row_ok    <= rok_d;
      col_ok    <= cok_d;
      col_off   <= off_d;
    end
  end

endmodule

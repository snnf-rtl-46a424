// ebbi_mem: the parallel memory banks that hold the EBBI stack.
//
// N_PAIR = N_EBBI+1 EBBI pairs are stored, each striped over N_MEM single-port
// SRAMs (instance [p][b] is pair p, bank b). Image row y lives in bank
// y mod N_MEM at bank row y / N_MEM, so the five consecutive rows of a 5x5
// patch always fall in five different banks and are read in one cycle.
//
// Three kinds of access are routed to the SRAMs:
//   * write  - sets the bits of wr_mask in one word of bank wr_bank of pair
//              wr_pair (the pixel of the incoming event);
//   * read   - every bank of the N_RD pairs named in rd_pair is read at its
//              own address rd_addr[b]; rd_data[k][b] returns, one cycle later,
//              the word of bank b of pair rd_pair[k] (k = 0 is the oldest pair);
//   * clear  - writes zeros at clr_addr into every bank of each pair whose
//              clr_pairs bit is set (the freed pair, or all pairs at start-up).
// The controller never aims two kinds of access at the same SRAM in one
// cycle; assertions check this. Should it happen, clear wins over write and
// write over read.
//
// Follows the paper: bank count, row striping across banks (Fig. 8 labels row
// 0..4 to bank 0..4), one SRAM per bank and pair. Own choice: the clear port,
// the access priority, the word layout (see ebbi_sram).
module ebbi_mem
  import snnf_pkg::*;
#(
  parameter int unsigned N_PAIR = N_EBBI + 1,
  parameter int unsigned N_RD   = N_EBBI,
  parameter int unsigned NB     = N_MEM,
  parameter int unsigned DEPTH  = cdiv(SENSOR_H, N_MEM) * cdiv(SENSOR_W, PIX_PER_WORD),
  parameter int unsigned DW     = WORD_BITS,
  parameter int unsigned AW     = idx_w(DEPTH),
  parameter int unsigned PW     = idx_w(N_PAIR),
  parameter int unsigned BW     = idx_w(NB)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // write one word of the active pair
  input  logic                          wr_en,
  input  logic [PW-1:0]                 wr_pair,
  input  logic [BW-1:0]                 wr_bank,
  input  logic [AW-1:0]                 wr_addr,
  input  logic [DW-1:0]                 wr_mask,
  // parallel read of all banks of N_RD pairs
  input  logic                          rd_en,
  input  logic [NB-1:0][AW-1:0]         rd_addr,
  input  logic [N_RD-1:0][PW-1:0]       rd_pair,
  output logic [N_RD-1:0][NB-1:0][DW-1:0] rd_data,
  // clear (write zero) of whole pairs
  input  logic                          clr_en,
  input  logic [N_PAIR-1:0]             clr_pairs,
  input  logic [AW-1:0]                 clr_addr
);

  logic [N_PAIR-1:0][NB-1:0][DW-1:0] q;
  logic [N_RD-1:0][PW-1:0]           rd_pair_q;

  for (genvar p = 0; p < N_PAIR; p++) begin : g_pair
    // is pair p one of the pairs being read?
    logic rd_sel;
    always_comb begin
      rd_sel = 1'b0;
      for (int k = 0; k < N_RD; k++) begin
        if (rd_pair[k] == PW'(p)) rd_sel = 1'b1;
      end
    end

    for (genvar b = 0; b < NB; b++) begin : g_bank
      logic          clr_hit, wr_hit, rd_hit;
      logic          cs, we;
      logic [AW-1:0] addr;
      logic [DW-1:0] wmask, wdata;

      assign clr_hit = clr_en && clr_pairs[p];
      assign wr_hit  = wr_en && (wr_pair == PW'(p)) && (wr_bank == BW'(b));
      assign rd_hit  = rd_en && rd_sel;

      always_comb begin
        cs    = clr_hit || wr_hit || rd_hit;
        we    = clr_hit || wr_hit;
        addr  = rd_addr[b];
        wmask = '0;
        wdata = '0;
        if (clr_hit) begin
          addr  = clr_addr;
          wmask = '1;
          wdata = '0;
        end else if (wr_hit) begin
          addr  = wr_addr;
          wmask = wr_mask;
          wdata = '1;
        end
      end

      ebbi_sram #(.DEPTH(DEPTH), .DW(DW), .AW(AW)) u_sram (
        .clk  (clk),
        .cs   (cs),
        .we   (we),
        .wmask(wmask),
        .addr (addr),
        .wdata(wdata),
        .rdata(q[p][b])
      );

      // The controller keeps the three access kinds on different SRAMs.
      a_no_rd_conflict: assert property (@(posedge clk) disable iff (!rst_n)
        !(rd_hit && (clr_hit || wr_hit)))
        else $error("ebbi_mem: read collides with write/clear on pair %0d bank %0d", p, b);
      a_no_wr_clr: assert property (@(posedge clk) disable iff (!rst_n)
        !(wr_hit && clr_hit))
        else $error("ebbi_mem: write collides with clear on pair %0d bank %0d", p, b);
    end
  end

  // Remember which pair each read slot addressed, for the returning data.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pair_q <= '0;
    end else if (rd_en) begin
      rd_pair_q <= rd_pair;
    end
  end

  always_comb begin
    for (int k = 0; k < N_RD; k++) begin
      rd_data[k] = q[rd_pair_q[k]];
    end
  end

endmodule

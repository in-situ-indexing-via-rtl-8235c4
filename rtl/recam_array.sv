// recam_array: one 128-row memristive ReCAM crossbar (key + valid flag per row).
//
// Each stored ternary bit is a pair of memristive cells (R1, R2), kept here as one bit
// per cell with 1 = low resistance (LRS). As in the paper, '0' is (LRS, HRS), '1' is
// (HRS, LRS) and 'X' is (HRS, HRS). During a search SL drives R1 and SLbar drives R2;
// a row mismatches when a search voltage meets an LRS cell, which pulls its match line
// above the reference. `ml_match` is that sensed result, one bit per row, and is
// combinational in the search lines: the bank controller waits tCAM before using it.
//
// Normal accesses: a row write stores a ternary word in the columns selected by
// `wr_colmask` (so a delete can rewrite only the flag); a row read returns the stored
// word as bits + X-mask; a column read returns one ReCAM column over all rows.
// The analog match-line and sense circuits are reduced to their logic outcome.
// Reset formats every row to key 0, flag 0 (empty); the paper does not describe
// power-on contents, this is this design's choice so that rows read are defined.
module recam_array
  import path_pkg::*;
#(
  parameter int ROWS = SUB_ROWS,
  localparam int RW = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // search
  input  logic [QW-1:0]   sl,
  input  logic [QW-1:0]   slb,
  output logic [ROWS-1:0] ml_match,
  // row write
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [QW-1:0]   wr_bits,
  input  logic [QW-1:0]   wr_x,
  input  logic [QW-1:0]   wr_colmask,
  // row read
  input  logic [RW-1:0]   rd_row,
  output logic [QW-1:0]   rd_bits,
  output logic [QW-1:0]   rd_x,
  // column read
  input  logic [$clog2(QW)-1:0] col_sel,
  output logic [ROWS-1:0] col_bits      // 1 where the stored bit is '1'
);
  logic [QW-1:0] r1_lrs [ROWS];
  logic [QW-1:0] r2_lrs [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        r1_lrs[r] <= '1;          // all bits '0' -> (LRS, HRS)
        r2_lrs[r] <= '0;
      end
    end else if (wr_en) begin
      for (int c = 0; c < QW; c++) begin
        if (wr_colmask[c]) begin
          r1_lrs[wr_row][c] <= ~wr_x[c] & ~wr_bits[c];
          r2_lrs[wr_row][c] <= ~wr_x[c] &  wr_bits[c];
        end
      end
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      ml_match[r] = ~|((sl & r1_lrs[r]) | (slb & r2_lrs[r]));
  end

  assign rd_bits = r2_lrs[rd_row];
  assign rd_x    = ~(r1_lrs[rd_row] | r2_lrs[rd_row]);

  always_comb begin
    for (int r = 0; r < ROWS; r++)
      col_bits[r] = r2_lrs[r][col_sel];
  end
endmodule

// data_array: normal-cell memristive array holding the values of a ReCAM array.
//
// The paper keeps values out of the comparison and stores them, one normal cell per
// bit, in another array under the same row number as the key. This array has 128 rows
// of DW bits. In this design a row carries the value in bits [63:0] and the 16-bit
// resize indicator in bits [79:64]; bits [127:80] are free for software. The layout is
// this design's choice.
// Row write is synchronous; row read and column read (one bit of every row, used by the
// in-memory move to fetch indicator bit p of all rows at once) are combinational, the
// bank controller allowing tREAD before it samples them. Reset clears every row.
module data_array
  import path_pkg::*;
#(
  parameter int ROWS = SUB_ROWS,
  parameter int DW   = DATA_W,
  localparam int RW = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [DW-1:0]   wr_data,
  input  logic [RW-1:0]   rd_row,
  output logic [DW-1:0]   rd_data,
  input  logic [$clog2(DW)-1:0] col_sel,
  output logic [ROWS-1:0] col_bits
);
  logic [DW-1:0] mem [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) mem[r] <= '0;
    end else if (wr_en) begin
      mem[wr_row] <= wr_data;
    end
  end

  assign rd_data = mem[rd_row];

  always_comb begin
    for (int r = 0; r < ROWS; r++) col_bits[r] = mem[r][col_sel];
  end
endmodule

// move_ctrl: the move control of the bank controller (rule-guided in-memory moving).
//
// Holds REG_Indicator, the indicator bit p of every row of the source group, and the
// row-valid column, both captured in one cycle from a column read (`load`). It then
// presents the rows to move one at a time: `cur_valid` says a row is pending,
// `cur_row` is the lowest pending row and `cur_to_z` its indicator bit (0: move to
// array y, 1: move to array z). `next` retires the current row. Skipping rows whose
// valid flag is 0 and visiting rows in ascending order are this design's choices; the
// paper's traversal reads every row.
module move_ctrl #(
  parameter int NROWS = 512,
  localparam int RW = $clog2(NROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [NROWS-1:0] ind_col,
  input  logic [NROWS-1:0] valid_col,
  input  logic             next,
  output logic             cur_valid,
  output logic [RW-1:0]    cur_row,
  output logic             cur_to_z
);
  logic [NROWS-1:0] reg_indicator;
  logic [NROWS-1:0] pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_indicator <= '0;
      pending       <= '0;
    end else if (load) begin
      reg_indicator <= ind_col;
      pending       <= valid_col;
    end else if (next && cur_valid) begin
      pending[cur_row] <= 1'b0;
    end
  end

  always_comb begin
    cur_valid = |pending;
    cur_row   = '0;
    for (int r = NROWS - 1; r >= 0; r--)
      if (pending[r]) cur_row = RW'(r);
    cur_to_z = reg_indicator[cur_row];
  end
endmodule

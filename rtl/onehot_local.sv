// onehot_local: first step of the two-step one-hot module.
//
// Takes the ROWS sensed match lines of one ReCAM array and returns the number of the
// lowest matching row and whether any row matched. Picking the lowest row follows the
// paper's rule that the first empty row is used when several match. Combinational.
module onehot_local #(
  parameter int ROWS = 128,
  localparam int RW = $clog2(ROWS)
) (
  input  logic [ROWS-1:0] match,
  output logic            hit,
  output logic [RW-1:0]   row
);
  always_comb begin
    hit = 1'b0;
    row = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (match[r]) begin
        hit = 1'b1;
        row = RW'(r);
      end
    end
  end
endmodule

// onehot_global: second step of the two-step one-hot module.
//
// Gathers the (hit, row) results of the N_SUB arrays of one CAM group and forms the
// group-wide row number {array index, local row} of the first match, lowest array first.
// Keeping the per-array step separate lets the number of arrays per group be set by
// N_SUB, as the paper's configurable one-hot module does. Combinational.
module onehot_global #(
  parameter int N_SUB = 4,
  parameter int ROWS  = 128,
  localparam int RW = $clog2(ROWS),
  localparam int GW = $clog2(ROWS * N_SUB)
) (
  input  logic [N_SUB-1:0]        sub_hit,
  input  logic [N_SUB-1:0][RW-1:0] sub_row,
  output logic                    hit,
  output logic [GW-1:0]           row
);
  always_comb begin
    hit = 1'b0;
    row = '0;
    for (int s = N_SUB - 1; s >= 0; s--) begin
      if (sub_hit[s]) begin
        hit = 1'b1;
        row = GW'(s * ROWS) | GW'(sub_row[s]);
      end
    end
  end
endmodule

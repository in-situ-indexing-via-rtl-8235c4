// global_decoder: selects the addressed CAM group of a bank.
//
// Decodes the group address of the current bank operation into a one-hot select so
// that only the addressed arrays get search-line drive and write enables. `in_range`
// tells the bank controller whether the address names an existing group; an address
// past the last group selects nothing. The paper only names this block; a plain
// binary-to-one-hot decoder is this design's reading of it. Combinational.
module global_decoder #(
  parameter int GROUPS = 2048,
  parameter int AW     = 20
) (
  input  logic              en,
  input  logic [AW-1:0]     addr,
  output logic [GROUPS-1:0] sel
);
  always_comb begin
    for (int g = 0; g < GROUPS; g++)
      sel[g] = en && (32'(addr) == g);
  end
endmodule

// key_mask_encoder: the Key/Mask module that turns a query into search-line drive.
//
// Every query bit (64 key bits and the valid flag, bit 64) becomes a pair of
// search-line signals (SL, SLbar), where 1 stands for the search voltage Vs and 0 for
// ground. The encoding follows the paper's table: query 0 -> (0, Vs), query 1 -> (Vs, 0),
// masked bit X -> (0, 0), so a masked bit can never pull a match line up.
// When `en` is low both lines of every bit stay at 0 (no search in progress).
// Purely combinational. Placing the flag in bit 64 is this design's choice.
module key_mask_encoder
  import path_pkg::*;
(
  input  logic          en,
  input  logic [QW-1:0] q,      // {flag, key}
  input  logic [QW-1:0] mask,   // 1 = don't care
  output logic [QW-1:0] sl,
  output logic [QW-1:0] slb
);
  always_comb begin
    for (int i = 0; i < QW; i++) begin
      sl[i]  = en & ~mask[i] &  q[i];
      slb[i] = en & ~mask[i] & ~q[i];
    end
  end
endmodule

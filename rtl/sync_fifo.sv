// sync_fifo: small valid/ready FIFO of W-bit words, used by the chip controller as
// its per-bank command queue. DEPTH entries; a word pushed is visible at the output
// the next cycle; `in_ready` is low when full. Helper of this design.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;

  wire push = in_valid & in_ready;
  wire pop  = out_valid & out_ready;

  assign in_ready  = (32'(cnt) < DEPTH);
  assign out_valid = (cnt != 0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wp] <= in_data;
        wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end
endmodule

// giob: global IO buffer of a bank.
//
// Results leaving the bank (row-read data, search results, column reads, status) are
// parked here until the chip controller takes them, so the bank controller can start
// its next command while a response waits. Built as a DEPTH-entry FIFO of W-bit words
// with valid/ready on both sides; a word written is readable the next cycle. The
// paper names the buffer and its role; the FIFO form and its depth are this design's.
module giob #(
  parameter int W     = 8,
  parameter int DEPTH = 2
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
  logic [W-1:0]  buf_q [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [PW:0]   cnt;

  wire push = in_valid & in_ready;
  wire pop  = out_valid & out_ready;

  assign in_ready  = (32'(cnt) < DEPTH);
  assign out_valid = (cnt != 0);
  assign out_data  = buf_q[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
      for (int i = 0; i < DEPTH; i++) buf_q[i] <= '0;
    end else begin
      if (push) begin
        buf_q[wp] <= in_data;
        wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      end
      if (pop) rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      cnt <= cnt + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  // the occupancy never exceeds the depth, and a refused word leaves the fill level
  // unchanged unless a word leaves in the same cycle
  a_bounded:  assert property (@(posedge clk) disable iff (!rst_n) 32'(cnt) <= DEPTH);
  a_refused:  assert property (@(posedge clk) disable iff (!rst_n)
                in_valid && !in_ready && !out_ready |=> cnt == $past(cnt));
endmodule

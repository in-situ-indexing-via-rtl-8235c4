// tb_recam_array: one 128-row ReCAM array against a ternary reference model.
// Rows are written with random keys, stored don't-care bits and partial column masks;
// then random searches (some copied from stored rows, some masked) compare every match
// line with the model, and row reads and column reads are compared with it too.
// The reset state (every row key 0, flag 0) is checked first.
module tb_recam_array;
  import path_pkg::*;
  localparam int ROWS = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [QW-1:0]   sl, slb, wr_bits, wr_x, wr_colmask, rd_bits, rd_x;
  logic [ROWS-1:0] ml, colb;
  logic            wr_en;
  logic [6:0]      wr_row, rd_row;
  logic [6:0]      col_sel;

  recam_array #(.ROWS(ROWS)) dut (.clk, .rst_n, .sl, .slb, .ml_match(ml),
    .wr_en, .wr_row, .wr_bits, .wr_x, .wr_colmask, .rd_row, .rd_bits, .rd_x,
    .col_sel, .col_bits(colb));

  logic [QW-1:0] m_bits [ROWS];
  logic [QW-1:0] m_x    [ROWS];
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endtask

  task automatic search(input logic [QW-1:0] q, input logic [QW-1:0] m);
    sl = ~m & q; slb = ~m & ~q;
    #1;
    for (int r = 0; r < ROWS; r++) begin
      logic exp;
      exp = ((((m_bits[r] ^ q) & ~m_x[r]) & ~m) == '0);
      chk(ml[r] == exp, $sformatf("ml row %0d", r));
    end
  endtask

  initial begin
    sl = '0; slb = '0; wr_en = 0; wr_row = 0; wr_bits = 0; wr_x = 0; wr_colmask = 0;
    rd_row = 0; col_sel = 0;
    for (int r = 0; r < ROWS; r++) begin m_bits[r] = '0; m_x[r] = '0; end
    #12 rst_n = 1;
    // reset state: (flag 0, key 0) matches every row, (flag 1) matches none
    search('0, '0);
    search({1'b1, 64'h0}, {1'b0, {64{1'b1}}});
    // writes
    for (int n = 0; n < 300; n++) begin
      logic [QW-1:0] b, x, cm;
      int r;
      r  = $urandom % ROWS;
      b  = {$urandom, $urandom, $urandom};
      x  = (n % 3 == 0) ? ({$urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom} & {$urandom, $urandom, $urandom}) : '0;
      cm = (n % 5 == 0) ? {$urandom, $urandom, $urandom} : '1;
      @(negedge clk);
      wr_en = 1; wr_row = 7'(r); wr_bits = b; wr_x = x; wr_colmask = cm;
      @(negedge clk);
      wr_en = 0;
      for (int c = 0; c < QW; c++) if (cm[c]) begin
        m_bits[r][c] = b[c] & ~x[c];
        m_x[r][c]    = x[c];
      end
    end
    // searches
    for (int n = 0; n < 200; n++) begin
      logic [QW-1:0] q, m;
      int r;
      r = $urandom % ROWS;
      q = (n % 2 == 0) ? m_bits[r] : {$urandom, $urandom, $urandom};
      m = (n % 4 == 1) ? ({$urandom, $urandom, $urandom} | {$urandom, $urandom, $urandom}) : '0;
      search(q, m);
    end
    sl = '0; slb = '0;
    // row and column reads
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 7'(r); #1;
      chk(rd_bits == m_bits[r] && rd_x == m_x[r], $sformatf("row read %0d", r));
    end
    for (int c = 0; c < QW; c++) begin
      col_sel = 7'(c); #1;
      for (int r = 0; r < ROWS; r++) chk(colb[r] == m_bits[r][c], $sformatf("col %0d row %0d", c, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

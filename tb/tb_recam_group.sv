// tb_recam_group: a 512-row group of four arrays against a reference model. Rows are
// written across all four arrays; searches for stored keys (with flag 1) must return
// the lowest matching row across arrays, searches for absent keys must miss, an
// empty-row search (flag 0, key masked) must find the lowest free row, and an
// unselected group must neither match-drive nor accept writes. Row and column reads
// are compared with the model.
module tb_recam_group;
  import path_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sel, hit, wr_key_en, wr_data_en;
  logic [QW-1:0] sl, slb, wr_bits, wr_x, wr_colmask, rd_bits, rd_x;
  logic [8:0] match_row, wr_row, rd_row;
  logic [DATA_W-1:0] wr_data, rd_data;
  logic [6:0] col_data_sel, col_cam_sel;
  logic [511:0] col_data, col_cam;

  recam_group dut (.clk, .rst_n, .sel, .sl, .slb, .hit, .match_row, .wr_key_en,
    .wr_data_en, .wr_row, .wr_bits, .wr_x, .wr_colmask, .wr_data, .rd_row, .rd_bits,
    .rd_x, .rd_data, .col_data_sel, .col_cam_sel, .col_data, .col_cam);

  logic [QW-1:0]     m_bits [512];
  logic [DATA_W-1:0] m_data [512];
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("FAIL %s", what); end
  endtask

  task automatic wr(input int r, input logic [QW-1:0] b, input logic [DATA_W-1:0] d);
    @(negedge clk);
    wr_key_en = 1; wr_data_en = 1; wr_row = 9'(r); wr_bits = b; wr_x = '0; wr_colmask = '1; wr_data = d;
    @(negedge clk);
    wr_key_en = 0; wr_data_en = 0;
    if (sel) begin m_bits[r] = b; m_data[r] = d; end
  endtask

  function automatic int lowest_match(input logic [QW-1:0] q, input logic [QW-1:0] m);
    for (int r = 0; r < 512; r++) if ((((m_bits[r] ^ q)) & ~m) == '0) return r;
    return -1;
  endfunction

  task automatic srch(input logic [QW-1:0] q, input logic [QW-1:0] m);
    int e;
    sl = ~m & q; slb = ~m & ~q; #1;
    e = lowest_match(q, m);
    chk(hit == (e >= 0) && (e < 0 || int'(match_row) == e), $sformatf("search exp %0d got %b/%0d", e, hit, match_row));
    sl = '0; slb = '0;
  endtask

  initial begin
    sel = 1; sl = '0; slb = '0; wr_key_en = 0; wr_data_en = 0; wr_row = 0; wr_bits = 0;
    wr_x = 0; wr_colmask = 0; wr_data = 0; rd_row = 0; col_data_sel = 0; col_cam_sel = 7'd64;
    for (int r = 0; r < 512; r++) begin m_bits[r] = '0; m_data[r] = '0; end
    #12 rst_n = 1;
    // fill some rows in every array, leaving holes; key values repeat so the
    // lowest-row rule across arrays is exercised
    for (int n = 0; n < 200; n++) begin
      int r;
      r = (n < 8) ? (n * 64 + 3) : ($urandom % 512);
      wr(r, {1'b1, 32'hC0DE_0000, 32'($urandom % 40)}, {$urandom, $urandom, $urandom, $urandom});
    end
    for (int n = 0; n < 60; n++) srch({1'b1, 32'hC0DE_0000, 32'(n)}, '0);
    for (int n = 0; n < 40; n++) srch({1'b1, $urandom, $urandom}, '0);
    srch('0, {1'b0, {64{1'b1}}});                        // lowest empty row
    srch({1'b1, 64'h0}, {1'b0, {64{1'b1}}});             // lowest valid row
    // the row holding the last empty row of array 0 .. fill array 0 completely
    for (int r = 0; r < 128; r++) if (!m_bits[r][64]) wr(r, {1'b1, 64'(r)}, '0);
    srch('0, {1'b0, {64{1'b1}}});                        // now in array 1 or later
    // unselected: search lines gated, writes ignored
    sel = 0;
    sl = {1'b1, 64'h1234}; slb = ~sl; #1;
    chk(hit && match_row == 0, "unselected group sees no search drive");
    sl = '0; slb = '0;
    wr(7, {1'b1, 64'hDEAD}, 128'h1);
    sel = 1;
    rd_row = 9'd7; #1; chk(rd_bits == m_bits[7], "write ignored when unselected");
    // row and column reads
    for (int r = 0; r < 512; r++) begin
      rd_row = 9'(r); #1;
      chk(rd_bits == m_bits[r] && rd_x == '0 && rd_data == m_data[r], $sformatf("row read %0d", r));
    end
    for (int c = 0; c < 128; c += 9) begin
      col_data_sel = 7'(c); col_cam_sel = 7'(c % 65); #1;
      for (int r = 0; r < 512; r++) begin
        chk(col_data[r] == m_data[r][c], "col data");
        chk(col_cam[r] == m_bits[r][c % 65], "col cam");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

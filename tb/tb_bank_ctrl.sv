// tb_bank_ctrl: the bank controller driving two real CAM groups (wired here through
// the global decoder and the key/mask encoder). Every command type is run with short
// access times and checked for result and for its exact latency in cycles:
// READ/COLREAD = T_READ, WRITE = T_WRITE, INSERT/UPDATE/DELETE = T_CAM + T_WRITE,
// SEARCH = T_CAM + T_READ, failed CAM step = T_CAM, MOVE = T_READ + per moved item
// (T_CAM + 2 T_WRITE), T_READ per visited row, one cycle per row visited and at
// the end, and one cycle for each row kept in place. Also: insert into a
// full group, search after delete, ternary (masked) search, bad group address, and a
// move with one destination equal to the source.
module tb_bank_ctrl;
  import path_pkg::*;
  localparam int G = 2, TC = 3, TR = 2, TW = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, rsp_valid, rsp_ready;
  cmd_t cmd;
  rsp_t rsp;
  int checks = 0, failures = 0;

  logic                  grp_en, srch_en, wr_key_en, wr_data_en, hit;
  logic [GRP_MAX_W-1:0]  grp_addr;
  logic [QW-1:0]         srch_q, srch_mask, sl, slb, wr_bits, wr_x, wr_colmask, rd_bits, rd_x;
  logic [ROW_W-1:0]      match_row, wr_row, rd_row;
  logic [DATA_W-1:0]     wr_data, rd_data;
  logic [6:0]            col_data_sel, col_cam_sel;
  logic [GROUP_ROWS-1:0] col_data, col_cam;
  logic [G-1:0]          sel, g_hit;
  logic [ROW_W-1:0]      g_row [G];
  logic [QW-1:0]         g_b [G], g_x [G];
  logic [DATA_W-1:0]     g_d [G];
  logic [GROUP_ROWS-1:0] g_cd [G], g_cc [G];

  bank_ctrl #(.GROUPS(G), .T_CAM(TC), .T_READ(TR), .T_WRITE(TW), .BANK_ID(8'd3)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp_ready, .rsp,
    .grp_en, .grp_addr, .srch_en, .srch_q, .srch_mask, .hit, .match_row,
    .wr_key_en, .wr_data_en, .wr_row, .wr_bits, .wr_x, .wr_colmask, .wr_data,
    .rd_row, .rd_bits, .rd_x, .rd_data, .col_data_sel, .col_cam_sel, .col_data, .col_cam);

  global_decoder #(.GROUPS(G), .AW(GRP_MAX_W)) u_dec (.en(grp_en), .addr(grp_addr), .sel);
  key_mask_encoder u_km (.en(srch_en), .q(srch_q), .mask(srch_mask), .sl, .slb);
  for (genvar g = 0; g < G; g++) begin : g_g
    recam_group u_g (.clk, .rst_n, .sel(sel[g]), .sl, .slb, .hit(g_hit[g]), .match_row(g_row[g]),
      .wr_key_en, .wr_data_en, .wr_row, .wr_bits, .wr_x, .wr_colmask, .wr_data,
      .rd_row, .rd_bits(g_b[g]), .rd_x(g_x[g]), .rd_data(g_d[g]),
      .col_data_sel, .col_cam_sel, .col_data(g_cd[g]), .col_cam(g_cc[g]));
  end
  assign hit = g_hit[grp_addr[0]];
  assign match_row = g_row[grp_addr[0]];
  assign rd_bits = g_b[grp_addr[0]];
  assign rd_x = g_x[grp_addr[0]];
  assign rd_data = g_d[grp_addr[0]];
  assign col_data = g_cd[grp_addr[0]];
  assign col_cam = g_cc[grp_addr[0]];

  // ---- command helpers ----

  function automatic cmd_t mk(input op_e op, input int grp, input logic [63:0] key = '0,
                              input logic [127:0] data = '0, input int row = 0);
    cmd_t c;
    c = '0;
    c.op = op; c.grp = GRP_MAX_W'(grp); c.key = key; c.data = data; c.row = ROW_W'(row);
    return c;
  endfunction

  function automatic cmd_t mk_move(input int x, input int y, input int z, input int p);
    cmd_t c;
    c = '0;
    c.op = OP_MOVE; c.grp = GRP_MAX_W'(x); c.grp_y = GRP_MAX_W'(y); c.grp_z = GRP_MAX_W'(z);
    c.col = 7'(p);
    return c;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // Issue one command, wait for its response; `lat` is the number of clock edges from
  // the accepting edge to the edge after which the response is valid.
  task automatic do_cmd(input cmd_t c, output rsp_t r, output int lat);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd       = c;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
    lat = 0;
    while (!rsp_valid) begin
      lat++;
      @(negedge clk);
    end
    r = rsp;
    rsp_ready = 1'b1;
    @(negedge clk);
    rsp_ready = 1'b0;
  endtask

  rsp_t r;
  int lat;
  function automatic logic [127:0] dat(input int k, input logic ind_bit);
    return {48'h0, 15'h0, ind_bit, 32'hDA7A_0000, 32'(k)};
  endfunction

  initial begin
    cmd_valid = 0; rsp_ready = 0; cmd = '0;
    #22 rst_n = 1;
    // insert three keys into group 0
    for (int k = 0; k < 3; k++) begin
      do_cmd(mk(OP_INSERT, 0, 64'h100 + 64'(k), dat(k, 1'(k))), r, lat);
      chk(r.status == ST_OK && r.row == 9'(k) && r.bank == 8'd3, "insert row");
      chk(lat == TC + TW, $sformatf("insert latency %0d", lat));
    end
    // search
    do_cmd(mk(OP_SEARCH, 0, 64'h101), r, lat);
    chk(r.status == ST_OK && r.row == 1 && r.data == dat(1, 1), "search hit");
    chk(lat == TC + TR, $sformatf("search latency %0d", lat));
    do_cmd(mk(OP_SEARCH, 0, 64'h999), r, lat);
    chk(r.status == ST_NOT_FOUND && lat == TC, "search miss");
    // search in the other group misses
    do_cmd(mk(OP_SEARCH, 1, 64'h101), r, lat);
    chk(r.status == ST_NOT_FOUND, "search other group");
    // update then search
    do_cmd(mk(OP_UPDATE, 0, 64'h102, 128'hFEED), r, lat);
    chk(r.status == ST_OK && r.row == 2 && lat == TC + TW, "update");
    do_cmd(mk(OP_SEARCH, 0, 64'h102), r, lat);
    chk(r.data == 128'hFEED, "search after update");
    do_cmd(mk(OP_UPDATE, 0, 64'h555, 128'h1), r, lat);
    chk(r.status == ST_NOT_FOUND, "update miss");
    // delete then search; reinsert reuses the freed row (first empty row)
    do_cmd(mk(OP_DELETE, 0, 64'h100), r, lat);
    chk(r.status == ST_OK && r.row == 0 && lat == TC + TW, "delete");
    do_cmd(mk(OP_SEARCH, 0, 64'h100), r, lat);
    chk(r.status == ST_NOT_FOUND, "search after delete");
    do_cmd(mk(OP_INSERT, 0, 64'h200, dat(9, 0)), r, lat);
    chk(r.status == ST_OK && r.row == 0, "insert into freed row");
    // masked (ternary) search: low byte don't care
    begin
      cmd_t c;
      c = mk(OP_SEARCH, 0, 64'h1FF);
      c.kmask = 64'hFF;
      do_cmd(c, r, lat);
      chk(r.status == ST_OK && r.row == 1, "masked search finds lowest row 0x1xx");
    end
    // normal read / write / column read
    do_cmd(mk(OP_READ, 0, 0, 0, 1), r, lat);
    chk(r.key == 64'h101 && r.flag && r.data == dat(1, 1) && lat == TR, "row read");
    do_cmd(mk(OP_WRITE, 0, 64'h777, 128'h77, 300), r, lat);
    chk(r.status == ST_OK && lat == TW, "row write");
    do_cmd(mk(OP_READ, 0, 0, 0, 300), r, lat);
    chk(r.key == 64'h777 && r.flag == 1'b0 && r.data == 128'h77, "read written row (flag 0)");
    begin
      cmd_t c;
      c = mk(OP_COLREAD, 0);
      c.col = 7'(IND_LSB);
      do_cmd(c, r, lat);
      chk(r.col[2:0] == 3'b010 && lat == TR, $sformatf("column read %b", r.col[2:0]));
    end
    // bad group address
    do_cmd(mk(OP_SEARCH, 5, 64'h101), r, lat);
    chk(r.status == ST_BAD, "bad group");
    // move group 0 -> y = 0 (indicator 0 stays), z = 1 (indicator 1 moves)
    // valid rows: 0 (key 200, ind 0), 1 (101, ind 1), 2 (102, data FEED: ind 0)
    do_cmd(mk_move(0, 0, 1, 0), r, lat);
    chk(r.status == ST_OK && r.count == 1 && r.col[2:0] == 3'b010, $sformatf("move count %0d", r.count));
    chk(lat == TR + 4 + 3 * TR + 2 + TC + 2 * TW, $sformatf("move latency %0d", lat));
    do_cmd(mk(OP_SEARCH, 1, 64'h101), r, lat);
    chk(r.status == ST_OK && r.row == 0 && r.data == dat(1, 1), "moved item found in z");
    do_cmd(mk(OP_SEARCH, 0, 64'h101), r, lat);
    chk(r.status == ST_NOT_FOUND, "moved item gone from x");
    do_cmd(mk(OP_SEARCH, 0, 64'h200), r, lat);
    chk(r.status == ST_OK, "kept item still in x");
    // fill group 1 and see FULL
    for (int k = 1; k < GROUP_ROWS; k++) begin
      do_cmd(mk(OP_INSERT, 1, 64'h5000 + 64'(k), 0), r, lat);
      if (r.status != ST_OK) chk(0, "fill");
    end
    do_cmd(mk(OP_INSERT, 1, 64'h6000, 0), r, lat);
    chk(r.status == ST_FULL && lat == TC, "insert into full group");
    // move into a full destination ends with FULL
    do_cmd(mk(OP_INSERT, 0, 64'h300, dat(3, 1)), r, lat);
    do_cmd(mk_move(0, 0, 1, 0), r, lat);
    chk(r.status == ST_FULL && r.count == 0, "move into full group");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

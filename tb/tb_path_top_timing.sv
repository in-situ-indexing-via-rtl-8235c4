// tb_path_top_timing: the chip with its default bank count and access timing (8 banks,
// 24/24/120-cycle CAM/read/write) and 16 CAM groups per bank instead of the default
// 2048, so that it builds in about a minute. One complete pass of every command:
// inserts into every bank, a search hit and miss, update, delete, row write/read,
// column read and one in-memory move, with results and the per-command latency
// through the chip checked (bank latency + GIOB + chip-controller queue and return).
module tb_path_top_timing;
  import path_pkg::*;
  localparam int TC = 24, TR = 24, TW = 120, NB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_cmd_valid, host_cmd_ready, host_rsp_valid, host_rsp_ready;
  cmd_t host_cmd;
  rsp_t host_rsp;
  logic [NB-1:0] bank_busy;
  int checks = 0, failures = 0;

  path_top #(.GROUPS(16)) dut (.clk, .rst_n, .host_cmd_valid, .host_cmd_ready, .host_cmd,
    .host_rsp_valid, .host_rsp_ready, .host_rsp, .bank_busy);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one command, blocking; lat counts clock edges from acceptance to response valid
  task automatic run(input cmd_t c, output rsp_t r, output int lat);
    @(negedge clk);
    host_cmd_valid = 1; host_cmd = c;
    #1;
    while (!host_cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_cmd_valid = 0;
    lat = 0;
    while (!host_rsp_valid) begin lat++; @(negedge clk); end
    r = host_rsp;
    host_rsp_ready = 1;
    @(negedge clk);
    host_rsp_ready = 0;
  endtask

  function automatic cmd_t mk(input op_e op, input int bank, input int grp, input logic [63:0] key,
                              input logic [127:0] data);
    cmd_t c;
    c = '0; c.op = op; c.bank = 8'(bank); c.grp = 20'(grp); c.key = key; c.data = data;
    return c;
  endfunction

  // fixed path overhead: one cycle in the bank queue, one in the GIOB
  localparam int OVH = 2;

  initial begin
    rsp_t r;
    cmd_t c;
    int lat;
    host_cmd_valid = 0; host_rsp_ready = 0; host_cmd = '0;
    #22 rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      run(mk(OP_INSERT, b, 15, 64'hB000 + 64'(b), 128'(b) | (128'(b & 1) << IND_LSB)), r, lat);
      chk(r.status == ST_OK && r.row == 0 && int'(r.bank) == b, $sformatf("insert bank %0d", b));
      chk(lat == TC + TW + OVH, $sformatf("insert latency %0d", lat));
      run(mk(OP_INSERT, b, 15, 64'hC000 + 64'(b), 128'h100 | (128'((b + 1) & 1) << IND_LSB)), r, lat);
      chk(r.status == ST_OK && r.row == 1, "second insert");
    end
    run(mk(OP_SEARCH, 5, 15, 64'hB005, 0), r, lat);
    chk(r.status == ST_OK && r.data == (128'd5 | (128'd1 << IND_LSB)) && lat == TC + TR + OVH, "search hit");
    run(mk(OP_SEARCH, 5, 15, 64'hB004, 0), r, lat);
    chk(r.status == ST_NOT_FOUND && lat == TC + OVH, "search miss (key in another bank)");
    run(mk(OP_UPDATE, 2, 15, 64'hB002, 128'hAB), r, lat);
    chk(r.status == ST_OK && lat == TC + TW + OVH, "update");
    run(mk(OP_SEARCH, 2, 15, 64'hB002, 0), r, lat);
    chk(r.data == 128'hAB, "search after update");
    run(mk(OP_DELETE, 7, 15, 64'hC007, 0), r, lat);
    chk(r.status == ST_OK && r.row == 1, "delete");
    run(mk(OP_SEARCH, 7, 15, 64'hC007, 0), r, lat);
    chk(r.status == ST_NOT_FOUND, "search after delete");
    c = mk(OP_WRITE, 0, 3, 64'hFACE, 128'h1 << (IND_LSB + 5)); c.row = 9'd511; c.flag = 1;
    run(c, r, lat); chk(r.status == ST_OK && lat == TW + OVH, "row write");
    c.op = OP_READ; run(c, r, lat);
    chk(r.key == 64'hFACE && r.flag && lat == TR + OVH, "row read");
    c.op = OP_COLREAD; c.col = 7'(IND_LSB + 5); run(c, r, lat);
    chk(r.col == (512'h1 << 511) && lat == TR + OVH, "column read");
    // bank 1 group 15 holds B001 (indicator bit 0 = 1) and C001 (bit 0 = 0):
    // move x = 15 -> y = 0 / z = 1 by bit 0
    c = '0; c.op = OP_MOVE; c.bank = 8'd1; c.grp = 20'd15; c.grp_y = 20'd0; c.grp_z = 20'd1; c.col = 7'd0;
    run(c, r, lat);
    chk(r.status == ST_OK && r.count == 2, $sformatf("move count %0d", r.count));
    chk(lat == TR + 3 + 2 * (TR + TC + 2 * TW) + OVH, $sformatf("move latency %0d", lat));
    run(mk(OP_SEARCH, 1, 1, 64'hB001, 0), r, lat);
    chk(r.status == ST_OK && r.data[7:0] == 8'd1, "moved to z");
    run(mk(OP_SEARCH, 1, 0, 64'hC001, 0), r, lat);
    chk(r.status == ST_OK && r.data[7:0] == 8'h00 && r.data[8], "moved to y");
    run(mk(OP_SEARCH, 1, 15, 64'hB001, 0), r, lat);
    chk(r.status == ST_NOT_FOUND, "source emptied");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

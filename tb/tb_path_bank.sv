// tb_path_bank: a bank of 4 CAM groups under random traffic, compared with a reference
// model of the rows (valid flag, key, data per row). Keys come from a small pool so
// duplicates, misses, full groups and reuse of deleted rows all occur. Insert picks
// the lowest free row, search/update/delete act on the lowest valid matching row,
// moves split a group by indicator bit. Latencies include the one-cycle GIOB.
module tb_path_bank;
  import path_pkg::*;
  localparam int G = 4, TC = 2, TR = 2, TW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, rsp_valid, rsp_ready;
  cmd_t cmd;
  rsp_t rsp;
  int checks = 0, failures = 0;
  int n_full = 0, n_miss = 0, n_move = 0;

  path_bank #(.GROUPS(G), .T_CAM(TC), .T_READ(TR), .T_WRITE(TW), .BANK_ID(8'd1)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .rsp_valid, .rsp_ready, .rsp);

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

  bit            m_v [G][512];
  logic [63:0]   m_k [G][512];
  logic [127:0]  m_d [G][512];

  function automatic int find_free(input int g);
    for (int r = 0; r < 512; r++) if (!m_v[g][r]) return r;
    return -1;
  endfunction
  function automatic int find_key(input int g, input logic [63:0] k);
    for (int r = 0; r < 512; r++) if (m_v[g][r] && m_k[g][r] == k) return r;
    return -1;
  endfunction

  rsp_t r;
  int lat;

  initial begin
    cmd_valid = 0; rsp_ready = 0; cmd = '0;
    for (int g = 0; g < G; g++) for (int i = 0; i < 512; i++) begin m_v[g][i] = 0; m_k[g][i] = 0; m_d[g][i] = 0; end
    #22 rst_n = 1;
    for (int n = 0; n < 2500; n++) begin
      int g, e, op;
      logic [63:0] k;
      logic [127:0] d;
      g  = (n < 1200) ? 3 : $urandom % G;       // group 3 is driven full early
      k  = 64'h4000_0000_0000 + 64'($urandom % 700);
      d  = {$urandom, $urandom, $urandom, $urandom};
      op = $urandom % 10;
      if (n < 1200) op = 0;
      if (op <= 3) begin
        do_cmd(mk(OP_INSERT, g, k, d), r, lat);
        e = find_free(g);
        chk(r.status == ((e < 0) ? ST_FULL : ST_OK) && (e < 0 || int'(r.row) == e), $sformatf("insert g%0d exp %0d got %0d/%0d", g, e, r.status, r.row));
        chk(lat == ((e < 0) ? TC + 1 : TC + TW + 1), "insert latency");
        if (e >= 0) begin m_v[g][e] = 1; m_k[g][e] = k; m_d[g][e] = d; end
        else n_full++;
      end else if (op <= 6) begin
        do_cmd(mk(OP_SEARCH, g, k), r, lat);
        e = find_key(g, k);
        chk(r.status == ((e < 0) ? ST_NOT_FOUND : ST_OK) && (e < 0 || (int'(r.row) == e && r.data == m_d[g][e])), "search");
        chk(lat == ((e < 0) ? TC + 1 : TC + TR + 1), "search latency");
        if (e < 0) n_miss++;
      end else if (op == 7) begin
        do_cmd(mk(OP_UPDATE, g, k, d), r, lat);
        e = find_key(g, k);
        chk(r.status == ((e < 0) ? ST_NOT_FOUND : ST_OK), "update");
        if (e >= 0) m_d[g][e] = d;
      end else if (op == 8) begin
        do_cmd(mk(OP_DELETE, g, k), r, lat);
        e = find_key(g, k);
        chk(r.status == ((e < 0) ? ST_NOT_FOUND : ST_OK) && (e < 0 || int'(r.row) == e), "delete");
        if (e >= 0) m_v[g][e] = 0;
      end else begin
        int row;
        row = $urandom % 512;
        do_cmd(mk(OP_READ, g, 0, 0, row), r, lat);
        chk(r.flag == m_v[g][row] && (!m_v[g][row] || (r.key == m_k[g][row] && r.data == m_d[g][row])), "row read");
      end
    end
    // move group 2 into 0 (indicator bit 3 = 0) and 1 (bit 3 = 1); data bits 67 decide
    begin
      int x, y, z, moved;
      bit ok;
      x = 2; y = 0; z = 1;
      for (int g = 0; g < 2; g++) for (int i = 0; i < 512; i++) m_v[g][i] = 0;
      // clear y and z first so the move cannot run out of room
      for (int g = 0; g < 2; g++)
        for (int i = 0; i < 512; i++) begin
          do_cmd(mk(OP_WRITE, g, 0, 0, i), r, lat);
        end
      moved = 0;
      ok = 1;
      do_cmd(mk_move(x, y, z, 3), r, lat);
      n_move++;
      for (int i = 0; i < 512; i++) if (m_v[x][i]) begin
        int dst, e;
        dst = m_d[x][i][IND_LSB + 3] ? z : y;
        e = find_free(dst);
        m_v[dst][e] = 1; m_k[dst][e] = m_k[x][i]; m_d[dst][e] = m_d[x][i];
        m_v[x][i] = 0;
        moved++;
      end
      chk(r.status == ST_OK && int'(r.count) == moved, $sformatf("move count %0d exp %0d", r.count, moved));
      for (int g = 0; g < 3; g++)
        for (int i = 0; i < 512; i += 7) begin
          do_cmd(mk(OP_READ, g, 0, 0, i), r, lat);
          chk(r.flag == m_v[g][i] && (!m_v[g][i] || (r.key == m_k[g][i] && r.data == m_d[g][i])), $sformatf("after move g%0d r%0d", g, i));
        end
    end
    chk(n_full > 0 && n_miss > 0 && n_move > 0, "all outcomes seen");
    $display("full=%0d miss=%0d move=%0d", n_full, n_miss, n_move);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

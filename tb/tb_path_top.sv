// tb_path_top: end-to-end run of the PATH chip under a host-side model of the paper's
// single-level hash index (PATH-CHS).
//
// The host software lives in this testbench: a table of N logical buckets, each with
// 5 slots holding an array address (bank, group) and a count of valid items in that
// array. Bucket i lives in bank i % NUM_BANKS (interleaved mapping). An insert hashes
// the key, checks the bucket's counts and posts an in-situ INSERT to the first array
// with room without waiting for its answer (wait-free insertion). The first insert
// that finds its bucket full triggers a resize (passive collision resolution): every
// array x of bucket i is moved with MOVE(x, y = x, z = new array of bucket i + N,
// p = resize number), so items whose indicator bit is 1 go to the new bucket, all in
// memory. Afterwards every inserted key is searched (trying the slots of its bucket),
// a share is updated and deleted, and results are checked against a reference map.
// Also exercised: normal row read/write, column read, an insert into the full array
// that triggered the resize (FULL), a command to a missing bank (BAD).
// Each mechanism is counted, and a mechanism that never occurred is a failure.
// Two watchdogs end the run with a failure: one after a fixed time, and one when neither
// a command nor a response has crossed the host port for 200000 cycles.
module tb_path_top;
  import path_pkg::*;
  localparam int NB = 8, G = 11, TC = 2, TR = 2, TW = 4;
  localparam int SLOTS = 5, N0 = 8, MAXB = 16;
  localparam int CAP = GROUP_ROWS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic host_cmd_valid, host_cmd_ready, host_rsp_valid, host_rsp_ready;
  cmd_t host_cmd;
  rsp_t host_rsp;
  logic [NB-1:0] bank_busy;

  path_top #(.NUM_BANKS(NB), .GROUPS(G), .QDEPTH(4), .T_CAM(TC), .T_READ(TR), .T_WRITE(TW)) dut (
    .clk, .rst_n, .host_cmd_valid, .host_cmd_ready, .host_cmd,
    .host_rsp_valid, .host_rsp_ready, .host_rsp, .bank_busy);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int c_posted = 0, c_overlap_ins = 0, c_stall = 0, c_par = 0, c_resize = 0, c_move = 0,
      c_moved = 0, c_multi_try = 0, c_srch_hit = 0, c_srch_miss = 0, c_upd = 0, c_del = 0,
      c_full = 0, c_bad = 0, c_rowrw = 0, c_col = 0;
  always @(posedge clk) if (rst_n && $countones(bank_busy) >= 2) c_par++;

  // ---------------- host command port ----------------
  int seq = 0, outstanding = 0;
  bit   done_t [256];
  rsp_t res_t  [256];
  bit   posted_t [256];
  status_e exp_posted [256];

  task automatic issue(input cmd_t c, input bit posted, input status_e exp, output int tag);
    tag = seq % 256;
    seq++;
    c.tag = 8'(tag);
    done_t[tag] = 0; posted_t[tag] = posted; exp_posted[tag] = exp;
    @(negedge clk);
    host_cmd_valid = 1; host_cmd = c;
    #1;
    while (!host_cmd_ready) begin c_stall++; @(negedge clk); #1; end
    if (posted && c.op == OP_INSERT && outstanding > 0) c_overlap_ins++;
    outstanding++;
    @(posedge clk);
    #1 host_cmd_valid = 0;
  endtask

  task automatic wait_tag(input int tag, output rsp_t r);
    while (!done_t[tag]) @(negedge clk);
    r = res_t[tag];
  endtask

  task automatic drain();
    while (outstanding > 0) @(negedge clk);
  endtask

  task automatic run(input cmd_t c, output rsp_t r);
    int t;
    issue(c, 0, ST_OK, t);
    wait_tag(t, r);
  endtask

  // response collector
  initial begin
    host_rsp_ready = 0;
    forever begin
      @(negedge clk);
      host_rsp_ready = ($urandom % 8) != 0;
      #1;
      if (rst_n && host_rsp_valid && host_rsp_ready) begin
        int t;
        t = int'(host_rsp.tag);
        res_t[t] = host_rsp;
        done_t[t] = 1;
        outstanding--;
        if (posted_t[t]) chk(host_rsp.status == exp_posted[t], $sformatf("posted op %0d tag %0d status %0d", host_rsp.op, t, host_rsp.status));
      end
    end
  end

  // ---------------- host software: hash table ----------------
  int N = N0, nresize = 0;
  int slot_bank [MAXB][SLOTS];
  int slot_grp  [MAXB][SLOTS];
  int kvcnt     [MAXB][SLOTS];
  int next_grp  [NB];
  logic [127:0] ref_map [logic [63:0]];
  logic [63:0]  keys [$];

  function automatic logic [63:0] hash64(input logic [63:0] k);
    logic [63:0] h;
    h = k ^ (k >> 33);
    h = h * 64'hff51afd7ed558ccd;
    h = h ^ (h >> 33);
    h = h * 64'hc4ceb9fe1a85ec53;
    return h ^ (h >> 33);
  endfunction

  function automatic int path_alloc(input int bank);
    int g;
    g = next_grp[bank];
    next_grp[bank]++;
    return g;
  endfunction

  function automatic logic [127:0] row_data(input logic [63:0] k, input logic [63:0] v);
    logic [127:0] d;
    d = '0;
    d[63:0] = v;
    d[IND_LSB +: IND_W] = hash64(k)[$clog2(N0) +: IND_W];   // the next 16 hash bits
    return d;
  endfunction

  // returns 0 when the bucket is full (resize needed)
  task automatic hash_insert(input logic [63:0] k, input logic [63:0] v, output bit ok);
    int b, t;
    cmd_t c;
    b = int'(hash64(k) % 64'(N));
    ok = 0;
    for (int s = 0; s < SLOTS; s++) begin
      if (!ok && kvcnt[b][s] < CAP) begin
        c = '0;
        c.op = OP_INSERT; c.bank = 8'(slot_bank[b][s]); c.grp = GRP_MAX_W'(slot_grp[b][s]);
        c.key = k; c.data = row_data(k, v);
        issue(c, 1, ST_OK, t);
        c_posted++;
        kvcnt[b][s]++;
        ok = 1;
      end
    end
  endtask

  task automatic hash_search(input logic [63:0] k, output bit found, output logic [127:0] d);
    int b, tries;
    rsp_t r;
    cmd_t c;
    b = int'(hash64(k) % 64'(N));
    found = 0; tries = 0; d = '0;
    for (int s = 0; s < SLOTS; s++) begin
      if (!found) begin
        c = '0;
        c.op = OP_SEARCH; c.bank = 8'(slot_bank[b][s]); c.grp = GRP_MAX_W'(slot_grp[b][s]); c.key = k;
        run(c, r);
        tries++;
        if (r.status == ST_OK) begin found = 1; d = r.data; end
      end
    end
    if (found && tries > 1) c_multi_try++;
  endtask

  task automatic hash_modify(input op_e op, input logic [63:0] k, input logic [63:0] v, output bit found);
    int b;
    rsp_t r;
    cmd_t c;
    b = int'(hash64(k) % 64'(N));
    found = 0;
    for (int s = 0; s < SLOTS; s++) begin
      if (!found) begin
        c = '0;
        c.op = op; c.bank = 8'(slot_bank[b][s]); c.grp = GRP_MAX_W'(slot_grp[b][s]);
        c.key = k; c.data = row_data(k, v);
        run(c, r);
        if (r.status == ST_OK) begin
          found = 1;
          if (op == OP_DELETE) kvcnt[b][s]--;
        end
      end
    end
  endtask

  // resize: bucket i keeps items with indicator bit 0 in place, bit 1 go to bucket i + N
  task automatic hash_resize();
    int tags [MAXB][SLOTS];
    rsp_t r;
    drain();
    c_resize++;
    for (int i = 0; i < N; i++)
      for (int s = 0; s < SLOTS; s++) begin
        slot_bank[i + N][s] = slot_bank[i][s];           // same bank as bucket i
        slot_grp[i + N][s]  = path_alloc(slot_bank[i][s]);
        kvcnt[i + N][s]     = 0;
      end
    for (int i = 0; i < N; i++)
      for (int s = 0; s < SLOTS; s++) begin
        cmd_t c;
        int t;
        c = '0;
        c.op = OP_MOVE; c.bank = 8'(slot_bank[i][s]);
        c.grp = GRP_MAX_W'(slot_grp[i][s]); c.grp_y = c.grp;
        c.grp_z = GRP_MAX_W'(slot_grp[i + N][s]); c.col = 7'(nresize);
        issue(c, 1, ST_OK, t);
        tags[i][s] = t;
        c_move++;
      end
    drain();
    for (int i = 0; i < N; i++)
      for (int s = 0; s < SLOTS; s++) begin
        r = res_t[tags[i][s]];
        kvcnt[i][s]     -= int'(r.count);
        kvcnt[i + N][s] += int'(r.count);
        c_moved += int'(r.count);
      end
    N = 2 * N;
    nresize++;
  endtask

  // ---------------- the run ----------------
  initial begin
    bit ok, found;
    logic [127:0] d;
    rsp_t r;
    cmd_t c;
    int t, nins, resize_at;
    host_cmd_valid = 0; host_cmd = '0;
    for (int i = 0; i < 256; i++) begin done_t[i] = 0; posted_t[i] = 0; exp_posted[i] = ST_OK; end
    for (int b = 0; b < NB; b++) next_grp[b] = 0;
    #22 rst_n = 1;
    // initialisation: every bucket gets SLOTS arrays from its own bank (path_alloc)
    for (int i = 0; i < N0; i++)
      for (int s = 0; s < SLOTS; s++) begin
        slot_bank[i][s] = i % NB;
        slot_grp[i][s]  = path_alloc(i % NB);
        kvcnt[i][s]     = 0;
      end

    // workload Load: continuous insertions until the first bucket is full, resize,
    // then keep inserting
    nins = 0;
    resize_at = 0;
    while (nresize == 0 || nins < resize_at + 1500) begin
      logic [63:0] k;
      k = {32'hABCD_0000 + 32'(nins), 32'(nins * 2654435761)};
      hash_insert(k, ~k, ok);
      if (!ok) begin
        $display("bucket full after %0d inserts: load factor %0d/1000", nins,
                 (nins * 1000) / (N0 * SLOTS * CAP));
        // software that ignored its counts would get FULL from the array itself
        begin
          int bb;
          bb = int'(hash64(k) % 64'(N));
          c = '0; c.op = OP_INSERT; c.bank = 8'(slot_bank[bb][0]); c.grp = GRP_MAX_W'(slot_grp[bb][0]);
          c.key = k;
          run(c, r);
          chk(r.status == ST_FULL, "insert into full array");
          if (r.status == ST_FULL) c_full++;
        end
        resize_at = nins;
        hash_resize();
        hash_insert(k, ~k, ok);
        chk(ok, "insert after resize");
      end
      ref_map[k] = row_data(k, ~k);
      keys.push_back(k);
      nins++;
    end
    drain();
    $display("inserted %0d keys, N = %0d, moved %0d items", nins, N, c_moved);
    chk(c_moved > 0, "items moved");

    // search every 5th key (to keep the run short), then absent keys
    foreach (keys[i]) if (i % 5 == 0) begin
      hash_search(keys[i], found, d);
      chk(found && d == ref_map[keys[i]], $sformatf("search key %0d", i));
      if (found) c_srch_hit++;
    end
    for (int i = 0; i < 50; i++) begin
      hash_search({32'h5555_0000, 32'(i)}, found, d);
      chk(!found, "absent key");
      if (!found) c_srch_miss++;
    end
    // update and delete
    for (int i = 1; i < 600; i += 6) begin
      hash_modify(OP_UPDATE, keys[i], 64'h0BAD_F00D_0000_0000 + 64'(i), found);
      chk(found, "update");
      ref_map[keys[i]] = row_data(keys[i], 64'h0BAD_F00D_0000_0000 + 64'(i));
      c_upd++;
      hash_search(keys[i], found, d);
      chk(found && d == ref_map[keys[i]], "search after update");
    end
    for (int i = 2; i < 600; i += 6) begin
      hash_modify(OP_DELETE, keys[i], 0, found);
      chk(found, "delete");
      c_del++;
      hash_search(keys[i], found, d);
      chk(!found, "search after delete");
    end

    // normal memory access and column read on bank 3, group 10 (unused by the table)
    c = '0; c.op = OP_WRITE; c.bank = 8'd3; c.grp = 20'd10; c.row = 9'd17; c.key = 64'h77; c.flag = 1;
    c.data = 128'h1 << (IND_LSB + 2);
    run(c, r); chk(r.status == ST_OK, "row write"); c_rowrw++;
    c.op = OP_READ; run(c, r);
    chk(r.key == 64'h77 && r.flag && r.data == (128'h1 << (IND_LSB + 2)), "row read"); c_rowrw++;
    c.op = OP_COLREAD; c.col = 7'(IND_LSB + 2); run(c, r);
    chk(r.col == (512'h1 << 17), "column read"); c_col++;
    c = '0; c.op = OP_SEARCH; c.bank = 8'd12; run(c, r);
    chk(r.status == ST_BAD, "missing bank"); if (r.status == ST_BAD) c_bad++;

    $display("posted=%0d overlapped=%0d stalls=%0d parallel_bank_cycles=%0d resizes=%0d moves=%0d moved=%0d",
             c_posted, c_overlap_ins, c_stall, c_par, c_resize, c_move, c_moved);
    $display("search hit=%0d miss=%0d multi_try=%0d update=%0d delete=%0d full=%0d bad=%0d rowrw=%0d col=%0d",
             c_srch_hit, c_srch_miss, c_multi_try, c_upd, c_del, c_full, c_bad, c_rowrw, c_col);
    chk(c_posted > 0, "wait-free inserts");
    chk(c_overlap_ins > 0, "inserts posted while others outstanding");
    chk(c_stall > 0, "bank queue stall");
    chk(c_par > 0, "banks busy in parallel");
    chk(c_resize > 0 && c_move > 0 && c_moved > 0, "resize by in-memory move");
    chk(c_multi_try > 0, "search over several slots");
    chk(c_srch_hit > 0 && c_srch_miss > 0 && c_upd > 0 && c_del > 0, "ISUD");
    chk(c_full > 0, "FULL");
    chk(c_bad > 0, "BAD");
    chk(c_rowrw > 0 && c_col > 0, "normal access");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // progress watchdog: the chip must accept a command or return a response at least
  // once every 200000 cycles (far above the longest queue of moves)
  int idle_cyc = 0;
  always @(posedge clk) begin
    if ((host_cmd_valid && host_cmd_ready) || (host_rsp_valid && host_rsp_ready)) idle_cyc <= 0;
    else idle_cyc <= idle_cyc + 1;
    if (idle_cyc == 200000) begin
      failures++;
      $display("no progress for %0d cycles", idle_cyc);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
  initial begin
    #200000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_chip_ctrl: the chip controller between a host driver and 8 behavioural bank
// stand-ins (each answers its commands in order after a random delay and echoes the
// tag). Checks: every command reaches the bank it names and only that bank, each bank
// sees its commands in issue order, every response comes back to the host once with
// its tag, commands to a missing bank are answered BAD, a full per-bank queue stalls
// the host port, and responses of several banks waiting at once are returned
// round-robin (checked against a reference pointer).
module tb_chip_ctrl;
  import path_pkg::*;
  localparam int NB = 8, QD = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_cmd_valid, host_cmd_ready, host_rsp_valid, host_rsp_ready;
  cmd_t host_cmd;
  rsp_t host_rsp;
  logic [NB-1:0] bcv, bcr, brv, brr;
  cmd_t bc [NB];
  rsp_t br [NB];
  int checks = 0, failures = 0, stalls = 0, rr_ok = 0, rr_bad = 0;

  chip_ctrl #(.NUM_BANKS(NB), .QDEPTH(QD)) dut (.clk, .rst_n,
    .host_cmd_valid, .host_cmd_ready, .host_cmd, .host_rsp_valid, .host_rsp_ready, .host_rsp,
    .bank_cmd_valid(bcv), .bank_cmd_ready(bcr), .bank_cmd(bc),
    .bank_rsp_valid(brv), .bank_rsp_ready(brr), .bank_rsp(br));

  // behavioural banks: take a command, wait, present its response until taken
  int exp_tag [NB][$];
  int pending_tags [256];
  for (genvar b = 0; b < NB; b++) begin : g_bank
    int busy;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy <= 0; brv[b] <= 0; br[b] <= '0;
      end else begin
        if (brv[b] && brr[b]) brv[b] <= 0;
        if (busy > 1) busy <= busy - 1;
        else if (busy == 1 && !brv[b]) begin busy <= 0; brv[b] <= 1; end
        if (bcv[b] && bcr[b]) begin
          busy <= 1 + ($urandom % (b == 0 ? 40 : 6));
          br[b] <= '0;
          br[b].tag <= bc[b].tag;
          br[b].bank <= BANK_MAX_W'(b);
          br[b].status <= ST_OK;
          if (int'(bc[b].bank) != b) begin failures++; $display("FAIL bank %0d got bank %0d cmd", b, bc[b].bank); end
          checks++;
          if (exp_tag[b].size() == 0 || exp_tag[b][0] != int'(bc[b].tag)) begin failures++; $display("FAIL bank %0d order", b); end
          else void'(exp_tag[b].pop_front());
        end
      end
    end
    assign bcr[b] = (busy == 0) && !brv[b];
  end

  // round-robin reference: the next requester after the last one served, cyclically
  // over banks 0..NB-1 and the controller's own error responder (index NB)
  int last_served = NB;
  always @(posedge clk) if (rst_n && host_rsp_valid && host_rsp_ready) begin
    int e, idx, who;
    logic [NB:0] req;
    req = {dut.err_valid, brv};
    e = -1;
    for (int k = 1; k <= NB + 1; k++) begin
      idx = (last_served + k) % (NB + 1);
      if (e < 0 && req[idx]) e = idx;
    end
    who = (host_rsp.bank >= NB) ? NB : int'(host_rsp.bank);
    if (who == e) rr_ok++; else rr_bad++;
    last_served = who;
  end

  int sent = 0, got = 0, bad_sent = 0, bad_got = 0;
  initial begin
    host_cmd_valid = 0; host_rsp_ready = 0; host_cmd = '0;
    for (int i = 0; i < 256; i++) pending_tags[i] = 0;
    #22 rst_n = 1;
    fork
      begin : drive
        for (int n = 0; n < 400; n++) begin
          cmd_t c;
          c = '0;
          c.op = OP_SEARCH;
          c.tag = 8'(n);
          c.bank = (n % 50 == 49) ? 8'd9 : ((n < 60) ? 8'd0 : 8'($urandom % NB));
          @(negedge clk);
          host_cmd_valid = 1; host_cmd = c;
          #1;
          while (!host_cmd_ready) begin stalls++; @(negedge clk); #1; end
          if (c.bank < NB) exp_tag[c.bank].push_back(n % 256);
          else bad_sent++;
          pending_tags[n % 256]++;
          sent++;
          @(posedge clk);
          #1 host_cmd_valid = 0;
        end
      end
      begin : collect
        while (got < 400) begin
          @(negedge clk);
          host_rsp_ready = ($urandom % 4 != 0) || (sent == 400);
          #1;
          if (host_rsp_valid && host_rsp_ready) begin
            checks++;
            if (pending_tags[host_rsp.tag] == 0) begin failures++; $display("FAIL unknown tag %0d", host_rsp.tag); end
            else pending_tags[host_rsp.tag]--;
            if (host_rsp.bank >= NB) begin
              bad_got++;
              checks++; if (host_rsp.status != ST_BAD) failures++;
            end
            got++;
          end
        end
      end
    join
    checks++; if (bad_got != bad_sent || bad_sent == 0) begin failures++; $display("FAIL bad bank responses %0d/%0d", bad_got, bad_sent); end
    checks++; if (stalls == 0) begin failures++; $display("FAIL queue never stalled"); end
    checks++; if (rr_bad != 0 || rr_ok == 0) begin failures++; $display("FAIL round robin ok=%0d bad=%0d", rr_ok, rr_bad); end
    for (int b = 0; b < NB; b++) begin checks++; if (exp_tag[b].size() != 0) failures++; end
    $display("stalls=%0d rr_ok=%0d", stalls, rr_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

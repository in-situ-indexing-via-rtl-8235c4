// chip_ctrl: CTRL-C, the chip controller between the host interface and the banks.
//
// Every host command (normal memory access or PIM command, `cmd_t`) names its bank.
// The controller queues it in that bank's command FIFO (QDEPTH entries), so the host
// can post commands to several banks back to back and the banks work in parallel; a
// command to a busy bank waits in its queue without blocking other banks unless that
// queue is full, which stalls the host port (`host_cmd_ready` low). Bank responses
// are returned on one host response port, chosen round-robin among the banks that
// have one. A command naming a bank that does not exist is answered directly with
// status BAD. Routing by bank and returning results are the paper's description of
// CTRL-C; the queues, their depth and the round-robin return are this design's choice.
// The plain valid/ready host port stands in for the DDR or CXL interface.
module chip_ctrl
  import path_pkg::*;
#(
  parameter int NUM_BANKS = 8,
  parameter int QDEPTH    = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host side
  input  logic                 host_cmd_valid,
  output logic                 host_cmd_ready,
  input  cmd_t                 host_cmd,
  output logic                 host_rsp_valid,
  input  logic                 host_rsp_ready,
  output rsp_t                 host_rsp,
  // bank side
  output logic [NUM_BANKS-1:0] bank_cmd_valid,
  input  logic [NUM_BANKS-1:0] bank_cmd_ready,
  output cmd_t                 bank_cmd [NUM_BANKS],
  input  logic [NUM_BANKS-1:0] bank_rsp_valid,
  output logic [NUM_BANKS-1:0] bank_rsp_ready,
  input  rsp_t                 bank_rsp [NUM_BANKS]
);
  localparam int NREQ = NUM_BANKS + 1;          // banks + local error responder
  localparam int PW   = $clog2(NREQ);

  wire bad_bank = 32'(host_cmd.bank) >= NUM_BANKS;

  // ---- per-bank command queues ----
  logic [NUM_BANKS-1:0] q_in_ready;
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_q
    sync_fifo #(.W($bits(cmd_t)), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .in_valid(host_cmd_valid && !bad_bank && 32'(host_cmd.bank) == b),
      .in_ready(q_in_ready[b]), .in_data(host_cmd),
      .out_valid(bank_cmd_valid[b]), .out_ready(bank_cmd_ready[b]),
      .out_data(bank_cmd[b])
    );
  end

  // ---- local responder for commands to a missing bank ----
  logic err_valid;
  rsp_t err_rsp;
  logic err_ready;

  always_comb begin
    host_cmd_ready = 1'b0;
    if (bad_bank) host_cmd_ready = !err_valid;
    else begin
      for (int b = 0; b < NUM_BANKS; b++)
        if (32'(host_cmd.bank) == b) host_cmd_ready = q_in_ready[b];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_valid <= 1'b0;
      err_rsp   <= '0;
    end else begin
      if (err_valid && err_ready) err_valid <= 1'b0;
      if (host_cmd_valid && host_cmd_ready && bad_bank) begin
        err_valid      <= 1'b1;
        err_rsp        <= '0;
        err_rsp.op     <= host_cmd.op;
        err_rsp.tag    <= host_cmd.tag;
        err_rsp.bank   <= host_cmd.bank;
        err_rsp.status <= ST_BAD;
      end
    end
  end

  // ---- round-robin response return ----
  logic [NREQ-1:0] req;
  logic [PW-1:0]   last_g, grant;
  logic            any;
  assign req = {err_valid, bank_rsp_valid};

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = 1; k <= NREQ; k++) begin
      int idx;
      idx = (int'(last_g) + k) % NREQ;
      if (!any && req[idx]) begin
        any   = 1'b1;
        grant = PW'(idx);
      end
    end
  end

  assign host_rsp_valid = any;
  always_comb begin
    host_rsp = err_rsp;
    for (int b = 0; b < NUM_BANKS; b++)
      if (32'(grant) == b) host_rsp = bank_rsp[b];
  end

  always_comb begin
    for (int b = 0; b < NUM_BANKS; b++)
      bank_rsp_ready[b] = any && host_rsp_ready && (32'(grant) == b);
    err_ready = any && host_rsp_ready && (32'(grant) == NUM_BANKS);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_g <= PW'(NREQ - 1);
    else if (any && host_rsp_ready) last_g <= grant;
  end

  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    host_rsp_valid && !host_rsp_ready |=> host_rsp_valid);
endmodule

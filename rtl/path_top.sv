// path_top: the PATH chip, an in-situ indexing memory built from memristive ReCAM.
//
// A chip controller and NUM_BANKS banks. The host sends normal memory commands
// (row read/write, column read) and PIM commands (in-situ insert, search, update,
// delete, and in-memory move) on one valid/ready command port and receives one
// response per command on the response port, tagged with the command's tag and bank.
// Banks run independently, so commands to different banks overlap in time; this is
// what the host software's interleaved bucket-to-bank mapping exploits.
// The bank count follows the paper (8 banks); the number of CAM groups per bank
// (paper: 131072 of 4 x 128 rows) is scaled down to GROUPS = 2048. Timing parameters are
// clock cycles for the paper's 20 ns CAM/read and 100 ns write at an assumed 1.2 GHz.
// The DDR/CXL interface itself is not part of this design.
module path_top
  import path_pkg::*;
#(
  parameter int NUM_BANKS = 8,
  parameter int GROUPS    = 2048,
  parameter int QDEPTH    = 4,
  parameter int T_CAM     = 24,
  parameter int T_READ    = 24,
  parameter int T_WRITE   = 120
) (
  input  logic clk,
  input  logic rst_n,
  input  logic host_cmd_valid,
  output logic host_cmd_ready,
  input  cmd_t host_cmd,
  output logic host_rsp_valid,
  input  logic host_rsp_ready,
  output rsp_t host_rsp,
  output logic [NUM_BANKS-1:0] bank_busy     // bank has a command in progress
);
  logic [NUM_BANKS-1:0] b_cmd_valid, b_cmd_ready, b_rsp_valid, b_rsp_ready;
  cmd_t                 b_cmd [NUM_BANKS];
  rsp_t                 b_rsp [NUM_BANKS];

  chip_ctrl #(.NUM_BANKS(NUM_BANKS), .QDEPTH(QDEPTH)) u_ctrl (
    .clk, .rst_n,
    .host_cmd_valid, .host_cmd_ready, .host_cmd,
    .host_rsp_valid, .host_rsp_ready, .host_rsp,
    .bank_cmd_valid(b_cmd_valid), .bank_cmd_ready(b_cmd_ready), .bank_cmd(b_cmd),
    .bank_rsp_valid(b_rsp_valid), .bank_rsp_ready(b_rsp_ready), .bank_rsp(b_rsp)
  );

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    path_bank #(.GROUPS(GROUPS), .T_CAM(T_CAM), .T_READ(T_READ), .T_WRITE(T_WRITE),
                .BANK_ID(BANK_MAX_W'(b))) u_bank (
      .clk, .rst_n,
      .cmd_valid(b_cmd_valid[b]), .cmd_ready(b_cmd_ready[b]), .cmd(b_cmd[b]),
      .rsp_valid(b_rsp_valid[b]), .rsp_ready(b_rsp_ready[b]), .rsp(b_rsp[b])
    );
    assign bank_busy[b] = !b_cmd_ready[b];
  end
endmodule

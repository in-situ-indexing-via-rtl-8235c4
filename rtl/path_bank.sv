// path_bank: one PATH bank, memory arrays that can also run ReCAM operations.
//
// Contains the bank controller (CTRL-B with its move control), the global decoder,
// the key/mask encoder, GROUPS CAM groups of 4 x 128 rows and the global IO buffer.
// The controller names one group per step; the decoder selects it, the encoder's
// search lines and the write strobes reach only that group, and the group's match,
// row-read and column-read results are multiplexed back to the controller.
// Commands enter through a valid/ready port; responses leave through the GIOB.
// The paper's bank holds 524288 arrays (131072 groups, 1 GB). Here every array is
// an explicit register array, so GROUPS defaults to 2048 groups (8192 arrays, 8 MiB of
// key and data cells per bank), the largest power of two whose 8-bank elaboration
// still fits in 32 GiB; testbenches use far fewer.
module path_bank
  import path_pkg::*;
#(
  parameter int GROUPS  = 2048,
  parameter int T_CAM   = 24,
  parameter int T_READ  = 24,
  parameter int T_WRITE = 120,
  parameter logic [BANK_MAX_W-1:0] BANK_ID = '0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cmd_valid,
  output logic  cmd_ready,
  input  cmd_t  cmd,
  output logic  rsp_valid,
  input  logic  rsp_ready,
  output rsp_t  rsp
);
  localparam int GA = (GROUPS > 1) ? $clog2(GROUPS) : 1;

  logic                  c_rsp_valid, c_rsp_ready;
  rsp_t                  c_rsp;
  logic                  grp_en;
  logic [GRP_MAX_W-1:0]  grp_addr;
  logic                  srch_en;
  logic [QW-1:0]         srch_q, srch_mask, sl, slb;
  logic                  wr_key_en, wr_data_en;
  logic [ROW_W-1:0]      wr_row, rd_row;
  logic [QW-1:0]         wr_bits, wr_x, wr_colmask;
  logic [DATA_W-1:0]     wr_data;
  logic [6:0]            col_data_sel, col_cam_sel;
  logic [GROUPS-1:0]     sel;

  logic [GROUPS-1:0]     g_hit;
  logic [ROW_W-1:0]      g_row     [GROUPS];
  logic [QW-1:0]         g_rd_bits [GROUPS];
  logic [QW-1:0]         g_rd_x    [GROUPS];
  logic [DATA_W-1:0]     g_rd_data [GROUPS];
  logic [GROUP_ROWS-1:0] g_col_d   [GROUPS];
  logic [GROUP_ROWS-1:0] g_col_c   [GROUPS];

  logic                  hit;
  logic [ROW_W-1:0]      match_row;
  logic [QW-1:0]         rd_bits, rd_x;
  logic [DATA_W-1:0]     rd_data;
  logic [GROUP_ROWS-1:0] col_data, col_cam;

  bank_ctrl #(.GROUPS(GROUPS), .T_CAM(T_CAM), .T_READ(T_READ), .T_WRITE(T_WRITE),
              .BANK_ID(BANK_ID)) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd,
    .rsp_valid(c_rsp_valid), .rsp_ready(c_rsp_ready), .rsp(c_rsp),
    .grp_en, .grp_addr,
    .srch_en, .srch_q, .srch_mask, .hit, .match_row,
    .wr_key_en, .wr_data_en, .wr_row, .wr_bits, .wr_x, .wr_colmask, .wr_data,
    .rd_row, .rd_bits, .rd_x, .rd_data,
    .col_data_sel, .col_cam_sel, .col_data, .col_cam
  );

  global_decoder #(.GROUPS(GROUPS), .AW(GRP_MAX_W)) u_gdec (
    .en(grp_en), .addr(grp_addr), .sel
  );

  key_mask_encoder u_km (.en(srch_en), .q(srch_q), .mask(srch_mask), .sl, .slb);

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    recam_group u_grp (
      .clk, .rst_n, .sel(sel[g]),
      .sl, .slb, .hit(g_hit[g]), .match_row(g_row[g]),
      .wr_key_en, .wr_data_en, .wr_row, .wr_bits, .wr_x, .wr_colmask, .wr_data,
      .rd_row, .rd_bits(g_rd_bits[g]), .rd_x(g_rd_x[g]), .rd_data(g_rd_data[g]),
      .col_data_sel, .col_cam_sel, .col_data(g_col_d[g]), .col_cam(g_col_c[g])
    );
  end

  // result multiplexer: the selected group's outputs back to the controller
  logic [GA-1:0] gi;
  assign gi = GA'(grp_addr);
  always_comb begin
    hit       = g_hit[gi];
    match_row = g_row[gi];
    rd_bits   = g_rd_bits[gi];
    rd_x      = g_rd_x[gi];
    rd_data   = g_rd_data[gi];
    col_data  = g_col_d[gi];
    col_cam   = g_col_c[gi];
  end

  giob #(.W($bits(rsp_t)), .DEPTH(2)) u_giob (
    .clk, .rst_n,
    .in_valid(c_rsp_valid), .in_ready(c_rsp_ready), .in_data(c_rsp),
    .out_valid(rsp_valid), .out_ready(rsp_ready), .out_data(rsp)
  );
endmodule

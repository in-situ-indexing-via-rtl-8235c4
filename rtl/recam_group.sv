// recam_group: one 512-row CAM group built from N_SUB ReCAM arrays and their data arrays.
//
// The paper extends CAM capacity vertically: the key and flag are sent to n = 4
// arrays of 128 rows in parallel, and a two-step one-hot module (per array, then across
// arrays) gives the final matching row. This module is that group: it holds N_SUB
// recam_array / data_array pairs that share row numbers, gates the search lines with
// the group select from the global decoder (only the addressed arrays are driven), and
// returns hit + 9-bit row of the first match.
// Row numbers are {array index, local row}. Row read, row write (key cells and/or data
// row) and column read (one data column and one ReCAM column over all 512 rows at once)
// address the same rows. Writes take effect at the clock edge; all reads and the match
// result are combinational, the bank controller applying the tCAM/tREAD waits.
module recam_group
  import path_pkg::*;
#(
  parameter int N_SUB_P = N_SUB,
  parameter int ROWS    = SUB_ROWS,
  localparam int RW = $clog2(ROWS),
  localparam int NR = ROWS * N_SUB_P,
  localparam int GW = $clog2(NR)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               sel,          // from the global decoder
  // search
  input  logic [QW-1:0]      sl,
  input  logic [QW-1:0]      slb,
  output logic               hit,
  output logic [GW-1:0]      match_row,
  // row write
  input  logic               wr_key_en,
  input  logic               wr_data_en,
  input  logic [GW-1:0]      wr_row,
  input  logic [QW-1:0]      wr_bits,
  input  logic [QW-1:0]      wr_x,
  input  logic [QW-1:0]      wr_colmask,
  input  logic [DATA_W-1:0]  wr_data,
  // row read
  input  logic [GW-1:0]      rd_row,
  output logic [QW-1:0]      rd_bits,
  output logic [QW-1:0]      rd_x,
  output logic [DATA_W-1:0]  rd_data,
  // column read
  input  logic [6:0]         col_data_sel,
  input  logic [6:0]         col_cam_sel,
  output logic [NR-1:0]      col_data,
  output logic [NR-1:0]      col_cam
);
  logic [QW-1:0] sl_g, slb_g;
  assign sl_g  = sel ? sl  : '0;
  assign slb_g = sel ? slb : '0;

  logic [N_SUB_P-1:0]         sub_hit;
  logic [N_SUB_P-1:0][RW-1:0] sub_row;
  logic [QW-1:0]              s_rd_bits [N_SUB_P];
  logic [QW-1:0]              s_rd_x    [N_SUB_P];
  logic [DATA_W-1:0]          s_rd_data [N_SUB_P];

  logic [RW-1:0] wr_lrow, rd_lrow;
  assign wr_lrow = wr_row[RW-1:0];
  assign rd_lrow = rd_row[RW-1:0];

  for (genvar s = 0; s < N_SUB_P; s++) begin : g_sub
    logic [ROWS-1:0] ml;
    logic            wsel;
    if (N_SUB_P > 1) begin : g_ws
      assign wsel = (wr_row[GW-1:RW] == (GW-RW)'(s));
    end else begin : g_ws1
      assign wsel = 1'b1;
    end

    recam_array #(.ROWS(ROWS)) u_cam (
      .clk, .rst_n,
      .sl(sl_g), .slb(slb_g), .ml_match(ml),
      .wr_en(sel & wr_key_en & wsel), .wr_row(wr_lrow),
      .wr_bits, .wr_x, .wr_colmask,
      .rd_row(rd_lrow), .rd_bits(s_rd_bits[s]), .rd_x(s_rd_x[s]),
      .col_sel(col_cam_sel), .col_bits(col_cam[s*ROWS +: ROWS])
    );

    data_array #(.ROWS(ROWS), .DW(DATA_W)) u_data (
      .clk, .rst_n,
      .wr_en(sel & wr_data_en & wsel), .wr_row(wr_lrow), .wr_data,
      .rd_row(rd_lrow), .rd_data(s_rd_data[s]),
      .col_sel(col_data_sel), .col_bits(col_data[s*ROWS +: ROWS])
    );

    onehot_local #(.ROWS(ROWS)) u_oh (.match(ml), .hit(sub_hit[s]), .row(sub_row[s]));
  end

  onehot_global #(.N_SUB(N_SUB_P), .ROWS(ROWS)) u_ohg (
    .sub_hit, .sub_row, .hit(hit), .row(match_row)
  );

  // Row read mux over the arrays of the group.
  always_comb begin
    rd_bits = '0;
    rd_x    = '0;
    rd_data = '0;
    for (int s = 0; s < N_SUB_P; s++) begin
      if (N_SUB_P == 1 || 32'(rd_row) / ROWS == s) begin
        rd_bits = s_rd_bits[s];
        rd_x    = s_rd_x[s];
        rd_data = s_rd_data[s];
      end
    end
  end
endmodule

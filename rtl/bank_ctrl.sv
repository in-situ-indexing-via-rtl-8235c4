// bank_ctrl: CTRL-B, the bank controller that sequences composite PATH commands.
//
// It takes one command at a time (valid/ready, `cmd_t`), drives the bank's arrays
// through the global decoder, the key/mask encoder and the shared row/column ports,
// waits the array access time of every step with its timing counter, and hands one
// `rsp_t` per command to the global IO buffer.
//
//   READ / WRITE   one row step (tREAD / tWR)
//   COLREAD        one column step (tREAD) over all 512 rows of a group
//   INSERT         CAM step for (flag = 0, key masked), the first empty row; then a
//                  write of key, data and flag = 1 (tCAM + tWR). No empty row: FULL.
//   SEARCH         CAM step for (key, flag = 1); read of the data row (tCAM + tREAD)
//   UPDATE         CAM step; write of the data row (tCAM + tWR)
//   DELETE         CAM step; write of the flag column only, flag := 0 (tCAM + tWR)
//   MOVE x,y,z,p   column read of indicator bit p and of the flag column of group x
//                  into the move control; then for every valid row: row read (tREAD),
//                  CAM step for an empty row in y (bit 0) or z (bit 1) (tCAM), write
//                  there (tWR), clear the source flag (tWR). A row whose destination is
//                  x itself stays in place. A full destination ends the move with FULL.
//
// The list of steps per command and the rule of the move follow the paper; the
// opcodes, the status codes, the flag-clearing of moved rows and the step latencies in
// cycles (20 ns and 100 ns at an assumed 1.2 GHz controller clock) are this design's.
// A response leaves at the earliest T_CAM/T_READ/T_WRITE sums above after the command
// is accepted; the command port is ready again once the response is handed over.
module bank_ctrl
  import path_pkg::*;
#(
  parameter int GROUPS  = 2048,
  parameter int T_CAM   = 24,
  parameter int T_READ  = 24,
  parameter int T_WRITE = 120,
  parameter logic [BANK_MAX_W-1:0] BANK_ID = '0
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // command in
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  cmd_t                  cmd,
  // response out (to the GIOB)
  output logic                  rsp_valid,
  input  logic                  rsp_ready,
  output rsp_t                  rsp,
  // array side: address of the group being driven
  output logic                  grp_en,
  output logic [GRP_MAX_W-1:0]  grp_addr,
  // search (to the key/mask encoder)
  output logic                  srch_en,
  output logic [QW-1:0]         srch_q,
  output logic [QW-1:0]         srch_mask,
  input  logic                  hit,
  input  logic [ROW_W-1:0]      match_row,
  // row write
  output logic                  wr_key_en,
  output logic                  wr_data_en,
  output logic [ROW_W-1:0]      wr_row,
  output logic [QW-1:0]         wr_bits,
  output logic [QW-1:0]         wr_x,
  output logic [QW-1:0]         wr_colmask,
  output logic [DATA_W-1:0]     wr_data,
  // row read
  output logic [ROW_W-1:0]      rd_row,
  input  logic [QW-1:0]         rd_bits,
  input  logic [QW-1:0]         rd_x,
  input  logic [DATA_W-1:0]     rd_data,
  // column read
  output logic [6:0]            col_data_sel,
  output logic [6:0]            col_cam_sel,
  input  logic [GROUP_ROWS-1:0] col_data,
  input  logic [GROUP_ROWS-1:0] col_cam
);
  typedef enum logic [3:0] {
    S_IDLE, S_CAM, S_ROWRD, S_ROWWR, S_COLRD, S_RESP,
    S_M_COL, S_M_NEXT, S_M_RD, S_M_CAM, S_M_WR, S_M_CLR
  } state_e;

  localparam int CW = $clog2(T_WRITE + T_READ + T_CAM + 1);

  state_e              st;
  logic [CW-1:0]       cnt;
  cmd_t                cur;
  rsp_t                r;
  logic [ROW_W-1:0]    row_q;       // row found by the CAM step / row being moved
  logic [QW-1:0]       mv_bits, mv_x;
  logic [DATA_W-1:0]   mv_data;
  logic [GRP_MAX_W-1:0] mv_dest;

  wire last = (cnt == '0);

  // move control
  logic            mc_load, mc_next, mc_valid, mc_to_z;
  logic [ROW_W-1:0] mc_row;
  move_ctrl #(.NROWS(GROUP_ROWS)) u_move (
    .clk, .rst_n,
    .load(mc_load), .ind_col(col_data), .valid_col(col_cam),
    .next(mc_next), .cur_valid(mc_valid), .cur_row(mc_row), .cur_to_z(mc_to_z)
  );

  assign cmd_ready = (st == S_IDLE);
  assign rsp_valid = (st == S_RESP);
  assign rsp       = r;

  function automatic logic [CW-1:0] wait_of(int t);
    return CW'(t - 1);
  endfunction

  function automatic logic grp_ok(logic [GRP_MAX_W-1:0] g);
    return 32'(g) < GROUPS;
  endfunction

  // ---------------- array drive ----------------
  always_comb begin
    grp_en       = 1'b0;
    grp_addr     = cur.grp;
    srch_en      = 1'b0;
    srch_q       = {1'b1, cur.key};
    srch_mask    = {1'b0, cur.kmask};
    wr_key_en    = 1'b0;
    wr_data_en   = 1'b0;
    wr_row       = row_q;
    wr_bits      = {1'b1, cur.key};
    wr_x         = {1'b0, cur.kmask};
    wr_colmask   = '1;
    wr_data      = cur.data;
    rd_row       = row_q;
    col_data_sel = cur.col;
    col_cam_sel  = 7'(KEY_W);           // the flag column
    mc_load      = 1'b0;
    mc_next      = 1'b0;
    unique case (st)
      S_CAM: begin
        grp_en  = 1'b1;
        srch_en = 1'b1;
        if (cur.op == OP_INSERT) begin
          srch_q    = '0;                // flag = 0: an empty row
          srch_mask = {1'b0, {KEY_W{1'b1}}};
        end
      end
      S_ROWRD: begin
        grp_en = 1'b1;
        rd_row = (cur.op == OP_READ) ? cur.row : row_q;
      end
      S_ROWWR: begin
        grp_en = 1'b1;
        unique case (cur.op)
          OP_WRITE: begin
            wr_row    = cur.row;
            wr_bits   = {cur.flag, cur.key};
            wr_key_en = last;
            wr_data_en = last;
          end
          OP_INSERT: begin
            wr_key_en  = last;
            wr_data_en = last;
          end
          OP_UPDATE: wr_data_en = last;
          OP_DELETE: begin
            wr_bits    = '0;
            wr_x       = '0;
            wr_colmask = {1'b1, {KEY_W{1'b0}}};
            wr_key_en  = last;
          end
          default: ;
        endcase
      end
      S_COLRD: grp_en = 1'b1;
      S_M_COL: begin
        grp_en       = 1'b1;
        col_data_sel = 7'(IND_LSB) + cur.col;
        mc_load      = last;
      end
      S_M_RD: begin
        grp_en = 1'b1;
        rd_row = mc_row;
      end
      S_M_CAM: begin
        grp_en    = 1'b1;
        grp_addr  = mv_dest;
        srch_en   = 1'b1;
        srch_q    = '0;
        srch_mask = {1'b0, {KEY_W{1'b1}}};
      end
      S_M_WR: begin
        grp_en     = 1'b1;
        grp_addr   = mv_dest;
        wr_bits    = mv_bits;
        wr_x       = mv_x;
        wr_data    = mv_data;
        wr_key_en  = last;
        wr_data_en = last;
      end
      S_M_CLR: begin
        grp_en     = 1'b1;
        wr_row     = mc_row;
        wr_bits    = '0;
        wr_x       = '0;
        wr_colmask = {1'b1, {KEY_W{1'b0}}};
        wr_key_en  = last && (mv_dest != cur.grp);   // an item kept in place stays valid
        mc_next    = last;
      end
      default: ;
    endcase
  end

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      cnt     <= '0;
      cur     <= '0;
      r       <= '0;
      row_q   <= '0;
      mv_bits <= '0;
      mv_x    <= '0;
      mv_data <= '0;
      mv_dest <= '0;
    end else begin
      if (!last) cnt <= cnt - 1'b1;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          cur      <= cmd;
          r        <= '0;
          r.op     <= cmd.op;
          r.tag    <= cmd.tag;
          r.bank   <= BANK_ID;
          r.status <= ST_OK;
          row_q    <= cmd.row;
          if (!grp_ok(cmd.grp) ||
              (cmd.op == OP_MOVE && (!grp_ok(cmd.grp_y) || !grp_ok(cmd.grp_z) ||
                                     32'(cmd.col) >= IND_W))) begin
            r.status <= ST_BAD;
            st       <= S_RESP;
          end else begin
            unique case (cmd.op)
              OP_READ:    begin st <= S_ROWRD; cnt <= wait_of(T_READ);  end
              OP_WRITE:   begin st <= S_ROWWR; cnt <= wait_of(T_WRITE); end
              OP_COLREAD: begin st <= S_COLRD; cnt <= wait_of(T_READ);  end
              OP_INSERT, OP_SEARCH, OP_UPDATE, OP_DELETE:
                          begin st <= S_CAM;   cnt <= wait_of(T_CAM);   end
              OP_MOVE:    begin st <= S_M_COL; cnt <= wait_of(T_READ);  end
              default:    begin st <= S_RESP;  r.status <= ST_BAD;     end
            endcase
          end
        end
        S_CAM: if (last) begin
          row_q <= match_row;
          r.row <= match_row;
          if (!hit) begin
            r.status <= (cur.op == OP_INSERT) ? ST_FULL : ST_NOT_FOUND;
            st       <= S_RESP;
          end else if (cur.op == OP_SEARCH) begin
            st <= S_ROWRD; cnt <= wait_of(T_READ);
          end else begin
            st <= S_ROWWR; cnt <= wait_of(T_WRITE);
          end
        end
        S_ROWRD: if (last) begin
          r.key  <= rd_bits[KEY_W-1:0];
          r.flag <= rd_bits[KEY_W];
          r.data <= rd_data;
          if (cur.op == OP_READ) r.row <= cur.row;
          st <= S_RESP;
        end
        S_ROWWR: if (last) begin
          if (cur.op == OP_WRITE) r.row <= cur.row;
          st <= S_RESP;
        end
        S_COLRD: if (last) begin
          r.col <= col_data;
          st    <= S_RESP;
        end
        S_RESP: if (rsp_ready) st <= S_IDLE;
        // ---- in-memory move ----
        S_M_COL: if (last) st <= S_M_NEXT;
        S_M_NEXT: begin
          if (!mc_valid) begin
            st <= S_RESP;
          end else begin
            st  <= S_M_RD;
            cnt <= wait_of(T_READ);
          end
        end
        S_M_RD: if (last) begin
          mv_bits <= rd_bits;
          mv_x    <= rd_x;
          mv_data <= rd_data;
          mv_dest <= mc_to_z ? cur.grp_z : cur.grp_y;
          if ((mc_to_z ? cur.grp_z : cur.grp_y) == cur.grp) begin
            // destination is the source group: the item stays where it is
            st <= S_M_CLR;
            cnt <= '0;
          end else begin
            st  <= S_M_CAM;
            cnt <= wait_of(T_CAM);
          end
        end
        S_M_CAM: if (last) begin
          row_q <= match_row;
          if (!hit) begin
            r.status <= ST_FULL;
            st       <= S_RESP;
          end else begin
            st  <= S_M_WR;
            cnt <= wait_of(T_WRITE);
          end
        end
        S_M_WR: if (last) begin
          r.count       <= r.count + 1'b1;
          r.col[mc_row] <= 1'b1;
          st            <= S_M_CLR;
          cnt           <= wait_of(T_WRITE);
        end
        S_M_CLR: if (last) st <= S_M_NEXT;
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule

// path_pkg: types and constants shared by the PATH in-situ indexing chip.
//
// A PATH chip is a memory whose arrays can also act as ternary content-addressable
// memory (ReCAM). Each ReCAM row holds a 64-bit key and a valid flag; the row's value
// and its resize indicator sit in a normal-cell data array under the same row number.
// Four 128-row arrays form one 512-row CAM group, the unit that an in-situ
// insert/search/update/delete (ISUD) command or an in-memory move works on.
//
// The row size, key width, group size, bank count and the 20 ns / 100 ns access times
// follow the paper. The command set encoding, the data-row layout, the command and
// response structs and the clock-cycle counts are this design's own choices.
package path_pkg;

  localparam int KEY_W      = 64;              // matching key width
  localparam int QW         = KEY_W + 1;       // key + valid flag = ReCAM bits per row
  localparam int SUB_ROWS   = 128;             // rows of one ReCAM array
  localparam int N_SUB      = 4;               // arrays per CAM group
  localparam int GROUP_ROWS = SUB_ROWS * N_SUB; // 512
  localparam int ROW_W      = $clog2(GROUP_ROWS);
  localparam int DATA_W     = 128;             // normal-cell columns per data row
  localparam int VAL_W      = 64;              // value field, data bits [63:0]
  localparam int IND_LSB    = 64;              // indicator field, data bits [79:64]
  localparam int IND_W      = 16;
  localparam int BANK_MAX_W = 8;               // width of bank id field in commands
  localparam int GRP_MAX_W  = 20;              // width of group address field in commands

  // Commands understood by a bank controller.
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_READ    = 4'd1,   // normal row read: key/flag and data of one row
    OP_WRITE   = 4'd2,   // normal row write: key/flag and data of one row
    OP_COLREAD = 4'd3,   // column read of one data column over all 512 rows
    OP_INSERT  = 4'd4,   // in-situ insert: find first empty row, write key/data/flag
    OP_SEARCH  = 4'd5,   // in-situ search: match (key, flag=1), return data
    OP_UPDATE  = 4'd6,   // in-situ update: match, write new data
    OP_DELETE  = 4'd7,   // in-situ delete: match, clear valid flag
    OP_MOVE    = 4'd8    // in-memory move of group x into y / z by indicator bit p
  } op_e;

  typedef enum logic [1:0] {
    ST_OK        = 2'd0,
    ST_NOT_FOUND = 2'd1,   // no matching row (search/update/delete)
    ST_FULL      = 2'd2,   // no empty row (insert, or move destination)
    ST_BAD       = 2'd3    // unknown opcode or address out of range
  } status_e;

  typedef struct packed {
    op_e                    op;
    logic [7:0]             tag;      // returned unchanged with the response
    logic [BANK_MAX_W-1:0]  bank;
    logic [GRP_MAX_W-1:0]   grp;      // array group x (all ops)
    logic [GRP_MAX_W-1:0]   grp_y;    // move: destination when indicator bit = 0
    logic [GRP_MAX_W-1:0]   grp_z;    // move: destination when indicator bit = 1
    logic [ROW_W-1:0]       row;      // row for READ/WRITE
    logic [6:0]             col;      // data column for COLREAD; indicator bit p for MOVE
    logic [KEY_W-1:0]       key;
    logic                   flag;     // WRITE: valid flag to store
    logic [KEY_W-1:0]       kmask;    // search-time key mask, 1 = don't care
    logic [DATA_W-1:0]      data;
  } cmd_t;

  typedef struct packed {
    op_e                    op;
    logic [7:0]             tag;
    logic [BANK_MAX_W-1:0]  bank;
    status_e                status;
    logic [ROW_W-1:0]       row;      // matched / written row
    logic [KEY_W-1:0]       key;      // READ: stored key ('1' bits; X reads 0)
    logic                   flag;     // READ: stored flag
    logic [DATA_W-1:0]      data;     // READ/SEARCH: data row
    logic [GROUP_ROWS-1:0]  col;      // COLREAD: the column; MOVE: rows moved
    logic [ROW_W:0]         count;    // MOVE: number of items moved
  } rsp_t;

endpackage

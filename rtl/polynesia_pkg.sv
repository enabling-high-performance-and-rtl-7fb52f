// polynesia_pkg: types and constants shared by the analytical-island logic of one vault.
//
// The update log entry carries the four fields the design needs: a commit ID (a global
// timestamp that orders updates from all transactional threads), the update type
// (insert, delete, modify), the new data value and the record key, which is the pair
// (column ID, row ID). Field widths are this design's choice; the architecture only
// names the fields. Memory is modelled as word addressed with 128-bit (16 B) words, a
// size inside the 8-256 B access granularity of an HMC-like vault, so that one log
// entry and one hash-bucket node each fit in a single word.
package polynesia_pkg;

  localparam int unsigned ADDR_W   = 32;   // word address
  localparam int unsigned DATA_W   = 128;  // one memory word, 16 bytes
  localparam int unsigned COMMIT_W = 32;
  localparam int unsigned VAL_W    = 32;
  localparam int unsigned COLID_W  = 16;
  localparam int unsigned ROW_W    = 32;
  localparam int unsigned KEY_W    = COLID_W + ROW_W;
  localparam int unsigned ID_W     = 4;    // copy-unit requester ID

  typedef enum logic [1:0] {
    UPD_INSERT = 2'd0,
    UPD_DELETE = 2'd1,
    UPD_MODIFY = 2'd2
  } upd_type_e;

  // One entry of a per-thread update log and of the final log (114 bits).
  typedef struct packed {
    logic [COMMIT_W-1:0] commit_id;
    upd_type_e           typ;
    logic [VAL_W-1:0]    data;
    logic [COLID_W-1:0]  col;
    logic [ROW_W-1:0]    row;
  } log_entry_t;

  // One node of a bucket's linked list in the (column,row) hash index (113 bits).
  // 'target' is the base address of the column buffer of the node's column.
  // A 'next' of zero ends the list.
  typedef struct packed {
    logic                valid;
    logic [COLID_W-1:0]  col;
    logic [ROW_W-1:0]    row;
    logic [ADDR_W-1:0]   target;
    logic [ADDR_W-1:0]   next;
  } hash_node_t;

  typedef enum logic [1:0] {
    CP_READ  = 2'd0,  // read one word, data returned to the requester
    CP_WRITE = 2'd1,  // write one word
    CP_COPY  = 2'd2   // copy 'len' words from 'src' to 'dst', completion returned
  } copy_op_e;

  typedef struct packed {
    copy_op_e           op;
    logic [ID_W-1:0]    id;
    logic [ADDR_W-1:0]  src;
    logic [ADDR_W-1:0]  dst;
    logic [ADDR_W-1:0]  len;
    logic [DATA_W-1:0]  wdata;
  } copy_cmd_t;

  typedef struct packed {
    logic [ID_W-1:0]    id;
    logic [DATA_W-1:0]  data;
  } copy_rsp_t;

  function automatic logic [KEY_W-1:0] entry_key(log_entry_t e);
    return {e.col, e.row};
  endfunction

endpackage

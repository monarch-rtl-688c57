// monarch_pkg: types and constants shared by the Monarch RTL.
//
// Geometry: a XAM subarray is 64 rows x 64 columns; a set is 8 subarrays, so
// a 64-byte block is eight 64-bit words, one per subarray (a row of each
// subarray in RowIn mode, a column of each subarray in ColumnIn mode); a
// superset is an 8x8 grid of subarrays holding 8 diagonal sets (512 blocks,
// 32 KB). The interface timing defaults are the CPU-cycle numbers of the
// resistive stack configuration. Field widths of the command bundle are
// sized for 64 banks and 256 supersets per bank; smaller configurations use
// the low bits.
package monarch_pkg;

  // ---------------- array / superset geometry ----------------
  localparam int unsigned XAM_ROWS   = 64;  // rows per subarray
  localparam int unsigned XAM_COLS   = 64;  // columns per subarray
  localparam int unsigned SET_ARRAYS = 8;   // subarrays per set (= grid width)
  localparam int unsigned SS_SETS    = 8;   // sets per superset (= grid height)
  localparam int unsigned WORD_W     = 64;  // one subarray row or column
  localparam int unsigned BLOCK_W    = SET_ARRAYS * WORD_W;       // 512-bit block
  localparam int unsigned SET_BLOCKS = XAM_COLS * SET_ARRAYS;     // 512 columns per set

  localparam int unsigned BANK_W = 6;       // bank field of the command bundle
  localparam int unsigned SS_W   = 8;       // superset field
  localparam int unsigned SET_W  = 3;       // set inside a superset
  localparam int unsigned IDX_W  = 6;       // row or column inside a subarray
  localparam int unsigned MIDX_W = 9;       // column index inside a set (0..511)

  // ---------------- physical address ----------------
  localparam int unsigned PA_W     = 35;    // 32 GB off-chip memory
  localparam int unsigned BOFF_W   = 6;     // byte inside a 64 B block
  localparam int unsigned VAULT_W  = 3;     // 8 vaults
  localparam int unsigned UTAG_W   = PA_W - BOFF_W - SS_W - VAULT_W; // 18 address-tag bits
  localparam int unsigned TAG_W    = 32;    // stored tag word: {dirty, valid, 30-bit tag}
  localparam int unsigned TAG_ADDR_W = 30;
  localparam int unsigned TAG_VALID_BIT = 30;
  localparam int unsigned TAG_DIRTY_BIT = 31;

  // ---------------- interface timing (CPU cycles) ----------------
  localparam int unsigned T_RP    = 8;
  localparam int unsigned T_RCD   = 4;
  localparam int unsigned T_RAS   = 4;
  localparam int unsigned T_CAS   = 4;
  localparam int unsigned T_CWD   = 4;
  localparam int unsigned T_CCD_R = 1;
  localparam int unsigned T_WRITE = 162;    // two-step resistive write (tWR)
  localparam int unsigned T_RTP   = 1;
  localparam int unsigned T_RRD   = 1;
  localparam int unsigned T_BL    = 4;

  // ---------------- stack commands ----------------
  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_PREPARE  = 3'd1,   // toggle the bank between RAM and CAM sensing
    CMD_ACTIVATE = 3'd2,   // toggle the superset port between RowIn and ColumnIn
    CMD_READ     = 3'd3,   // row read (RAM bank) or search (CAM bank)
    CMD_WRITE    = 3'd4    // block write, or key/mask buffer write
  } cmd_e;

  typedef struct packed {
    cmd_e                 cmd;
    logic [BANK_W-1:0]    bank;
    logic [SS_W-1:0]      ss;
    logic [SET_W-1:0]     set;
    logic [IDX_W-1:0]     idx;       // row (RowIn) or column (ColumnIn); LSB picks key/mask
    logic                 use_mask;  // ColumnIn write limited to the rows set in the mask buffer
  } stack_cmd_t;

  // ---------------- vault modes and requests ----------------
  typedef enum logic [1:0] {
    VM_FLAT_RAM = 2'd0,
    VM_FLAT_CAM = 2'd1,
    VM_CACHE    = 2'd2
  } vault_mode_e;

  typedef enum logic [2:0] {
    OP_READ    = 3'd0,   // data read (flat) or L3 miss fill (cache)
    OP_WRITE   = 3'd1,   // data write (flat modes)
    OP_KEY_WR  = 3'd2,   // write to the key pointer (flat-CAM)
    OP_MASK_WR = 3'd3,   // write to the mask pointer (flat-CAM)
    OP_SEARCH  = 3'd4,   // read of the match pointer (flat-CAM)
    OP_EVICT   = 3'd5    // L3 eviction carrying its D and R flags (cache)
  } req_op_e;

  typedef struct packed {
    req_op_e             op;
    logic [PA_W-1:0]     addr;
    logic [BLOCK_W-1:0]  wdata;
    logic                dirty;   // L3 D flag (OP_EVICT)
    logic                rd;      // L3 R flag (OP_EVICT)
  } mreq_t;

  typedef struct packed {
    logic [BLOCK_W-1:0]  rdata;
    logic                hit;          // cache: served by Monarch
    logic                match_valid;  // flat-CAM: match register not NULL
    logic [MIDX_W-1:0]   match_idx;
  } mresp_t;

  // one-cycle event pulses, used for observation and statistics
  typedef struct packed {
    logic prepare;
    logic activate;
    logic search;
    logic match_reuse;   // search answered from the match register
    logic keymask_xfer;  // key or mask block sent to a superset
    logic hit;
    logic miss;
    logic install;
    logic skip;          // eviction with D=0,R=0 dropped
    logic forward;       // write sent to main memory instead of the XAM arrays
    logic mww_block;     // write held back or redirected by t_MWW
    logic rotate;        // wear-leveling rotation finished
    logic flush_wb;      // dirty block written back during a rotation
  } ctrl_events_t;

  // index of the first set bit at or after position 'start' (wrapping); found=0 if none
  function automatic logic [MIDX_W:0] first_one_from(input logic [SET_BLOCKS-1:0] v,
                                                      input logic [MIDX_W-1:0] start);
    logic [MIDX_W:0] res;
    logic [MIDX_W-1:0] p;
    res = '0;
    for (int k = SET_BLOCKS - 1; k >= 0; k--) begin
      p = start + MIDX_W'(k);
      if (v[p]) res = {1'b1, p};
    end
    return res;
  endfunction

  // position of the most significant set bit, plus one (0 for zero)
  function automatic logic [5:0] msb_pos1(input logic [31:0] v);
    logic [5:0] r;
    r = '0;
    for (int k = 0; k < 32; k++) if (v[k]) r = 6'(k + 1);
    return r;
  endfunction

endpackage

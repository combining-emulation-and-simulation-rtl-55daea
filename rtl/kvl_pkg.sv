// kvl_pkg: types and constants shared by the key/value lookup accelerator.
//
// The accelerator works on 8-byte keys and 8-byte values held in 16-byte hash
// table entries (key in the low half, value in the high half). Its data path is
// 128 bits wide, so one hash table entry moves in one beat, and memory is read
// in packets of at most 128 bytes. Key and packet sizes follow the paper; the
// value size, entry layout, address width and tag layout are this design's own.
package kvl_pkg;

  localparam int unsigned ADDR_W      = 34;   // byte address into memory
  localparam int unsigned DATA_W      = 128;  // memory / data path beat
  localparam int unsigned BEAT_BYTES  = DATA_W / 8;
  localparam int unsigned KEY_W       = 64;
  localparam int unsigned VAL_W       = 64;
  localparam int unsigned ENTRY_BYTES = 16;   // one hash table entry = one beat
  localparam int unsigned PKT_BYTES   = 128;  // largest memory packet
  localparam int unsigned PKT_BEATS   = PKT_BYTES / BEAT_BYTES;
  localparam int unsigned IDX_W       = 32;   // hash table index
  localparam int unsigned LEN_W       = 32;   // byte length of an LSU command
  localparam int unsigned TAG_W       = 16;   // [7:0] LSU slot, [15:8] source port

  // Memory read request: one packet, never crossing a PKT_BYTES boundary.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [7:0]        nbytes;  // multiple of BEAT_BYTES, 16..128
    logic [TAG_W-1:0]  tag;
  } mem_req_t;

  // Memory read response: one beat of a packet.
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [TAG_W-1:0]  tag;
    logic              last;
  } mem_resp_t;

  // Addressing modes of a load/store unit control stream.
  typedef enum logic [1:0] {
    LSU_SEQ     = 2'd0,  // one contiguous block
    LSU_STRIDED = 2'd1,  // COUNT elements of ELEM_BYTES, STRIDE bytes apart
    LSU_RANDOM  = 2'd2   // one probe sequence per index from the index stream
  } lsu_mode_e;

  typedef struct packed {
    lsu_mode_e         mode;
    logic [ADDR_W-1:0] base;       // block / first element / table base
    logic [LEN_W-1:0]  nbytes;     // SEQ: block length in bytes (beat multiple)
    logic [LEN_W-1:0]  elem_bytes; // STRIDED: element length (beat multiple)
    logic [ADDR_W-1:0] stride;     // STRIDED: distance between elements
    logic [LEN_W-1:0]  count;      // STRIDED: elements; RANDOM: indices
    logic [4:0]        tbl_log2;   // RANDOM: log2 of table entries
    logic [7:0]        psl;        // RANDOM: probe sequence length (entries)
  } lsu_rd_cfg_t;

  typedef struct packed {
    logic [15:0] base;    // first scratchpad word
    logic [15:0] stride;  // words between values
    logic [31:0] count;   // number of values
  } lsu_wr_cfg_t;

  localparam logic [VAL_W-1:0] KEY_NOT_FOUND = '1;

  // 64-bit finaliser of MurmurHash3 (fmix64): the key hash of this design.
  function automatic logic [63:0] fmix64(input logic [63:0] k);
    logic [63:0] h;
    h = k ^ (k >> 33);
    h = h * 64'hff51afd7ed558ccd;
    h = h ^ (h >> 33);
    h = h * 64'hc4ceb9fe1a85ec53;
    h = h ^ (h >> 33);
    return h;
  endfunction

  // CPU register map (64-bit word registers).
  localparam logic [3:0] REG_KEY_BASE = 4'd0;  // byte address of the key batch
  localparam logic [3:0] REG_NUM_KEYS = 4'd1;  // keys in the batch
  localparam logic [3:0] REG_TBL_BASE = 4'd2;  // byte address of the hash table
  localparam logic [3:0] REG_TBL_LOG2 = 4'd3;  // log2 of table entries
  localparam logic [3:0] REG_PSL      = 4'd4;  // probe sequence length
  localparam logic [3:0] REG_VAL_BASE = 4'd5;  // first scratchpad word for values
  localparam logic [3:0] REG_CTRL     = 4'd6;  // write bit 0 = start
  localparam logic [3:0] REG_STATUS   = 4'd7;  // [0] busy, [1] done
  localparam logic [3:0] REG_CYCLES   = 4'd8;  // cycles of the last batch

endpackage

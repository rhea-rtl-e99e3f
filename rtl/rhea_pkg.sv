// rhea_pkg: types and constants shared by the MSI cache-coherent memory subsystem.
//
// The subsystem connects N private L1 caches to one AXI/ACE coherent interconnect that owns
// a directory and a memory controller. Everything that crosses a module boundary is defined
// here: the MSI line states, the AXI request opcodes (read-clean, read-unique, evict,
// write-back), the ACE snoop opcodes, one packed struct per AXI/ACE channel and the two
// per-cache bundles (cache_req_t from a cache to the interconnect, cache_rsp_t back).
//
// Following the paper: 1 GB main memory (30-bit byte addresses), 32-bit AXI/ACE data bus,
// MSI protocol, AW/W/AR/B/R AXI channels and AC/CR/CD ACE channels.
// Own choices (the paper does not give them): 64-byte cache lines (the gem5 default line
// size), channels carry line addresses instead of byte addresses, a line moves as a burst
// of LINE_BYTES/4 = 16 beats with a `last` flag, and the reduced opcode sets below.
package rhea_pkg;

  localparam int unsigned ADDR_W     = 30;               // byte address, 1 GB main memory
  localparam int unsigned DATA_W     = 32;               // AXI/ACE data bus width
  localparam int unsigned STRB_W     = DATA_W / 8;
  localparam int unsigned LINE_BYTES = 64;               // cache line size
  localparam int unsigned LINE_W     = LINE_BYTES * 8;
  localparam int unsigned BEATS      = LINE_BYTES / STRB_W;  // beats per line burst
  localparam int unsigned BEAT_W     = $clog2(BEATS);
  localparam int unsigned OFFSET_W   = $clog2(LINE_BYTES);
  localparam int unsigned LADDR_W    = ADDR_W - OFFSET_W;    // line address width
  localparam int unsigned WORD_AW    = ADDR_W - $clog2(STRB_W);  // word address width

  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [DATA_W-1:0]  word_t;

  // MSI stable states, used both in the L1 tag array and in the directory.
  typedef enum logic [1:0] {
    ST_I = 2'd0,
    ST_S = 2'd1,
    ST_M = 2'd2
  } msi_e;

  // AR channel requests.
  typedef enum logic {
    AR_READ_CLEAN  = 1'b0,   // load miss: obtain a shared copy
    AR_READ_UNIQUE = 1'b1    // store miss or upgrade: obtain the only copy
  } ar_op_e;

  // AW channel requests.
  typedef enum logic {
    AW_EVICT     = 1'b0,     // drop a clean (S) line, no W data
    AW_WRITEBACK = 1'b1      // write back a dirty (M) line, BEATS W beats follow
  } aw_op_e;

  // AC channel snoops.
  typedef enum logic [1:0] {
    SNP_READ_SHARED  = 2'd0, // supply dirty data, M -> S
    SNP_READ_UNIQUE  = 2'd1, // supply dirty data, -> I
    SNP_MAKE_INVALID = 2'd2  // -> I (dirty data, if any, is still returned)
  } snp_e;

  typedef struct packed {
    laddr_t addr;
    ar_op_e op;
  } ar_chan_t;

  typedef struct packed {
    laddr_t addr;
    aw_op_e op;
  } aw_chan_t;

  // W, R and CD beats.
  typedef struct packed {
    word_t data;
    logic  last;
  } data_chan_t;

  typedef struct packed {
    laddr_t addr;
    snp_e   snoop;
  } ac_chan_t;

  typedef struct packed {
    logic data_transfer;     // a CD burst of BEATS beats follows
    logic was_present;       // the snooped cache held the line
  } cr_chan_t;

  // Everything one L1 controller drives towards the interconnect.
  typedef struct packed {
    logic       aw_valid;
    aw_chan_t   aw;
    logic       w_valid;
    data_chan_t w;
    logic       ar_valid;
    ar_chan_t   ar;
    logic       cr_valid;
    cr_chan_t   cr;
    logic       cd_valid;
    data_chan_t cd;
    logic       b_ready;
    logic       r_ready;
    logic       ac_ready;
  } cache_req_t;

  // Everything the interconnect drives towards one L1 controller.
  typedef struct packed {
    logic       aw_ready;
    logic       w_ready;
    logic       ar_ready;
    logic       cr_ready;
    logic       cd_ready;
    logic       b_valid;
    logic       r_valid;
    data_chan_t r;
    logic       ac_valid;
    ac_chan_t   ac;
  } cache_rsp_t;

  // Word lane `beat` of a line.
  function automatic word_t line_word(line_t l, logic [BEAT_W-1:0] beat);
    return l[beat*DATA_W +: DATA_W];
  endfunction

endpackage

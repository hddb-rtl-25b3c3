// hddb_pkg: types, constants and helper functions shared by the HDDB in-storage
// search accelerator.
//
// The accelerator stores hyperdimensional (HD) encodings of SQL table cells in
// triple-level-cell (TLC) ferroelectric NAND. Three HV bits are packed into one
// cell with a Gray code, and a query HV is compared against stored HVs eight
// cells at a time with dual boundary approximate matching (DBAM). Numbers that
// come from the paper: K = 8 cells per DBAM group, 3 bits per cell, 7-bit bin
// indices over 4 encoding levels with 100 bins per level, 64-bit NSP I/O. The
// on-network flit format, command encodings and query-configuration layout are
// this design's own choices.
package hddb_pkg;

  // ---------------------------------------------------------------- array
  localparam int unsigned CELL_BITS  = 3;                  // TLC: 3 bits / cell
  localparam int unsigned DBAM_K     = 8;                  // WLs activated per DBAM sense
  localparam int unsigned GROUP_BITS = CELL_BITS * DBAM_K; // HV bits per DBAM group
  localparam int unsigned IO_W       = 64;                 // NSP <-> array I/O width

  // ---------------------------------------------------------------- NSP
  localparam int unsigned SCORE_W    = 16;  // per-row similarity score width
  localparam int unsigned BIN_IDX_W  = 7;   // bin index width (100 bins need 7 bits)
  localparam int unsigned NUM_LEVELS = 4;   // recursive numeric encoding levels
  localparam int unsigned ROW_W      = 16;  // row (bit line) index width inside a core
  localparam int unsigned PAGE_W     = 15;  // WL page address width (128 blocks x 128 WLs)

  // ---------------------------------------------------------------- network
  localparam int unsigned NODE_W     = 5;
  localparam logic [NODE_W-1:0] HOST_ID  = 5'd31;  // the host, above the root
  localparam logic [NODE_W-1:0] BCAST_ID = 5'd30;  // every core

  typedef enum logic [3:0] {
    FK_CFG0      = 4'd0,   // ETC: predicate configuration word 0
    FK_CFG1      = 4'd1,   // ETC: predicate configuration word 1
    FK_QGROUP    = 4'd2,   // ETC: one 24-bit query group into the query buffer
    FK_KEY       = 4'd3,   // ETC: one 42-bit word of the unbinding key HV
    FK_START     = 4'd4,   // ETC/LUD: start the query
    FK_PROG      = 4'd5,   // any core: program one TLC cell (offline load)
    FK_ERASE     = 4'd6,   // any core: erase one block (offline load)
    FK_LCFG      = 4'd7,   // LUD: dictionary/aggregation configuration
    FK_HV_ROW    = 4'd8,   // ETC->LUD: header of one unbound HV (row id)
    FK_HV_WORD   = 4'd9,   // ETC->LUD: one 42-bit word of an unbound HV
    FK_ETC_DONE  = 4'd10,  // ETC->LUD: this ETC core has finished
    FK_RES_ROW   = 4'd11,  // LUD->host: one decoded (row, key) result
    FK_RES_AGG   = 4'd12,  // LUD->host: aggregate result
    FK_RES_DONE  = 4'd13   // LUD->host: end of results
  } flit_kind_e;

  typedef struct packed {
    logic [NODE_W-1:0] dst;
    logic [NODE_W-1:0] src;
    flit_kind_e        kind;
    logic              last;   // last flit of a packet (single flits: 1)
    logic [IO_W-1:0]   data;
  } flit_t;

  // ---------------------------------------------------------------- predicates
  typedef enum logic [2:0] {
    CMP_EQ = 3'd0, CMP_NE = 3'd1, CMP_LT = 3'd2,
    CMP_LE = 3'd3, CMP_GT = 3'd4, CMP_GE = 3'd5
  } cmp_op_e;

  typedef enum logic [2:0] {
    AGG_NONE = 3'd0,  // pure filter: return decoded rows
    AGG_COUNT = 3'd1, AGG_SUM = 3'd2, AGG_AVG = 3'd3, AGG_MIN = 3'd4, AGG_MAX = 3'd5
  } agg_op_e;

  // FK_CFG0 payload: how the predicate column is searched.
  typedef struct packed {
    logic                 is_numeric;  // 1: numeric (bin recall + compare), 0: string
    cmp_op_e              cmp_op;      // numeric comparison (string: always equality)
    logic [PAGE_W-1:0]    col_page;    // first WL page of the predicate column's HV
    logic [11:0]          groups;      // DBAM groups per HV (string) or per level (numeric)
    logic [SCORE_W-1:0]   threshold;   // string match: score >= threshold
    logic [BIN_IDX_W-1:0] num_bins;    // bins per numeric level (paper: 100)
    logic [9:0]           rsvd;
  } cfg0_t;

  // FK_CFG1 payload: numeric query indices and what to decode.
  typedef struct packed {
    logic [NUM_LEVELS-1:0][BIN_IDX_W-1:0] qidx;  // query bin index per level, [0] coarsest
    logic [PAGE_W-1:0]    proj_page;   // first WL page of the projected column's HV
    logic [11:0]          proj_words;  // projected HV length in 42-bit words (14 cells each)
    logic [NODE_W-1:0]    lud_dst;     // LU dictionary core that decodes the results
    logic                 decode;      // 1: forward selected HVs for decoding
    logic [2:0]           rsvd;
  } cfg1_t;

  // FK_LCFG payload: LU dictionary search and aggregation.
  typedef struct packed {
    logic [PAGE_W-1:0]    dict_page;   // first WL page of the dictionary HVs
    logic [11:0]          dict_groups; // DBAM groups per dictionary HV
    logic [ROW_W-1:0]     dict_entries;// number of dictionary entries (one per bit line)
    agg_op_e              agg_op;
    logic [NODE_W-1:0]    n_etc;       // number of ETC cores that will report
    logic [12:0]          rsvd;
  } lcfg_t;

  // ---------------------------------------------------------------- Gray code
  // Three HV bits <-> one of 8 TLC levels. Adjacent levels differ in one bit,
  // so a one-level threshold-voltage shift flips at most one HV bit.
  function automatic logic [2:0] gray_level_to_bits(input logic [2:0] level);
    return level ^ (level >> 1);
  endfunction

  function automatic logic [2:0] gray_bits_to_level(input logic [2:0] bits);
    logic [2:0] l;
    l[2] = bits[2];
    l[1] = bits[1] ^ l[2];
    l[0] = bits[0] ^ l[1];
    return l;
  endfunction

endpackage

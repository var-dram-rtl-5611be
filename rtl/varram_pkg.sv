// varram_pkg: types and constants shared by the VAR-DRAM controller blocks.
//
// The DRAM geometry follows the functional diagram of the design: four ranks
// of one chip each, eight power-gated banks per chip, and 32,768 rows per
// bank.  A column is one 64-bit bus word; 1,024 columns per row make a 2 GB
// rank (8 banks x 32 K rows x 1 K columns x 8 B), matching the 2 GB rank size
// of the evaluated system.  The column width is this design's choice.
//
// A word address is {rank, bank, row, col} (30 bits).  The hardware trie keys
// on that address zero-extended to 32 bits: four 8-bit symbols, most
// significant first, so rank and bank select the first symbol.
//
// FLAG is the two-bit remapping state: 00 no translation, 01 migration in
// progress, 10 victim banks remapped (powered down).  Its MSB selects the
// translated path in the address decoder's DEMUX and MUX.
//
// Lint note: rb_of reads only the rank and bank fields of its argument and
// addr_of_key drops the two zero-extension bits of a key; the unused bits
// are intended.  A module that uses only part of the package sees the other
// constants as unused.
package varram_pkg;

  localparam int unsigned RANKS  = 4;
  localparam int unsigned BANKS  = 8;
  localparam int unsigned RANK_W = $clog2(RANKS);
  localparam int unsigned BANK_W = $clog2(BANKS);
  localparam int unsigned ROW_W  = 15;
  localparam int unsigned COL_W  = 10;
  localparam int unsigned NBANKS = RANKS * BANKS;       // banks in the device
  localparam int unsigned RB_W   = RANK_W + BANK_W;     // flat bank index width
  localparam int unsigned ADDR_W = RB_W + ROW_W + COL_W;
  localparam int unsigned DATA_W = 64;

  // Trie geometry: 4 levels of 8-bit symbols.
  localparam int unsigned STRIDE = 8;
  localparam int unsigned LEVELS = 4;
  localparam int unsigned KEY_W  = STRIDE * LEVELS;

  typedef struct packed {
    logic [RANK_W-1:0] rank;
    logic [BANK_W-1:0] bank;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
  } dram_addr_t;

  // Row and column part of an address: the value the primary trie returns.
  typedef struct packed {
    logic [ROW_W-1:0] row;
    logic [COL_W-1:0] col;
  } rowcol_t;

  typedef enum logic [1:0] {
    FLAG_NONE    = 2'b00,
    FLAG_MIGRATE = 2'b01,
    FLAG_REMAP   = 2'b10
  } flag_t;

  // One entry of the variation matrix V.
  typedef struct packed {
    logic              victim;
    logic [RANK_W-1:0] tgt_rank;
    logic [BANK_W-1:0] tgt_bank;
  } vm_entry_t;

  typedef enum logic [2:0] {
    CMD_NOP  = 3'd0,
    CMD_ACT  = 3'd1,
    CMD_RD   = 3'd2,
    CMD_WR   = 3'd3,
    CMD_PRE  = 3'd4,
    CMD_COPY = 3'd5   // RowClone PSM copy of one column word between banks
  } dram_cmd_e;

  function automatic logic [RB_W-1:0] rb_of(dram_addr_t a);
    return {a.rank, a.bank};
  endfunction

  function automatic logic [KEY_W-1:0] key_of(dram_addr_t a);
    return KEY_W'(a);
  endfunction

  function automatic dram_addr_t addr_of_key(logic [KEY_W-1:0] k);
    return dram_addr_t'(k[ADDR_W-1:0]);
  endfunction

endpackage

// rainbow_pkg: system-wide constants and types of the Rainbow coherence engine.
//
// The system is a multi-chip server: N_CHIPS chips, each with CORES_PER_CHIP
// cores (private L1/L2), a shared LLC split into N_BANKS banks with one D|F-LLC
// controller per bank, and one memory controller with its D|F-MEM controller.
// Block addresses are 64-byte line addresses of a 4 GB physical space, so
// ADDR_W = 32 - 6 = 26 bits.
//
// Colored tokens (one gold, one silver per chip, one bronze per core) are
// carried as counts in tokens_t. Chip count, core count, bank count, block
// size and memory size follow the dual-chip system the results are given for;
// the encodings of messages and the address mapping (bank = low bits, home
// chip = high bits) are this design's own choices.
package rainbow_pkg;

  localparam int N_CHIPS        = 2;
  localparam int CORES_PER_CHIP = 4;
  localparam int N_BANKS        = 4;
  localparam int N_CORES        = N_CHIPS * CORES_PER_CHIP;
  localparam int ADDR_W         = 26;

  localparam int CHIP_W = (N_CHIPS > 1) ? $clog2(N_CHIPS) : 1;
  localparam int CORE_W = $clog2(CORES_PER_CHIP);
  localparam int BANK_W = $clog2(N_BANKS);
  localparam int SIL_W  = $clog2(N_CHIPS + 1);
  localparam int BRZ_W  = $clog2(N_CORES + 1);

  typedef logic [ADDR_W-1:0] addr_t;

  typedef struct packed {
    logic             gold;
    logic [SIL_W-1:0] silver;
    logic [BRZ_W-1:0] bronze;
  } tokens_t;

  localparam tokens_t TOK_NONE = '{gold: 1'b0, silver: '0, bronze: '0};
  localparam tokens_t TOK_ALL  = '{gold: 1'b1, silver: SIL_W'(N_CHIPS),
                                   bronze: BRZ_W'(N_CORES)};

  // Requests arriving at a D|F-LLC controller from its own chip.
  typedef enum logic [1:0] {
    LREQ_RD        = 2'd0,  // read miss in the private caches
    LREQ_WR        = 2'd1,  // write miss / upgrade in the private caches
    LREQ_PRIV_EVICT= 2'd2,  // a private cache dropped its copy (tokens go to LLC)
    LREQ_LLC_EVICT = 2'd3   // the LLC bank wants to evict a line
  } lreq_e;

  // Requests from a D|F-LLC controller to the home D|F-MEM controller.
  typedef enum logic [1:0] {
    HREQ_RD    = 2'd0,
    HREQ_WR    = 2'd1,
    HREQ_EVICT = 2'd2
  } hreq_e;

  // Snoop kinds, used both towards private caches and towards chips.
  typedef enum logic [1:0] {
    SNP_RD_LOCAL  = 2'd0,  // silver holder sends data + one bronze token
    SNP_RD_REMOTE = 2'd1,  // gold holder sends one silver + a chip's bronze tokens
    SNP_COLLECT   = 2'd2   // everybody sends every token and invalidates
  } snp_e;

  // Kind of request a token holder answers (input of token_grant).
  typedef enum logic [1:0] {
    GR_RD_LOCAL  = 2'd0,
    GR_RD_REMOTE = 2'd1,
    GR_ALL       = 2'd2
  } grant_e;

  // Who supplied the tokens of a completed local request.
  typedef enum logic [1:0] {
    SRC_LLC  = 2'd0,
    SRC_CORE = 2'd1,
    SRC_HOME = 2'd2,
    SRC_NONE = 2'd3
  } src_e;

  // Directory operations.
  typedef enum logic [2:0] {
    DOP_LOOKUP = 3'd0,
    DOP_WRITE  = 3'd1,  // set sharers and owner, allocate on miss
    DOP_ADD    = 3'd2,  // sharers |= mask, allocate on miss
    DOP_REMOVE = 3'd3,  // sharers &= ~mask, free the entry when empty
    DOP_INVAL  = 3'd4
  } dop_e;

  // Filter operations.
  typedef enum logic [1:0] {
    FOP_QUERY  = 2'd0,
    FOP_INSERT = 2'd1,
    FOP_DELETE = 2'd2
  } fop_e;

  // One-cycle event pulses of a D|F-LLC controller (for observation).
  typedef struct packed {
    logic dllc_hit;     // request served through the D-LLC sharer vector
    logic llc_hit;      // request served by the LLC bank itself
    logic fllc_bcast;   // F-LLC hit: broadcast to the cores of the chip
    logic recon;        // D-LLC entry rebuilt from broadcast replies
    logic false_pos;    // F-LLC broadcast found no token
    logic to_home;      // request forwarded to the home D|F-MEM
    logic dir_evict;    // silent D-LLC eviction
    logic ext_snoop;    // snoop from a home D|F-MEM served
  } llc_ev_t;

  // One-cycle event pulses of a D|F-MEM controller.
  typedef struct packed {
    logic dmem_hit;     // D-MEM hit: unicast / multicast to chips
    logic fmem_bcast;   // F-MEM hit: broadcast to all chips
    logic recon;        // D-MEM entry rebuilt from broadcast replies
    logic false_pos;    // F-MEM broadcast found no token
    logic mem_read;     // block served from DRAM with all tokens
    logic dir_evict;    // silent D-MEM eviction
    logic evict_clean;  // LLC eviction returned all gold+silver tokens
    logic evict_inval;  // LLC eviction needed a system-wide invalidation
  } mem_ev_t;

  function automatic tokens_t tok_add(tokens_t a, tokens_t b);
    tokens_t r;
    r.gold   = a.gold | b.gold;
    r.silver = a.silver + b.silver;
    r.bronze = a.bronze + b.bronze;
    return r;
  endfunction

  function automatic logic tok_any(tokens_t a);
    return a.gold | (a.silver != '0) | (a.bronze != '0);
  endfunction

  function automatic logic tok_is_all(tokens_t a);
    return a == TOK_ALL;
  endfunction

  function automatic logic [BANK_W-1:0] bank_of(addr_t a);
    return a[BANK_W-1:0];
  endfunction

  function automatic logic [CHIP_W-1:0] home_of(addr_t a);
    return a[ADDR_W-1 -: CHIP_W];
  endfunction

endpackage

// rainbow_top: the coherence fabric of a Rainbow multi-chip server.
//
// N_CHIPS chips, each with N_BANKS LLC banks (one dfllc_ctrl each, holding a
// D-LLC and an F-LLC) and one memory controller (one dfmem_ctrl, holding a
// D-MEM and an F-MEM). Blocks are interleaved over the banks of a chip by their
// low address bits and over the home memory controllers by their high bits.
// This module connects the controllers to one another:
//   - home requests: every bank can send to every home; each home picks one
//     requesting bank per transaction, round robin, and its reply returns to
//     the bank (chip, bank_of(addr)) that sent it;
//   - home snoops: a home snoops, in each target chip, only the bank that owns
//     the address; a bank targeted by several homes takes the lowest-numbered
//     first and returns its reply to the home it accepted.
// Everything the paper takes from the processor (cores and their L1/L2
// caches), the LLC data arrays, the DRAM devices and the on-chip and off-chip
// networks are outside: their connections are the ports of this module,
// indexed [chip][bank] (and [core] for private-cache snoop replies) or [chip]
// for the memory side. Latency through this module is zero cycles; the
// networks' latency belongs to the outside.
//
// The organisation (banks with D|F-LLC, one memory controller per chip with
// D|F-MEM, four cores and four banks per chip, two chips) follows the paper's
// base architecture and its dual-chip evaluation; the structure sizes are its
// 1 MB-per-chip configuration. The arbitration policies are this design's.
//
// Lint note: verilator's SYNCASYNCNET on rst_n stands by design. It is the
// asynchronous reset everywhere; the warning comes from the handshake
// assertions inside the bank and home controllers, which use it in a clocked
// 'disable iff'.
module rainbow_top
  import rainbow_pkg::*;
#(
  parameter int LLC_DIR_ENTRIES = 512,
  parameter int LLC_DIR_WAYS    = 8,
  parameter int LLC_F_BUCKETS   = 512,
  parameter int LLC_F_CELLS     = 4,
  parameter int MEM_DIR_ENTRIES = 4096,
  parameter int MEM_DIR_WAYS    = 8,
  parameter int MEM_F_BUCKETS   = 8192,
  parameter int MEM_F_CELLS     = 8,
  parameter int F_D             = 2,
  parameter int F_FP_W          = 8,
  parameter int F_CNT_W         = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // private-cache requests per bank
  input  logic                      lreq_valid  [N_CHIPS][N_BANKS],
  output logic                      lreq_ready  [N_CHIPS][N_BANKS],
  input  lreq_e                     lreq_type   [N_CHIPS][N_BANKS],
  input  logic [CORE_W-1:0]         lreq_core   [N_CHIPS][N_BANKS],
  input  addr_t                     lreq_addr   [N_CHIPS][N_BANKS],
  input  tokens_t                   lreq_tokens [N_CHIPS][N_BANKS],
  input  logic                      lreq_last   [N_CHIPS][N_BANKS],
  output logic                      lrsp_valid  [N_CHIPS][N_BANKS],
  output lreq_e                     lrsp_type   [N_CHIPS][N_BANKS],
  output logic [CORE_W-1:0]         lrsp_core   [N_CHIPS][N_BANKS],
  output addr_t                     lrsp_addr   [N_CHIPS][N_BANKS],
  output tokens_t                   lrsp_tokens [N_CHIPS][N_BANKS],
  output src_e                      lrsp_src    [N_CHIPS][N_BANKS],
  // LLC bank arrays
  output logic                      llc_req_valid   [N_CHIPS][N_BANKS],
  output addr_t                     llc_req_addr    [N_CHIPS][N_BANKS],
  input  logic                      llc_rsp_valid   [N_CHIPS][N_BANKS],
  input  logic                      llc_rsp_hit     [N_CHIPS][N_BANKS],
  input  tokens_t                   llc_rsp_tokens  [N_CHIPS][N_BANKS],
  input  logic                      llc_rsp_only    [N_CHIPS][N_BANKS],
  output logic                      llc_take_valid  [N_CHIPS][N_BANKS],
  output addr_t                     llc_take_addr   [N_CHIPS][N_BANKS],
  output tokens_t                   llc_take_tokens [N_CHIPS][N_BANKS],
  // snoops to private caches
  output logic                      snp_valid      [N_CHIPS][N_BANKS],
  output logic [CORES_PER_CHIP-1:0] snp_mask       [N_CHIPS][N_BANKS],
  output snp_e                      snp_kind       [N_CHIPS][N_BANKS],
  output addr_t                     snp_addr       [N_CHIPS][N_BANKS],
  input  logic [CORES_PER_CHIP-1:0] snp_rsp_valid  [N_CHIPS][N_BANKS],
  input  tokens_t                   snp_rsp_tokens [N_CHIPS][N_BANKS][CORES_PER_CHIP],
  input  logic [CORES_PER_CHIP-1:0] snp_rsp_has    [N_CHIPS][N_BANKS],
  input  logic [CORES_PER_CHIP-1:0] snp_rsp_silver [N_CHIPS][N_BANKS],
  // DRAM per memory controller
  output logic                      mem_req_valid [N_CHIPS],
  output addr_t                     mem_req_addr  [N_CHIPS],
  input  logic                      mem_rsp_valid [N_CHIPS],
  // observation
  output llc_ev_t                   llc_ev [N_CHIPS][N_BANKS],
  output mem_ev_t                   mem_ev [N_CHIPS],
  output logic                      init_done
);

  localparam int NB   = N_CHIPS * N_BANKS;
  localparam int NB_W = (NB > 1) ? $clog2(NB) : 1;

  // bank side of the fabric
  logic    hreq_valid [N_CHIPS][N_BANKS];
  logic    hreq_ready [N_CHIPS][N_BANKS];
  hreq_e   hreq_type  [N_CHIPS][N_BANKS];
  addr_t   hreq_addr  [N_CHIPS][N_BANKS];
  tokens_t hreq_tokens[N_CHIPS][N_BANKS];
  logic    hrsp_valid [N_CHIPS][N_BANKS];
  tokens_t hrsp_tokens[N_CHIPS][N_BANKS];
  logic    xsnp_valid [N_CHIPS][N_BANKS];
  logic    xsnp_ready [N_CHIPS][N_BANKS];
  snp_e    xsnp_kind  [N_CHIPS][N_BANKS];
  addr_t   xsnp_addr  [N_CHIPS][N_BANKS];
  logic    xrsp_valid [N_CHIPS][N_BANKS];
  tokens_t xrsp_tokens[N_CHIPS][N_BANKS];
  logic    xrsp_has   [N_CHIPS][N_BANKS];
  logic [CHIP_W-1:0] xsrc [N_CHIPS][N_BANKS];   // home whose snoop a bank serves
  logic [NB-1:0]     bank_init;

  // home side of the fabric
  logic               m_req_valid [N_CHIPS];
  logic               m_req_ready [N_CHIPS];
  hreq_e              m_req_type  [N_CHIPS];
  logic [CHIP_W-1:0]  m_req_chip  [N_CHIPS];
  addr_t              m_req_addr  [N_CHIPS];
  tokens_t            m_req_tokens[N_CHIPS];
  logic               m_rsp_valid [N_CHIPS];
  logic [CHIP_W-1:0]  m_rsp_chip  [N_CHIPS];
  addr_t              m_rsp_addr  [N_CHIPS];
  tokens_t            m_rsp_tokens[N_CHIPS];
  logic [N_CHIPS-1:0] m_xs_valid  [N_CHIPS];
  logic [N_CHIPS-1:0] m_xs_ready  [N_CHIPS];
  snp_e               m_xs_kind   [N_CHIPS];
  addr_t              m_xs_addr   [N_CHIPS];
  logic [N_CHIPS-1:0] m_xr_valid  [N_CHIPS];
  tokens_t            m_xr_tokens [N_CHIPS][N_CHIPS];
  logic [N_CHIPS-1:0] m_xr_has    [N_CHIPS];
  logic [N_CHIPS-1:0] mc_init;
  logic [NB_W-1:0]    rr   [N_CHIPS];
  logic [NB_W-1:0]    gsel [N_CHIPS];

  assign init_done = (&bank_init) & (&mc_init);

  // ---------------- controllers ----------------
  for (genvar c = 0; c < N_CHIPS; c++) begin : g_chip
    for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
      dfllc_ctrl #(
        .DIR_ENTRIES(LLC_DIR_ENTRIES), .DIR_WAYS(LLC_DIR_WAYS), .F_D(F_D),
        .F_BUCKETS(LLC_F_BUCKETS), .F_CELLS(LLC_F_CELLS), .F_FP_W(F_FP_W), .F_CNT_W(F_CNT_W)
      ) u_llc (
        .clk, .rst_n,
        .lreq_valid(lreq_valid[c][b]), .lreq_ready(lreq_ready[c][b]),
        .lreq_type(lreq_type[c][b]), .lreq_core(lreq_core[c][b]), .lreq_addr(lreq_addr[c][b]),
        .lreq_tokens(lreq_tokens[c][b]), .lreq_last(lreq_last[c][b]),
        .lrsp_valid(lrsp_valid[c][b]), .lrsp_type(lrsp_type[c][b]), .lrsp_core(lrsp_core[c][b]),
        .lrsp_addr(lrsp_addr[c][b]), .lrsp_tokens(lrsp_tokens[c][b]), .lrsp_src(lrsp_src[c][b]),
        .llc_req_valid(llc_req_valid[c][b]), .llc_req_addr(llc_req_addr[c][b]),
        .llc_rsp_valid(llc_rsp_valid[c][b]), .llc_rsp_hit(llc_rsp_hit[c][b]),
        .llc_rsp_tokens(llc_rsp_tokens[c][b]), .llc_rsp_only(llc_rsp_only[c][b]),
        .llc_take_valid(llc_take_valid[c][b]), .llc_take_addr(llc_take_addr[c][b]),
        .llc_take_tokens(llc_take_tokens[c][b]),
        .snp_valid(snp_valid[c][b]), .snp_mask(snp_mask[c][b]), .snp_kind(snp_kind[c][b]),
        .snp_addr(snp_addr[c][b]), .snp_rsp_valid(snp_rsp_valid[c][b]),
        .snp_rsp_tokens(snp_rsp_tokens[c][b]), .snp_rsp_has(snp_rsp_has[c][b]),
        .snp_rsp_silver(snp_rsp_silver[c][b]),
        .hreq_valid(hreq_valid[c][b]), .hreq_ready(hreq_ready[c][b]),
        .hreq_type(hreq_type[c][b]), .hreq_addr(hreq_addr[c][b]),
        .hreq_tokens(hreq_tokens[c][b]),
        .hrsp_valid(hrsp_valid[c][b]), .hrsp_tokens(hrsp_tokens[c][b]),
        .xsnp_valid(xsnp_valid[c][b]), .xsnp_ready(xsnp_ready[c][b]),
        .xsnp_kind(xsnp_kind[c][b]), .xsnp_addr(xsnp_addr[c][b]),
        .xrsp_valid(xrsp_valid[c][b]), .xrsp_tokens(xrsp_tokens[c][b]),
        .xrsp_has(xrsp_has[c][b]),
        .ev(llc_ev[c][b]), .init_done(bank_init[c*N_BANKS+b]));
    end

    dfmem_ctrl #(
      .DIR_ENTRIES(MEM_DIR_ENTRIES), .DIR_WAYS(MEM_DIR_WAYS), .F_D(F_D),
      .F_BUCKETS(MEM_F_BUCKETS), .F_CELLS(MEM_F_CELLS), .F_FP_W(F_FP_W), .F_CNT_W(F_CNT_W)
    ) u_mem (
      .clk, .rst_n,
      .req_valid(m_req_valid[c]), .req_ready(m_req_ready[c]), .req_type(m_req_type[c]),
      .req_chip(m_req_chip[c]), .req_addr(m_req_addr[c]), .req_tokens(m_req_tokens[c]),
      .rsp_valid(m_rsp_valid[c]), .rsp_chip(m_rsp_chip[c]), .rsp_addr(m_rsp_addr[c]),
      .rsp_tokens(m_rsp_tokens[c]),
      .xs_valid(m_xs_valid[c]), .xs_ready(m_xs_ready[c]), .xs_kind(m_xs_kind[c]),
      .xs_addr(m_xs_addr[c]), .xr_valid(m_xr_valid[c]), .xr_tokens(m_xr_tokens[c]),
      .xr_has(m_xr_has[c]),
      .mem_req_valid(mem_req_valid[c]), .mem_req_addr(mem_req_addr[c]),
      .mem_rsp_valid(mem_rsp_valid[c]),
      .ev(mem_ev[c]), .init_done(mc_init[c]));
  end

  // ---------------- home request arbitration (round robin per home) ----------------
  logic [NB-1:0] cand [N_CHIPS];
  always_comb begin
    for (int h = 0; h < N_CHIPS; h++) begin
      for (int s = 0; s < NB; s++)
        cand[h][s] = hreq_valid[s / N_BANKS][s % N_BANKS] &&
                     home_of(hreq_addr[s / N_BANKS][s % N_BANKS]) == CHIP_W'(h);
      // scan from the highest priority down so the first candidate after rr wins
      gsel[h] = '0;
      for (int k = NB - 1; k >= 0; k--)
        if (cand[h][(int'(rr[h]) + k) % NB]) gsel[h] = NB_W'((int'(rr[h]) + k) % NB);
      m_req_valid[h]  = |cand[h];
      m_req_type[h]   = hreq_type  [int'(gsel[h]) / N_BANKS][int'(gsel[h]) % N_BANKS];
      m_req_addr[h]   = hreq_addr  [int'(gsel[h]) / N_BANKS][int'(gsel[h]) % N_BANKS];
      m_req_tokens[h] = hreq_tokens[int'(gsel[h]) / N_BANKS][int'(gsel[h]) % N_BANKS];
      m_req_chip[h]   = CHIP_W'(int'(gsel[h]) / N_BANKS);
    end
    for (int c = 0; c < N_CHIPS; c++)
      for (int b = 0; b < N_BANKS; b++) begin
        hreq_ready[c][b] = 1'b0;
        for (int h = 0; h < N_CHIPS; h++)
          if (m_req_valid[h] && m_req_ready[h] && int'(gsel[h]) == c * N_BANKS + b)
            hreq_ready[c][b] = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int h = 0; h < N_CHIPS; h++) rr[h] <= '0;
    end else begin
      for (int h = 0; h < N_CHIPS; h++)
        if (m_req_valid[h] && m_req_ready[h])
          rr[h] <= (int'(gsel[h]) == NB - 1) ? '0 : NB_W'(int'(gsel[h]) + 1);
    end
  end

  // ---------------- home replies back to the requesting bank ----------------
  always_comb begin
    for (int c = 0; c < N_CHIPS; c++)
      for (int b = 0; b < N_BANKS; b++) begin
        hrsp_valid[c][b]  = 1'b0;
        hrsp_tokens[c][b] = TOK_NONE;
        for (int h = 0; h < N_CHIPS; h++)
          if (m_rsp_valid[h] && m_rsp_chip[h] == CHIP_W'(c) &&
              bank_of(m_rsp_addr[h]) == BANK_W'(b)) begin
            hrsp_valid[c][b]  = 1'b1;
            hrsp_tokens[c][b] = m_rsp_tokens[h];
          end
      end
  end

  // ---------------- home snoops to banks (lowest home first) ----------------
  logic [CHIP_W-1:0] xpick [N_CHIPS][N_BANKS];
  always_comb begin
    for (int c = 0; c < N_CHIPS; c++)
      for (int b = 0; b < N_BANKS; b++) begin
        xsnp_valid[c][b] = 1'b0; xpick[c][b] = '0;
        for (int h = N_CHIPS - 1; h >= 0; h--)
          if (m_xs_valid[h][c] && bank_of(m_xs_addr[h]) == BANK_W'(b)) begin
            xsnp_valid[c][b] = 1'b1; xpick[c][b] = CHIP_W'(h);
          end
        xsnp_kind[c][b] = m_xs_kind[xpick[c][b]];
        xsnp_addr[c][b] = m_xs_addr[xpick[c][b]];
      end
    for (int h = 0; h < N_CHIPS; h++)
      for (int c = 0; c < N_CHIPS; c++) begin
        m_xs_ready[h][c] = 1'b0;
        m_xr_valid[h][c] = 1'b0;
        m_xr_has[h][c]   = 1'b0;
        m_xr_tokens[h][c] = TOK_NONE;
        for (int b = 0; b < N_BANKS; b++) begin
          if (xsnp_valid[c][b] && xsnp_ready[c][b] && xpick[c][b] == CHIP_W'(h) &&
              bank_of(m_xs_addr[h]) == BANK_W'(b))
            m_xs_ready[h][c] = 1'b1;
          if (xrsp_valid[c][b] && xsrc[c][b] == CHIP_W'(h)) begin
            m_xr_valid[h][c]  = 1'b1;
            m_xr_has[h][c]    = xrsp_has[c][b];
            m_xr_tokens[h][c] = xrsp_tokens[c][b];
          end
        end
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CHIPS; c++)
        for (int b = 0; b < N_BANKS; b++) xsrc[c][b] <= '0;
    end else begin
      for (int c = 0; c < N_CHIPS; c++)
        for (int b = 0; b < N_BANKS; b++)
          if (xsnp_valid[c][b] && xsnp_ready[c][b]) xsrc[c][b] <= xpick[c][b];
    end
  end

endmodule

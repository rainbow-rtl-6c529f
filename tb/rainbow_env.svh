// rainbow_env.svh: test environment shared by the system-level test benches.
// Included inside a test-bench module after it defines N_OPS (number of
// random requests per bank thread), MEM_LAT (DRAM cycles), LLC_LAT (LLC bank
// cycles), POOL (addresses per bank) and REQUIRE_ALL (whether every mechanism
// must have been seen).
//
// Models: four private caches per chip (token tables; snoops answered after 2
// cycles by the token_grant rule), one LLC array per bank (token table, lookup
// after LLC_LAT cycles), and one DRAM per home (answers after MEM_LAT cycles
// and holds every token of a block no chip holds). One request thread per
// (chip, bank) issues random reads, writes, upgrades, private evictions and LLC
// evictions; requests to the same block are serialised by the test bench
// (the controllers do not order racing requests to one block), requests to
// different blocks run in parallel. After every request the test bench checks
// that the block's tokens add up to exactly one full set (none created, none
// lost), that a read obtained a token and that a write obtained all of them.

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                      lreq_valid  [N_CHIPS][N_BANKS];
  logic                      lreq_ready  [N_CHIPS][N_BANKS];
  lreq_e                     lreq_type   [N_CHIPS][N_BANKS];
  logic [CORE_W-1:0]         lreq_core   [N_CHIPS][N_BANKS];
  addr_t                     lreq_addr   [N_CHIPS][N_BANKS];
  tokens_t                   lreq_tokens [N_CHIPS][N_BANKS];
  logic                      lreq_last   [N_CHIPS][N_BANKS];
  logic                      lrsp_valid  [N_CHIPS][N_BANKS];
  lreq_e                     lrsp_type   [N_CHIPS][N_BANKS];
  logic [CORE_W-1:0]         lrsp_core   [N_CHIPS][N_BANKS];
  addr_t                     lrsp_addr   [N_CHIPS][N_BANKS];
  tokens_t                   lrsp_tokens [N_CHIPS][N_BANKS];
  src_e                      lrsp_src    [N_CHIPS][N_BANKS];
  logic                      llc_req_valid   [N_CHIPS][N_BANKS];
  addr_t                     llc_req_addr    [N_CHIPS][N_BANKS];
  logic                      llc_rsp_valid   [N_CHIPS][N_BANKS];
  logic                      llc_rsp_hit     [N_CHIPS][N_BANKS];
  tokens_t                   llc_rsp_tokens  [N_CHIPS][N_BANKS];
  logic                      llc_rsp_only    [N_CHIPS][N_BANKS];
  logic                      llc_take_valid  [N_CHIPS][N_BANKS];
  addr_t                     llc_take_addr   [N_CHIPS][N_BANKS];
  tokens_t                   llc_take_tokens [N_CHIPS][N_BANKS];
  logic                      snp_valid      [N_CHIPS][N_BANKS];
  logic [CORES_PER_CHIP-1:0] snp_mask       [N_CHIPS][N_BANKS];
  snp_e                      snp_kind       [N_CHIPS][N_BANKS];
  addr_t                     snp_addr       [N_CHIPS][N_BANKS];
  logic [CORES_PER_CHIP-1:0] snp_rsp_valid  [N_CHIPS][N_BANKS];
  tokens_t                   snp_rsp_tokens [N_CHIPS][N_BANKS][CORES_PER_CHIP];
  logic [CORES_PER_CHIP-1:0] snp_rsp_has    [N_CHIPS][N_BANKS];
  logic [CORES_PER_CHIP-1:0] snp_rsp_silver [N_CHIPS][N_BANKS];
  logic                      mem_req_valid [N_CHIPS];
  addr_t                     mem_req_addr  [N_CHIPS];
  logic                      mem_rsp_valid [N_CHIPS];
  llc_ev_t                   llc_ev [N_CHIPS][N_BANKS];
  mem_ev_t                   mem_ev [N_CHIPS];
  logic                      init_done;

  int checks = 0, failures = 0;
  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // in-flight balance: modular in every colour, so the order in which a
  // departure and an arrival of the same cycle are booked does not matter
  function automatic tokens_t fmod(tokens_t a, tokens_t b, bit sub);
    tokens_t r; r.gold = a.gold ^ b.gold;
    r.silver = sub ? a.silver - b.silver : a.silver + b.silver;
    r.bronze = sub ? a.bronze - b.bronze : a.bronze + b.bronze;
    return r;
  endfunction
  function automatic tokens_t tsub(tokens_t a, tokens_t b);
    tokens_t r; r.gold = a.gold & ~b.gold; r.silver = a.silver - b.silver;
    r.bronze = a.bronze - b.bronze; return r;
  endfunction

  // ---------------- token bookkeeping ----------------
  tokens_t ctok [N_CHIPS][CORES_PER_CHIP][addr_t];
  tokens_t ltok [N_CHIPS][N_BANKS][addr_t];
  tokens_t mtok [addr_t];          // absent entry: memory holds every token
  tokens_t fly  [addr_t];          // tokens travelling inside the controllers
  bit      busy [addr_t];

  function automatic tokens_t cget(int c, int k, addr_t a);
    return ctok[c][k].exists(a) ? ctok[c][k][a] : TOK_NONE;
  endfunction
  function automatic tokens_t lget(int c, int b, addr_t a);
    return ltok[c][b].exists(a) ? ltok[c][b][a] : TOK_NONE;
  endfunction
  function automatic tokens_t mget(addr_t a);
    return mtok.exists(a) ? mtok[a] : TOK_ALL;
  endfunction
  function automatic tokens_t fget(addr_t a);
    return fly.exists(a) ? fly[a] : TOK_NONE;
  endfunction
  function automatic tokens_t total_of(addr_t a);
    tokens_t t; t = tok_add(mget(a), fget(a));
    for (int c = 0; c < N_CHIPS; c++) begin
      for (int k = 0; k < CORES_PER_CHIP; k++) t = tok_add(t, cget(c, k, a));
      t = tok_add(t, lget(c, int'(bank_of(a)), a));
    end
    return t;
  endfunction

  // ---------------- per-bank models ----------------
  for (genvar gc = 0; gc < N_CHIPS; gc++) begin : g_c
    for (genvar gb = 0; gb < N_BANKS; gb++) begin : g_b
      tokens_t rh [CORES_PER_CHIP], rg [CORES_PER_CHIP], rk [CORES_PER_CHIP];
      grant_e  rkind;
      for (genvar k = 0; k < CORES_PER_CHIP; k++) begin : g_rule
        token_grant u (.held(rh[k]), .kind(rkind), .is_llc(1'b0), .give(rg[k]), .keep(rk[k]));
      end
      // LLC bank array
      initial begin
        llc_rsp_valid[gc][gb] = 0; llc_rsp_hit[gc][gb] = 0;
        llc_rsp_tokens[gc][gb] = TOK_NONE; llc_rsp_only[gc][gb] = 0;
        forever begin
          @(posedge clk);
          if (llc_req_valid[gc][gb] && rst_n) begin
            addr_t a; a = llc_req_addr[gc][gb];
            repeat (LLC_LAT - 1) @(posedge clk);
            llc_rsp_valid[gc][gb] <= 1;
            llc_rsp_hit[gc][gb] <= tok_any(lget(gc, gb, a));
            llc_rsp_tokens[gc][gb] <= lget(gc, gb, a);
            llc_rsp_only[gc][gb] <= 1'b1;
            for (int k = 0; k < CORES_PER_CHIP; k++)
              if (tok_any(cget(gc, k, a))) llc_rsp_only[gc][gb] <= 1'b0;
            @(posedge clk);
            llc_rsp_valid[gc][gb] <= 0;
          end
        end
      end
      always @(posedge clk) if (llc_take_valid[gc][gb] && rst_n) begin
        addr_t a; a = llc_take_addr[gc][gb];
        ltok[gc][gb][a] = tsub(lget(gc, gb, a), llc_take_tokens[gc][gb]);
        fly[a] = fmod(fget(a), llc_take_tokens[gc][gb], 1'b0);
      end
      // private caches
      initial begin
        snp_rsp_valid[gc][gb] = '0; snp_rsp_has[gc][gb] = '0; snp_rsp_silver[gc][gb] = '0;
        for (int k = 0; k < CORES_PER_CHIP; k++) snp_rsp_tokens[gc][gb][k] = TOK_NONE;
        forever begin
          @(posedge clk);
          if (snp_valid[gc][gb] && rst_n) begin
            logic [CORES_PER_CHIP-1:0] m; snp_e kd; addr_t a;
            m = snp_mask[gc][gb]; kd = snp_kind[gc][gb]; a = snp_addr[gc][gb];
            @(posedge clk);
            rkind = (kd == SNP_COLLECT) ? GR_ALL : (kd == SNP_RD_REMOTE) ? GR_RD_REMOTE : GR_RD_LOCAL;
            for (int k = 0; k < CORES_PER_CHIP; k++) rh[k] = cget(gc, k, a);
            #1;
            for (int k = 0; k < CORES_PER_CHIP; k++) if (m[k]) begin
              snp_rsp_tokens[gc][gb][k] <= rg[k];
              snp_rsp_has[gc][gb][k] <= tok_any(rk[k]);
              snp_rsp_silver[gc][gb][k] <= rh[k].silver != '0;
              ctok[gc][k][a] = rk[k];
              fly[a] = fmod(fget(a), rg[k], 1'b0);
            end
            snp_rsp_valid[gc][gb] <= m;
            @(posedge clk);
            snp_rsp_valid[gc][gb] <= '0;
          end
        end
      end
    end
    // DRAM of the home on this chip
    initial begin
      mem_rsp_valid[gc] = 0;
      forever begin
        @(posedge clk);
        if (mem_req_valid[gc] && rst_n) begin
          addr_t a; a = mem_req_addr[gc];
          check(tok_is_all(mget(a)), "DRAM read only when memory holds every token");
          fly[a] = fmod(fget(a), mget(a), 1'b0);
          mtok[a] = TOK_NONE;
          n_mem_reads++;
          repeat (MEM_LAT - 1) @(posedge clk);
          mem_rsp_valid[gc] <= 1;
          @(posedge clk);
          mem_rsp_valid[gc] <= 0;
        end
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_dllc_hit, n_llc_hit, n_fllc_bcast, n_lrecon, n_lfp, n_to_home, n_ldev, n_xsnp;
  int n_dmem_hit, n_fmem_bcast, n_mrecon, n_mfp, n_mem_read, n_mdev, n_ev_clean, n_ev_inval;
  int n_mem_reads, n_ops, n_xsnp_waiting;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N_CHIPS; c++) begin
      for (int b = 0; b < N_BANKS; b++) begin
        n_dllc_hit   += int'(llc_ev[c][b].dllc_hit);
        n_llc_hit    += int'(llc_ev[c][b].llc_hit);
        n_fllc_bcast += int'(llc_ev[c][b].fllc_bcast);
        n_lrecon     += int'(llc_ev[c][b].recon);
        n_lfp        += int'(llc_ev[c][b].false_pos);
        n_to_home    += int'(llc_ev[c][b].to_home);
        n_ldev       += int'(llc_ev[c][b].dir_evict);
        n_xsnp       += int'(llc_ev[c][b].ext_snoop);
        // a home snoop served while the bank's own request waits for its home
        if (llc_ev[c][b].ext_snoop && bank_waiting[c][b]) n_xsnp_waiting++;
      end
      n_dmem_hit   += int'(mem_ev[c].dmem_hit);
      n_fmem_bcast += int'(mem_ev[c].fmem_bcast);
      n_mrecon     += int'(mem_ev[c].recon);
      n_mfp        += int'(mem_ev[c].false_pos);
      n_mem_read   += int'(mem_ev[c].mem_read);
      n_mdev       += int'(mem_ev[c].dir_evict);
      n_ev_clean   += int'(mem_ev[c].evict_clean);
      n_ev_inval   += int'(mem_ev[c].evict_inval);
    end
  end
  bit bank_waiting [N_CHIPS][N_BANKS];

  // ---------------- request threads ----------------
  function automatic addr_t pool_addr(int b, int i);
    // POOL blocks per bank, alternating between the two homes (top address bit)
    return addr_t'(((i % 2) << (ADDR_W - 1)) | ((i * 37 + 5) << BANK_W) | b);
  endfunction

  task automatic issue(int c, int b, lreq_e t, int k, addr_t a);
    logic last;
    tokens_t tk;
    last = 1'b1;
    tk = (t == LREQ_LLC_EVICT) ? lget(c, b, a) : cget(c, k, a);
    if (t == LREQ_PRIV_EVICT) begin
      ltok[c][b][a] = tok_add(lget(c, b, a), cget(c, k, a));
      ctok[c][k][a] = TOK_NONE;
      for (int j = 0; j < CORES_PER_CHIP; j++) if (tok_any(cget(c, j, a))) last = 1'b0;
    end
    if (t == LREQ_LLC_EVICT) begin
      ltok[c][b][a] = TOK_NONE;
      fly[a] = fmod(fget(a), tk, 1'b0);
    end
    lreq_valid[c][b] <= 1; lreq_type[c][b] <= t; lreq_core[c][b] <= CORE_W'(k);
    lreq_addr[c][b] <= a; lreq_tokens[c][b] <= tk; lreq_last[c][b] <= last;
    do @(posedge clk); while (!lreq_ready[c][b]);
    lreq_valid[c][b] <= 0;
    bank_waiting[c][b] = (t != LREQ_PRIV_EVICT);
    do @(posedge clk); while (!lrsp_valid[c][b]);
    bank_waiting[c][b] = 0;
    if (t == LREQ_RD || t == LREQ_WR) begin
      ctok[c][k][a] = tok_add(cget(c, k, a), lrsp_tokens[c][b]);
      fly[a] = fmod(fget(a), lrsp_tokens[c][b], 1'b1);
    end
    if (t == LREQ_LLC_EVICT) begin
      mtok[a] = tok_add(mget(a) == TOK_ALL && !mtok.exists(a) ? TOK_NONE : mget(a), fget(a));
      fly[a] = TOK_NONE;
    end
    repeat (4) @(posedge clk);
    check(!tok_any(fget(a)), $sformatf("chip %0d bank %0d %s %h: no token left in flight (%p)",
                                       c, b, t.name(), a, fget(a)));
    check(tok_is_all(total_of(a)), $sformatf("chip %0d %s %h: tokens conserved (%p)",
                                             c, t.name(), a, total_of(a)));
    if (t == LREQ_RD)
      check(tok_any(cget(c, k, a)), $sformatf("chip %0d core %0d read %h got a token", c, k, a));
    if (t == LREQ_WR)
      check(tok_is_all(cget(c, k, a)), $sformatf("chip %0d core %0d write %h got every token", c, k, a));
    n_ops++;
  endtask

  task automatic thread(int c, int b);
    for (int n = 0; n < N_OPS; n++) begin
      addr_t a; int k; int r; lreq_e t; bit go;
      a = pool_addr(b, int'($urandom % POOL));
      k = int'($urandom % CORES_PER_CHIP);
      r = int'($urandom % 100);
      while (busy.exists(a) && busy[a]) @(posedge clk);
      busy[a] = 1;
      go = 1;
      if (r < 10) begin
        t = LREQ_LLC_EVICT; go = tok_any(lget(c, b, a));
      end else if (!tok_any(cget(c, k, a))) begin
        t = (r < 65) ? LREQ_RD : LREQ_WR;
      end else if (tok_is_all(cget(c, k, a))) begin
        t = LREQ_PRIV_EVICT; go = (r < 55);
      end else begin
        t = (r < 50) ? LREQ_WR : LREQ_PRIV_EVICT;
      end
      if (go) issue(c, b, t, k, a);
      busy[a] = 0;
      @(posedge clk);
    end
  endtask

  int done_threads = 0;
  initial begin
    for (int c = 0; c < N_CHIPS; c++)
      for (int b = 0; b < N_BANKS; b++) begin
        lreq_valid[c][b] = 0; lreq_type[c][b] = LREQ_RD; lreq_core[c][b] = '0;
        lreq_addr[c][b] = '0; lreq_tokens[c][b] = TOK_NONE; lreq_last[c][b] = 0;
        bank_waiting[c][b] = 0;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);
    for (int c = 0; c < N_CHIPS; c++)
      for (int b = 0; b < N_BANKS; b++)
        fork
          automatic int cc = c, bb = b;
          begin thread(cc, bb); done_threads++; end
        join_none
    wait (done_threads == N_CHIPS * N_BANKS);
    repeat (20) @(posedge clk);
    $display("requests completed: %0d, DRAM reads: %0d", n_ops, n_mem_reads);
    $display("D|F-LLC: D-LLC hits %0d, LLC hits %0d, F-LLC broadcasts %0d, reconstructions %0d,",
             n_dllc_hit, n_llc_hit, n_fllc_bcast, n_lrecon);
    $display("         false positives %0d, to home %0d, silent evictions %0d, home snoops %0d (%0d while waiting)",
             n_lfp, n_to_home, n_ldev, n_xsnp, n_xsnp_waiting);
    $display("D|F-MEM: D-MEM hits %0d, F-MEM broadcasts %0d, reconstructions %0d, false positives %0d,",
             n_dmem_hit, n_fmem_bcast, n_mrecon, n_mfp);
    $display("         DRAM reads %0d, silent evictions %0d, clean evictions %0d, invalidating evictions %0d",
             n_mem_read, n_mdev, n_ev_clean, n_ev_inval);
    check(n_ops > 0, "requests completed");
    check(n_mem_read == n_mem_reads, "every DRAM read was flagged");
    check(n_dllc_hit > 0 && n_llc_hit > 0 && n_fllc_bcast > 0 && n_lrecon > 0 && n_to_home > 0 &&
          n_xsnp > 0, "LLC-side mechanisms seen");
    check(n_dmem_hit > 0 && n_fmem_bcast > 0 && n_mrecon > 0 && n_mem_read > 0 &&
          n_ev_clean + n_ev_inval > 0, "home-side mechanisms seen");
    if (REQUIRE_ALL) begin
      check(n_lfp > 0, "F-LLC false positive seen");
      check(n_mfp > 0, "F-MEM false positive seen");
      check(n_ldev > 0, "silent D-LLC eviction seen");
      check(n_mdev > 0, "silent D-MEM eviction seen");
      check(n_ev_clean > 0, "clean LLC eviction seen");
      check(n_ev_inval > 0, "invalidating LLC eviction seen");
      check(n_xsnp_waiting > 0, "home snoop served while waiting for the home");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

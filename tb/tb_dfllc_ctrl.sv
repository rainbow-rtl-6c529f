// tb_dfllc_ctrl: self-checking test of one D|F-LLC bank controller (chip of a
// 2-chip system: 1 gold, 2 silver, 8 bronze tokens per block).
// The test bench models the four private caches (token tables answering
// snoops with the token_grant rule), the LLC bank array (token table, 5-cycle
// lookup as in the paper's bank access time) and the home (a pool holding the
// tokens that are outside the chip). A scripted sequence walks every branch of
// the read-miss and write-miss trees, a private eviction, an LLC eviction, a
// filter false positive and home snoops, checking the tokens granted, who
// supplied them, the event flags and that no token is created or lost.
module tb_dfllc_ctrl;
  import rainbow_pkg::*;

  localparam int CPC = CORES_PER_CHIP;
  localparam int LLC_LAT = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic lreq_valid, lreq_ready, lreq_last, lrsp_valid;
  lreq_e lreq_type, lrsp_type;
  logic [CORE_W-1:0] lreq_core, lrsp_core;
  addr_t lreq_addr, lrsp_addr;
  tokens_t lreq_tokens, lrsp_tokens;
  src_e lrsp_src;
  logic llc_req_valid, llc_rsp_valid, llc_rsp_hit, llc_rsp_only, llc_take_valid;
  addr_t llc_req_addr, llc_take_addr;
  tokens_t llc_rsp_tokens, llc_take_tokens;
  logic snp_valid;
  logic [CPC-1:0] snp_mask, snp_rsp_valid, snp_rsp_has, snp_rsp_silver;
  snp_e snp_kind;
  addr_t snp_addr;
  tokens_t snp_rsp_tokens [CPC];
  logic hreq_valid, hreq_ready, hrsp_valid;
  hreq_e hreq_type;
  addr_t hreq_addr;
  tokens_t hreq_tokens, hrsp_tokens;
  logic xsnp_valid, xsnp_ready, xrsp_valid, xrsp_has;
  snp_e xsnp_kind;
  addr_t xsnp_addr;
  tokens_t xrsp_tokens;
  llc_ev_t ev;
  logic init_done;

  dfllc_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- environment state ----------------
  tokens_t ctok [CPC][addr_t];   // private caches
  tokens_t ltok [addr_t];        // LLC bank
  tokens_t htok [addr_t];        // outside the chip (other chip + memory)

  function automatic tokens_t get(ref tokens_t m [addr_t], input addr_t a);
    return m.exists(a) ? m[a] : TOK_NONE;
  endfunction
  function automatic tokens_t tsub(tokens_t a, tokens_t b);
    tokens_t r; r.gold = a.gold & ~b.gold; r.silver = a.silver - b.silver;
    r.bronze = a.bronze - b.bronze; return r;
  endfunction
  function automatic tokens_t T(logic g, int s, int b);
    return '{gold: g, silver: SIL_W'(s), bronze: BRZ_W'(b)};
  endfunction
  function automatic tokens_t total_of(addr_t a);
    tokens_t t;
    t = tok_add(get(ltok, a), get(htok, a));
    for (int c = 0; c < CPC; c++) t = tok_add(t, get(ctok[c], a));
    return t;
  endfunction

  // token rule instance shared by the private-cache model
  tokens_t g_held, g_give, g_keep; grant_e g_kind;
  token_grant u_rule (.held(g_held), .kind(g_kind), .is_llc(1'b0), .give(g_give), .keep(g_keep));

  // ---------------- LLC bank model ----------------
  initial begin
    llc_rsp_valid = 0; llc_rsp_hit = 0; llc_rsp_tokens = TOK_NONE; llc_rsp_only = 0;
    forever begin
      @(posedge clk);
      if (llc_req_valid && rst_n) begin
        addr_t a; a = llc_req_addr;
        repeat (LLC_LAT - 1) @(posedge clk);
        llc_rsp_valid <= 1;
        llc_rsp_hit <= tok_any(get(ltok, a));
        llc_rsp_tokens <= get(ltok, a);
        llc_rsp_only <= 1'b1;
        for (int c = 0; c < CPC; c++) if (tok_any(get(ctok[c], a))) llc_rsp_only <= 1'b0;
        @(posedge clk);
        llc_rsp_valid <= 0;
      end
    end
  end
  always @(posedge clk) if (llc_take_valid && rst_n) begin
    ltok[llc_take_addr] = tsub(get(ltok, llc_take_addr), llc_take_tokens);
    taken = tok_add(taken, llc_take_tokens);
  end
  tokens_t taken;

  // ---------------- private caches: answer snoops after 2 cycles ----------------
  initial begin
    snp_rsp_valid = '0; snp_rsp_has = '0; snp_rsp_silver = '0;
    for (int c = 0; c < CPC; c++) snp_rsp_tokens[c] = TOK_NONE;
    forever begin
      @(posedge clk);
      if (snp_valid && rst_n) begin
        logic [CPC-1:0] m; snp_e k; addr_t a;
        m = snp_mask; k = snp_kind; a = snp_addr;
        @(posedge clk);
        for (int c = 0; c < CPC; c++) if (m[c]) begin
          g_held = get(ctok[c], a);
          g_kind = (k == SNP_COLLECT) ? GR_ALL : (k == SNP_RD_REMOTE) ? GR_RD_REMOTE : GR_RD_LOCAL;
          #1;
          snp_rsp_tokens[c] <= g_give;
          snp_rsp_has[c] <= tok_any(g_keep);
          snp_rsp_silver[c] <= g_held.silver != '0;
          ctok[c][a] = g_keep;
          given = tok_add(given, g_give);
        end
        snp_rsp_valid <= m;
        @(posedge clk);
        snp_rsp_valid <= '0;
      end
    end
  end
  tokens_t given;

  // ---------------- home model ----------------
  tokens_t h_seen_tokens;
  initial begin
    hreq_ready = 0; hrsp_valid = 0; hrsp_tokens = TOK_NONE;
    forever begin
      @(posedge clk);
      if (hreq_valid && rst_n) begin
        hreq_type_seen = hreq_type; h_seen_tokens = hreq_tokens;
        hreq_ready <= 1;
        @(posedge clk);
        hreq_ready <= 0;
        repeat (10) @(posedge clk);
        unique case (hreq_type_seen)
          HREQ_EVICT: begin
            htok[hreq_addr] = tok_add(get(htok, hreq_addr), h_seen_tokens);
            hrsp_tokens <= TOK_NONE;
          end
          HREQ_WR: begin
            hrsp_tokens <= get(htok, hreq_addr); htok[hreq_addr] = TOK_NONE;
          end
          default: begin
            if (tok_is_all(get(htok, hreq_addr))) begin
              hrsp_tokens <= TOK_ALL; htok[hreq_addr] = TOK_NONE;
            end else begin
              hrsp_tokens <= T(0, 0, 1);
              htok[hreq_addr] = tsub(get(htok, hreq_addr), T(0, 0, 1));
            end
          end
        endcase
        hrsp_valid <= 1;
        @(posedge clk);
        hrsp_valid <= 0;
      end
    end
  end
  hreq_e hreq_type_seen;

  // ---------------- event collection ----------------
  llc_ev_t evs;
  always @(posedge clk) evs <= evs | ev;

  // ---------------- drivers ----------------
  task automatic request(lreq_e t, int core, addr_t a, logic last, tokens_t exp_tok,
                         src_e exp_src, string what);
    evs = '0;
    lreq_valid <= 1; lreq_type <= t; lreq_core <= CORE_W'(core); lreq_addr <= a;
    lreq_tokens <= (t == LREQ_LLC_EVICT) ? get(ltok, a) : get(ctok[core], a);
    lreq_last <= last;
    do @(posedge clk); while (!lreq_ready);
    lreq_valid <= 0;
    if (t == LREQ_LLC_EVICT) ltok[a] = TOK_NONE;       // the line leaves the bank
    do @(posedge clk); while (!lrsp_valid);
    check(lrsp_tokens == exp_tok && lrsp_src == exp_src && lrsp_core == CORE_W'(core),
          $sformatf("%s: got %p from %s", what, lrsp_tokens, lrsp_src.name()));
    if (t == LREQ_RD || t == LREQ_WR) ctok[core][a] = tok_add(get(ctok[core], a), lrsp_tokens);
    repeat (8) @(posedge clk);
    check(tok_is_all(total_of(a)), $sformatf("%s: tokens conserved (%p)", what, total_of(a)));
  endtask

  task automatic ext_snoop(snp_e k, addr_t a, tokens_t exp_tok, logic exp_has, string what);
    evs = '0;
    xsnp_valid <= 1; xsnp_kind <= k; xsnp_addr <= a;
    do @(posedge clk); while (!xsnp_ready);
    xsnp_valid <= 0;
    do @(posedge clk); while (!xrsp_valid);
    check(xrsp_tokens == exp_tok && xrsp_has == exp_has,
          $sformatf("%s: got %p has=%0b", what, xrsp_tokens, xrsp_has));
    htok[a] = tok_add(get(htok, a), xrsp_tokens);
    repeat (8) @(posedge clk);
    check(tok_is_all(total_of(a)), $sformatf("%s: tokens conserved", what));
  endtask

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t A = 26'h0001_000;   // bank bits 00
  localparam addr_t B = 26'h0002_000;
  localparam addr_t C = 26'h0003_000;

  initial begin
    lreq_valid = 0; lreq_type = LREQ_RD; lreq_core = '0; lreq_addr = '0;
    lreq_tokens = TOK_NONE; lreq_last = 0; xsnp_valid = 0; xsnp_kind = SNP_RD_REMOTE;
    xsnp_addr = '0; evs = '0; taken = TOK_NONE; given = TOK_NONE;
    htok[A] = TOK_ALL; htok[C] = TOK_ALL; ltok[B] = TOK_ALL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);

    // 1. first read: nothing in the chip -> home, all tokens from memory
    request(LREQ_RD, 0, A, 0, TOK_ALL, SRC_HOME, "read, all miss");
    check(evs.to_home && !evs.fllc_bcast, "read miss goes to home");
    // 2. another core reads: F-LLC hit -> broadcast, D-LLC entry rebuilt
    request(LREQ_RD, 1, A, 0, T(0, 0, 1), SRC_CORE, "read, F-LLC hit");
    check(evs.fllc_bcast && evs.recon && !evs.to_home, "broadcast and reconstruction");
    // 3. third core: D-LLC hit -> silver core answers; latency measured
    request(LREQ_RD, 2, A, 0, T(0, 0, 1), SRC_CORE, "read, D-LLC hit");
    check(evs.dllc_hit && !evs.fllc_bcast, "served through the D-LLC");
    // 4. another chip reads: the gold core gives one silver and four bronze
    ext_snoop(SNP_RD_REMOTE, A, T(0, 1, 4), 1'b1, "remote read at gold chip");
    check(evs.ext_snoop, "external snoop served");
    // 5. write by a core without tokens: sharers collected, rest from home
    request(LREQ_WR, 3, A, 0, TOK_ALL, SRC_HOME, "write, D-LLC hit, tokens outside");
    check(evs.dllc_hit && evs.to_home, "write collects sharers then asks home");
    check(h_seen_tokens == T(1, 1, 4), "home told which tokens the chip holds");
    // 6. private eviction of the last copy: tokens go to the LLC bank
    ltok[A] = ctok[3][A]; ctok[3][A] = TOK_NONE;
    request(LREQ_PRIV_EVICT, 3, A, 1, TOK_NONE, SRC_NONE, "private eviction");
    // 7. read: LLC holds every token, no private copy -> LLC answers
    request(LREQ_RD, 0, A, 0, T(0, 0, 1), SRC_LLC, "read, LLC hit");
    check(evs.llc_hit && !evs.fllc_bcast && !evs.dllc_hit, "served by the LLC bank");
    // 8. write: LLC lacks one bronze -> F-LLC broadcast completes on-chip
    request(LREQ_WR, 1, A, 0, TOK_ALL, SRC_CORE, "write, F-LLC hit, all on chip");
    check(evs.fllc_bcast && !evs.to_home, "write completed inside the chip");
    // 9. home collects the block: D-LLC entry of the writer is used
    ext_snoop(SNP_COLLECT, A, TOK_ALL, 1'b0, "home collection");
    check(tok_any(get(ctok[1], A)) == 1'b0, "writer invalidated");
    // 10. next read of A misses everything again (D-LLC and F-LLC cleaned up)
    request(LREQ_RD, 2, A, 0, TOK_ALL, SRC_HOME, "read after collection");
    check(evs.to_home && !evs.fllc_bcast && !evs.dllc_hit, "no stale filter or directory");
    // 11. LLC eviction of a line with every token and no private copy
    request(LREQ_LLC_EVICT, 0, B, 0, TOK_NONE, SRC_HOME, "LLC eviction");
    check(h_seen_tokens == TOK_ALL && hreq_type_seen == HREQ_EVICT, "eviction hands all tokens home");
    // 12. filter false positive: copy dropped without telling the filter
    request(LREQ_RD, 0, C, 0, TOK_ALL, SRC_HOME, "read C");
    htok[C] = ctok[0][C]; ctok[0][C] = TOK_NONE;
    request(LREQ_RD, 1, C, 0, TOK_ALL, SRC_HOME, "read C, false positive");
    check(evs.fllc_bcast && evs.false_pos && evs.to_home, "false positive detected and forwarded");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dfmem_ctrl: self-checking test of the home D|F-MEM controller at its
// default size (4096-entry D-MEM, 2 x 8192 x 8 F-MEM) in a 2-chip system.
// The test bench models each chip as one token holder answering home snoops
// (token_grant rule) and the DRAM with the paper's 300-cycle access time.
// A scripted sequence covers memory reads, F-MEM broadcasts with D-MEM
// reconstruction, D-MEM unicast to the gold chip, write collection, clean and
// invalidating LLC evictions, the F-MEM counts they leave behind and a filter
// false positive, checking tokens, events, latency and token conservation.
module tb_dfmem_ctrl;
  import rainbow_pkg::*;

  localparam int MEM_LAT = 300;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, rsp_valid;
  hreq_e req_type;
  logic [CHIP_W-1:0] req_chip, rsp_chip;
  addr_t req_addr, rsp_addr, xs_addr, mem_req_addr;
  tokens_t req_tokens, rsp_tokens;
  logic [N_CHIPS-1:0] xs_valid, xs_ready, xr_valid, xr_has;
  snp_e xs_kind;
  tokens_t xr_tokens [N_CHIPS];
  logic mem_req_valid, mem_rsp_valid;
  mem_ev_t ev;
  logic init_done;

  dfmem_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  tokens_t ctk [N_CHIPS][addr_t];
  tokens_t mtk [addr_t];
  function automatic tokens_t get(ref tokens_t m [addr_t], input addr_t a);
    return m.exists(a) ? m[a] : TOK_NONE;
  endfunction
  function automatic tokens_t T(logic g, int s, int b);
    return '{gold: g, silver: SIL_W'(s), bronze: BRZ_W'(b)};
  endfunction
  function automatic tokens_t total_of(addr_t a);
    tokens_t t; t = get(mtk, a);
    for (int c = 0; c < N_CHIPS; c++) t = tok_add(t, get(ctk[c], a));
    return t;
  endfunction

  tokens_t g_held [N_CHIPS], g_give [N_CHIPS], g_keep [N_CHIPS];
  grant_e  g_kind;
  for (genvar c = 0; c < N_CHIPS; c++) begin : g_rule
    token_grant u (.held(g_held[c]), .kind(g_kind), .is_llc(1'b0), .give(g_give[c]),
                   .keep(g_keep[c]));
  end

  // chips: accept snoops at once, answer 3 cycles later
  initial begin
    xs_ready = '0; xr_valid = '0; xr_has = '0;
    for (int c = 0; c < N_CHIPS; c++) xr_tokens[c] = TOK_NONE;
    forever begin
      @(posedge clk);
      if (xs_valid != '0 && rst_n) begin
        logic [N_CHIPS-1:0] m; snp_e k; addr_t a;
        m = xs_valid; k = xs_kind; a = xs_addr;
        xs_ready <= m;
        @(posedge clk);
        xs_ready <= '0;
        @(posedge clk);
        g_kind = (k == SNP_COLLECT) ? GR_ALL : GR_RD_REMOTE;
        for (int c = 0; c < N_CHIPS; c++) g_held[c] = get(ctk[c], a);
        #1;
        for (int c = 0; c < N_CHIPS; c++) if (m[c]) begin
          xr_tokens[c] <= g_give[c];
          xr_has[c] <= tok_any(g_keep[c]);
          ctk[c][a] = g_keep[c];
          xgiven = tok_add(xgiven, g_give[c]);
        end
        @(posedge clk);
        xr_valid <= m;
        @(posedge clk);
        xr_valid <= '0;
      end
    end
  end

  tokens_t xgiven;   // tokens the chips handed to the home in this request

  // DRAM: fixed access time; a read hands over the memory's tokens
  int mem_reads = 0;
  initial begin
    mem_rsp_valid = 0;
    forever begin
      @(posedge clk);
      if (mem_req_valid && rst_n) begin
        addr_t a; a = mem_req_addr;
        mem_reads++;
        check(tok_is_all(get(mtk, a)), "memory holds every token when read");
        mtk[a] = TOK_NONE;
        repeat (MEM_LAT - 1) @(posedge clk);
        mem_rsp_valid <= 1;
        @(posedge clk);
        mem_rsp_valid <= 0;
      end
    end
  end

  mem_ev_t evs;
  always @(posedge clk) evs <= evs | ev;

  int t0, lat;
  task automatic request(hreq_e t, int chip, addr_t a, tokens_t exp, string what);
    evs = '0; xgiven = TOK_NONE;
    req_valid <= 1; req_type <= t; req_chip <= CHIP_W'(chip); req_addr <= a;
    req_tokens <= get(ctk[chip], a);
    do @(posedge clk); while (!req_ready);
    t0 = int'($time / 10);
    req_valid <= 0;
    if (t == HREQ_EVICT) begin
      mtk[a] = tok_add(get(mtk, a), get(ctk[chip], a)); ctk[chip][a] = TOK_NONE;
    end
    do @(posedge clk); while (!rsp_valid);
    lat = int'($time / 10) - t0;
    check(rsp_tokens == exp && rsp_chip == CHIP_W'(chip) && rsp_addr == a,
          $sformatf("%s: got %p", what, rsp_tokens));
    if (t != HREQ_EVICT) ctk[chip][a] = tok_add(get(ctk[chip], a), rsp_tokens);
    if (t == HREQ_EVICT) mtk[a] = tok_add(get(mtk, a), xgiven);  // collected for memory
    repeat (12) @(posedge clk);
    check(tok_is_all(total_of(a)), $sformatf("%s: tokens conserved (%p)", what, total_of(a)));
  endtask

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t A = 26'h0012_345;
  initial begin
    req_valid = 0; req_type = HREQ_RD; req_chip = '0; req_addr = '0; req_tokens = TOK_NONE;
    evs = '0;
    mtk[A] = TOK_ALL;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (init_done);
    @(posedge clk);

    request(HREQ_RD, 0, A, TOK_ALL, "first read");
    check(evs.mem_read && !evs.fmem_bcast, "F-MEM miss reads DRAM");
    check(lat >= MEM_LAT && lat < MEM_LAT + 20, $sformatf("DRAM read latency %0d", lat));
    request(HREQ_RD, 1, A, T(0, 1, 4), "second chip reads");
    check(evs.fmem_bcast && evs.recon && !evs.mem_read, "F-MEM hit: broadcast, D-MEM rebuilt");
    request(HREQ_RD, 1, A, T(0, 0, 4), "read with D-MEM entry");
    check(evs.dmem_hit && !evs.fmem_bcast, "D-MEM hit: request to the gold chip");
    request(HREQ_WR, 0, A, T(0, 1, 8), "write by the gold chip");
    check(evs.dmem_hit && !evs.mem_read, "write collects from sharer chips");
    request(HREQ_RD, 1, A, T(0, 1, 4), "read after write");
    check(evs.fmem_bcast && evs.recon, "D-MEM entry was dropped by the write");
    request(HREQ_EVICT, 1, A, TOK_NONE, "eviction without gold");
    check(evs.evict_inval, "eviction missing tokens invalidates system-wide");
    check(tok_is_all(get(mtk, A)), "memory owns the block again");
    request(HREQ_RD, 0, A, TOK_ALL, "read after invalidation");
    check(evs.mem_read && !evs.fmem_bcast, "F-MEM counts of both chips removed");
    request(HREQ_EVICT, 0, A, TOK_NONE, "clean eviction");
    check(evs.evict_clean && !evs.evict_inval, "all gold+silver returned");
    request(HREQ_WR, 1, A, TOK_ALL, "write after clean eviction");
    check(evs.mem_read && !evs.fmem_bcast, "F-MEM empty after clean eviction");
    // the chip drops its copy without telling the home: a false positive
    mtk[A] = ctk[1][A]; ctk[1][A] = TOK_NONE;
    request(HREQ_RD, 0, A, TOK_ALL, "read on a false positive");
    check(evs.fmem_bcast && evs.false_pos && evs.mem_read, "false positive falls back to DRAM");
    check(mem_reads == 4, $sformatf("DRAM reads %0d", mem_reads));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

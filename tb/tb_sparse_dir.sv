// tb_sparse_dir: self-checking test of the sparse directory at its D-LLC
// default size (512 entries, 8 ways, 4 sharers, bank bits skipped).
// Checks: initialisation time (one set per cycle), two-cycle operation
// latency, write/add/remove/invalidate semantics, freeing an entry whose
// sharer vector empties, silent round-robin eviction of the oldest way of a
// full set, and a random sequence against an associative-array model on
// addresses that fall in distinct sets.
module tb_sparse_dir;
  import rainbow_pkg::*;

  localparam int ENTRIES = 512, WAYS = 8, SHARERS = 4, SKIP = 2;
  localparam int SETS = ENTRIES / WAYS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic op_valid, op_ready, rsp_valid, rsp_hit, rsp_evicted, init_done;
  dop_e op;
  addr_t op_addr;
  logic [SHARERS-1:0] op_sharers, rsp_sharers;
  logic [1:0] op_owner, rsp_owner;
  int checks = 0, failures = 0;

  sparse_dir dut (.*);

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // one operation; returns the response sampled in the compare cycle
  task automatic do_op(dop_e o, addr_t a, logic [SHARERS-1:0] sh, logic [1:0] own,
                       output logic hit, output logic [SHARERS-1:0] rsh,
                       output logic [1:0] rown, output logic evd);
    while (!op_ready) @(posedge clk);
    op_valid <= 1; op <= o; op_addr <= a; op_sharers <= sh; op_owner <= own;
    @(posedge clk);
    op_valid <= 0;
    #1;
    check(rsp_valid === 1'b1, "response one cycle after accept");
    hit = rsp_hit; rsh = rsp_sharers; rown = rsp_owner; evd = rsp_evicted;
    @(posedge clk);
  endtask

  function automatic addr_t mk(int set, int tag);
    return addr_t'((tag << (SKIP + $clog2(SETS))) | (set << SKIP) | 1);
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic h, e; logic [SHARERS-1:0] s; logic [1:0] w;
  int cyc;
  logic [SHARERS-1:0] m_sh [int];
  logic [1:0]         m_own [int];

  initial begin
    op_valid = 0; op = DOP_LOOKUP; op_addr = '0; op_sharers = '0; op_owner = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!init_done) begin @(posedge clk); cyc++; end
    check(cyc == SETS, $sformatf("init takes one cycle per set (%0d)", cyc));

    do_op(DOP_LOOKUP, mk(3, 5), '0, '0, h, s, w, e);
    check(!h, "empty directory misses");
    do_op(DOP_WRITE, mk(3, 5), 4'b0011, 2'd1, h, s, w, e);
    check(!h && !e, "write allocates without eviction");
    do_op(DOP_LOOKUP, mk(3, 5), '0, '0, h, s, w, e);
    check(h && s == 4'b0011 && w == 2'd1, "lookup returns written entry");
    do_op(DOP_ADD, mk(3, 5), 4'b0100, '0, h, s, w, e);
    do_op(DOP_LOOKUP, mk(3, 5), '0, '0, h, s, w, e);
    check(h && s == 4'b0111 && w == 2'd1, "add sets a sharer bit, keeps owner");
    do_op(DOP_REMOVE, mk(3, 5), 4'b0011, '0, h, s, w, e);
    do_op(DOP_LOOKUP, mk(3, 5), '0, '0, h, s, w, e);
    check(h && s == 4'b0100, "remove clears sharer bits");
    do_op(DOP_REMOVE, mk(3, 5), 4'b0100, '0, h, s, w, e);
    do_op(DOP_LOOKUP, mk(3, 5), '0, '0, h, s, w, e);
    check(!h, "entry freed when no sharer is left");
    do_op(DOP_LOOKUP, mk(3, 5) ^ addr_t'(1 << SKIP), '0, '0, h, s, w, e);
    check(!h, "other set misses");

    // fill one set, then one more: the oldest way is overwritten silently
    for (int t = 0; t < WAYS; t++) begin
      do_op(DOP_ADD, mk(9, 100 + t), 4'b0001 << (t % 4), 2'(t % 4), h, s, w, e);
      check(!e, "no eviction while the set has room");
    end
    do_op(DOP_ADD, mk(9, 200), 4'b1000, 2'd3, h, s, w, e);
    check(e, "allocation in a full set evicts silently");
    do_op(DOP_LOOKUP, mk(9, 100), '0, '0, h, s, w, e);
    check(!h, "the first-allocated way was the victim");
    for (int t = 1; t < WAYS; t++) begin
      do_op(DOP_LOOKUP, mk(9, 100 + t), '0, '0, h, s, w, e);
      check(h && s == (4'b0001 << (t % 4)), "other ways survive the eviction");
    end
    do_op(DOP_LOOKUP, mk(9, 200), '0, '0, h, s, w, e);
    check(h && s == 4'b1000 && w == 2'd3, "new entry present");
    do_op(DOP_INVAL, mk(9, 200), '0, '0, h, s, w, e);
    do_op(DOP_LOOKUP, mk(9, 200), '0, '0, h, s, w, e);
    check(!h, "invalidate frees the entry");

    // random operations against a model, one address per set (sets 20..51)
    for (int i = 0; i < 600; i++) begin
      int k; addr_t a; dop_e o; logic [SHARERS-1:0] rs; logic [1:0] ro;
      logic eh; logic [SHARERS-1:0] esh; logic [1:0] eown;
      k = 20 + int'($urandom % 32);
      a = mk(k, 7);
      o = dop_e'($urandom % 5);
      rs = 4'($urandom); ro = 2'($urandom);
      eh = m_sh.exists(k);
      esh = eh ? m_sh[k] : '0; eown = eh ? m_own[k] : '0;
      do_op(o, a, rs, ro, h, s, w, e);
      check(h == eh && s == esh && w == eown,
            $sformatf("random op %0d (%s) matches model", i, o.name()));
      unique case (o)
        DOP_WRITE: begin m_sh[k] = rs; m_own[k] = ro; end
        DOP_ADD:   if (eh) m_sh[k] = esh | rs; else begin m_sh[k] = rs; m_own[k] = ro; end
        DOP_REMOVE: if (eh) begin
          if ((esh & ~rs) == '0) begin m_sh.delete(k); m_own.delete(k); end
          else m_sh[k] = esh & ~rs;
        end
        DOP_INVAL: if (eh) begin m_sh.delete(k); m_own.delete(k); end
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

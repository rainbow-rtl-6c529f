// tb_dlcbf: self-checking test of the d-left counting Bloom filter at its
// F-LLC default size (2 subtables x 512 buckets x 4 cells, 8-bit fingerprints).
// Checks: initialisation time, two-cycle operation latency, no false negative
// for 2560 inserted blocks (the private-cache blocks of four cores, 4 x 160 KB
// / 64 B, spread over four banks: 10240 / 4), false-positive rate below the 5 %
// the filters are sized for, multi-insert counting, an empty filter again
// after every block is deleted (except behind saturated counters), and, on a
// tiny 2 x 4 x 1 filter, overflow flagged with still no false negative.
module tb_dlcbf;
  import rainbow_pkg::*;

  localparam int N_IN = 2560, N_OUT = 4000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic op_valid, op_ready, rsp_valid, rsp_hit, rsp_overflow, rsp_underflow, init_done;
  fop_e op;
  addr_t op_addr;
  int checks = 0, failures = 0;

  dlcbf dut (.*);

  // a tiny filter (2 x 4 buckets x 1 cell) driven into overflow
  logic s_valid, s_ready, s_rsp_valid, s_hit, s_ovf, s_unf, s_init;
  fop_e s_op;
  addr_t s_addr;
  dlcbf #(.D(2), .BUCKETS(4), .CELLS(1)) dut_s (
    .clk, .rst_n, .op_valid(s_valid), .op_ready(s_ready), .op(s_op), .op_addr(s_addr),
    .rsp_valid(s_rsp_valid), .rsp_hit(s_hit), .rsp_overflow(s_ovf), .rsp_underflow(s_unf),
    .init_done(s_init));

  task automatic s_do(fop_e o, addr_t a, output logic hit, output logic ovf);
    while (!s_ready) @(posedge clk);
    s_valid <= 1; s_op <= o; s_addr <= a;
    @(posedge clk);
    s_valid <= 0;
    #1;
    hit = s_hit; ovf = s_ovf;
    @(posedge clk);
  endtask

  task automatic check(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic do_op(fop_e o, addr_t a, output logic hit, output logic ovf);
    while (!op_ready) @(posedge clk);
    op_valid <= 1; op <= o; op_addr <= a;
    @(posedge clk);
    op_valid <= 0;
    #1;
    check(rsp_valid === 1'b1, "response one cycle after accept");
    hit = rsp_hit; ovf = rsp_overflow;
    @(posedge clk);
  endtask

  // random block addresses (the random access pattern the filter is sized
  // for); bit 25 separates the inserted set from the probe set, and the low
  // 12 bits hold the index so every inserted address is distinct
  addr_t ins [N_IN];
  addr_t outs [N_OUT];
  function automatic addr_t in_addr(int i);
    return ins[i];
  endfunction
  function automatic addr_t out_addr(int i);
    return outs[i];
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int mult [int];
  // hash formula of the filter: top 17 bits of the low 32 bits of a * 0x9E3779B1
  function automatic int ref_hash(addr_t a);
    logic [63:0] p;
    p = 64'(a) * 64'h9E37_79B1;
    return int'(p[31:15]);
  endfunction

  logic h, o;
  int cyc, fn, fp, ovf;

  initial begin
    op_valid = 0; op = FOP_QUERY; op_addr = '0;
    s_valid = 0; s_op = FOP_QUERY; s_addr = '0;
    for (int i = 0; i < N_IN; i++)
      ins[i] = addr_t'({$urandom} % (1 << 12)) << 12 | addr_t'(i);   // i < 4096: distinct
    for (int i = 0; i < N_OUT; i++)
      outs[i] = addr_t'($urandom) | addr_t'(1 << 25);
    for (int i = 0; i < N_IN; i++) ins[i][25] = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!init_done) begin @(posedge clk); cyc++; end
    check(cyc == 512, $sformatf("init takes one cycle per bucket (%0d)", cyc));

    do_op(FOP_QUERY, in_addr(0), h, o);
    check(!h, "empty filter misses");

    // counting: two inserts need two deletes
    do_op(FOP_INSERT, in_addr(0), h, o);
    do_op(FOP_INSERT, in_addr(0), h, o);
    check(h, "second insert sees the block");
    do_op(FOP_DELETE, in_addr(0), h, o);
    do_op(FOP_QUERY, in_addr(0), h, o);
    check(h, "still present after one of two deletes");
    do_op(FOP_DELETE, in_addr(0), h, o);
    do_op(FOP_QUERY, in_addr(0), h, o);
    check(!h, "absent after the second delete");

    ovf = 0;
    for (int i = 0; i < N_IN; i++) begin
      do_op(FOP_INSERT, in_addr(i), h, o);
      ovf += int'(o);
    end
    check(ovf == 0, $sformatf("no bucket overflow at the design load (%0d)", ovf));
    fn = 0;
    for (int i = 0; i < N_IN; i++) begin
      do_op(FOP_QUERY, in_addr(i), h, o);
      if (!h) fn++;
    end
    check(fn == 0, $sformatf("no false negatives (%0d)", fn));
    fp = 0;
    for (int i = 0; i < N_OUT; i++) begin
      do_op(FOP_QUERY, out_addr(i), h, o);
      if (h) fp++;
    end
    $display("false positives: %0d of %0d", fp, N_OUT);
    check(fp * 100 < 5 * N_OUT, "false-positive rate below 5 %");
    check(fp > 0, "some false positives exist (the filter is approximate)");

    // Blocks whose hash value is shared by three or more inserted blocks drive
    // a 2-bit counter to its sticky maximum and must stay visible; every other
    // block must be gone. The multiplicity is worked out from the hash formula.
    for (int i = 0; i < N_IN; i++) mult[ref_hash(in_addr(i))]++;
    for (int i = 0; i < N_IN; i++) do_op(FOP_DELETE, in_addr(i), h, o);
    fn = 0; fp = 0;
    for (int i = 0; i < N_IN; i++) begin
      do_op(FOP_QUERY, in_addr(i), h, o);
      if (h != (mult[ref_hash(in_addr(i))] >= 3)) fn++;
      if (h) fp++;
    end
    $display("blocks left behind saturated counters: %0d", fp);
    check(fn == 0, $sformatf("only saturated cells survive deleting every block (%0d wrong)", fn));

    // overflow: 8 cells cannot hold 40 blocks; no inserted block may be missed
    ovf = 0; fn = 0;
    for (int i = 0; i < 40; i++) begin s_do(FOP_INSERT, ins[i], h, o); ovf += int'(o); end
    for (int i = 0; i < 40; i++) begin s_do(FOP_QUERY, ins[i], h, o); fn += int'(!h); end
    $display("tiny filter: %0d of 40 inserts overflowed", ovf);
    check(ovf > 0, "overflow flagged when every candidate bucket is full");
    check(fn == 0, $sformatf("no false negative after overflow (%0d missed)", fn));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

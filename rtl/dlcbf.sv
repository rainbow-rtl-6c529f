// dlcbf: d-left Counting Bloom Filter, used as F-LLC (blocks present in the
// private caches of a chip) and as F-MEM (blocks of this home present in any
// chip).
//
// The block address is hashed once to H = BKT_W + FP_W bits. Subtable i applies
// its own invertible permutation P_i to H (multiply by an odd constant, then
// XOR a constant, modulo 2^H); the upper BKT_W bits of P_i(H) select a bucket
// of subtable i and the lower FP_W bits are the fingerprint stored there.
// Because P_i is a bijection, a (bucket, fingerprint) pair of subtable i names
// exactly one hash value, which is what lets a d-left filter delete safely.
// A bucket holds CELLS cells of {fingerprint, counter}; counter 0 is a free cell.
//   query : hit if any of the D candidate buckets holds the fingerprint
//   insert: increment the matching cell, else take a free cell in the least
//           loaded candidate bucket (leftmost on a tie)
//   delete: decrement the matching cell; the cell is free again at zero
// A counter that reached its maximum stays there (never decremented). An
// insert finding all candidate buckets full is flagged on rsp_overflow and
// sets a sticky overflow bit in each candidate bucket; a query reaching a
// bucket with that bit set reports a hit. Both rules keep the filter free of
// false negatives (a miss must be trustworthy: the home reads memory with all
// tokens on a miss) at the price of extra false positives.
//
// Interface and timing: an operation (fop_e) is accepted when op_ready is high;
// the D buckets are read in that cycle and rsp_* is valid in the next one, when
// the modified bucket is written back: two cycles per operation. rsp_hit is the
// presence before the operation. After reset every bucket is cleared, one
// bucket index per cycle, with op_ready low until init_done.
//
// From the paper: a d-left CBF with per-subtable permutations (the P boxes of
// its sketch, two subtables drawn), fingerprint and counter per cell, increment
// on arrival and decrement on the last eviction. Own choices: the hash and
// permutation constants, CELLS, FP_W, CNT_W, saturation and the overflow bit.
module dlcbf #(
  parameter int D       = 2,
  parameter int BUCKETS = 512,
  parameter int CELLS   = 4,
  parameter int FP_W    = 8,
  parameter int CNT_W   = 2,
  parameter int AW      = rainbow_pkg::ADDR_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 op_valid,
  output logic                 op_ready,
  input  rainbow_pkg::fop_e    op,
  input  logic [AW-1:0]        op_addr,
  output logic                 rsp_valid,
  output logic                 rsp_hit,
  output logic                 rsp_overflow,
  output logic                 rsp_underflow,
  output logic                 init_done
);
  import rainbow_pkg::*;

  localparam int BKT_W  = $clog2(BUCKETS);
  localparam int H_W    = BKT_W + FP_W;
  localparam int CIDX_W = (CELLS > 1) ? $clog2(CELLS) : 1;
  localparam int DIDX_W = (D > 1) ? $clog2(D) : 1;
  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  typedef struct packed {
    logic [FP_W-1:0]  fp;
    logic [CNT_W-1:0] cnt;
  } cell_t;
  typedef struct packed {
    logic                   ovf;     // an insert into this bucket was dropped
    cell_t [CELLS-1:0]      cells;
  } bucket_t;

  // hash of the block address (multiplicative, top H_W bits of the product)
  function automatic logic [H_W-1:0] hash(logic [AW-1:0] a);
    logic [63:0] p;
    p = 64'(a) * 64'h0000_0000_9E37_79B1;
    return p[31 -: H_W];
  endfunction

  // permutation of subtable i: odd multiplier then XOR, both modulo 2^H_W
  function automatic logic [H_W-1:0] perm(int i, logic [H_W-1:0] h);
    logic [63:0] m;
    logic [63:0] c;
    int          k;
    k = 2 * (7919 * (i + 1) + 3) + 1;           // odd multiplier
    m = 64'(k);
    c = 64'h0000_0000_5A5A_C3C3 ^ 64'(i * 40503);
    return H_W'(64'(h) * m) ^ H_W'(c);
  endfunction

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_CMP} state_e;
  state_e state;

  logic [BKT_W-1:0] init_idx;
  fop_e             r_op;
  logic [H_W-1:0]   r_h;

  bucket_t          rd_bkt [D];
  bucket_t          wr_bkt [D];
  logic [D-1:0]     we;
  logic [BKT_W-1:0] bidx   [D];
  logic [BKT_W-1:0] cidx   [D];   // candidate bucket of the current op
  logic [FP_W-1:0]  cfp    [D];

  always_comb begin
    for (int i = 0; i < D; i++) begin
      logic [H_W-1:0] ph;
      ph      = perm(i, (state == S_CMP) ? r_h : hash(op_addr));
      bidx[i] = ph[H_W-1 -: BKT_W];
      cfp[i]  = ph[FP_W-1:0];
    end
  end

  for (genvar g = 0; g < D; g++) begin : g_sub
    bucket_t tbl [BUCKETS];
    always_ff @(posedge clk) begin
      if (state == S_INIT) tbl[init_idx] <= '0;
      else if (state == S_CMP && we[g]) tbl[cidx[g]] <= wr_bkt[g];
      if (state == S_IDLE && op_valid) rd_bkt[g] <= tbl[bidx[g]];
    end
  end

  // compare stage
  logic              any_match;
  logic              any_ovf;
  logic [DIDX_W-1:0] m_sub;
  logic [CIDX_W-1:0] m_cell;
  logic [D-1:0]      has_free;
  logic [CIDX_W-1:0] free_cell [D];
  int unsigned       load      [D];
  logic              ins_ok;
  logic [DIDX_W-1:0] ins_sub;

  always_comb begin
    any_match = 1'b0; m_sub = '0; m_cell = '0; any_ovf = 1'b0;
    for (int i = D - 1; i >= 0; i--) begin
      has_free[i] = 1'b0; free_cell[i] = '0; load[i] = 0;
      if (rd_bkt[i].ovf) any_ovf = 1'b1;
      for (int c = CELLS - 1; c >= 0; c--) begin
        if (rd_bkt[i].cells[c].cnt != '0) begin
          load[i] = load[i] + 1;
          if (rd_bkt[i].cells[c].fp == cfp[i]) begin
            any_match = 1'b1; m_sub = DIDX_W'(i); m_cell = CIDX_W'(c);
          end
        end else begin
          has_free[i] = 1'b1; free_cell[i] = CIDX_W'(c);
        end
      end
    end
    ins_ok = 1'b0; ins_sub = '0;
    for (int i = D - 1; i >= 0; i--) begin
      if (has_free[i] && (!ins_ok || load[i] <= load[ins_sub])) begin
        ins_ok = 1'b1; ins_sub = DIDX_W'(i);
      end
    end
  end

  always_comb begin
    for (int i = 0; i < D; i++) begin
      wr_bkt[i] = rd_bkt[i];
      we[i]     = 1'b0;
      cidx[i]   = bidx[i];
    end
    if (state == S_CMP) begin
      if (r_op == FOP_INSERT) begin
        if (any_match) begin
          if (rd_bkt[m_sub].cells[m_cell].cnt != CNT_MAX) begin
            wr_bkt[m_sub].cells[m_cell].cnt = rd_bkt[m_sub].cells[m_cell].cnt + 1'b1;
            we[m_sub] = 1'b1;
          end
        end else if (ins_ok) begin
          wr_bkt[ins_sub].cells[free_cell[ins_sub]].fp  = cfp[ins_sub];
          wr_bkt[ins_sub].cells[free_cell[ins_sub]].cnt = CNT_W'(1);
          we[ins_sub] = 1'b1;
        end else begin
          // no room: mark every candidate bucket so the block is never missed
          for (int i = 0; i < D; i++) begin
            wr_bkt[i].ovf = 1'b1;
            we[i]         = 1'b1;
          end
        end
      end else if (r_op == FOP_DELETE) begin
        if (any_match && rd_bkt[m_sub].cells[m_cell].cnt != CNT_MAX) begin
          wr_bkt[m_sub].cells[m_cell].cnt = rd_bkt[m_sub].cells[m_cell].cnt - 1'b1;
          we[m_sub] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_idx <= '0;
      r_op     <= FOP_QUERY;
      r_h      <= '0;
    end else begin
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == BKT_W'(BUCKETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (op_valid) begin
          r_op  <= op;
          r_h   <= hash(op_addr);
          state <= S_CMP;
        end
        S_CMP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign op_ready      = (state == S_IDLE);
  assign init_done     = (state != S_INIT);
  assign rsp_valid     = (state == S_CMP);
  assign rsp_hit       = any_match || any_ovf;
  assign rsp_overflow  = (state == S_CMP) && (r_op == FOP_INSERT) && !any_match && !ins_ok;
  assign rsp_underflow = (state == S_CMP) && (r_op == FOP_DELETE) && !any_match;

endmodule

// sparse_dir: loosely inclusive sparse directory, used as D-LLC (sharers are
// the cores of a chip) and as D-MEM (sharers are the chips of the system).
//
// Each entry holds a valid bit, the address tag, one presence bit per sharer
// and the number of the sharer that owns the block (the silver-token core in a
// D-LLC, the gold-token chip in a D-MEM). The directory is set associative; a
// set is one memory word (all ways plus a round-robin victim pointer). An
// allocation that finds the set full overwrites the victim way without telling
// anyone: this is the silent ("loosely inclusive") eviction of the protocol, no
// sharer is invalidated and the information is rebuilt on demand later.
//
// Interface and timing: one operation (dop_e) is accepted when op_ready is
// high. The set is read in the accept cycle (synchronous read) and compared in
// the next cycle, in which rsp_* is valid for one cycle and the modified set is
// written back. rsp_hit/rsp_sharers/rsp_owner report the entry as it was before
// the operation; rsp_evicted flags a silent eviction. An operation therefore
// takes two cycles. After reset the module clears every set, one per cycle,
// and keeps op_ready low until init_done.
//
// From the paper: tag + sharer bit-vector entries, silent eviction, owner
// annotation in the sharer information, two ways drawn in its sketch. Own
// choices: associativity (WAYS), round-robin replacement, the owner field
// encoding and the two-cycle read-modify-write access.
module sparse_dir #(
  parameter int ENTRIES  = 512,
  parameter int WAYS     = 8,
  parameter int SHARERS  = 4,
  parameter int IDX_SKIP = 2,    // address bits below the set index (bank interleave)
  parameter int AW       = rainbow_pkg::ADDR_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   op_valid,
  output logic                   op_ready,
  input  rainbow_pkg::dop_e      op,
  input  logic [AW-1:0]          op_addr,
  input  logic [SHARERS-1:0]     op_sharers,
  input  logic [$clog2(SHARERS)-1:0] op_owner,
  output logic                   rsp_valid,
  output logic                   rsp_hit,
  output logic [SHARERS-1:0]     rsp_sharers,
  output logic [$clog2(SHARERS)-1:0] rsp_owner,
  output logic                   rsp_evicted,
  output logic                   init_done
);
  import rainbow_pkg::*;

  localparam int SETS  = ENTRIES / WAYS;
  localparam int SET_W = $clog2(SETS);
  localparam int WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int OWN_W = $clog2(SHARERS);
  localparam int TAG_W = AW - IDX_SKIP - SET_W;

  typedef struct packed {
    logic               valid;
    logic [TAG_W-1:0]   tag;
    logic [SHARERS-1:0] sharers;
    logic [OWN_W-1:0]   owner;
  } entry_t;

  typedef struct packed {
    logic [WAY_W-1:0]      rr;
    entry_t [WAYS-1:0]     way;
  } set_t;

  set_t mem [SETS];

  typedef enum logic [1:0] {S_INIT, S_IDLE, S_CMP} state_e;
  state_e state;

  logic [SET_W-1:0]   init_idx;
  set_t               rd_set;
  dop_e               r_op;
  logic [SET_W-1:0]   r_idx;
  logic [TAG_W-1:0]   r_tag;
  logic [SHARERS-1:0] r_sh;
  logic [OWN_W-1:0]   r_own;

  function automatic logic [SET_W-1:0] idx_of(logic [AW-1:0] a);
    return a[IDX_SKIP +: SET_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [AW-1:0] a);
    return a[AW-1 -: TAG_W];
  endfunction

  // compare stage
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic             has_free;
  logic [WAY_W-1:0] free_way;
  set_t             new_set;
  logic             do_write;
  logic             evicted;

  always_comb begin
    hit = 1'b0; hit_way = '0; has_free = 1'b0; free_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (rd_set.way[w].valid && rd_set.way[w].tag == r_tag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
      if (!rd_set.way[w].valid) begin
        has_free = 1'b1; free_way = WAY_W'(w);
      end
    end
  end

  always_comb begin
    logic [WAY_W-1:0] w;
    new_set  = rd_set;
    do_write = 1'b0;
    evicted  = 1'b0;
    w        = hit ? hit_way : (has_free ? free_way : rd_set.rr);
    unique case (r_op)
      DOP_WRITE, DOP_ADD: begin
        do_write = 1'b1;
        if (!hit) begin
          evicted = !has_free;
          if (!has_free) new_set.rr = (WAYS > 1) ? WAY_W'(rd_set.rr + 1'b1) : '0;
          new_set.way[w].valid   = 1'b1;
          new_set.way[w].tag     = r_tag;
          new_set.way[w].sharers = r_sh;
          new_set.way[w].owner   = r_own;
        end else if (r_op == DOP_WRITE) begin
          new_set.way[w].sharers = r_sh;
          new_set.way[w].owner   = r_own;
        end else begin
          new_set.way[w].sharers = rd_set.way[w].sharers | r_sh;
        end
      end
      DOP_REMOVE: begin
        if (hit) begin
          do_write = 1'b1;
          new_set.way[w].sharers = rd_set.way[w].sharers & ~r_sh;
          if ((rd_set.way[w].sharers & ~r_sh) == '0) new_set.way[w].valid = 1'b0;
        end
      end
      DOP_INVAL: begin
        if (hit) begin
          do_write = 1'b1;
          new_set.way[w].valid = 1'b0;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_INIT;
      init_idx <= '0;
      r_op     <= DOP_LOOKUP;
      r_idx    <= '0;
      r_tag    <= '0;
      r_sh     <= '0;
      r_own    <= '0;
    end else begin
      unique case (state)
        S_INIT: begin
          init_idx <= init_idx + 1'b1;
          if (init_idx == SET_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (op_valid) begin
          r_op  <= op;
          r_idx <= idx_of(op_addr);
          r_tag <= tag_of(op_addr);
          r_sh  <= op_sharers;
          r_own <= op_owner;
          state <= S_CMP;
        end
        S_CMP: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // set memory: one synchronous read port, one write port
  always_ff @(posedge clk) begin
    if (state == S_INIT) mem[init_idx] <= '0;
    else if (state == S_CMP && do_write) mem[r_idx] <= new_set;
    if (state == S_IDLE && op_valid) rd_set <= mem[idx_of(op_addr)];
  end

  assign op_ready    = (state == S_IDLE);
  assign init_done   = (state != S_INIT);
  assign rsp_valid   = (state == S_CMP);
  assign rsp_hit     = hit;
  assign rsp_sharers = hit ? rd_set.way[hit_way].sharers : '0;
  assign rsp_owner   = hit ? rd_set.way[hit_way].owner : '0;
  assign rsp_evicted = (state == S_CMP) && evicted;

endmodule

// dfmem_ctrl: home coherence controller at a memory controller, with its
// D|F-MEM structure.
//
// The D-MEM is a sparse_dir whose sharers are the chips of the system (owner =
// the chip holding the gold token); the F-MEM is a dlcbf counting, for every
// block of this home, the chips holding a copy. Requests come from the LLC
// banks of every chip (after their own D|F-LLC decided the chip cannot serve
// them):
//   read  (D-MEM hit)  -> ask the gold-owner chip, add the requester as sharer
//         (F-MEM hit)  -> broadcast to all chips, build a D-MEM entry from the
//                         replies; no token anywhere = false positive -> DRAM
//         (F-MEM miss) -> read DRAM, the requester gets every token
//   write (D-MEM hit)  -> collect tokens from the sharer chips
//         (F-MEM hit)  -> collect from all chips
//         (F-MEM miss) -> DRAM with every token
//   evict (all gold+silver tokens returned) -> forget the chip in D-MEM/F-MEM
//         (tokens missing) -> system-wide collection, like a write
// Token counting ends a write collection as soon as every token is present.
// The F-MEM is incremented when a chip without a copy obtains one and
// decremented for every chip that loses its copy (write, invalidation,
// eviction). Memory holds either all tokens of a block or none.
//
// Interfaces (valid pulses are one cycle): req_* (ready/valid) from the LLC
// banks, rsp_* back to the requesting chip; xs_* snoops to the chips, one
// valid/ready pair per chip held until accepted, xr_* one reply per snooped
// chip; mem_* a DRAM access (any latency, no data modelled). One transaction
// at a time; lookup three cycles, each table update two.
//
// The decision tree follows the paper's actions for requests reaching the
// D-MEM and its replacement rules. Own choices: serial processing, message
// encodings, falling back to a broadcast when a D-MEM multicast did not find
// all tokens, and treating the requesting chip's held tokens as proof that it
// already had a copy.
//
// Lint note: verilator's SYNCASYNCNET on rst_n stands by design. rst_n is the
// asynchronous reset of the registers, and the two assertions at the end also
// use it in their clocked 'disable iff'; no logic samples it synchronously.
module dfmem_ctrl #(
  parameter int DIR_ENTRIES = 4096,
  parameter int DIR_WAYS    = 8,
  parameter int F_D         = 2,
  parameter int F_BUCKETS   = 8192,
  parameter int F_CELLS     = 8,
  parameter int F_FP_W      = 8,
  parameter int F_CNT_W     = 2
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 req_valid,
  output logic                                 req_ready,
  input  rainbow_pkg::hreq_e                   req_type,
  input  logic [rainbow_pkg::CHIP_W-1:0]       req_chip,
  input  rainbow_pkg::addr_t                   req_addr,
  input  rainbow_pkg::tokens_t                 req_tokens,
  output logic                                 rsp_valid,
  output logic [rainbow_pkg::CHIP_W-1:0]       rsp_chip,
  output rainbow_pkg::addr_t                   rsp_addr,
  output rainbow_pkg::tokens_t                 rsp_tokens,
  output logic [rainbow_pkg::N_CHIPS-1:0]      xs_valid,
  input  logic [rainbow_pkg::N_CHIPS-1:0]      xs_ready,
  output rainbow_pkg::snp_e                    xs_kind,
  output rainbow_pkg::addr_t                   xs_addr,
  input  logic [rainbow_pkg::N_CHIPS-1:0]      xr_valid,
  input  rainbow_pkg::tokens_t                 xr_tokens [rainbow_pkg::N_CHIPS],
  input  logic [rainbow_pkg::N_CHIPS-1:0]      xr_has,
  output logic                                 mem_req_valid,
  output rainbow_pkg::addr_t                   mem_req_addr,
  input  logic                                 mem_rsp_valid,
  output rainbow_pkg::mem_ev_t                 ev,
  output logic                                 init_done
);
  import rainbow_pkg::*;

  localparam logic [N_CHIPS-1:0] ALL_CHIPS = '1;

  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_SNP, S_MEM, S_UPD} state_e;
  typedef enum logic [2:0] {M_RD_D, M_RD_B, M_WR_D, M_WR_B, M_EV} mode_e;
  state_e state;
  mode_e  t_mode;

  // ---------------- D-MEM and F-MEM ----------------
  logic              d_valid, d_ready, d_rsp_valid, d_rsp_hit, d_rsp_evicted, d_init;
  dop_e              d_op;
  logic [N_CHIPS-1:0] d_sh, d_rsp_sh;
  logic [CHIP_W-1:0] d_own, d_rsp_own;
  addr_t             d_addr;
  logic              f_valid, f_ready, f_rsp_valid, f_rsp_hit, f_ovf, f_unf, f_init;
  fop_e              f_op;
  addr_t             f_addr;

  sparse_dir #(.ENTRIES(DIR_ENTRIES), .WAYS(DIR_WAYS), .SHARERS(N_CHIPS), .IDX_SKIP(0))
  u_dmem (
    .clk, .rst_n, .op_valid(d_valid), .op_ready(d_ready), .op(d_op), .op_addr(d_addr),
    .op_sharers(d_sh), .op_owner(d_own), .rsp_valid(d_rsp_valid), .rsp_hit(d_rsp_hit),
    .rsp_sharers(d_rsp_sh), .rsp_owner(d_rsp_own), .rsp_evicted(d_rsp_evicted),
    .init_done(d_init));

  dlcbf #(.D(F_D), .BUCKETS(F_BUCKETS), .CELLS(F_CELLS), .FP_W(F_FP_W), .CNT_W(F_CNT_W))
  u_fmem (
    .clk, .rst_n, .op_valid(f_valid), .op_ready(f_ready), .op(f_op), .op_addr(f_addr),
    .rsp_valid(f_rsp_valid), .rsp_hit(f_rsp_hit), .rsp_overflow(f_ovf),
    .rsp_underflow(f_unf), .init_done(f_init));

  assign init_done = d_init & f_init;

  // ---------------- transaction state ----------------
  hreq_e              t_type;
  logic [CHIP_W-1:0]  t_chip;
  addr_t              t_addr;
  tokens_t            t_tok;
  logic               lk_req, got_d, got_f;
  logic               lk_dhit, lk_fhit;
  logic [N_CHIPS-1:0] lk_dsh;
  logic [CHIP_W-1:0]  lk_down;
  logic [N_CHIPS-1:0] xs_pend, pend, snooped, has_v, gave_v;
  tokens_t            acc;
  snp_e               r_kind;

  // pending table updates: one directory op, then F-MEM deletes, then an insert
  logic               u_dir, u_dwait, u_fwait, u_ins;
  dop_e               u_dop;
  logic [N_CHIPS-1:0] u_dsh;
  logic [CHIP_W-1:0]  u_down;
  logic [N_CHIPS-1:0] u_del;
  logic               mem_wait;

  wire [N_CHIPS-1:0] req_bit = N_CHIPS'(1) << t_chip;
  wire               lk_done = got_d & got_f;

  // next F-MEM update
  logic              f_upd;
  fop_e              f_upd_op;
  logic [CHIP_W-1:0] del_chip;
  always_comb begin
    del_chip = '0;
    for (int c = N_CHIPS - 1; c >= 0; c--) if (u_del[c]) del_chip = CHIP_W'(c);
    f_upd    = (state == S_UPD) && !u_fwait && (u_del != '0 || u_ins);
    f_upd_op = (u_del != '0) ? FOP_DELETE : FOP_INSERT;
  end

  always_comb begin
    d_valid = lk_req; d_op = DOP_LOOKUP; d_addr = t_addr; d_sh = '0; d_own = '0;
    f_valid = lk_req; f_op = FOP_QUERY;  f_addr = t_addr;
    if (state == S_UPD && u_dir) begin
      d_valid = 1'b1; d_op = u_dop; d_sh = u_dsh; d_own = u_down;
    end
    if (f_upd) begin
      f_valid = 1'b1; f_op = f_upd_op;
    end
  end

  // accumulation of this cycle's chip replies
  tokens_t            x_in;
  logic [N_CHIPS-1:0] x_hit;
  logic [N_CHIPS-1:0] x_gave;
  always_comb begin
    x_in = TOK_NONE;
    x_hit = xr_valid & pend;
    x_gave = '0;
    for (int c = 0; c < N_CHIPS; c++)
      if (x_hit[c]) begin
        x_in = tok_add(x_in, xr_tokens[c]);
        x_gave[c] = tok_any(xr_tokens[c]);
      end
  end

  // first chip that gave tokens on a remote read is the gold owner
  logic [CHIP_W-1:0] gold_chip;
  always_comb begin
    gold_chip = t_chip;
    for (int c = N_CHIPS - 1; c >= 0; c--) if (gave_v[c]) gold_chip = CHIP_W'(c);
  end

  tokens_t total;
  assign total = tok_add(acc, t_tok);

  assign req_ready = (state == S_IDLE) && init_done;
  assign xs_valid  = (state == S_SNP) ? xs_pend : '0;
  assign xs_kind   = r_kind;
  assign xs_addr   = t_addr;
  assign rsp_chip  = t_chip;
  assign rsp_addr  = t_addr;
  assign mem_req_addr = t_addr;

  task automatic start_snoop(input snp_e k, input logic [N_CHIPS-1:0] m, input mode_e md);
    r_kind  <= k;
    xs_pend <= m;
    pend    <= m;
    snooped <= snooped | m;
    t_mode  <= md;
    state   <= S_SNP;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t_mode <= M_RD_D;
      t_type <= HREQ_RD; t_chip <= '0; t_addr <= '0; t_tok <= TOK_NONE;
      lk_req <= 1'b0; got_d <= 1'b0; got_f <= 1'b0;
      lk_dhit <= 1'b0; lk_fhit <= 1'b0; lk_dsh <= '0; lk_down <= '0;
      xs_pend <= '0; pend <= '0; snooped <= '0; has_v <= '0; gave_v <= '0;
      acc <= TOK_NONE; r_kind <= SNP_RD_REMOTE;
      u_dir <= 1'b0; u_dwait <= 1'b0; u_fwait <= 1'b0; u_ins <= 1'b0;
      u_dop <= DOP_LOOKUP; u_dsh <= '0; u_down <= '0; u_del <= '0;
      mem_wait <= 1'b0; mem_req_valid <= 1'b0;
      rsp_valid <= 1'b0; rsp_tokens <= TOK_NONE; ev <= '0;
    end else begin
      lk_req <= 1'b0; rsp_valid <= 1'b0; mem_req_valid <= 1'b0; ev <= '0;

      if (d_rsp_valid && state == S_LOOK) begin
        got_d <= 1'b1; lk_dhit <= d_rsp_hit; lk_dsh <= d_rsp_sh; lk_down <= d_rsp_own;
      end
      if (f_rsp_valid && state == S_LOOK) begin
        got_f <= 1'b1; lk_fhit <= f_rsp_hit;
      end

      unique case (state)
        S_IDLE: if (req_valid && req_ready) begin
          t_type <= req_type; t_chip <= req_chip; t_addr <= req_addr; t_tok <= req_tokens;
          lk_req <= 1'b1; got_d <= 1'b0; got_f <= 1'b0;
          acc <= TOK_NONE; snooped <= '0; has_v <= '0; gave_v <= '0;
          u_dir <= 1'b0; u_ins <= 1'b0; u_del <= '0;
          state <= S_LOOK;
        end
        // ------------------------------------------------------------
        S_LOOK: if (lk_done) begin
          unique case (t_type)
            HREQ_RD: begin
              if (lk_dhit && lk_down != t_chip) begin
                ev.dmem_hit <= 1'b1;
                start_snoop(SNP_RD_REMOTE, N_CHIPS'(1) << lk_down, M_RD_D);
              end else if (lk_fhit || lk_dhit) begin
                ev.fmem_bcast <= 1'b1;
                start_snoop(SNP_RD_REMOTE, ALL_CHIPS & ~req_bit, M_RD_B);
              end else begin
                ev.mem_read <= 1'b1; mem_req_valid <= 1'b1; mem_wait <= 1'b1;
                state <= S_MEM;
              end
            end
            HREQ_WR: begin
              if (lk_dhit && ((lk_dsh | (N_CHIPS'(1) << lk_down)) & ~req_bit) != '0) begin
                ev.dmem_hit <= 1'b1;
                start_snoop(SNP_COLLECT, (lk_dsh | (N_CHIPS'(1) << lk_down)) & ~req_bit, M_WR_D);
              end else if (lk_fhit || lk_dhit || tok_any(t_tok)) begin
                ev.fmem_bcast <= 1'b1;
                start_snoop(SNP_COLLECT, ALL_CHIPS & ~req_bit, M_WR_B);
              end else begin
                ev.mem_read <= 1'b1; mem_req_valid <= 1'b1; mem_wait <= 1'b1;
                state <= S_MEM;
              end
            end
            default: begin  // HREQ_EVICT
              if (t_tok.gold && t_tok.silver == SIL_W'(N_CHIPS)) begin
                ev.evict_clean <= 1'b1;
                rsp_valid <= 1'b1; rsp_tokens <= TOK_NONE;
                u_dir <= lk_dhit; u_dop <= DOP_REMOVE; u_dsh <= req_bit;
                u_del <= req_bit;
                state <= S_UPD;
              end else begin
                ev.evict_inval <= 1'b1;
                start_snoop(SNP_COLLECT,
                            lk_dhit ? ((lk_dsh | (N_CHIPS'(1) << lk_down)) & ~req_bit)
                                    : (ALL_CHIPS & ~req_bit), M_EV);
              end
            end
          endcase
        end
        // ------------------------------------------------------------
        S_SNP: begin
          xs_pend <= xs_pend & ~xs_ready;
          pend    <= pend & ~x_hit;
          acc     <= tok_add(acc, x_in);
          has_v   <= has_v | (x_hit & xr_has);
          gave_v  <= gave_v | x_gave;
          if (pend == '0 && xs_pend == '0) begin
            unique case (t_mode)
              M_RD_D: begin
                if (tok_any(acc)) begin
                  rsp_valid <= 1'b1; rsp_tokens <= acc;
                  u_dir <= 1'b1; u_dop <= DOP_ADD; u_dsh <= req_bit;
                  u_ins <= !tok_any(t_tok);
                  state <= S_UPD;
                end else begin
                  ev.fmem_bcast <= 1'b1;
                  start_snoop(SNP_RD_REMOTE, ALL_CHIPS & ~req_bit & ~snooped, M_RD_B);
                end
              end
              M_RD_B: begin
                if (tok_any(acc) || has_v != '0) begin
                  ev.recon <= 1'b1;
                  rsp_valid <= 1'b1; rsp_tokens <= acc;
                  u_dir <= 1'b1; u_dop <= DOP_WRITE; u_dsh <= has_v | gave_v | req_bit;
                  u_down <= gold_chip;
                  u_ins <= !tok_any(t_tok);
                  state <= S_UPD;
                end else begin
                  ev.false_pos <= 1'b1;
                  ev.mem_read <= 1'b1; mem_req_valid <= 1'b1; mem_wait <= 1'b1;
                  state <= S_MEM;
                end
              end
              M_WR_D, M_WR_B: begin
                if (!tok_is_all(total) && t_mode == M_WR_D &&
                    (ALL_CHIPS & ~req_bit & ~snooped) != '0) begin
                  ev.fmem_bcast <= 1'b1;
                  start_snoop(SNP_COLLECT, ALL_CHIPS & ~req_bit & ~snooped, M_WR_B);
                end else if (!tok_any(total)) begin
                  ev.false_pos <= 1'b1;
                  ev.mem_read <= 1'b1; mem_req_valid <= 1'b1; mem_wait <= 1'b1;
                  state <= S_MEM;
                end else begin
                  rsp_valid <= 1'b1; rsp_tokens <= acc;
                  u_dir <= 1'b1; u_dop <= DOP_INVAL;
                  u_del <= gave_v & ~req_bit;
                  u_ins <= !tok_any(t_tok);
                  state <= S_UPD;
                end
              end
              default: begin  // M_EV: memory now holds every token
                rsp_valid <= 1'b1; rsp_tokens <= TOK_NONE;
                u_dir <= 1'b1; u_dop <= DOP_INVAL;
                u_del <= (gave_v & ~req_bit) | (tok_any(t_tok) ? req_bit : '0);
                state <= S_UPD;
              end
            endcase
          end
        end
        // ------------------------------------------------------------
        S_MEM: if (mem_rsp_valid && mem_wait) begin
          mem_wait <= 1'b0;
          rsp_valid <= 1'b1; rsp_tokens <= TOK_ALL;
          u_ins <= 1'b1;
          state <= S_UPD;
        end
        // ------------------------------------------------------------
        S_UPD: begin
          if (u_dir && d_ready) begin u_dir <= 1'b0; u_dwait <= 1'b1; end
          if (d_rsp_valid) begin u_dwait <= 1'b0; ev.dir_evict <= d_rsp_evicted; end
          if (f_upd && f_ready) begin
            u_fwait <= 1'b1;
            if (u_del != '0) u_del[del_chip] <= 1'b0;
            else             u_ins <= 1'b0;
          end
          if (f_rsp_valid) u_fwait <= 1'b0;
          if (!u_dir && !u_dwait && !u_fwait && u_del == '0 && !u_ins &&
              !(f_upd && f_ready))
            state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // handshake rules
  a_xr_expected: assert property (@(posedge clk) disable iff (!rst_n)
    (xr_valid & ~pend) == '0);
  a_mem_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> state == S_MEM);

endmodule

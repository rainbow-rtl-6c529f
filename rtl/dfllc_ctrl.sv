// dfllc_ctrl: coherence controller of one LLC bank with its D|F-LLC structure.
//
// It holds the D-LLC (a sparse_dir whose sharers are the cores of the chip)
// and the F-LLC (a dlcbf recording blocks present in private caches), and
// decides, for every private-cache miss of its address slice, where the
// tokens come from:
//   read  (D-LLC hit)        -> ask the silver core named in the entry
//         (LLC hit)          -> the LLC bank answers with a bronze token
//         (F-LLC hit)        -> broadcast to the cores, rebuild the D-LLC entry;
//                               no token found = false positive -> home
//         (all miss)         -> read request to the home D|F-MEM
//   write (D-LLC hit)        -> collect tokens from the sharers
//         (LLC holds all)    -> the LLC bank hands over every token
//         (F-LLC hit)        -> broadcast collection, new D-LLC entry
//         (tokens missing)   -> write request to the home D|F-MEM
// Token counting tells when a write is complete (all tokens present) and
// when a read found nobody (false positive). It also serves snoops sent by a
// home D|F-MEM (external requests are handled like local ones: LLC, D-LLC,
// F-LLC in that order) and LLC evictions (all tokens of the chip collected,
// then handed to the home). Private evictions clear the core from the D-LLC
// and, on the last private copy, decrement the F-LLC.
//
// Interfaces (all valid pulses are one cycle long):
//   lreq_*  requests from the private caches (ready/valid), lrsp_* the reply
//           with the tokens granted and who supplied them;
//   llc_*   lookup of the LLC bank array (any latency) and llc_take_* telling
//           it which tokens left the bank;
//   snp_*   snoop to a mask of cores, one snp_rsp_* pulse back per core;
//   hreq_*  request to the home (ready/valid), hrsp_* its reply;
//   xsnp_*  snoop from a home (ready/valid), xrsp_* the chip's reply.
// One local transaction is handled at a time; an external snoop can be served
// while the local transaction waits for its home. A lookup takes three cycles
// plus the LLC latency; each table update two more.
//
// The decision trees follow the read-miss, write-miss and replacement actions
// of the paper. Own choices: the blocking single-transaction organisation, the
// message encodings, falling back (to the LLC bank, then the home) when the
// core named in a D-LLC entry no longer holds tokens, and when the F-LLC is
// incremented (a block arrives in a private cache of a chip that had no
// private copy).
//
// Lint note: verilator's SYNCASYNCNET on rst_n stands by design. rst_n is the
// asynchronous reset of the registers, and the handshake assertions at the end
// also use it in their clocked 'disable iff'; no logic samples it synchronously.
module dfllc_ctrl #(
  parameter int DIR_ENTRIES = 512,
  parameter int DIR_WAYS    = 8,
  parameter int F_D         = 2,
  parameter int F_BUCKETS   = 512,
  parameter int F_CELLS     = 4,
  parameter int F_FP_W      = 8,
  parameter int F_CNT_W     = 2
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // private-cache requests
  input  logic                                   lreq_valid,
  output logic                                   lreq_ready,
  input  rainbow_pkg::lreq_e                     lreq_type,
  input  logic [rainbow_pkg::CORE_W-1:0]         lreq_core,
  input  rainbow_pkg::addr_t                     lreq_addr,
  input  rainbow_pkg::tokens_t                   lreq_tokens,
  input  logic                                   lreq_last,
  output logic                                   lrsp_valid,
  output rainbow_pkg::lreq_e                     lrsp_type,
  output logic [rainbow_pkg::CORE_W-1:0]         lrsp_core,
  output rainbow_pkg::addr_t                     lrsp_addr,
  output rainbow_pkg::tokens_t                   lrsp_tokens,
  output rainbow_pkg::src_e                      lrsp_src,
  // LLC bank array
  output logic                                   llc_req_valid,
  output rainbow_pkg::addr_t                     llc_req_addr,
  input  logic                                   llc_rsp_valid,
  input  logic                                   llc_rsp_hit,
  input  rainbow_pkg::tokens_t                   llc_rsp_tokens,
  input  logic                                   llc_rsp_only,
  output logic                                   llc_take_valid,
  output rainbow_pkg::addr_t                     llc_take_addr,
  output rainbow_pkg::tokens_t                   llc_take_tokens,
  // snoops to the private caches of this chip
  output logic                                   snp_valid,
  output logic [rainbow_pkg::CORES_PER_CHIP-1:0] snp_mask,
  output rainbow_pkg::snp_e                      snp_kind,
  output rainbow_pkg::addr_t                     snp_addr,
  input  logic [rainbow_pkg::CORES_PER_CHIP-1:0] snp_rsp_valid,
  input  rainbow_pkg::tokens_t                   snp_rsp_tokens [rainbow_pkg::CORES_PER_CHIP],
  input  logic [rainbow_pkg::CORES_PER_CHIP-1:0] snp_rsp_has,
  input  logic [rainbow_pkg::CORES_PER_CHIP-1:0] snp_rsp_silver,
  // requests to the home D|F-MEM
  output logic                                   hreq_valid,
  input  logic                                   hreq_ready,
  output rainbow_pkg::hreq_e                     hreq_type,
  output rainbow_pkg::addr_t                     hreq_addr,
  output rainbow_pkg::tokens_t                   hreq_tokens,
  input  logic                                   hrsp_valid,
  input  rainbow_pkg::tokens_t                   hrsp_tokens,
  // snoops from a home D|F-MEM
  input  logic                                   xsnp_valid,
  output logic                                   xsnp_ready,
  input  rainbow_pkg::snp_e                      xsnp_kind,
  input  rainbow_pkg::addr_t                     xsnp_addr,
  output logic                                   xrsp_valid,
  output rainbow_pkg::tokens_t                   xrsp_tokens,
  output logic                                   xrsp_has,
  // observation
  output rainbow_pkg::llc_ev_t                   ev,
  output logic                                   init_done
);
  import rainbow_pkg::*;

  localparam int CPC = CORES_PER_CHIP;
  localparam logic [CPC-1:0] ALL_CORES = '1;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOK, S_SNP, S_HOME, S_UPD, S_XLOOK, S_XSNP
  } state_e;
  typedef enum logic [1:0] {M_RD_D, M_RD_B, M_WR, M_EV} mode_e;

  state_e state, ret_state;

  // ---------------- D-LLC and F-LLC ----------------
  logic              d_valid, d_ready, d_rsp_valid, d_rsp_hit, d_rsp_evicted, d_init;
  dop_e              d_op;
  logic [CPC-1:0]    d_sh, d_rsp_sh;
  logic [CORE_W-1:0] d_own, d_rsp_own;
  addr_t             d_addr;
  logic              f_valid, f_ready, f_rsp_valid, f_rsp_hit, f_ovf, f_unf, f_init;
  fop_e              f_op;
  addr_t             f_addr;

  sparse_dir #(.ENTRIES(DIR_ENTRIES), .WAYS(DIR_WAYS), .SHARERS(CPC), .IDX_SKIP(BANK_W))
  u_dllc (
    .clk, .rst_n, .op_valid(d_valid), .op_ready(d_ready), .op(d_op), .op_addr(d_addr),
    .op_sharers(d_sh), .op_owner(d_own), .rsp_valid(d_rsp_valid), .rsp_hit(d_rsp_hit),
    .rsp_sharers(d_rsp_sh), .rsp_owner(d_rsp_own), .rsp_evicted(d_rsp_evicted),
    .init_done(d_init));

  dlcbf #(.D(F_D), .BUCKETS(F_BUCKETS), .CELLS(F_CELLS), .FP_W(F_FP_W), .CNT_W(F_CNT_W))
  u_fllc (
    .clk, .rst_n, .op_valid(f_valid), .op_ready(f_ready), .op(f_op), .op_addr(f_addr),
    .rsp_valid(f_rsp_valid), .rsp_hit(f_rsp_hit), .rsp_overflow(f_ovf),
    .rsp_underflow(f_unf), .init_done(f_init));

  assign init_done = d_init & f_init;

  // ---------------- transaction registers ----------------
  lreq_e             t_type;
  logic [CORE_W-1:0] t_core;
  addr_t             t_addr;
  tokens_t           t_tok;
  logic              t_last;
  mode_e             t_mode;
  logic              t_dhit;      // D-LLC hit of the local transaction
  logic              t_nopriv;    // no private copy in the chip before
  logic              t_gave;      // a core gave tokens to this transaction
  tokens_t           acc;         // tokens gathered for the local requester
  logic              h_sent, h_got;
  tokens_t           h_tok;

  snp_e              x_kind;
  addr_t             x_addr;
  tokens_t           xacc;
  logic              x_has;

  // lookup results
  logic              got_d, got_f, got_l;
  logic              lk_dhit, lk_fhit, lk_lhit, lk_lonly;
  logic [CPC-1:0]    lk_dsh;
  logic [CORE_W-1:0] lk_down;
  tokens_t           lk_ltok;

  // snoop accumulation
  logic [CPC-1:0]    pend;
  tokens_t           sacc;
  logic [CPC-1:0]    shas;
  logic              ssil_v;
  logic [CORE_W-1:0] ssil;
  logic              s_gave;      // some core gave or held tokens

  // pending table updates
  logic              u_dir, u_flt, u_dwait, u_fwait;
  dop_e              u_dop;
  logic [CPC-1:0]    u_dsh;
  logic [CORE_W-1:0] u_down;
  fop_e              u_fop;
  addr_t             u_addr;
  logic              lk_req;      // lookup to be issued next cycle
  addr_t             lk_addr;

  // LLC grant
  tokens_t           gr_give, gr_keep;
  grant_e            gr_kind;
  always_comb begin
    if (state == S_XLOOK) gr_kind = (x_kind == SNP_RD_REMOTE) ? GR_RD_REMOTE : GR_ALL;
    else                  gr_kind = (t_type == LREQ_RD) ? GR_RD_LOCAL : GR_ALL;
  end
  token_grant u_grant (.held(lk_ltok), .kind(gr_kind), .is_llc(1'b1), .give(gr_give),
                       .keep(gr_keep));

  // table ports
  always_comb begin
    d_valid = 1'b0; d_op = DOP_LOOKUP; d_addr = lk_addr; d_sh = '0; d_own = '0;
    f_valid = 1'b0; f_op = FOP_QUERY;  f_addr = lk_addr;
    if (lk_req) begin
      d_valid = 1'b1; f_valid = 1'b1;
    end else if (state == S_UPD && u_dir) begin
      d_valid = 1'b1; d_op = u_dop; d_addr = u_addr; d_sh = u_dsh; d_own = u_down;
    end
    if (!lk_req && state == S_UPD && u_flt) begin
      f_valid = 1'b1; f_op = u_fop; f_addr = u_addr;
    end
  end

  wire lk_done = got_d & got_f & got_l;
  assign lrsp_type = t_type;
  assign lrsp_core = t_core;
  assign lrsp_addr = t_addr;
  wire [CPC-1:0] req_bit = CPC'(1) << t_core;

  assign lreq_ready = (state == S_IDLE) && init_done && !xsnp_valid && !lk_req;
  assign xsnp_ready = (state == S_IDLE || state == S_HOME) && init_done && !lk_req;
  assign hreq_valid = (state == S_HOME) && !h_sent;
  assign hreq_addr  = t_addr;
  assign hreq_type  = (t_type == LREQ_RD) ? HREQ_RD : (t_type == LREQ_WR) ? HREQ_WR : HREQ_EVICT;
  // tokens the chip holds: the home learns from them whether the chip had a copy
  assign hreq_tokens = (t_type == LREQ_LLC_EVICT) ? acc : tok_add(t_tok, acc);

  // snoop response accumulation (combinational sum of this cycle's replies)
  tokens_t        s_in;
  logic [CPC-1:0] s_hit;
  always_comb begin
    s_in  = TOK_NONE;
    s_hit = snp_rsp_valid & pend;
    for (int c = 0; c < CPC; c++)
      if (s_hit[c]) s_in = tok_add(s_in, snp_rsp_tokens[c]);
  end

  // request-local shorthand
  tokens_t wr_total;
  assign wr_total = tok_add(tok_add(acc, sacc), t_tok);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; ret_state <= S_IDLE;
      t_type <= LREQ_RD; t_core <= '0; t_addr <= '0; t_tok <= TOK_NONE; t_last <= 1'b0;
      t_mode <= M_RD_D; t_dhit <= 1'b0; t_nopriv <= 1'b0; t_gave <= 1'b0; acc <= TOK_NONE;
      h_sent <= 1'b0; h_got <= 1'b0; h_tok <= TOK_NONE;
      x_kind <= SNP_RD_REMOTE; x_addr <= '0; xacc <= TOK_NONE; x_has <= 1'b0;
      got_d <= 1'b0; got_f <= 1'b0; got_l <= 1'b0;
      lk_dhit <= 1'b0; lk_fhit <= 1'b0; lk_lhit <= 1'b0; lk_lonly <= 1'b0;
      lk_dsh <= '0; lk_down <= '0; lk_ltok <= TOK_NONE;
      pend <= '0; sacc <= TOK_NONE; shas <= '0; ssil_v <= 1'b0; ssil <= '0; s_gave <= 1'b0;
      u_dir <= 1'b0; u_flt <= 1'b0; u_dwait <= 1'b0; u_fwait <= 1'b0;
      u_dop <= DOP_LOOKUP; u_dsh <= '0; u_down <= '0; u_fop <= FOP_QUERY; u_addr <= '0;
      lk_req <= 1'b0; lk_addr <= '0;
      lrsp_valid <= 1'b0;
      lrsp_tokens <= TOK_NONE; lrsp_src <= SRC_NONE;
      llc_req_valid <= 1'b0; llc_req_addr <= '0;
      llc_take_valid <= 1'b0; llc_take_addr <= '0; llc_take_tokens <= TOK_NONE;
      snp_valid <= 1'b0; snp_mask <= '0; snp_kind <= SNP_RD_LOCAL; snp_addr <= '0;
      xrsp_valid <= 1'b0; xrsp_tokens <= TOK_NONE; xrsp_has <= 1'b0;
      ev <= '0;
    end else begin
      // defaults: single-cycle pulses
      lrsp_valid <= 1'b0; llc_req_valid <= 1'b0; llc_take_valid <= 1'b0;
      snp_valid <= 1'b0; xrsp_valid <= 1'b0; ev <= '0;
      lk_req <= 1'b0;

      if (hreq_valid && hreq_ready) h_sent <= 1'b1;
      if (hrsp_valid) begin h_got <= 1'b1; h_tok <= hrsp_tokens; end

      // capture lookups
      if (d_rsp_valid && (state == S_LOOK || state == S_XLOOK)) begin
        got_d <= 1'b1; lk_dhit <= d_rsp_hit; lk_dsh <= d_rsp_sh; lk_down <= d_rsp_own;
      end
      if (f_rsp_valid && (state == S_LOOK || state == S_XLOOK)) begin
        got_f <= 1'b1; lk_fhit <= f_rsp_hit;
      end
      if (llc_rsp_valid && (state == S_LOOK || state == S_XLOOK)) begin
        got_l <= 1'b1; lk_lhit <= llc_rsp_hit; lk_ltok <= llc_rsp_hit ? llc_rsp_tokens : TOK_NONE;
        lk_lonly <= llc_rsp_only;
      end
      // capture snoop replies
      if (state == S_SNP || state == S_XSNP) begin
        pend <= pend & ~s_hit;
        sacc <= tok_add(sacc, s_in);
        shas <= shas | (s_hit & snp_rsp_has);
        for (int c = 0; c < CPC; c++)
          if (s_hit[c] && (snp_rsp_silver[c] || snp_rsp_tokens[c].gold)) begin
            ssil_v <= 1'b1; ssil <= CORE_W'(c);
          end
        if (|(s_hit & snp_rsp_has) || tok_any(s_in)) s_gave <= 1'b1;
      end

      unique case (state)
        // ------------------------------------------------------------
        S_IDLE: begin
          if (xsnp_valid && xsnp_ready) begin
            x_kind <= xsnp_kind; x_addr <= xsnp_addr; ret_state <= S_IDLE;
            lk_req <= 1'b1; lk_addr <= xsnp_addr;
            llc_req_valid <= 1'b1; llc_req_addr <= xsnp_addr;
            got_d <= 1'b0; got_f <= 1'b0; got_l <= 1'b0;
            state <= S_XLOOK;
          end else if (lreq_valid && lreq_ready) begin
            t_type <= lreq_type; t_core <= lreq_core; t_addr <= lreq_addr;
            t_tok <= lreq_tokens; t_last <= lreq_last;
            acc <= TOK_NONE; h_sent <= 1'b0; h_got <= 1'b0;
            lk_req <= 1'b1; lk_addr <= lreq_addr;
            llc_req_valid <= (lreq_type == LREQ_RD || lreq_type == LREQ_WR);
            llc_req_addr <= lreq_addr;
            got_d <= 1'b0; got_f <= 1'b0;
            got_l <= !(lreq_type == LREQ_RD || lreq_type == LREQ_WR);
            lk_lhit <= 1'b0; lk_ltok <= TOK_NONE; lk_lonly <= 1'b0;
            state <= S_LOOK;
          end
        end
        // ------------------------------------------------------------
        S_LOOK: if (lk_done) begin
          t_dhit <= lk_dhit; t_gave <= 1'b0;
          u_addr <= t_addr; u_dir <= 1'b0; u_flt <= 1'b0;
          sacc <= TOK_NONE; shas <= '0; ssil_v <= 1'b0; s_gave <= 1'b0;
          snp_addr <= t_addr;
          t_nopriv <= !lk_dhit && (!lk_lhit || lk_lonly) && !tok_any(t_tok);
          unique case (t_type)
            LREQ_PRIV_EVICT: begin
              u_dir <= lk_dhit; u_dop <= DOP_REMOVE; u_dsh <= req_bit;
              u_flt <= t_last;  u_fop <= FOP_DELETE;
              lrsp_valid <= 1'b1; lrsp_tokens <= TOK_NONE; lrsp_src <= SRC_NONE;
              ret_state <= S_IDLE; state <= S_UPD;
            end
            LREQ_RD: begin
              if (lk_dhit && lk_down != t_core) begin
                ev.dllc_hit <= 1'b1;
                snp_valid <= 1'b1; snp_kind <= SNP_RD_LOCAL; snp_mask <= CPC'(1) << lk_down;
                pend <= CPC'(1) << lk_down; t_mode <= M_RD_D; state <= S_SNP;
              end else if (lk_lhit && tok_any(gr_give)) begin
                ev.llc_hit <= 1'b1;
                llc_take_valid <= 1'b1; llc_take_addr <= t_addr; llc_take_tokens <= gr_give;
                lrsp_valid <= 1'b1; lrsp_tokens <= gr_give; lrsp_src <= SRC_LLC;
                u_dir <= lk_dhit; u_dop <= DOP_ADD; u_dsh <= req_bit;
                u_flt <= lk_lonly && !lk_dhit; u_fop <= FOP_INSERT;
                ret_state <= S_IDLE; state <= S_UPD;
              end else if (lk_fhit || lk_dhit) begin
                ev.fllc_bcast <= 1'b1;
                snp_valid <= 1'b1; snp_kind <= SNP_RD_LOCAL; snp_mask <= ALL_CORES & ~req_bit;
                pend <= ALL_CORES & ~req_bit; t_mode <= M_RD_B; state <= S_SNP;
              end else begin
                ev.to_home <= 1'b1; state <= S_HOME;
              end
            end
            LREQ_WR: begin
              // the LLC bank gives every token it has to a writer
              if (lk_lhit && tok_any(lk_ltok)) begin
                llc_take_valid <= 1'b1; llc_take_addr <= t_addr; llc_take_tokens <= lk_ltok;
              end
              acc <= lk_ltok;
              if (lk_dhit) begin
                ev.dllc_hit <= 1'b1;
                snp_valid <= |((lk_dsh | (CPC'(1) << lk_down)) & ~req_bit);
                snp_kind <= SNP_COLLECT;
                snp_mask <= (lk_dsh | (CPC'(1) << lk_down)) & ~req_bit;
                pend <= (lk_dsh | (CPC'(1) << lk_down)) & ~req_bit;
                t_mode <= M_WR; state <= S_SNP;
              end else if (lk_lhit && tok_is_all(tok_add(lk_ltok, t_tok))) begin
                ev.llc_hit <= 1'b1;
                lrsp_valid <= 1'b1; lrsp_tokens <= lk_ltok; lrsp_src <= SRC_LLC;
                u_flt <= lk_lonly && !tok_any(t_tok); u_fop <= FOP_INSERT;
                ret_state <= S_IDLE; state <= S_UPD;
              end else if (lk_fhit) begin
                ev.fllc_bcast <= 1'b1;
                snp_valid <= 1'b1; snp_kind <= SNP_COLLECT; snp_mask <= ALL_CORES & ~req_bit;
                pend <= ALL_CORES & ~req_bit; t_mode <= M_WR; state <= S_SNP;
              end else begin
                ev.to_home <= 1'b1; state <= S_HOME;
              end
            end
            default: begin  // LREQ_LLC_EVICT: t_tok are the LLC line's tokens
              acc <= t_tok;
              if (lk_dhit || lk_fhit) begin
                snp_valid <= 1'b1; snp_kind <= SNP_COLLECT;
                snp_mask <= lk_dhit ? (lk_dsh | (CPC'(1) << lk_down)) : ALL_CORES;
                pend <= lk_dhit ? (lk_dsh | (CPC'(1) << lk_down)) : ALL_CORES;
                t_mode <= M_EV; state <= S_SNP;
              end else begin
                ev.to_home <= 1'b1; state <= S_HOME;
              end
            end
          endcase
        end
        // ------------------------------------------------------------
        S_SNP: if (pend == '0 && !snp_valid) begin
          u_addr <= t_addr; u_dir <= 1'b0; u_flt <= 1'b0;
          t_gave <= s_gave;
          unique case (t_mode)
            M_RD_D: begin
              if (tok_any(sacc)) begin
                lrsp_valid <= 1'b1; lrsp_tokens <= sacc; lrsp_src <= SRC_CORE;
                u_dir <= 1'b1; u_dop <= DOP_ADD; u_dsh <= req_bit;
                ret_state <= S_IDLE; state <= S_UPD;
              end else if (lk_lhit && tok_any(gr_give)) begin
                // the named deliverer has moved its tokens to the LLC bank
                ev.llc_hit <= 1'b1;
                llc_take_valid <= 1'b1; llc_take_addr <= t_addr; llc_take_tokens <= gr_give;
                lrsp_valid <= 1'b1; lrsp_tokens <= gr_give; lrsp_src <= SRC_LLC;
                u_dir <= 1'b1; u_dop <= DOP_ADD; u_dsh <= req_bit;
                ret_state <= S_IDLE; state <= S_UPD;
              end else begin
                ev.to_home <= 1'b1; t_nopriv <= 1'b0; state <= S_HOME;
              end
            end
            M_RD_B: begin
              if (tok_any(sacc)) begin
                ev.recon <= 1'b1;
                lrsp_valid <= 1'b1; lrsp_tokens <= sacc; lrsp_src <= SRC_CORE;
                u_dir <= 1'b1; u_dop <= DOP_WRITE; u_dsh <= shas | req_bit;
                u_down <= ssil_v ? ssil : t_core;
                ret_state <= S_IDLE; state <= S_UPD;
              end else begin
                ev.false_pos <= !s_gave; ev.to_home <= 1'b1;
                t_nopriv <= !s_gave; state <= S_HOME;
              end
            end
            M_WR: begin
              if (tok_is_all(wr_total)) begin
                if (!t_dhit) ev.recon <= 1'b1;
                lrsp_valid <= 1'b1; lrsp_tokens <= tok_add(acc, sacc); lrsp_src <= SRC_CORE;
                u_dir <= 1'b1; u_dop <= DOP_WRITE; u_dsh <= req_bit; u_down <= t_core;
                ret_state <= S_IDLE; state <= S_UPD;
              end else begin
                acc <= tok_add(acc, sacc);
                ev.false_pos <= !t_dhit && !s_gave;
                ev.to_home <= 1'b1;
                t_nopriv <= t_nopriv && !s_gave; state <= S_HOME;
              end
            end
            default: begin  // M_EV: every token of the chip is now gathered
              acc <= tok_add(acc, sacc);
              ev.to_home <= 1'b1;
              state <= S_HOME;
            end
          endcase
        end
        // ------------------------------------------------------------
        S_HOME: begin
          if (xsnp_valid && xsnp_ready) begin
            x_kind <= xsnp_kind; x_addr <= xsnp_addr; ret_state <= S_HOME;
            lk_req <= 1'b1; lk_addr <= xsnp_addr;
            llc_req_valid <= 1'b1; llc_req_addr <= xsnp_addr;
            got_d <= 1'b0; got_f <= 1'b0; got_l <= 1'b0;
            state <= S_XLOOK;
          end else if (h_got && h_sent) begin
            h_got <= 1'b0;
            u_addr <= t_addr; u_dir <= 1'b0; u_flt <= 1'b0;
            lrsp_valid <= 1'b1; lrsp_src <= SRC_HOME;
            lrsp_tokens <= (t_type == LREQ_LLC_EVICT) ? TOK_NONE : tok_add(acc, h_tok);
            if (t_type == LREQ_LLC_EVICT) begin
              // the chip keeps no copy: forget it in both structures
              u_dir <= t_dhit; u_dop <= DOP_INVAL;
              u_flt <= t_gave; u_fop <= FOP_DELETE;
            end else begin
              u_flt <= t_nopriv; u_fop <= FOP_INSERT;
              if (t_dhit) begin
                u_dir <= 1'b1;
                u_dop <= (t_type == LREQ_WR) ? DOP_WRITE : DOP_ADD;
                u_dsh <= req_bit; u_down <= t_core;
              end
            end
            ret_state <= S_IDLE; state <= S_UPD;
          end
        end
        // ------------------------------------------------------------
        S_UPD: begin
          if (u_dir && d_valid && d_ready) begin u_dir <= 1'b0; u_dwait <= 1'b1; end
          if (u_flt && f_valid && f_ready) begin u_flt <= 1'b0; u_fwait <= 1'b1; end
          if (d_rsp_valid) begin u_dwait <= 1'b0; ev.dir_evict <= d_rsp_evicted; end
          if (f_rsp_valid) u_fwait <= 1'b0;
          if (!u_dir && !u_flt && !u_dwait && !u_fwait) state <= ret_state;
        end
        // ------------------------------------------------------------
        S_XLOOK: if (lk_done) begin
          ev.ext_snoop <= 1'b1;
          sacc <= TOK_NONE; shas <= '0; ssil_v <= 1'b0; s_gave <= 1'b0;
          snp_addr <= x_addr;
          x_has <= lk_lhit;
          xacc <= TOK_NONE;
          if (x_kind == SNP_RD_REMOTE) begin
            if (lk_lhit && lk_ltok.gold) begin
              xacc <= gr_give;
              if (tok_any(gr_give)) begin
                llc_take_valid <= 1'b1; llc_take_addr <= x_addr; llc_take_tokens <= gr_give;
              end
              pend <= '0; state <= S_XSNP;
            end else if (lk_dhit) begin
              snp_valid <= 1'b1; snp_kind <= SNP_RD_REMOTE; snp_mask <= CPC'(1) << lk_down;
              pend <= CPC'(1) << lk_down; state <= S_XSNP;
            end else if (lk_fhit) begin
              snp_valid <= 1'b1; snp_kind <= SNP_RD_REMOTE; snp_mask <= ALL_CORES;
              pend <= ALL_CORES; state <= S_XSNP;
            end else begin
              pend <= '0; state <= S_XSNP;
            end
          end else begin  // SNP_COLLECT
            if (lk_lhit && tok_any(lk_ltok)) begin
              llc_take_valid <= 1'b1; llc_take_addr <= x_addr; llc_take_tokens <= lk_ltok;
            end
            xacc <= lk_ltok;
            if (lk_dhit || lk_fhit) begin
              snp_valid <= 1'b1; snp_kind <= SNP_COLLECT;
              snp_mask <= lk_dhit ? (lk_dsh | (CPC'(1) << lk_down)) : ALL_CORES;
              pend <= lk_dhit ? (lk_dsh | (CPC'(1) << lk_down)) : ALL_CORES;
            end else begin
              pend <= '0;
            end
            state <= S_XSNP;
          end
          u_dir <= 1'b0; u_flt <= 1'b0; u_addr <= x_addr;
          u_dop <= DOP_INVAL; u_fop <= FOP_DELETE;
        end
        // ------------------------------------------------------------
        S_XSNP: if (pend == '0 && !snp_valid) begin
          xrsp_valid  <= 1'b1;
          xrsp_tokens <= tok_add(xacc, sacc);
          if (x_kind == SNP_COLLECT) begin
            xrsp_has <= 1'b0;
            u_dir <= lk_dhit;
            u_flt <= s_gave;
          end else begin
            xrsp_has <= x_has | (|shas) | tok_any(sacc);
          end
          state <= S_UPD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- handshake rules ----------------
  // A snoop reply may only come from a core that is being waited for.
  a_snp_rsp: assert property (@(posedge clk) disable iff (!rst_n)
    (snp_rsp_valid & ~pend) == '0 || snp_valid);
  // The home never answers a request that was not sent.
  a_hrsp: assert property (@(posedge clk) disable iff (!rst_n)
    hrsp_valid |-> (state == S_HOME || state == S_XLOOK || state == S_XSNP || state == S_UPD));

endmodule

// token_grant: the colored-token reply rule of a token holder.
//
// Every block has one gold token, one silver token per chip and one bronze
// token per core. Bronze tokens are plain token-counting tokens (one to read,
// all to write); the silver holder of a chip answers reads from cores of its
// own chip and the gold holder answers reads coming from other chips. Given
// the tokens a holder has and the kind of request, this block computes the
// tokens the holder gives away:
//   GR_ALL       : every token (write, invalidation, eviction collection)
//   GR_RD_REMOTE : a gold holder gives one silver token and CORES_PER_CHIP
//                  bronze tokens, so the requesting chip gets its own deliverer;
//                  a holder without gold gives nothing
//   GR_RD_LOCAL  : a silver (or gold) holder gives one bronze token
// The gold holder keeps one silver token (it stays the deliverer of its own
// chip) and gives at most the bronze tokens it has; a deliverer keeps its
// colored token, so it may give away its last bronze token and still read. An
// LLC bank (is_llc) serves a local read from any bronze token it has, without
// needing silver.
//
// Purely combinational. The counts per color and the remote-read rule follow
// the paper; giving exactly one bronze token on a local read ("at least one
// bronze token"), and what a holder short of tokens gives, are this design's
// choices.
module token_grant (
  input  rainbow_pkg::tokens_t held,
  input  rainbow_pkg::grant_e  kind,
  input  logic                 is_llc,
  output rainbow_pkg::tokens_t give,
  output rainbow_pkg::tokens_t keep
);
  import rainbow_pkg::*;

  localparam logic [BRZ_W-1:0] CPC = BRZ_W'(CORES_PER_CHIP);

  always_comb begin
    give = TOK_NONE;
    unique case (kind)
      GR_ALL: give = held;
      GR_RD_REMOTE: if (held.gold) begin
        give.silver = (held.silver > SIL_W'(1)) ? SIL_W'(1) : '0;
        give.bronze = (held.bronze > CPC) ? CPC : held.bronze;
      end
      GR_RD_LOCAL:
        if ((is_llc || held.gold || held.silver != '0) && held.bronze != '0)
          give.bronze = BRZ_W'(1);
      default: give = TOK_NONE;
    endcase
    keep.gold   = held.gold & ~give.gold;
    keep.silver = held.silver - give.silver;
    keep.bronze = held.bronze - give.bronze;
  end

endmodule

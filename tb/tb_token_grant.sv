// tb_token_grant: self-checking test of the colored-token reply rule.
// Directed cases with hand-worked expected grants for a 2-chip, 8-core system
// (gold = 1, silver = 2, bronze = 8), then random holdings checked for token
// conservation (give + keep = held), for never giving a token not held and
// for a reading core always keeping a token.
module tb_token_grant;
  import rainbow_pkg::*;

  tokens_t held, give, keep;
  grant_e  kind;
  logic    is_llc;
  int checks = 0, failures = 0;

  token_grant dut (.held, .kind, .is_llc, .give, .keep);

  function automatic tokens_t T(logic g, int s, int b);
    return '{gold: g, silver: SIL_W'(s), bronze: BRZ_W'(b)};
  endfunction

  task automatic expect_grant(tokens_t h, grant_e k, logic l, tokens_t exp, string what);
    held = h; kind = k; is_llc = l;
    #1;
    checks++;
    if (give !== exp) begin
      failures++;
      $display("FAIL %s: held=%p give=%p expected=%p", what, h, give, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    expect_grant(TOK_ALL,      GR_ALL,       1'b0, TOK_ALL,      "write takes all");
    expect_grant(T(1,2,8),     GR_RD_REMOTE, 1'b0, T(0,1,4),     "gold core, remote read");
    expect_grant(T(1,1,4),     GR_RD_REMOTE, 1'b0, T(0,0,4),     "gold core keeps last silver");
    expect_grant(T(0,1,4),     GR_RD_REMOTE, 1'b0, T(0,0,0),     "no gold: no remote grant");
    expect_grant(T(0,1,4),     GR_RD_LOCAL,  1'b0, T(0,0,1),     "silver core, local read");
    expect_grant(T(0,1,1),     GR_RD_LOCAL,  1'b0, T(0,0,1),     "silver core gives last bronze");
    expect_grant(T(0,1,0),     GR_RD_LOCAL,  1'b0, T(0,0,0),     "silver core without bronze");
    expect_grant(T(1,2,2),     GR_RD_REMOTE, 1'b0, T(0,1,2),     "gold core with few bronze");
    expect_grant(T(0,0,3),     GR_RD_LOCAL,  1'b0, T(0,0,0),     "bronze-only core does not answer");
    expect_grant(T(0,0,3),     GR_RD_LOCAL,  1'b1, T(0,0,1),     "LLC answers with any bronze");
    expect_grant(T(0,0,1),     GR_RD_LOCAL,  1'b1, T(0,0,1),     "LLC gives its last bronze");
    expect_grant(T(1,2,8),     GR_RD_REMOTE, 1'b1, T(0,1,4),     "gold LLC, remote read");
    expect_grant(T(1,1,2),     GR_RD_REMOTE, 1'b1, T(0,0,2),     "gold LLC with few bronze");
    expect_grant(T(0,1,3),     GR_ALL,       1'b1, T(0,1,3),     "collect from LLC");
    for (int i = 0; i < 300; i++) begin
      tokens_t h;
      h = T(1'($urandom), int'($urandom % 3), int'($urandom % 9));
      held = h; kind = grant_e'($urandom % 3); is_llc = 1'($urandom);
      #1;
      checks++;
      if (tok_add(give, keep) !== h || give.silver > h.silver || give.bronze > h.bronze ||
          (give.gold && !h.gold) || (kind != GR_ALL && give.gold) ||
          (kind != GR_ALL && !is_llc && tok_any(h) && !tok_any(keep))) begin
        failures++;
        $display("FAIL random: held=%p kind=%s give=%p keep=%p", h, kind.name(), give, keep);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_te_priority: exhaustive-style random check of the packet selection
// rules of te_priority (including the two-packet hold) against a reference
// written from the rule table, plus directed cases for each rule.
module tb_te_priority;
  import te_pkg::*;
  int checks = 0, failures = 0;
  logic adv, fd, hold, lq, tq, nq, rs, full, sup;
  itype_e lt, tt;
  logic [1:0] lp, tp, np;
  logic [4:0] ce, ci;
  sel_e sel;
  int hits[7];
  int nhold = 0;
  bit clk = 0;

  te_priority dut (.decide_i(adv), .first_done_i(fd), .hold_o(hold), .lc_qual_i(lq), .lc_itype_i(lt), .lc_priv_i(lp),
    .tc_qual_i(tq), .tc_itype_i(tt), .tc_priv_i(tp), .nc_qual_i(nq), .nc_priv_i(np),
    .resync_req_i(rs), .cnt_excl_i(ce), .cnt_incl_i(ci), .full_i(full),
    .support_req_i(sup), .sel_o(sel));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: returns the selection and sets h when tc needs a second packet
  function automatic sel_e model(output bit h);
    sel_e s = SEL_NONE;
    bit st = 0, en;
    en = (rs && ci != 0) || !nq || np != tp || tt == IT_EXC || tt == IT_INT;
    h = 0;
    if (adv && tq) begin
      if (!fd) begin
        if (lq && (lt == IT_EXC || lt == IT_INT)) begin s = SEL_TRAP; st = 1; end
        else if (!lq || lp != tp || (rs && ce == 0)) begin s = SEL_START; st = 1; end
        else if (lt == IT_ERET || lt == IT_UJUMP) begin s = SEL_ADDR_TC; st = 1; end
      end
      if (!st) begin
        if (en) s = SEL_ADDR_END;
        else if (full) s = SEL_FULL;
      end
      h = st && en;
    end
    if (s == SEL_NONE && sup) s = SEL_SUPPORT;
    return s;
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      adv = $urandom_range(0, 7) != 0; fd = $urandom_range(0, 3) == 0; lq = $urandom_range(0, 7) != 0;
      tq = $urandom_range(0, 7) != 0;  nq = $urandom_range(0, 7) != 0;
      lt = itype_e'($urandom_range(0, 6)); tt = itype_e'($urandom_range(0, 6));
      lp = ($urandom_range(0, 7) == 0) ? 2'd1 : 2'd3; tp = ($urandom_range(0, 7) == 0) ? 2'd1 : 2'd3;
      np = ($urandom_range(0, 7) == 0) ? 2'd1 : 2'd3;
      rs = $urandom_range(0, 7) == 0; sup = $urandom_range(0, 7) == 0;
      ce = 5'($urandom_range(0, 30)); ci = ce + 5'($urandom_range(0, 1));
      full = (ci == 31);
      #1;
      begin
        bit h;
        sel_e m;
        m = model(h);
        checks++;
        if (sel !== m || hold !== h) begin
          failures++;
          if (failures < 10) $display("mismatch: got %s/%0b want %s/%0b", sel.name(), hold, m.name(), h);
        end
        if (h) nhold++;
      end
      hits[sel]++;
    end
    checks++; if (nhold == 0) failures++;
    // directed: a plain block with nothing special gives no packet
    fd = 0; adv = 1; lq = 1; tq = 1; nq = 1; lt = IT_TBR; tt = IT_NTBR; lp = 3; tp = 3; np = 3;
    rs = 0; sup = 0; ce = 3; ci = 4; full = 0; #1;
    checks++; if (sel !== SEL_NONE) failures++;
    lt = IT_EXC; #1; checks++; if (sel !== SEL_TRAP) failures++;
    lt = IT_UJUMP; #1; checks++; if (sel !== SEL_ADDR_TC) failures++;
    lt = IT_NONE; nq = 0; #1; checks++; if (sel !== SEL_ADDR_END) failures++;
    nq = 1; ce = 30; ci = 31; full = 1; #1; checks++; if (sel !== SEL_FULL) failures++;
    lq = 0; #1; checks++; if (sel !== SEL_START || hold) failures++;
    nq = 0; #1; checks++; if (sel !== SEL_START || !hold) failures++;
    fd = 1; #1; checks++; if (sel !== SEL_ADDR_END || hold) failures++;
    fd = 0; nq = 1;
    adv = 0; sup = 1; #1; checks++; if (sel !== SEL_SUPPORT) failures++;
    foreach (hits[k]) begin checks++; if (hits[k] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// te_priority: chooses which E-Trace packet, if any, the encoder emits for the
// current block.
//
// The encoder keeps three blocks in view: the last one (lc), the current one
// (tc) and the next one (nc, the block arriving in this cycle). A decision is
// taken for tc when decide_i is set, i.e. when nc is present and a packet can
// be taken. That the
// priority logic selects the packet kind from the state of three consecutive
// cycles is from the design description; the rule order below is this
// design's reading of the E-Trace algorithm, first match wins, and only for a
// qualified tc:
//   1. lc ended in an exception/interrupt  -> F3.1 trap (tc is the handler)
//   2. lc not qualified, privilege changed, or resync requested with no
//      branch pending before tc             -> F3.0 start at tc
//   3. lc ended in an uninferable jump or exception return
//                                           -> F1/F2 with tc's first address
//   4. resync requested with branches pending, nc not qualified, nc changes
//      privilege, or tc ends in a trap      -> F1/F2 with tc's last address
//   5. branch map full with tc's branch     -> F1 with full map, no address
// Rules 1-3 report the start of tc and rule 4 its end. When both apply, rule
// 1-3 goes first and hold_o asks the encoder to keep tc for one more cycle
// (no advance); in that cycle first_done_i is set, rules 1-3 are skipped and
// rule 4 is taken, so neither report nor any branch is lost. When no block is
// decided, a pending support request gives a F3.3 support packet. Purely
// combinational.
module te_priority
  import te_pkg::*;
(
  input  logic                    decide_i,
  input  logic                    first_done_i,
  input  logic                    lc_qual_i,
  input  itype_e                  lc_itype_i,
  input  logic [PRIV_W-1:0]       lc_priv_i,
  input  logic                    tc_qual_i,
  input  itype_e                  tc_itype_i,
  input  logic [PRIV_W-1:0]       tc_priv_i,
  input  logic                    nc_qual_i,
  input  logic [PRIV_W-1:0]       nc_priv_i,
  input  logic                    resync_req_i,
  input  logic [BRANCH_CNT_W-1:0] cnt_excl_i,
  input  logic [BRANCH_CNT_W-1:0] cnt_incl_i,
  input  logic                    full_i,
  input  logic                    support_req_i,
  output sel_e                    sel_o,
  output logic                    hold_o
);

  logic start_rule, end_rule;

  always_comb begin
    end_rule = (resync_req_i && (cnt_incl_i != '0)) || !nc_qual_i ||
               (nc_priv_i != tc_priv_i) || is_trap(tc_itype_i);
    start_rule = 1'b0;
    sel_o  = SEL_NONE;
    if (decide_i && tc_qual_i) begin
      if (!first_done_i) begin
        start_rule = 1'b1;
        if (lc_qual_i && is_trap(lc_itype_i))
          sel_o = SEL_TRAP;
        else if (!lc_qual_i || (lc_priv_i != tc_priv_i) ||
                 (resync_req_i && (cnt_excl_i == '0)))
          sel_o = SEL_START;
        else if (is_updiscon(lc_itype_i))
          sel_o = SEL_ADDR_TC;
        else
          start_rule = 1'b0;
      end
      if (!start_rule) begin
        if (end_rule)
          sel_o = SEL_ADDR_END;
        else if (full_i)
          sel_o = SEL_FULL;
      end
    end
    hold_o = decide_i && tc_qual_i && start_rule && end_rule;
    if ((sel_o == SEL_NONE) && support_req_i)
      sel_o = SEL_SUPPORT;
  end

endmodule

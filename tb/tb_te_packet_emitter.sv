// tb_te_packet_emitter: asks te_packet_emitter for each packet kind and
// decodes the payload field by field against the layouts, checks the byte
// length (sign-extension cut for formats 1 and 2), the differential address
// against the last reported one, the flush outputs and the hold of a packet
// while the encapsulator is not ready.
module tb_te_packet_emitter;
  import te_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  sel_e sel;
  te_block_t lc, tc;
  te_cfg_t cfg;
  logic [30:0] me, mi;
  logic [4:0] ce, ci;
  logic rdy, free, take, sync, sack, fa, fk, pv;
  pkt_type_t pt;
  logic [4:0] plen;
  logic [143:0] pay;
  logic [63:0] last, eaddr;
  logic has_addr;

  // the last reported address is kept outside the emitter, as in the encoder
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) last <= '0;
    else if (has_addr) last <= eaddr;

  te_packet_emitter dut (.clk_i(clk), .rst_ni(rst_n), .sel_i(sel), .lc_i(lc), .tc_i(tc),
    .cfg_i(cfg), .map_excl_i(me), .cnt_excl_i(ce), .map_incl_i(mi), .cnt_incl_i(ci),
    .last_addr_i(last), .addr_o(eaddr), .has_addr_o(has_addr),
    .encapsulator_ready_i(rdy), .free_o(free), .take_o(take), .sync_o(sync),
    .support_ack_o(sack), .flush_all_o(fa), .flush_keep_o(fk), .packet_valid_o(pv),
    .packet_type_o(pt), .packet_length_o(plen), .packet_payload_o(pay));

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // bytes for hdr header bits plus a sign-extended value v of 63 bits
  function automatic int cut_len(int hdr, logic [62:0] v);
    int n = 63;
    while (n > 1 && v[n-1] == v[n-2]) n--;
    return (hdr + n + 7) / 8;
  endfunction

  // issue one packet: returns after it has been registered
  task automatic emit(sel_e s);
    @(negedge clk); sel = s;
    #1;
    check(take == 1, "take");
    @(posedge clk); #1 sel = SEL_NONE;
  endtask

  logic [63:0] prev;
  initial begin
    sel = SEL_NONE; lc = '0; tc = '0; cfg = '0; me = '0; mi = '0; ce = 0; ci = 0; rdy = 1;
    cfg.enable = 1; cfg.full_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // F3.0 start at 0x8000_0100, block of one taken branch (4 bytes)
    tc.iaddr = 64'h8000_0100; tc.iretire = 2; tc.ilastsize = 1; tc.itype = IT_TBR; tc.priv = 2'd3;
    @(negedge clk); sel = SEL_START; #1;
    check(sync && fk && !fa, "start flush/sync");
    @(posedge clk); #1 sel = SEL_NONE;
    check(pv && pt.fmt == F_SYNC && pt.sub == SF_START, "start type");
    check(pay[1:0] == 2'd3 && pay[3:2] == 2'd0 && pay[4] == 0 && pay[6:5] == 2'd3, "start header");
    check(pay[69:7] == 63'h4000_0080, "start address");
    check(plen == 5'd9, "start length");

    // F2 differential to 0x8000_0140 (tc first address), no branches
    tc.iaddr = 64'h8000_0140; tc.iretire = 6; tc.ilastsize = 0; tc.itype = IT_NONE;
    ce = 0;
    emit(SEL_ADDR_TC);
    check(pt.fmt == F_ADDR && pay[64:2] == 63'h20, "F2 delta +0x40");
    check(plen == 5'(cut_len(2, 63'h20)), $sformatf("F2 length %0d", plen));

    // F1 with 3 branches, last address of tc: 0x8000_0200 + (6-1)*2 = 0x8000_020A
    tc.iaddr = 64'h8000_0200; tc.iretire = 6; tc.ilastsize = 0; tc.itype = IT_NTBR;
    ci = 3; mi = 31'b101;
    @(negedge clk); sel = SEL_ADDR_END; #1; check(fa && !fk, "end flushes all");
    @(posedge clk); #1 sel = SEL_NONE;
    check(pt.fmt == F_BRANCH && pay[6:2] == 5'd3 && pay[37:7] == 31'b101, "F1 branches");
    prev = 64'h8000_020A - 64'h8000_0140;
    check(pay[100:38] == prev[63:1], "F1 delta address");
    check(plen == 5'(cut_len(38, prev[63:1])), "F1 length");

    // negative delta back to 0x8000_0100 (F2), full packet sign bits
    tc.iaddr = 64'h8000_0100; tc.iretire = 2; tc.ilastsize = 1; tc.itype = IT_NONE; ce = 0;
    emit(SEL_ADDR_TC);
    prev = 64'h8000_0100 - 64'h8000_020A;
    check(pay[64:2] == prev[63:1] && pay[65] == 1 && pay[66] == 1, "F2 negative delta");
    check(plen == 5'(cut_len(2, prev[63:1])), "F2 negative length");

    // full-address mode
    cfg.full_addr = 1;
    tc.iaddr = 64'h8000_0300; emit(SEL_ADDR_TC);
    check(pay[64:2] == 63'h4000_0180 && plen == 5'(cut_len(2, 63'h4000_0180)), "F2 full address");

    // F1 full map without address
    mi = 31'h5555_5555; ci = 5'd31;
    @(negedge clk); sel = SEL_FULL; #1; check(fa, "full flushes");
    @(posedge clk); #1 sel = SEL_NONE;
    check(pt.fmt == F_BRANCH && pay[6:2] == 0 && pay[37:7] == 31'h5555_5555 && plen == 5, "F1 full");

    // F3.1 trap: lc holds cause/tval, tc is handler
    lc.itype = IT_INT; lc.cause = 5'd7; lc.tval = 64'hDEAD_BEEF_0000_1234;
    tc.iaddr = 64'h8000_0800; tc.iretire = 4; tc.priv = 2'd3;
    @(negedge clk); sel = SEL_TRAP; #1; check(sync && fk, "trap sync");
    @(posedge clk); #1 sel = SEL_NONE;
    check(pt.sub == SF_TRAP && pay[11:7] == 5'd7 && pay[12] == 1 && pay[13] == 1, "trap header");
    check(pay[76:14] == 63'h4000_0400 && pay[140:77] == 64'hDEAD_BEEF_0000_1234, "trap addr/tval");
    check(plen == 18, "trap length");

    // support packet
    @(negedge clk); sel = SEL_SUPPORT; #1; check(sack && !sync, "support ack");
    @(posedge clk); #1 sel = SEL_NONE;
    check(pt.sub == SF_SUPPORT && pay[4] == 1 && pay[5] == 1 && plen == 1, "support");

    // back-pressure: packet held while not ready, free low
    tc.iaddr = 64'h8000_0900; emit(SEL_ADDR_TC);
    rdy = 0;
    prev = {1'b0, pay[64:2]};
    repeat (3) begin
      @(negedge clk); check(pv && !free && pay[64:2] == prev[62:0], "hold");
      sel = SEL_START; #1; check(!take, "no take while full"); sel = SEL_NONE;
    end
    rdy = 1; @(negedge clk); check(!pv, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

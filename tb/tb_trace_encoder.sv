// tb_trace_encoder: programs the trace encoder over APB and sends it a
// hand-written block sequence whose packets were worked out by hand from the
// packet rules: support packet on enable, start, branch packet after an
// uninferable jump, address before a trap, trap packet, address after an
// exception return, address before the trace leaves the filtered range,
// restart, a full 31-branch map, and a block that needs two packets. The
// sequence is run three times from reset: one block per cycle, two blocks per
// cycle (both lanes), and random groups with idle cycles; all three must give
// the same packets. The packet sink applies random back-pressure and takes
// lane 0's packet before lane 1's. Each packet's type, length and fields are
// checked.
module tb_trace_encoder;
  import te_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic brdy, rdy, psel, pen, pwr, pready, perr;
  logic [1:0] bvld, pv;
  te_block_t [1:0] b;
  itype_e [1:0] b_it;
  logic [1:0][4:0] b_cause;
  logic [1:0][63:0] b_tval, b_iaddr;
  logic [1:0][1:0] b_priv;
  logic [1:0][7:0] b_iret;
  logic [1:0][0:0] b_ls;
  logic [11:0] paddr;
  logic [31:0] pwdata, prdata;
  pkt_type_t [1:0] pt;
  logic [1:0][4:0] plen;
  logic [1:0][143:0] pay;

  for (genvar i = 0; i < 2; i++) begin : g_b
    assign b_it[i] = b[i].itype;    assign b_cause[i] = b[i].cause;
    assign b_tval[i] = b[i].tval;   assign b_iaddr[i] = b[i].iaddr;
    assign b_priv[i] = b[i].priv;   assign b_iret[i] = b[i].iretire;
    assign b_ls[i] = b[i].ilastsize;
  end

  trace_encoder #(.NLANES(2)) dut (.clk_i(clk), .rst_ni(rst_n), .block_valid_i(bvld),
    .block_ready_o(brdy), .itype_i(b_it), .cause_i(b_cause), .tval_i(b_tval),
    .priv_i(b_priv), .iaddr_i(b_iaddr), .iretire_i(b_iret), .ilastsize_i(b_ls), .paddr_i(paddr), .psel_i(psel),
    .penable_i(pen), .pwrite_i(pwr), .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready),
    .pslverr_o(perr), .lost_cnt_i(16'd0), .encapsulator_ready_i(rdy), .packet_valid_o(pv),
    .packet_type_o(pt), .packet_length_o(plen), .packet_payload_o(pay));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { pkt_type_t t; int len; logic [143:0] p; } pkt_s;
  pkt_s got[$];
  always @(posedge clk) begin
    for (int i = 0; i < 2; i++)
      if (rst_n && pv[i] && rdy) got.push_back('{pt[i], int'(plen[i]), pay[i]});
    rdy <= ($urandom_range(0, 2) != 0);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int cut_len(int hdr, logic [62:0] v);
    int n = 63;
    while (n > 1 && v[n-1] == v[n-2]) n--;
    return (hdr + n + 7) / 8;
  endfunction

  task automatic apb_wr(logic [11:0] a, logic [31:0] d);
    @(negedge clk); paddr = a; pwr = 1; pwdata = d; psel = 1; pen = 0;
    @(negedge clk); pen = 1;
    @(negedge clk); psel = 0; pen = 0;
  endtask

  te_block_t blks[$];
  task automatic send(logic [63:0] a, int ret, bit last4, itype_e t, logic [4:0] c = 0,
                      logic [63:0] tv = 0);
    te_block_t x;
    x = '0; x.iaddr = a; x.iretire = 8'(ret); x.ilastsize = last4; x.itype = t;
    x.priv = 2'd3; x.cause = c; x.tval = tv;
    blks.push_back(x);
  endtask

  // mode 0: one block per cycle, 1: two per cycle, 2: random groups and gaps
  task automatic feed(int mode);
    int i, k;
    i = 0;
    while (i < blks.size()) begin
      @(negedge clk);
      if (mode == 2) while ($urandom_range(0, 3) == 0) @(negedge clk);
      k = (mode == 0) ? 1 : (mode == 1) ? 2 : $urandom_range(1, 2);
      // the last block only closes the sequence: it goes alone, so that the
      // block before it is decided
      if (i + k >= blks.size()) k = 1;
      b[0] = blks[i];
      b[1] = (k == 2) ? blks[i+1] : '0;
      bvld = (k == 2) ? 2'b11 : 2'b01;
      #4; while (!brdy) begin @(negedge clk); #4; end
      if (k == 2) npair++;
      @(posedge clk); #1 bvld = 0;
      i += k;
    end
  endtask

  int npair = 0, nhold0 = 0, nhold1 = 0;
  always @(posedge clk) begin
    if (dut.hold[0] && brdy === 1'b0) nhold0++;
    if (dut.hold[1] && brdy === 1'b0) nhold1++;
  end
  logic [63:0] d;
  initial begin
    bvld = 0; b = '0; psel = 0; pen = 0; pwr = 0; paddr = 0; pwdata = 0;
    send(64'h1000, 4, 1, IT_TBR);      // B0
    send(64'h1100, 2, 1, IT_NTBR);     // B1
    send(64'h1104, 6, 1, IT_UJUMP);    // B2
    send(64'h2000, 2, 1, IT_NONE);     // B3
    send(64'h2004, 3, 1, IT_TBR);      // B4
    send(64'h3000, 2, 1, IT_EXC, 5'd2, 64'h55); // B5
    send(64'h8000, 4, 1, IT_ERET);     // B6 handler
    send(64'h1200, 2, 1, IT_NONE);     // B7
    send(64'h1210, 4, 0, IT_NONE);     // B7'
    send(64'h9_0000, 2, 1, IT_NONE);   // B8 outside the range
    send(64'h1300, 2, 1, IT_NONE);     // B9
    for (int i = 0; i < 32; i++) send(64'h1400 + 64'(i * 4), 2, 1, IT_NTBR);
    send(64'h1500, 2, 1, IT_NONE);
    // a block after a jump that is also the last before leaving the range:
    // two packets from one block
    send(64'h1600, 2, 1, IT_UJUMP);
    send(64'h1700, 2, 1, IT_NTBR);
    send(64'h9_0000, 2, 1, IT_NONE);
    send(64'h1800, 2, 1, IT_NONE);
    send(64'h1900, 2, 1, IT_NONE);
    for (int run = 0; run < 3; run++) begin
      rst_n = 0; got.delete();
      repeat (2) @(posedge clk); rst_n = 1;
      apb_wr(12'h04, 32'd0);             // no resync
      apb_wr(12'h10, 32'h0); apb_wr(12'h14, 32'h0);
      apb_wr(12'h18, 32'hFFFF); apb_wr(12'h1C, 32'h0);
      apb_wr(12'h00, 32'h11);            // enable, delta mode, address filter
      feed(run);
      repeat (20) @(posedge clk);
      verify(run);
    end
    check(npair > 20, "both lanes used");
    check(nhold0 > 0 && nhold1 > 0, "two-packet block seen in each lane");
    $display("holds: lane 0 %0d, lane 1 %0d", nhold0, nhold1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic verify(int run);
    $display("run %0d: %0d packets", run, got.size());

    check(got.size() == 12, $sformatf("packet count %0d", got.size()));
    if (got.size() == 12) begin
      // 1: support
      check(got[0].t.fmt == F_SYNC && got[0].t.sub == SF_SUPPORT && got[0].len == 1 &&
            got[0].p[4] == 1 && got[0].p[5] == 0, "support");
      // 2: start at 0x1000
      check(got[1].t.sub == SF_START && got[1].t.fmt == F_SYNC && got[1].p[4] == 1 &&
            got[1].p[69:7] == 63'h800 && got[1].len == 9, "start");
      // 3: F1 two branches (taken, not taken) at 0x2000, delta 0x1000
      check(got[2].t.fmt == F_BRANCH && got[2].p[6:2] == 2 && got[2].p[37:7] == 31'b10 &&
            got[2].p[100:38] == 63'h800 && got[2].len == cut_len(38, 63'h800), "branch after jump");
      // 4: F1 one taken branch, trap point 0x3000, delta 0x1000
      check(got[3].t.fmt == F_BRANCH && got[3].p[6:2] == 1 && got[3].p[37:7] == 0 &&
            got[3].p[100:38] == 63'h800, "before trap");
      // 5: trap, handler 0x8000, cause 2, tval 0x55
      check(got[4].t.sub == SF_TRAP && got[4].p[11:7] == 2 && got[4].p[12] == 0 &&
            got[4].p[76:14] == 63'h4000 && got[4].p[140:77] == 64'h55 && got[4].len == 18, "trap");
      // 6: F2 after eret: 0x1200 - 0x8000
      d = 64'h1200 - 64'h8000;
      check(got[5].t.fmt == F_ADDR && got[5].p[64:2] == d[63:1] &&
            got[5].len == cut_len(2, d[63:1]), "after eret");
      // 7: F2 last address before leaving the range: 0x1216 - 0x1200
      check(got[6].t.fmt == F_ADDR && got[6].p[64:2] == 63'hB && got[6].len == 1, "before unqualified");
      // 8: restart at 0x1300
      check(got[7].t.sub == SF_START && got[7].p[69:7] == 63'h980, "restart");
      // 9: full map of 31 not-taken branches
      check(got[8].t.fmt == F_BRANCH && got[8].p[6:2] == 0 && got[8].p[37:7] == '1 &&
            got[8].len == 5, "full map");
      // 10, 11: start of the block after the jump, then its end
      check(got[9].t.fmt == F_BRANCH && got[9].p[6:2] == 1 && got[9].p[7] == 1 &&
            got[9].p[100:38] == 63'h200, "after jump");
      check(got[10].t.fmt == F_BRANCH && got[10].p[6:2] == 1 && got[10].p[7] == 1 &&
            got[10].p[100:38] == 63'h0 && got[10].len == 5, "same block, end");
      check(got[11].t.sub == SF_START && got[11].p[69:7] == 63'hC00, "restart 2");
    end
  endtask
endmodule

// tb_trace_system: end-to-end run of the tracing system at its default
// parameters. A random core model retires up to two instructions per cycle
// (compressed and full-size, taken and not-taken branches, uninferable jumps,
// exceptions, interrupts, exception returns that change privilege) into the
// trace interface port; the encoder is programmed over APB; an AXI4 slave with
// random and, in one phase, very long stalls receives the bursts and decodes
// every packet: header, byte strobes, format, sign-extended address fields in
// full and differential mode, branch maps.
// Checks: every decoded address is the address of a retired instruction or a
// trap; the decoded branch outcomes equal, in order, the outcomes of all
// branches retired inside the traced privilege levels (until blocks are
// deliberately lost); the lost-block counter read over APB is non-zero after
// the overflow phase. Each mechanism of the design is counted and must occur.
module tb_trace_system;
  import te_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  tip_commit_t [1:0] cm;
  logic [1:0] priv;
  logic tv, ti;
  logic [4:0] tcause;
  logic [63:0] ttval, tepc;
  logic [11:0] paddr;
  logic psel, pen, pwr, pready, perr;
  logic [31:0] pwdata, prdata;
  logic awv, awr, wv, wr, bv, brd;
  axi_aw_t aw;
  axi_w_t w;
  axi_b_t b;

  trace_system dut (.clk_i(clk), .rst_ni(rst_n), .commit_i(cm), .priv_i(priv),
    .trap_valid_i(tv), .trap_interrupt_i(ti), .trap_cause_i(tcause), .trap_tval_i(ttval),
    .trap_epc_i(tepc), .paddr_i(paddr), .psel_i(psel), .penable_i(pen), .pwrite_i(pwr),
    .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready), .pslverr_o(perr),
    .aw_valid_o(awv), .aw_ready_i(awr), .aw_o(aw), .w_valid_o(wv), .w_ready_i(wr), .w_o(w),
    .b_valid_i(bv), .b_ready_o(brd), .b_i(b));

  always #5 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  // ---------------------------------------------------------------- core model
  bit          pcs[longint];     // every retired pc and trap pc
  bit          exp_br[$];        // outcomes of traced branches, 1 = not taken
  bit          run = 0, traced_en = 0, check_br = 1;
  logic [3:0]  traced_mask = 4'hF;
  logic [63:0] pc = 64'h8000_0000, epc_save;
  logic [1:0]  priv_save;
  int          in_handler = 0, n_privchg = 0, n_exc = 0, n_int = 0;
  longint      n_instr = 0, n_bytes = 0;

  always @(negedge clk) begin
    cm = '0; tv = 0;
    if (run) begin
      for (int i = 0; i < 2; i++) begin
        if ($urandom_range(0, 3) != 0) begin
          itype_e t;
          bit     c;
          int     r;
          c = $urandom_range(0, 1);
          r = $urandom_range(0, 99);
          t = IT_NONE;
          if (in_handler == 1) t = IT_ERET;
          else if (r < 15) t = IT_TBR;
          else if (r < 30) t = IT_NTBR;
          else if (r < 31) t = IT_UJUMP;
          cm[i].valid = 1; cm[i].pc = pc; cm[i].compressed = c; cm[i].itype = t;
          pcs[pc] = 1;
          if (traced_en && traced_mask[priv] && check_br) n_instr++;
          if ((t == IT_TBR || t == IT_NTBR) && traced_en && traced_mask[priv])
            exp_br.push_back(t == IT_NTBR);
          if (in_handler > 0) in_handler--;
          if (t == IT_TBR || t == IT_UJUMP)
            pc = 64'h8000_0000 + 64'($urandom_range(0, 4095)) * 2 + (pc[31] ? 0 : 64'h1_0000);
          else
            pc = pc + (c ? 2 : 4);
          if (t == IT_ERET) begin
            pc = epc_save;
            break;
          end
        end
      end
      if (in_handler == 0 && $urandom_range(0, 150) == 0) begin
        tv = 1; ti = $urandom_range(0, 1); tcause = 5'($urandom_range(1, 11));
        ttval = {$urandom, $urandom}; tepc = pc; pcs[pc] = 1;
        if (ti) n_int++; else n_exc++;
        epc_save = pc; priv_save = priv;
        pc = 64'h8000_4000 + 64'($urandom_range(0, 63)) * 4;
        in_handler = $urandom_range(4, 10);
      end
    end
  end
  // privilege: set after the cycle's retirement
  always @(posedge clk) begin
    if (tv) priv <= 2'd3;
    else if ((cm[0].valid && cm[0].itype == IT_ERET) || (cm[1].valid && cm[1].itype == IT_ERET)) begin
      // return to the saved level, sometimes to the other user/supervisor level
      logic [1:0] np;
      np = ($urandom_range(0, 2) == 0) ? (priv_save ^ 2'd1) : priv_save;
      if (np == 2'd2 || np == 2'd3) np = 2'd0;
      if (np != priv_save) n_privchg++;
      priv <= np;
    end
  end

  // ---------------------------------------------------------------- APB
  task automatic apb(bit wr_, logic [11:0] a, logic [31:0] d, output logic [31:0] r);
    @(negedge clk); paddr = a; pwr = wr_; pwdata = d; psel = 1; pen = 0;
    @(negedge clk); pen = 1;
    @(posedge clk); r = prdata;
    @(negedge clk); psel = 0; pen = 0;
  endtask

  // ---------------------------------------------------------------- AXI slave + decoder
  bit          stall = 0;
  bit          full_mode = 0;
  logic [63:0] last_addr_d = 0;
  int          n_pkt = 0, n_support = 0, n_start = 0, n_trap = 0, n_trap_int = 0, n_f2 = 0,
               n_f1a = 0, n_f1full = 0, n_full_mode = 0, n_delta_mode = 0, n_badaddr = 0;
  int          n_brbits = 0, n_brbad = 0;

  task automatic decode(int len, pkt_type_t t, logic [143:0] p);
    logic [63:0] a, f;
    int lsb, nb;
    bit has_a;
    n_pkt++;
    if (check_br) n_bytes += len;
    check(p[1:0] == t.fmt, "format field equals header type");
    has_a = 0;
    if (t.fmt == F_SYNC) begin
      if (t.sub == SF_SUPPORT) begin
        n_support++; full_mode = p[5];
      end else if (t.sub == SF_START) begin
        n_start++; a = {p[69:7], 1'b0}; has_a = 1;
      end else if (t.sub == SF_TRAP) begin
        n_trap++; if (p[12]) n_trap_int++;
        a = {p[76:14], 1'b0}; has_a = 1;
      end
    end else if (t.fmt == F_ADDR || t.fmt == F_BRANCH) begin
      nb = (t.fmt == F_BRANCH) ? ((p[6:2] == 0) ? 31 : int'(p[6:2])) : 0;
      if (check_br)
        for (int i = 0; i < nb; i++) begin
          if (exp_br.size() == 0 || exp_br[0] != p[7 + i]) n_brbad++;
          if (exp_br.size() != 0) void'(exp_br.pop_front());
          n_brbits++;
        end
      if (t.fmt == F_BRANCH && p[6:2] == 0) begin
        n_f1full++;
      end else begin
        if (t.fmt == F_ADDR) n_f2++; else n_f1a++;
        lsb = (t.fmt == F_ADDR) ? 2 : 38;
        f = '0;
        for (int i = 0; i < 64; i++)
          f[i] = (lsb + i < len * 8) ? p[lsb + i] : p[len * 8 - 1];
        a = full_mode ? {f[62:0], 1'b0} : last_addr_d + {f[62:0], 1'b0};
        has_a = 1;
        if (full_mode) n_full_mode++; else n_delta_mode++;
      end
    end
    if (has_a) begin
      if (!pcs.exists(a)) begin
        n_badaddr++;
        if (n_badaddr < 5) $display("address %h not retired (fmt %0d len %0d)", a, t.fmt, len);
      end
      last_addr_d = a;
    end
  endtask

  initial begin
    awr = 0; wr = 0; bv = 0; b = '0;
    forever begin
      int nb, len;
      pkt_type_t t;
      logic [143:0] p;
      @(negedge clk); awr = !stall && $urandom_range(0, 15) != 0; #4;
      while (!(awv && awr)) begin @(negedge clk); awr = !stall && $urandom_range(0, 15) != 0; #4; end
      nb = int'(aw.len) + 1;
      @(posedge clk); #1 awr = 0;
      p = '0; len = 0; t = '0;
      for (int k = 0; k < nb; k++) begin
        @(negedge clk); wr = !stall && $urandom_range(0, 15) != 0; #4;
        while (!(wv && wr)) begin @(negedge clk); wr = !stall && $urandom_range(0, 15) != 0; #4; end
        if (k == 0) begin
          len = int'(w.data[7:0]); t = pkt_type_t'(w.data[11:8]);
          check(nb == 1 + (len + 7) / 8, "burst length");
        end else begin
          for (int by = 0; by < 8; by++)
            if ((k - 1) * 8 + by < len) p[((k - 1) * 8 + by) * 8 +: 8] = w.data[by * 8 +: 8];
        end
        check(w.last == (k == nb - 1), "wlast");
        @(posedge clk); #1 wr = 0;
      end
      decode(len, t, p);
      @(negedge clk); bv = 1;
      @(posedge clk); #1 bv = 0;
    end
  end

  // ---------------------------------------------------------------- mechanism probes
  int n_resync = 0, n_resync_pkt = 0, n_hold = 0, n_filtered = 0, n_encap_bp = 0,
      n_te_stall = 0, n_two_dec = 0, n_two_pkt = 0;
  bit resync_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_te.resync_req && !resync_q) begin
      n_resync++;
      if (dut.u_te.cfg.resync_mode) n_resync_pkt++;
    end
    resync_q <= dut.u_te.resync_req;
    if (|dut.u_te.hold) n_hold++;
    if (dut.u_te.advance && !dut.u_te.nc_qual[0] && dut.u_te.cfg.enable) n_filtered++;
    if (|dut.pkt_valid && !dut.pkt_ready) n_encap_bp++;
    if (dut.blk_valid[0] && !dut.blk_ready) n_te_stall++;
    if (&dut.u_te.active) n_two_dec++;
    if (&dut.pkt_valid && dut.pkt_ready) n_two_pkt++;
  end

  task automatic count(int n, string what);
    checks++;
    $display("  %-34s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  logic [31:0] r;
  initial begin
    cm = '0; priv = 2'd0; tv = 0; ti = 0; tcause = 0; ttval = 0; tepc = 0;
    psel = 0; pen = 0; pwr = 0; paddr = 0; pwdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // phase 1: differential addresses, resync every 5 packets
    apb(1, 12'h04, 32'd5, r);
    apb(1, 12'h00, 32'h05, r);   // enable, delta, resync counts packets
    traced_en = 1;
    run = 1; repeat (4000) @(posedge clk);
    run = 0; repeat (300) @(posedge clk);
    // phase 2: full addresses, supervisor level filtered out, resync every 60 cycles
    traced_mask = 4'b1101;
    apb(1, 12'h08, 32'hD, r);
    apb(1, 12'h04, 32'd60, r);
    apb(1, 12'h00, 32'h0B, r);   // enable, full, cycle resync, privilege filter
    run = 1; repeat (4000) @(posedge clk);
    run = 0; repeat (300) @(posedge clk);
    // phase 3: trace off for a while, then on again (delta mode)
    traced_en = 0;
    apb(1, 12'h00, 32'h00, r);
    run = 1; repeat (500) @(posedge clk);
    run = 0; repeat (300) @(posedge clk);
    traced_mask = 4'hF;
    apb(1, 12'h00, 32'h05, r);
    traced_en = 1;
    run = 1; repeat (3000) @(posedge clk);
    run = 0; repeat (400) @(posedge clk);
    check(n_brbad == 0, $sformatf("branch outcomes: %0d wrong of %0d", n_brbad, n_brbits));
    check(exp_br.size() <= 31, $sformatf("branches not yet reported: %0d", exp_br.size()));
    apb(0, 12'h20, 0, r);
    check(r == 0, "no block lost before the overflow phase");
    // phase 4: the AXI side stalls, the FIFOs fill and blocks are lost
    check_br = 0;
    stall = 1;
    run = 1; repeat (1500) @(posedge clk);
    stall = 0; repeat (1500) @(posedge clk);
    run = 0; repeat (2000) @(posedge clk);
    apb(0, 12'h20, 0, r);
    check(r > 0, $sformatf("lost blocks %0d", r));
    check(n_badaddr == 0, $sformatf("%0d decoded addresses were never retired", n_badaddr));
    $display("packets=%0d branch bits checked=%0d", n_pkt, n_brbits);
    // compression against 32 bits per traced instruction (phases 1-3)
    $display("compression: %0d payload bytes for %0d traced instructions = %0.1f%%",
             n_bytes, n_instr, 100.0 * (1.0 - real'(n_bytes * 8) / real'(n_instr * 32)));
    count(n_support, "support packets (enable/mode change)");
    count(n_start, "start packets");
    count(n_trap - n_trap_int, "trap packets, exception");
    count(n_trap_int, "trap packets, interrupt");
    count(n_f2, "address-only packets");
    count(n_f1a, "branch packets with address");
    count(n_f1full, "full branch map packets");
    count(n_full_mode, "full-address reports");
    count(n_delta_mode, "differential reports");
    count(n_resync - n_resync_pkt, "resync, cycle mode");
    count(n_resync_pkt, "resync, packet mode");
    count(n_hold, "two-packet blocks");
    count(n_two_dec, "two blocks decided in one cycle");
    count(n_two_pkt, "two packets in one cycle");
    count(n_privchg, "privilege changes");
    count(n_filtered, "blocks filtered out");
    count(n_encap_bp, "encapsulator back-pressure cycles");
    count(n_te_stall, "encoder input stall cycles");
    count(int'(r), "blocks lost in the interface FIFO");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

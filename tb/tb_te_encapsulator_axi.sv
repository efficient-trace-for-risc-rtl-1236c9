// tb_te_encapsulator_axi: sends random packets (random length 1..18 bytes)
// into both input lanes of te_encapsulator_axi with random valid timing
// (none, either or both lanes per cycle; lane 0 is the older packet), and plays an AXI4 slave
// with random ready and response delays. Each burst is checked against the
// packet that produced it: address, length, size, burst type, header beat
// (length, type, sequence number), payload bytes, last-beat strobe and WLAST.
// The first burst is also timed: with an always-ready slave its address phase
// is valid right after the clock edge following the hand-over.
module tb_te_encapsulator_axi;
  import te_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [1:0] pv;
  logic pr, awv, awr, wv, wr, bv, brd;
  pkt_type_t [1:0] pt;
  logic [1:0][4:0] plen;
  logic [1:0][143:0] pay;
  axi_aw_t aw;
  axi_w_t w;
  axi_b_t b;

  te_encapsulator_axi #(.NIN(2), .DEPTH(8), .BASE_ADDR(64'h1000_0000)) dut (.clk_i(clk), .rst_ni(rst_n),
    .pkt_valid_i(pv), .pkt_ready_o(pr), .pkt_type_i(pt), .pkt_length_i(plen),
    .pkt_payload_i(pay), .aw_valid_o(awv), .aw_ready_i(awr), .aw_o(aw), .w_valid_o(wv),
    .w_ready_i(wr), .w_o(w), .b_valid_i(bv), .b_ready_o(brd), .b_i(b));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { pkt_type_t t; int len; logic [143:0] p; } pkt_s;
  pkt_s sent[$];
  int nrecv = 0, fullseen = 0, npair = 0;
  localparam int N = 300;
  bit slow = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // producer
  initial begin
    pv = 0; pt = '0; plen = 0; pay = '0;
    repeat (3) @(posedge clk);
    for (int i = 0; i < N; ) begin
      logic [1:0] m;
      @(negedge clk);
      while ($urandom_range(0, 2) == 0 && i > 0) @(negedge clk);
      m = 2'($urandom_range(1, 3));
      if (i == N - 1) m = 2'b01;
      pv = m;
      for (int l = 0; l < 2; l++) begin
        pt[l] = pkt_type_t'($urandom); plen[l] = 5'($urandom_range(1, 18));
        pay[l] = {$urandom, $urandom, $urandom, $urandom, $urandom};
        pay[l] = pay[l] & ((144'd1 << (plen[l] * 8)) - 1);
      end
      #4;
      while (!pr) begin fullseen++; @(negedge clk); #4; end
      for (int l = 0; l < 2; l++) if (m[l]) begin
        sent.push_back('{pt[l], int'(plen[l]), pay[l]});
        i++;
        if (m == 2'b11 && l == 1) npair++;
      end
      @(posedge clk);
      #1 pv = 0;
    end
  end

  // AXI slave
  initial begin
    int seq = 0;
    awr = 0; wr = 0; bv = 0; b = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // timing of the first packet: handed over at edge t, IDLE pops at t+1,
    // AW valid from t+1 and visible to the slave before edge t+2
    begin
      int t0, t1;
      @(posedge clk);
      while (!(pv != 0 && pr)) @(posedge clk);
      t0 = $time;
      do begin @(posedge clk); #1; end while (!awv);
      t1 = $time - 1;
      check((t1 - t0) == 10, $sformatf("first AW after %0d", t1 - t0));
    end
    while (nrecv < N) begin
      pkt_s e;
      int nb;
      logic [7:0] bytes[];
      slow = (nrecv > N / 2);
      // all handshakes are sampled 1 time unit before the rising edge
      @(negedge clk); awr = $urandom_range(0, 1); #4;
      while (!(awv && awr)) begin @(negedge clk); awr = $urandom_range(0, 1); #4; end
      e = sent.pop_front();
      nb = 1 + (e.len + 7) / 8;
      check(aw.addr == 64'h1000_0000 && aw.len == 8'(nb - 1) && aw.size == 3 && aw.burst == 1, "aw");
      @(posedge clk); #1 awr = 0;
      for (int k = 0; k < nb; k++) begin
        @(negedge clk); wr = $urandom_range(0, 1); #4;
        while (!(wv && wr)) begin @(negedge clk); wr = $urandom_range(0, 1); #4; end
        check(w.last == (k == nb - 1), "wlast");
        if (k == 0) begin
          check(w.data[7:0] == 8'(e.len) && w.data[11:8] == e.t && w.data[47:16] == 32'(seq), "header");
        end else begin
          for (int by = 0; by < 8; by++) begin
            int idx;
            bit in_pkt;
            idx = (k - 1) * 8 + by;
            in_pkt = idx < e.len;
            check(w.strb[by] == in_pkt, "strobe");
            if (in_pkt) check(w.data[by*8 +: 8] == e.p[idx*8 +: 8], "payload byte");
          end
        end
        @(posedge clk); #1 wr = 0;
      end
      repeat ($urandom_range(0, slow ? 12 : 1)) @(posedge clk);
      #1 bv = 1;
      @(posedge clk); while (!brd) @(posedge clk);
      #1 bv = 0;
      seq++; nrecv++;
    end
    check(fullseen > 0, "FIFO filled at least once");
    check(npair > 0, "two packets in one cycle");
    $display("packets=%0d backpressure cycles=%0d", nrecv, fullseen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

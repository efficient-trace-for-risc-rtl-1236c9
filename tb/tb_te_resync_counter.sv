// tb_te_resync_counter: checks that the request rises exactly after the
// programmed number of cycles (cycle mode) or packets (packet mode), holds
// until a sync, counts two packets emitted in one cycle as two, and that
// threshold 0 or disable keep it low.
module tb_te_resync_counter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic en, mode, sync, req;
  logic [1:0] pkt;
  logic [15:0] max;

  te_resync_counter #(.CNT_W(16), .NPKT(2)) dut (.clk_i(clk), .rst_ni(rst_n), .enable_i(en),
    .mode_i(mode), .max_i(max), .packets_i(pkt), .sync_i(sync), .resync_req_o(req));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit exp, string what);
    checks++;
    if (req !== exp) begin failures++; $display("FAIL %s: req=%0b", what, req); end
  endtask

  initial begin
    en = 0; mode = 0; pkt = 0; sync = 0; max = 16'd10;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // cycle mode: request exactly 10 cycles after enabling
    @(negedge clk) en = 1;
    for (int c = 1; c <= 12; c++) begin
      @(negedge clk);
      chk(c >= 10, $sformatf("cycle %0d", c));
    end
    // sync clears it
    sync = 1; @(negedge clk); sync = 0;
    chk(0, "after sync");
    // packet mode: 5 packets with idle cycles in between
    mode = 1; max = 16'd5;
    sync = 1; @(negedge clk); sync = 0;
    for (int p = 1; p <= 6; p++) begin
      repeat (3) @(negedge clk);
      chk(p > 5, $sformatf("before packet %0d", p));
      pkt = 1; @(negedge clk); pkt = 0;
    end
    chk(1, "held");
    // two lanes: packets emitted in pairs
    sync = 1; @(negedge clk); sync = 0;
    pkt = 2; @(negedge clk); pkt = 0; @(negedge clk); chk(0, "2 packets");
    pkt = 2; @(negedge clk); pkt = 0; @(negedge clk); chk(0, "4 packets");
    pkt = 2; @(negedge clk); pkt = 0; @(negedge clk); chk(1, "6 packets");
    // disabled or threshold 0: never
    en = 0; @(negedge clk); chk(0, "disabled");
    en = 1; max = 0; repeat (20) @(negedge clk); chk(0, "max 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

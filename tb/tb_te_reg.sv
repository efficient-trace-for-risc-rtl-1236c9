// tb_te_reg: APB writes and reads of every register of te_reg, the error
// response for unmapped addresses, the configuration record and the support
// request raised by an enable or mode change.
module tb_te_reg;
  import te_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [11:0] paddr;
  logic psel, penable, pwrite, pready, pslverr, sreq, sack;
  logic [31:0] pwdata, prdata;
  te_cfg_t cfg;

  te_reg dut (.clk_i(clk), .rst_ni(rst_n), .paddr_i(paddr), .psel_i(psel),
    .penable_i(penable), .pwrite_i(pwrite), .pwdata_i(pwdata), .prdata_o(prdata),
    .pready_o(pready), .pslverr_o(pslverr), .cfg_o(cfg), .support_req_o(sreq),
    .support_ack_i(sack), .lost_cnt_i(16'hBEEF));

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb(input bit wr, input logic [11:0] a, input logic [31:0] d,
                     output logic [31:0] r, output logic err);
    @(negedge clk); paddr = a; pwrite = wr; pwdata = d; psel = 1; penable = 0;
    @(negedge clk); penable = 1;
    @(posedge clk); r = prdata; err = pslverr;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [31:0] r; logic e;
  logic [31:0] vals[8] = '{32'h0000_003A, 32'h0000_1234, 32'h0000_0005, 32'h0000_0011,
                           32'h8000_1000, 32'h0000_0000, 32'h8000_2000, 32'h0000_0001};
  initial begin
    psel = 0; penable = 0; pwrite = 0; paddr = 0; pwdata = 0; sack = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // reset values
    apb(0, 12'h04, 0, r, e); check(r == 32'd256, "resync reset");
    apb(0, 12'h08, 0, r, e); check(r == 32'hF, "priv mask reset");
    check(!cfg.enable && !sreq, "disabled after reset");
    for (int i = 0; i < 8; i++) apb(1, 12'(i*4), vals[i], r, e);
    for (int i = 0; i < 8; i++) begin
      apb(0, 12'(i*4), 0, r, e);
      check(r == vals[i] && !e, $sformatf("readback %0d got %h", i, r));
    end
    apb(0, 12'h20, 0, r, e); check(r == 32'hBEEF, "lost counter");
    apb(0, 12'h24, 0, r, e); check(e, "unmapped address error");
    apb(1, 12'h02, 0, r, e); check(e, "misaligned error");
    check(cfg.enable == 0 && cfg.full_addr == 1 && cfg.resync_mode == 0 &&
          cfg.priv_filter_en == 1 && cfg.addr_filter_en == 1 && cfg.cause_filter_en == 1,
          "ctrl fields");
    check(cfg.resync_max == 16'h1234 && cfg.priv_mask == 4'h5 && cfg.cause_val == 5'h11,
          "other fields");
    check(cfg.addr_lo == 64'h8000_1000 && cfg.addr_hi == 64'h1_8000_2000, "address range");
    // full_addr changed 0 -> 1 above: support request pending
    check(sreq, "support request on mode change");
    @(negedge clk) sack = 1; @(negedge clk) sack = 0;
    check(!sreq, "ack clears request");
    apb(1, 12'h00, 32'h3A, r, e); check(!sreq, "same value: no request");
    apb(1, 12'h00, 32'h3B, r, e); check(sreq && cfg.enable, "enable: request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_te_filter: drives random blocks and filter settings into te_filter and
// compares the qualified flag with a reference written out here from the
// filter rules (enable, privilege mask, inclusive address range, trap cause).
module tb_te_filter;
  import te_pkg::*;
  int checks = 0, failures = 0;
  te_block_t blk;
  te_cfg_t   cfg;
  logic      q;
  bit        clk = 0;

  te_filter dut (.block_i(blk), .cfg_i(cfg), .qualified_o(q));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit model(te_block_t b, te_cfg_t c);
    bit ok = c.enable;
    if (c.priv_filter_en && !c.priv_mask[b.priv]) ok = 0;
    if (c.addr_filter_en && (b.iaddr < c.addr_lo || b.iaddr > c.addr_hi)) ok = 0;
    if (c.cause_filter_en && (b.itype == IT_EXC || b.itype == IT_INT) &&
        b.cause != c.cause_val) ok = 0;
    return ok;
  endfunction

  initial begin
    int npass = 0;
    for (int i = 0; i < 5000; i++) begin
      blk = '0; cfg = '0;
      blk.iaddr = 64'h8000_0000 + 64'($urandom_range(0, 255)) * 2;
      blk.priv  = 2'($urandom_range(0, 3));
      blk.itype = itype_e'($urandom_range(0, 6));
      blk.cause = 5'($urandom_range(0, 3));
      cfg.enable          = ($urandom_range(0, 7) != 0);
      cfg.priv_filter_en  = $urandom_range(0, 1) == 1;
      cfg.priv_mask       = 4'($urandom);
      cfg.addr_filter_en  = $urandom_range(0, 1) == 1;
      cfg.addr_lo         = 64'h8000_0000 + 64'($urandom_range(0, 200));
      cfg.addr_hi         = cfg.addr_lo + 64'($urandom_range(0, 200));
      cfg.cause_filter_en = $urandom_range(0, 1) == 1;
      cfg.cause_val       = 5'($urandom_range(0, 3));
      #1;
      checks++;
      if (q !== model(blk, cfg)) begin
        failures++;
        if (failures < 10) $display("mismatch iaddr=%h priv=%0d q=%0b", blk.iaddr, blk.priv, q);
      end
      if (q) npass++;
    end
    // directed: range bounds are inclusive
    cfg = '0; cfg.enable = 1; cfg.addr_filter_en = 1;
    cfg.addr_lo = 64'h100; cfg.addr_hi = 64'h200; blk = '0;
    blk.iaddr = 64'h100; #1 checks++; if (q !== 1) failures++;
    blk.iaddr = 64'h200; #1 checks++; if (q !== 1) failures++;
    blk.iaddr = 64'h202; #1 checks++; if (q !== 0) failures++;
    blk.iaddr = 64'h0FE; #1 checks++; if (q !== 0) failures++;
    checks++; if (npass == 0 || npass == 5000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

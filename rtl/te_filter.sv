// te_filter: decides, for each block that reaches the trace encoder, whether
// it is qualified, i.e. whether it belongs to the traced part of the program.
//
// A block is qualified when tracing is enabled and every enabled filter
// passes: the privilege filter (the bit of priv_mask selected by the block's
// privilege is set), the address filter (iaddr within [addr_lo, addr_hi]) and
// the cause filter (a block that ends in a trap is traced only if its cause
// equals the programmed cause). That the filter decides what is traced from
// the block inputs and the settings in te_reg is from the design description;
// the three filter kinds are this design's choice. Purely combinational.
module te_filter
  import te_pkg::*;
(
  input  te_block_t block_i,
  input  te_cfg_t   cfg_i,
  output logic      qualified_o
);

  logic priv_ok, addr_ok, cause_ok;

  always_comb begin
    priv_ok  = !cfg_i.priv_filter_en || cfg_i.priv_mask[block_i.priv];
    addr_ok  = !cfg_i.addr_filter_en ||
               ((block_i.iaddr >= cfg_i.addr_lo) && (block_i.iaddr <= cfg_i.addr_hi));
    cause_ok = !cfg_i.cause_filter_en || !is_trap(block_i.itype) ||
               (block_i.cause == cfg_i.cause_val);
    qualified_o = cfg_i.enable && priv_ok && addr_ok && cause_ok;
  end

endmodule

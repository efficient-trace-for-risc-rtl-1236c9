// trace_system: the tracing system of the CVA6 subsystem. The core's trace
// interface port extension (te_tip) turns retired instructions into blocks,
// the trace encoder (trace_encoder, configured over APB from the peripheral
// interconnect) compresses them into E-Trace packets, and the AXI
// encapsulator (te_encapsulator_axi) writes the packets through the system
// crossbar towards Ethernet. This chain is the integration shown in the design
// description; the core, the crossbar and the APB interconnect are outside and
// meet this module at its ports. The number of commit ports, the number of
// encoder lanes (blocks encoded per cycle), the FIFO depths and the target
// address are parameters.
module trace_system
  import te_pkg::*;
#(
  parameter int unsigned           NRET        = 2,
  parameter int unsigned           NLANES      = 2,
  parameter int unsigned           TIP_DEPTH   = 16,
  parameter int unsigned           ENCAP_DEPTH = 8,
  parameter int unsigned           APB_ADDR_W  = 12,
  parameter logic [AXI_ADDR_W-1:0] BASE_ADDR   = '0
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // core retirement (trace interface port)
  input  tip_commit_t [NRET-1:0] commit_i,
  input  logic [PRIV_W-1:0]      priv_i,
  input  logic                   trap_valid_i,
  input  logic                   trap_interrupt_i,
  input  logic [CAUSE_W-1:0]     trap_cause_i,
  input  logic [XLEN-1:0]        trap_tval_i,
  input  logic [XLEN-1:0]        trap_epc_i,
  // APB from the peripheral interconnect
  input  logic [APB_ADDR_W-1:0]  paddr_i,
  input  logic                   psel_i,
  input  logic                   penable_i,
  input  logic                   pwrite_i,
  input  logic [APB_DATA_W-1:0]  pwdata_i,
  output logic [APB_DATA_W-1:0]  prdata_o,
  output logic                   pready_o,
  output logic                   pslverr_o,
  // AXI4 write master towards the crossbar
  output logic                   aw_valid_o,
  input  logic                   aw_ready_i,
  output axi_aw_t                aw_o,
  output logic                   w_valid_o,
  input  logic                   w_ready_i,
  output axi_w_t                 w_o,
  input  logic                   b_valid_i,
  output logic                   b_ready_o,
  input  axi_b_t                 b_i
);

  logic      [NLANES-1:0]                blk_valid, pkt_valid;
  logic                                  blk_ready, pkt_ready;
  te_block_t [NLANES-1:0]                blk;
  logic [15:0]                           lost_cnt;
  pkt_type_t [NLANES-1:0]                pkt_type;
  logic      [NLANES-1:0][LEN_W-1:0]     pkt_len;
  logic      [NLANES-1:0][PAYLOAD_W-1:0] pkt_payload;
  itype_e    [NLANES-1:0]                b_itype;
  logic      [NLANES-1:0][CAUSE_W-1:0]   b_cause;
  logic      [NLANES-1:0][XLEN-1:0]      b_tval;
  logic      [NLANES-1:0][PRIV_W-1:0]    b_priv;
  logic      [NLANES-1:0][IADDR_W-1:0]   b_iaddr;
  logic      [NLANES-1:0][IRETIRE_W-1:0] b_iretire;
  logic      [NLANES-1:0][ILASTSIZE_W-1:0] b_ilastsize;

  for (genvar i = 0; i < NLANES; i++) begin : g_blk
    assign b_itype[i]     = blk[i].itype;
    assign b_cause[i]     = blk[i].cause;
    assign b_tval[i]      = blk[i].tval;
    assign b_priv[i]      = blk[i].priv;
    assign b_iaddr[i]     = blk[i].iaddr;
    assign b_iretire[i]   = blk[i].iretire;
    assign b_ilastsize[i] = blk[i].ilastsize;
  end

  te_tip #(.NRET(NRET), .NOUT(NLANES), .DEPTH(TIP_DEPTH)) u_tip (
    .clk_i, .rst_ni, .commit_i, .priv_i, .trap_valid_i, .trap_interrupt_i,
    .trap_cause_i, .trap_tval_i, .trap_epc_i,
    .block_valid_o(blk_valid), .block_o(blk), .block_ready_i(blk_ready),
    .lost_cnt_o(lost_cnt));

  trace_encoder #(.NLANES(NLANES), .APB_ADDR_W(APB_ADDR_W)) u_te (
    .clk_i, .rst_ni,
    .block_valid_i(blk_valid), .block_ready_o(blk_ready),
    .itype_i(b_itype), .cause_i(b_cause), .tval_i(b_tval), .priv_i(b_priv),
    .iaddr_i(b_iaddr), .iretire_i(b_iretire), .ilastsize_i(b_ilastsize),
    .paddr_i, .psel_i, .penable_i, .pwrite_i, .pwdata_i, .prdata_o, .pready_o,
    .pslverr_o, .lost_cnt_i(lost_cnt),
    .encapsulator_ready_i(pkt_ready), .packet_valid_o(pkt_valid),
    .packet_type_o(pkt_type), .packet_length_o(pkt_len),
    .packet_payload_o(pkt_payload));

  te_encapsulator_axi #(.NIN(NLANES), .DEPTH(ENCAP_DEPTH), .BASE_ADDR(BASE_ADDR)) u_encap (
    .clk_i, .rst_ni, .pkt_valid_i(pkt_valid), .pkt_ready_o(pkt_ready),
    .pkt_type_i(pkt_type), .pkt_length_i(pkt_len), .pkt_payload_i(pkt_payload),
    .aw_valid_o, .aw_ready_i, .aw_o, .w_valid_o, .w_ready_i, .w_o,
    .b_valid_i, .b_ready_o, .b_i);

endmodule

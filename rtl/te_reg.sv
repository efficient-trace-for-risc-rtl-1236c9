// te_reg: configuration registers of the trace encoder, written and read over
// APB (32-bit data, no wait states).
//
// The registers hold trace enable, the operating mode (full or differential
// addresses), the resynchronisation threshold and mode, and the filters. When
// software writes CTRL with a new enable or mode value, a request for a
// support packet (format 3, subformat 3) is raised and held until the packet
// emitter acknowledges it, so the decoder learns of the change. That trace
// enable, mode and filters live here and are set over APB is from the design
// description; the register map below and its reset values are this design's
// choice.
//
//   0x00 CTRL       [0] enable [1] full_addr [2] resync_mode (0 cycles,
//                   1 packets) [3] priv_filter_en [4] addr_filter_en
//                   [5] cause_filter_en
//   0x04 RESYNC_MAX [15:0] threshold, 0 disables resync
//   0x08 PRIV_MASK  [3:0] one bit per privilege level
//   0x0C CAUSE      [CAUSE_W-1:0] traced trap cause
//   0x10/0x14       ADDR_LO low/high word
//   0x18/0x1C       ADDR_HI low/high word
//   0x20 LOST       [15:0] blocks lost in the interface FIFO (read only)
// Other addresses answer with pslverr. Reads and writes complete in the access
// phase (psel & penable).
module te_reg
  import te_pkg::*;
#(
  parameter int unsigned APB_ADDR_W = 12,
  parameter logic [15:0] RESYNC_RST = 16'd256
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic [APB_ADDR_W-1:0] paddr_i,
  input  logic                  psel_i,
  input  logic                  penable_i,
  input  logic                  pwrite_i,
  input  logic [APB_DATA_W-1:0] pwdata_i,
  output logic [APB_DATA_W-1:0] prdata_o,
  output logic                  pready_o,
  output logic                  pslverr_o,
  output te_cfg_t               cfg_o,
  output logic                  support_req_o,
  input  logic                  support_ack_i,
  input  logic [15:0]           lost_cnt_i
);

  te_cfg_t cfg_q;
  logic    support_q;
  logic    access, hit;
  logic [7:0] word;

  assign access   = psel_i & penable_i;
  assign word     = 8'(paddr_i[APB_ADDR_W-1:2]);
  assign pready_o = 1'b1;
  assign hit      = (paddr_i[1:0] == 2'b00) && (word <= 8'd8);
  assign pslverr_o = access & ~hit;

  always_comb begin
    prdata_o = '0;
    unique case (word)
      8'd0: prdata_o = {26'd0, cfg_q.cause_filter_en, cfg_q.addr_filter_en,
                        cfg_q.priv_filter_en, cfg_q.resync_mode, cfg_q.full_addr,
                        cfg_q.enable};
      8'd1: prdata_o = {16'd0, cfg_q.resync_max};
      8'd2: prdata_o = {28'd0, cfg_q.priv_mask};
      8'd3: prdata_o = 32'(cfg_q.cause_val);
      8'd4: prdata_o = cfg_q.addr_lo[31:0];
      8'd5: prdata_o = cfg_q.addr_lo[IADDR_W-1:32];
      8'd6: prdata_o = cfg_q.addr_hi[31:0];
      8'd7: prdata_o = cfg_q.addr_hi[IADDR_W-1:32];
      8'd8: prdata_o = {16'd0, lost_cnt_i};
      default: prdata_o = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q            <= '0;
      cfg_q.resync_max <= RESYNC_RST;
      cfg_q.priv_mask  <= 4'hF;
      cfg_q.addr_hi    <= '1;
      support_q        <= 1'b0;
    end else begin
      if (support_ack_i) support_q <= 1'b0;
      if (access && pwrite_i && hit) begin
        unique case (word)
          8'd0: begin
            if ((pwdata_i[0] != cfg_q.enable) || (pwdata_i[1] != cfg_q.full_addr))
              support_q <= 1'b1;
            cfg_q.enable          <= pwdata_i[0];
            cfg_q.full_addr       <= pwdata_i[1];
            cfg_q.resync_mode     <= pwdata_i[2];
            cfg_q.priv_filter_en  <= pwdata_i[3];
            cfg_q.addr_filter_en  <= pwdata_i[4];
            cfg_q.cause_filter_en <= pwdata_i[5];
          end
          8'd1: cfg_q.resync_max <= pwdata_i[15:0];
          8'd2: cfg_q.priv_mask  <= pwdata_i[3:0];
          8'd3: cfg_q.cause_val  <= pwdata_i[CAUSE_W-1:0];
          8'd4: cfg_q.addr_lo[31:0]         <= pwdata_i;
          8'd5: cfg_q.addr_lo[IADDR_W-1:32] <= pwdata_i;
          8'd6: cfg_q.addr_hi[31:0]         <= pwdata_i;
          8'd7: cfg_q.addr_hi[IADDR_W-1:32] <= pwdata_i;
          default: ;
        endcase
      end
    end
  end

  assign cfg_o         = cfg_q;
  assign support_req_o = support_q;

  // APB: penable is only raised in the cycle after psel.
  a_apb_setup: assert property (@(posedge clk_i) disable iff (!rst_ni)
      penable_i |-> psel_i);

endmodule

// te_packet_emitter: builds the E-Trace packet chosen by te_priority and
// presents it to the encapsulator on a valid/ready interface.
//
// From the selected kind (sel_i), the last and current blocks (lc_i, tc_i, the
// delayed encoder inputs), the branch map and the configuration it forms the
// payload (layouts in te_pkg), the packet type {format, subformat} and the
// length in bytes. Addresses in formats 1 and 2 are either full or the
// difference to the previously reported address (cfg_i.full_addr), and are cut
// to their significant bits plus one sign bit: the decoder sign-extends the
// last bit sent. notify and updiscon are set equal to that sign so they cost
// nothing. Format 3 packets always carry full addresses and are not cut.
// That the emitter builds the packets from the priority decision, te_reg data
// and delayed inputs is from the design description; the layouts follow
// E-Trace and the cutting rule is this design's choice.
//
// The address last reported (last_addr_i) is kept by the encoder, which
// chains it from lane to lane: addr_o/has_addr_o give the address this packet
// reports.
//
// Timing: the packet is registered; packet_valid_o rises the cycle after the
// decision and holds until encapsulator_ready_i. free_o tells the encoder that
// a new packet can be taken this cycle (output empty or being drained). The
// take pulse, the flush commands for the branch map and the sync flag for the
// resync counter are all for the cycle of the decision.
module te_packet_emitter
  import te_pkg::*;
(
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  sel_e                    sel_i,
  input  te_block_t               lc_i,
  input  te_block_t               tc_i,
  input  te_cfg_t                 cfg_i,
  input  logic [BRANCH_MAP_W-1:0] map_excl_i,
  input  logic [BRANCH_CNT_W-1:0] cnt_excl_i,
  input  logic [BRANCH_MAP_W-1:0] map_incl_i,
  input  logic [BRANCH_CNT_W-1:0] cnt_incl_i,
  input  logic [IADDR_W-1:0]      last_addr_i,
  output logic [IADDR_W-1:0]      addr_o,
  output logic                    has_addr_o,
  input  logic                    encapsulator_ready_i,
  output logic                    free_o,
  output logic                    take_o,
  output logic                    sync_o,
  output logic                    support_ack_o,
  output logic                    flush_all_o,
  output logic                    flush_keep_o,
  output logic                    packet_valid_o,
  output pkt_type_t               packet_type_o,
  output logic [LEN_W-1:0]        packet_length_o,
  output logic [PAYLOAD_W-1:0]    packet_payload_o
);

  logic                    valid_q;
  pkt_type_t               type_q, type_d;
  logic [LEN_W-1:0]        len_q, len_d;
  logic [PAYLOAD_W-1:0]    payload_q, payload_d;

  logic [IADDR_W-1:0]      addr, diff;
  logic [ADDR_FIELD_W-1:0] full_f, rel_f;
  logic                    tc_single, tc_branch_bit;
  logic [7:0]              sig_bits, total_bits;
  logic                    has_addr;
  logic [BRANCH_CNT_W-1:0] cnt;
  logic [BRANCH_MAP_W-1:0] map;

  assign free_o = !valid_q || encapsulator_ready_i;
  assign take_o = free_o && (sel_i != SEL_NONE);

  // Number of bits of a two's complement value needed to keep its value.
  function automatic logic [7:0] signif(logic [ADDR_FIELD_W-1:0] v);
    logic [7:0] n;
    n = 8'd1;
    for (int i = 0; i < ADDR_FIELD_W - 1; i++)
      if (v[i] != v[ADDR_FIELD_W-1]) n = 8'(i + 2);
    return n;
  endfunction

  always_comb begin
    addr = (sel_i == SEL_ADDR_END) ? last_addr(tc_i) : tc_i.iaddr;
    diff = addr - last_addr_i;
    full_f = addr[IADDR_W-1:1];
    rel_f  = cfg_i.full_addr ? addr[IADDR_W-1:1] : diff[IADDR_W-1:1];
    tc_single = (tc_i.iretire == (tc_i.ilastsize[0] ? IRETIRE_W'(2) : IRETIRE_W'(1)));
    tc_branch_bit = !(tc_single && (tc_i.itype == IT_TBR));
    sig_bits = signif(rel_f);

    type_d     = '{fmt: F_SYNC, sub: SF_START};
    payload_d  = '0;
    total_bits = '0;
    has_addr   = 1'b1;
    cnt        = '0;
    map        = '0;
    flush_all_o  = 1'b0;
    flush_keep_o = 1'b0;

    unique case (sel_i)
      SEL_START: begin
        type_d = '{fmt: F_SYNC, sub: SF_START};
        payload_d[1:0] = F_SYNC;
        payload_d[3:2] = SF_START;
        payload_d[4]   = tc_branch_bit;
        payload_d[6:5] = tc_i.priv;
        payload_d[F3_ADDR_LSB +: ADDR_FIELD_W] = full_f;
        total_bits = 8'(F30_BITS);
        flush_keep_o = 1'b1;
      end
      SEL_TRAP: begin
        type_d = '{fmt: F_SYNC, sub: SF_TRAP};
        payload_d[1:0]  = F_SYNC;
        payload_d[3:2]  = SF_TRAP;
        payload_d[4]    = tc_branch_bit;
        payload_d[6:5]  = tc_i.priv;
        payload_d[7 +: CAUSE_W] = lc_i.cause;
        payload_d[12]   = (lc_i.itype == IT_INT);
        payload_d[13]   = 1'b1;  // thaddr: address is the handler entry
        payload_d[F31_ADDR_LSB +: ADDR_FIELD_W] = full_f;
        payload_d[F31_TVAL_LSB +: XLEN] = lc_i.tval;
        total_bits = 8'(F31_BITS);
        flush_keep_o = 1'b1;
      end
      SEL_ADDR_TC, SEL_ADDR_END: begin
        cnt = (sel_i == SEL_ADDR_TC) ? cnt_excl_i : cnt_incl_i;
        map = (sel_i == SEL_ADDR_TC) ? map_excl_i : map_incl_i;
        flush_keep_o = (sel_i == SEL_ADDR_TC);
        flush_all_o  = (sel_i == SEL_ADDR_END);
        if (cnt == '0) begin
          type_d = '{fmt: F_ADDR, sub: SF_START};
          payload_d[1:0] = F_ADDR;
          payload_d[F2_ADDR_LSB +: ADDR_FIELD_W] = rel_f;
          payload_d[F2_ADDR_LSB + ADDR_FIELD_W]     = rel_f[ADDR_FIELD_W-1];
          payload_d[F2_ADDR_LSB + ADDR_FIELD_W + 1] = rel_f[ADDR_FIELD_W-1];
          total_bits = 8'(F2_ADDR_LSB) + sig_bits;
        end else begin
          type_d = '{fmt: F_BRANCH, sub: SF_START};
          payload_d[1:0] = F_BRANCH;
          payload_d[6:2] = cnt;
          payload_d[F1_MAP_LSB +: BRANCH_MAP_W]  = map;
          payload_d[F1_ADDR_LSB +: ADDR_FIELD_W] = rel_f;
          payload_d[F1_ADDR_LSB + ADDR_FIELD_W]     = rel_f[ADDR_FIELD_W-1];
          payload_d[F1_ADDR_LSB + ADDR_FIELD_W + 1] = rel_f[ADDR_FIELD_W-1];
          total_bits = 8'(F1_ADDR_LSB) + sig_bits;
        end
      end
      SEL_FULL: begin
        type_d = '{fmt: F_BRANCH, sub: SF_START};
        payload_d[1:0] = F_BRANCH;
        payload_d[6:2] = '0;  // 0 encodes a full map of 31 branches
        payload_d[F1_MAP_LSB +: BRANCH_MAP_W] = map_incl_i;
        total_bits = 8'(F1_ADDR_LSB);
        has_addr   = 1'b0;
        flush_all_o = 1'b1;
      end
      SEL_SUPPORT: begin
        type_d = '{fmt: F_SYNC, sub: SF_SUPPORT};
        payload_d[1:0] = F_SYNC;
        payload_d[3:2] = SF_SUPPORT;
        payload_d[4]   = cfg_i.enable;
        payload_d[5]   = cfg_i.full_addr;
        payload_d[7:6] = cfg_i.enable ? 2'b00 : 2'b01;  // 01: trace ended
        total_bits = 8'(F33_BITS);
        has_addr   = 1'b0;
      end
      default: has_addr = 1'b0;
    endcase
    len_d = LEN_W'((total_bits + 8'd7) >> 3);
  end

  assign addr_o        = addr;
  assign has_addr_o    = take_o && has_addr;
  assign sync_o        = take_o && ((sel_i == SEL_START) || (sel_i == SEL_TRAP));
  assign support_ack_o = take_o && (sel_i == SEL_SUPPORT);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q   <= 1'b0;
      type_q    <= '{fmt: F_EXT, sub: SF_START};
      len_q     <= '0;
      payload_q <= '0;
    end else begin
      if (take_o) begin
        valid_q   <= 1'b1;
        type_q    <= type_d;
        len_q     <= len_d;
        payload_q <= payload_d;
      end else if (encapsulator_ready_i) begin
        valid_q <= 1'b0;
      end
    end
  end

  assign packet_valid_o   = valid_q;
  assign packet_type_o    = type_q;
  assign packet_length_o  = len_q;
  assign packet_payload_o = payload_q;

  // A packet is held stable until it is accepted.
  a_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (packet_valid_o && !encapsulator_ready_i) |=> (packet_valid_o && $stable(packet_payload_o)));

endmodule

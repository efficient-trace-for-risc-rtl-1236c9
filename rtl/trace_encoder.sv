// trace_encoder: RISC-V E-Trace instruction branch trace encoder.
//
// Blocks of retired instructions (iaddr, iretire, itype, ilastsize, priv,
// cause, tval) arrive in groups of up to NLANES per cycle and leave as
// compressed E-Trace packets (packet_valid/type/length/payload), up to one per
// lane and cycle, towards the AXI encapsulator. The structure follows the
// design description: te_filter qualifies each block, te_priority picks the
// packet kind, te_packet_emitter builds it, te_reg holds the APB-programmed
// settings, te_branch_map collects branch outcomes and te_resync_counter
// requests periodic resynchronisation. Filter, priority and emitter are
// replicated once per lane so that a core retiring several discontinuities
// per cycle is encoded in one cycle; lane i handles the i-th block of a group.
//
// The inputs are delayed by two register stages: the decision for a block
// (tc) looks at the block before it (lc) and the block after it (nc). Within
// a group these are the neighbouring lanes; lane 0's lc is the last block of
// the previous group and the last lane's nc is lane 0 of the arriving group.
// The branch map, the last reported address and the resync request are
// chained through the lanes in order, so the packet stream is exactly the one
// a single lane would produce block by block.
//
// Timing: a group is accepted (block_ready_o) when every lane's packet
// register is free; acceptance decides the previous group, whose packets
// appear one cycle later. A block that needs two packets (its start and its
// end) holds the input for one extra cycle: in the first cycle lanes up to
// that block are decided, in the second the rest. block_valid_i must be
// contiguous from lane 0. encapsulator_ready_i means the encapsulator can take
// all lanes' packets at once. The block valid/ready pair, the per-lane
// privilege and trap inputs and the lane chaining are this design's choice.
//
// The per-lane signals (sel, hold, the branch map views) are vectors indexed
// by lane, and lane i+1 depends on lane i through them, so a simulator that
// orders whole vectors sees a combinational loop. Bit by bit the chain only
// runs from lower to higher lanes and is free of loops; the warning stands.
module trace_encoder
  import te_pkg::*;
#(
  parameter int unsigned NLANES     = 2,
  parameter int unsigned APB_ADDR_W = 12
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  // block inputs, one set per lane
  input  logic   [NLANES-1:0]                 block_valid_i,
  output logic                                block_ready_o,
  input  itype_e [NLANES-1:0]                 itype_i,
  input  logic   [NLANES-1:0][CAUSE_W-1:0]    cause_i,
  input  logic   [NLANES-1:0][XLEN-1:0]       tval_i,
  input  logic   [NLANES-1:0][PRIV_W-1:0]     priv_i,
  input  logic   [NLANES-1:0][IADDR_W-1:0]    iaddr_i,
  input  logic   [NLANES-1:0][IRETIRE_W-1:0]  iretire_i,
  input  logic   [NLANES-1:0][ILASTSIZE_W-1:0] ilastsize_i,
  // APB configuration port
  input  logic [APB_ADDR_W-1:0]               paddr_i,
  input  logic                                psel_i,
  input  logic                                penable_i,
  input  logic                                pwrite_i,
  input  logic [APB_DATA_W-1:0]               pwdata_i,
  output logic [APB_DATA_W-1:0]               prdata_o,
  output logic                                pready_o,
  output logic                                pslverr_o,
  input  logic [15:0]                         lost_cnt_i,
  // packet outputs, one per lane
  input  logic                                encapsulator_ready_i,
  output logic      [NLANES-1:0]              packet_valid_o,
  output pkt_type_t [NLANES-1:0]              packet_type_o,
  output logic      [NLANES-1:0][LEN_W-1:0]   packet_length_o,
  output logic      [NLANES-1:0][PAYLOAD_W-1:0] packet_payload_o
);

  localparam int unsigned LW = (NLANES > 1) ? $clog2(NLANES) : 1;

  te_cfg_t                 cfg;
  te_block_t [NLANES-1:0]  nc, tc_q, lc, nx;
  logic [NLANES-1:0]       nc_qual, tc_valid_q, tc_qual_q, lc_qual, nx_qual;
  te_block_t               lc_q;
  logic                    lc_qual_q;
  logic [LW-1:0]           pos_q, hold_pos;
  logic                    second_q;

  logic [NLANES-1:0]       free, take, sync, active, hold, upd, first_done, resync_l;
  logic [NLANES-1:0]       flush_all, flush_keep, br_full, has_addr, support_ack;
  logic [NLANES-1:0]       support_l;
  sel_e [NLANES-1:0]       sel;
  logic [NLANES-1:0][IADDR_W-1:0]      last_in, addr;
  logic [NLANES-1:0][BRANCH_MAP_W-1:0] map_excl, map_incl;
  logic [NLANES-1:0][BRANCH_CNT_W-1:0] cnt_excl, cnt_incl;
  logic [IADDR_W-1:0]      last_q, last_d;
  logic                    all_free, decide, any_hold, advance;
  logic                    support_req, resync_req;
  logic [$clog2(NLANES+1)-1:0] npkt;

  te_reg #(.APB_ADDR_W(APB_ADDR_W)) u_reg (
    .clk_i, .rst_ni, .paddr_i, .psel_i, .penable_i, .pwrite_i, .pwdata_i,
    .prdata_o, .pready_o, .pslverr_o, .cfg_o(cfg),
    .support_req_o(support_req), .support_ack_i(support_ack[0]), .lost_cnt_i);

  assign all_free      = &free;
  assign decide        = block_valid_i[0] && all_free && tc_valid_q[0];
  assign any_hold      = |hold;
  assign advance       = block_valid_i[0] && all_free && !any_hold;
  assign block_ready_o = all_free && !any_hold;

  // Lane neighbours and the chains that run through the lanes in order.
  always_comb begin
    logic masked, synced;
    logic [IADDR_W-1:0] l;
    masked   = 1'b0;
    synced   = 1'b0;
    l        = last_q;
    hold_pos = '0;
    for (int i = 0; i < NLANES; i++) begin
      lc[i]      = (i == 0) ? lc_q      : tc_q[(i == 0) ? 0 : i-1];
      lc_qual[i] = (i == 0) ? lc_qual_q : tc_qual_q[(i == 0) ? 0 : i-1];
      if ((i + 1 < NLANES) && tc_valid_q[(i + 1 < NLANES) ? i+1 : i]) begin
        nx[i]      = tc_q[(i + 1 < NLANES) ? i+1 : i];
        nx_qual[i] = tc_qual_q[(i + 1 < NLANES) ? i+1 : i];
      end else begin
        nx[i]      = nc[0];
        nx_qual[i] = nc_qual[0];
      end
      active[i]     = decide && tc_valid_q[i] && (LW'(i) >= pos_q) && !masked;
      first_done[i] = second_q && (LW'(i) == pos_q);
      resync_l[i]   = resync_req && !synced;
      support_l[i]  = (i == 0) && support_req;
      upd[i]        = active[i] && tc_qual_q[i];
      last_in[i]    = l;
      if (has_addr[i]) l = addr[i];
      if (sync[i]) synced = 1'b1;
      if (hold[i] && !masked) hold_pos = LW'(i);
      if (hold[i]) masked = 1'b1;
    end
    last_d = l;
  end

  for (genvar i = 0; i < NLANES; i++) begin : g_lane
    assign nc[i] = '{iaddr: iaddr_i[i], iretire: iretire_i[i], itype: itype_i[i],
                     ilastsize: ilastsize_i[i], priv: priv_i[i], cause: cause_i[i],
                     tval: tval_i[i]};

    te_filter u_filter (.block_i(nc[i]), .cfg_i(cfg), .qualified_o(nc_qual[i]));

    te_priority u_priority (
      .decide_i(active[i]), .first_done_i(first_done[i]),
      .lc_qual_i(lc_qual[i]), .lc_itype_i(lc[i].itype), .lc_priv_i(lc[i].priv),
      .tc_qual_i(tc_qual_q[i]), .tc_itype_i(tc_q[i].itype), .tc_priv_i(tc_q[i].priv),
      .nc_qual_i(nx_qual[i]), .nc_priv_i(nx[i].priv),
      .resync_req_i(resync_l[i]), .cnt_excl_i(cnt_excl[i]), .cnt_incl_i(cnt_incl[i]),
      .full_i(br_full[i]), .support_req_i(support_l[i]), .sel_o(sel[i]), .hold_o(hold[i]));

    te_packet_emitter u_emitter (
      .clk_i, .rst_ni, .sel_i(sel[i]), .lc_i(lc[i]), .tc_i(tc_q[i]), .cfg_i(cfg),
      .map_excl_i(map_excl[i]), .cnt_excl_i(cnt_excl[i]),
      .map_incl_i(map_incl[i]), .cnt_incl_i(cnt_incl[i]),
      .last_addr_i(last_in[i]), .addr_o(addr[i]), .has_addr_o(has_addr[i]),
      .encapsulator_ready_i, .free_o(free[i]), .take_o(take[i]), .sync_o(sync[i]),
      .support_ack_o(support_ack[i]), .flush_all_o(flush_all[i]),
      .flush_keep_o(flush_keep[i]), .packet_valid_o(packet_valid_o[i]),
      .packet_type_o(packet_type_o[i]), .packet_length_o(packet_length_o[i]),
      .packet_payload_o(packet_payload_o[i]));

    logic unused_ack;
    if (i > 0) begin : g_no_support
      assign unused_ack = support_ack[i];  // only lane 0 sends support packets
    end else begin : g_support
      assign unused_ack = 1'b0;
    end
  end

  te_branch_map #(.NLANES(NLANES)) u_branch_map (
    .clk_i, .rst_ni, .upd_i(upd),
    .br_valid_i(br_valid_of(tc_q)), .br_taken_i(br_taken_of(tc_q)),
    .flush_all_i(flush_all), .flush_keep_i(flush_keep), .hold_i(hold),
    .map_excl_o(map_excl), .cnt_excl_o(cnt_excl),
    .map_incl_o(map_incl), .cnt_incl_o(cnt_incl), .full_o(br_full));

  function automatic logic [NLANES-1:0] br_valid_of(te_block_t [NLANES-1:0] b);
    for (int i = 0; i < NLANES; i++) br_valid_of[i] = is_branch(b[i].itype);
  endfunction
  function automatic logic [NLANES-1:0] br_taken_of(te_block_t [NLANES-1:0] b);
    for (int i = 0; i < NLANES; i++) br_taken_of[i] = (b[i].itype == IT_TBR);
  endfunction

  always_comb begin
    npkt = '0;
    for (int i = 0; i < NLANES; i++) npkt = npkt + $bits(npkt)'(take[i]);
  end

  te_resync_counter #(.CNT_W(16), .NPKT(NLANES)) u_resync (
    .clk_i, .rst_ni, .enable_i(cfg.enable), .mode_i(cfg.resync_mode),
    .max_i(cfg.resync_max), .packets_i(npkt), .sync_i(|sync),
    .resync_req_o(resync_req));

  // Group registers: tc is the group being decided, lc the block before it.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tc_q <= '0;  lc_q <= '0;
      tc_valid_q <= '0;  tc_qual_q <= '0;  lc_qual_q <= 1'b0;
      pos_q <= '0;  second_q <= 1'b0;  last_q <= '0;
    end else begin
      last_q <= last_d;
      if (advance) begin
        if (tc_valid_q[0]) begin
          for (int i = 0; i < NLANES; i++) begin
            if (tc_valid_q[i]) begin
              lc_q      <= tc_q[i];
              lc_qual_q <= tc_qual_q[i];
            end
          end
        end
        tc_q       <= nc;
        tc_valid_q <= block_valid_i;
        tc_qual_q  <= nc_qual & block_valid_i;
        pos_q      <= '0;
        second_q   <= 1'b0;
      end else if (decide && any_hold) begin
        pos_q    <= hold_pos;
        second_q <= 1'b1;
      end
    end
  end

  // Lanes are filled from lane 0 upwards.
  for (genvar i = 1; i < NLANES; i++) begin : g_contig
    a_contig: assert property (@(posedge clk_i) disable iff (!rst_ni)
        block_valid_i[i] |-> block_valid_i[i-1]);
  end

endmodule

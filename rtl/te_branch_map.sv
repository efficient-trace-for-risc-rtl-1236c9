// te_branch_map: collects the outcomes of traced branches so that they can be
// reported many at a time in format 1 packets.
//
// A 31-bit register holds one bit per branch (1 = not taken, 0 = taken, the
// oldest branch in bit 0) and a counter holds how many bits are in use; the
// register and counter are from the design description, the bit coding
// follows E-Trace. The encoder decides up to NLANES blocks per cycle, one per
// lane, in order. Lane i sees the map as left by lanes 0..i-1: *_excl is the
// map before its block, *_incl the map with the block's branch added, and
// full_o[i] is set when that map holds 31 branches, so that a packet is sent
// before a branch could be lost. Lane i acts when upd_i[i] is set; its packet
// either reported every branch (flush_all_i: map cleared), or those before
// its block (flush_keep_i: only the block's own branch stays). A lane that is
// held for a second packet (hold_i) keeps nothing: its branch is counted
// again when the lane is decided in the next cycle. The register takes the
// map left by the last lane in every cycle. Combinational from the register
// to the lane outputs; one register stage.
module te_branch_map
  import te_pkg::*;
#(
  parameter int unsigned NLANES = 2
) (
  input  logic                                 clk_i,
  input  logic                                 rst_ni,
  input  logic [NLANES-1:0]                    upd_i,
  input  logic [NLANES-1:0]                    br_valid_i,
  input  logic [NLANES-1:0]                    br_taken_i,
  input  logic [NLANES-1:0]                    flush_all_i,
  input  logic [NLANES-1:0]                    flush_keep_i,
  input  logic [NLANES-1:0]                    hold_i,
  output logic [NLANES-1:0][BRANCH_MAP_W-1:0]  map_excl_o,
  output logic [NLANES-1:0][BRANCH_CNT_W-1:0]  cnt_excl_o,
  output logic [NLANES-1:0][BRANCH_MAP_W-1:0]  map_incl_o,
  output logic [NLANES-1:0][BRANCH_CNT_W-1:0]  cnt_incl_o,
  output logic [NLANES-1:0]                    full_o
);

  logic [BRANCH_MAP_W-1:0] map_q, map_d;
  logic [BRANCH_CNT_W-1:0] cnt_q, cnt_d;

  always_comb begin
    logic [BRANCH_MAP_W-1:0] m;
    logic [BRANCH_CNT_W-1:0] c;
    m = map_q;
    c = cnt_q;
    for (int i = 0; i < NLANES; i++) begin
      map_excl_o[i] = m;
      cnt_excl_o[i] = c;
      map_incl_o[i] = m;
      cnt_incl_o[i] = c;
      if (upd_i[i] && br_valid_i[i]) begin
        map_incl_o[i][c] = ~br_taken_i[i];
        cnt_incl_o[i]    = c + 1'b1;
      end
      full_o[i] = (cnt_incl_o[i] == BRANCH_CNT_W'(BRANCH_MAP_W));
      if (upd_i[i]) begin
        if (flush_all_i[i] || hold_i[i]) begin
          m = '0;
          c = '0;
        end else if (flush_keep_i[i]) begin
          m = BRANCH_MAP_W'(br_valid_i[i] && !br_taken_i[i]);
          c = BRANCH_CNT_W'(br_valid_i[i]);
        end else begin
          m = map_incl_o[i];
          c = cnt_incl_o[i];
        end
      end
    end
    map_d = m;
    cnt_d = c;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      map_q <= '0;
      cnt_q <= '0;
    end else begin
      map_q <= map_d;
      cnt_q <= cnt_d;
    end
  end

  // A full map must be reported (entirely, or all but the current branch)
  // before a further branch is added.
  for (genvar i = 0; i < NLANES; i++) begin : g_chk
    a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
        (upd_i[i] && full_o[i] && !hold_i[i]) |-> (flush_all_i[i] || flush_keep_i[i]));
  end

endmodule

// te_resync_counter: forces periodic resynchronisation of the trace so that a
// decoder can pick up the stream without having seen its start.
//
// It counts clock cycles (mode_i = 0) or emitted packets (mode_i = 1; up to
// NPKT packets can be emitted in one cycle, one per encoder lane) while
// tracing is enabled. When the count reaches max_i, resync_req_o is set and
// stays set until a synchronising packet (format 3 start or trap) is emitted,
// which clears the count. Counting packets or cycles against a threshold and
// requesting resync from the priority logic is from the design description;
// the hold-until-sync behaviour and "max_i = 0 disables" are this design's
// choice. The request is decoded from the count register, so it rises in the
// cycle after the count reaches the threshold.
module te_resync_counter #(
  parameter int unsigned CNT_W = 16,
  parameter int unsigned NPKT  = 2
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     enable_i,
  input  logic                     mode_i,
  input  logic [CNT_W-1:0]         max_i,
  input  logic [$clog2(NPKT+1)-1:0] packets_i,
  input  logic                     sync_i,
  output logic                     resync_req_o
);

  logic [CNT_W-1:0] cnt_q;
  logic [CNT_W:0]   next;

  assign next = {1'b0, cnt_q} + (mode_i ? (CNT_W+1)'(packets_i) : (CNT_W+1)'(1));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
    end else if (!enable_i || sync_i) begin
      cnt_q <= '0;
    end else if (cnt_q < max_i) begin
      cnt_q <= (next >= {1'b0, max_i}) ? max_i : next[CNT_W-1:0];
    end
  end

  assign resync_req_o = enable_i && (max_i != '0) && (cnt_q >= max_i);

endmodule

// te_encapsulator_axi: takes trace packets from the encoder over a valid/ready
// handshake, buffers them in a FIFO and writes each one as an AXI4 write
// burst, so that the system crossbar can route it to the Ethernet interface.
//
// A burst has one header beat followed by ceil(length / 8) payload beats of
// 64 bits, little-endian, payload bit 0 in byte 0. The header beat holds the
// packet length in bytes [7:0], the packet type {format, subformat} [11:8]
// and a 32-bit packet sequence number [47:16], so a receiver can spot lost
// packets. Bursts are INCR, 8-byte beats, all to BASE_ADDR; only one write is
// outstanding, the next address phase starts after the write response. The
// last beat's strobe covers only the bytes of the packet. The valid/ready
// input, the FIFO and the AXI4 output are from the design description; the
// framing, the target address and the depth are this design's choice.
// The read channels of the master are unused and not present.
module te_encapsulator_axi
  import te_pkg::*;
#(
  parameter int unsigned           NIN       = 2,
  parameter int unsigned           DEPTH     = 8,
  parameter logic [AXI_ADDR_W-1:0] BASE_ADDR = '0
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic      [NIN-1:0]                pkt_valid_i,
  output logic                                pkt_ready_o,
  input  pkt_type_t [NIN-1:0]                 pkt_type_i,
  input  logic      [NIN-1:0][LEN_W-1:0]      pkt_length_i,
  input  logic      [NIN-1:0][PAYLOAD_W-1:0]  pkt_payload_i,
  output logic                 aw_valid_o,
  input  logic                 aw_ready_i,
  output axi_aw_t              aw_o,
  output logic                 w_valid_o,
  input  logic                 w_ready_i,
  output axi_w_t               w_o,
  input  logic                 b_valid_i,
  output logic                 b_ready_o,
  input  axi_b_t               b_i  // response code is not checked
);

  localparam int unsigned PTR_W  = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned NBEATS = (PAYLOAD_W + AXI_DATA_W - 1) / AXI_DATA_W;
  localparam int unsigned STRB_W = AXI_DATA_W / 8;

  typedef struct packed {
    pkt_type_t            ptype;
    logic [LEN_W-1:0]     len;
    logic [PAYLOAD_W-1:0] payload;
  } entry_t;

  typedef enum logic [1:0] {S_IDLE, S_AW, S_W, S_B} state_e;

  entry_t            mem_q [DEPTH];
  logic [PTR_W-1:0]  rd_q, wr_q;
  logic [PTR_W:0]    cnt_q;
  logic              pop;

  state_e            state_q;
  entry_t            cur_q;
  logic [7:0]        beat_q, nbeats;
  logic [31:0]       seq_q;
  logic [NBEATS*AXI_DATA_W-1:0] pay_ext;
  logic [7:0]        bytes_left;

  assign pkt_ready_o = ((PTR_W+1)'(DEPTH) - cnt_q >= (PTR_W+1)'(NIN));
  assign pop         = (state_q == S_IDLE) && (cnt_q != '0);

  // FIFO with NIN ordered write ports, lane 0 first.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      logic [PTR_W-1:0] wp;
      logic [PTR_W:0]   c;
      wp = wr_q;
      c  = cnt_q - (PTR_W+1)'(pop);
      if (pkt_ready_o) begin
        for (int i = 0; i < NIN; i++) begin
          if (pkt_valid_i[i]) begin
            mem_q[wp] <= '{ptype: pkt_type_i[i], len: pkt_length_i[i],
                           payload: pkt_payload_i[i]};
            wp = (wp == PTR_W'(DEPTH-1)) ? '0 : wp + 1'b1;
            c  = c + 1'b1;
          end
        end
      end
      if (pop) rd_q <= (rd_q == PTR_W'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      wr_q  <= wp;
      cnt_q <= c;
    end
  end

  // header beat plus one beat per 8 payload bytes
  assign nbeats  = 8'd1 + ((8'(cur_q.len) + 8'd7) >> 3);
  assign pay_ext = (NBEATS*AXI_DATA_W)'(cur_q.payload);

  always_comb begin
    aw_o       = '{id: '0, addr: BASE_ADDR, len: nbeats - 8'd1, size: 3'd3, burst: 2'b01};
    aw_valid_o = (state_q == S_AW);
    w_valid_o  = (state_q == S_W);
    b_ready_o  = (state_q == S_B);
    w_o.last   = (beat_q == nbeats - 8'd1);
    w_o.strb   = '1;
    bytes_left = '0;
    if (beat_q == 8'd0) begin
      w_o.data = AXI_DATA_W'({seq_q, 4'd0, cur_q.ptype, 3'd0, cur_q.len});
    end else begin
      w_o.data = pay_ext[32'(beat_q - 8'd1) * AXI_DATA_W +: AXI_DATA_W];
      bytes_left = 8'(cur_q.len) - (beat_q - 8'd1) * 8'(STRB_W);
      if (bytes_left < 8'(STRB_W))
        w_o.strb = STRB_W'((1 << bytes_left) - 1);
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cur_q   <= '0;
      beat_q  <= '0;
      seq_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (pop) begin
          cur_q   <= mem_q[rd_q];
          beat_q  <= '0;
          state_q <= S_AW;
        end
        S_AW: if (aw_ready_i) state_q <= S_W;
        S_W: if (w_ready_i) begin
          beat_q <= beat_q + 1'b1;
          if (w_o.last) state_q <= S_B;
        end
        S_B: if (b_valid_i) begin
          seq_q   <= seq_q + 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // AXI: address and data are held until accepted.
  a_aw_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (aw_valid_o && !aw_ready_i) |=> (aw_valid_o && $stable(aw_o)));
  a_w_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
      (w_valid_o && !w_ready_i) |=> (w_valid_o && $stable(w_o)));

endmodule

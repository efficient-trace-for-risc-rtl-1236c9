// te_tip: trace interface port (TIP) extension of the core. It turns the
// instructions retired by the core's commit ports into the blocks the trace
// encoder consumes, and buffers them in a FIFO.
//
// An open block starts at the first retired instruction after the previous
// block closed (iaddr = its pc) and grows by 1 (compressed) or 2 half-words
// per instruction. It closes when an instruction of a special type retires
// (its itype then ends the block), when the privilege level of retiring
// instructions changes (itype none), when iretire is about to overflow (itype
// none) or when a trap is taken (itype exception or interrupt, with cause and
// tval). A trap with no open block makes an empty block (iretire 0) whose
// iaddr is the trapping pc. Commit ports are taken in order, port 0 first;
// the trap of a cycle comes after its retired instructions. Up to NRET + 2
// blocks can close in one cycle; the FIFO writes all of them, and when there
// is no room the newest are dropped and counted in lost_cnt_o (saturating).
// That the core is extended with a port producing the E-Trace encoder inputs,
// and that it buffers them in FIFOs, is from the design description; the
// core-side inputs, the block merging across cycles and the FIFO depth are
// this design's choice. Output: the NOUT oldest blocks of the FIFO, lane 0
// the oldest, valid contiguous from lane 0; block_ready_i takes all valid
// lanes at once. No extra latency beyond the one cycle a block takes to be
// written.
module te_tip
  import te_pkg::*;
#(
  parameter int unsigned NRET  = 2,
  parameter int unsigned NOUT  = 2,
  parameter int unsigned DEPTH = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  tip_commit_t [NRET-1:0] commit_i,
  input  logic [PRIV_W-1:0]   priv_i,
  input  logic                trap_valid_i,
  input  logic                trap_interrupt_i,
  input  logic [CAUSE_W-1:0]  trap_cause_i,
  input  logic [XLEN-1:0]     trap_tval_i,
  input  logic [XLEN-1:0]     trap_epc_i,
  output logic [NOUT-1:0]     block_valid_o,
  output te_block_t [NOUT-1:0] block_o,
  input  logic                block_ready_i,
  output logic [15:0]         lost_cnt_o
);

  localparam int unsigned NPUSH = NRET + 2;
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  te_block_t               open_q, open_d;
  logic                    is_open_q, is_open_d;
  te_block_t [NPUSH-1:0]   push_blk;
  logic [NPUSH-1:0]        push_vld;

  te_block_t               mem_q [DEPTH];
  logic [PTR_W-1:0]        rd_q, wr_q;
  logic [PTR_W:0]          cnt_q;
  logic [15:0]             lost_q;

  localparam logic [IRETIRE_W-1:0] IRET_LIMIT = IRETIRE_W'((1 << IRETIRE_W) - 2);

  always_comb begin
    te_block_t b;
    logic      o;
    b = open_q;
    o = is_open_q;
    push_blk = '0;
    push_vld = '0;
    // privilege change closes the open block
    if (o && (b.priv != priv_i)) begin
      b.itype = IT_NONE;
      push_blk[0] = b;
      push_vld[0] = 1'b1;
      o = 1'b0;
    end
    for (int i = 0; i < NRET; i++) begin
      if (commit_i[i].valid) begin
        if (!o) begin
          b = '0;
          b.iaddr = commit_i[i].pc;
          b.priv  = priv_i;
          o = 1'b1;
        end
        b.iretire   = b.iretire + (commit_i[i].compressed ? IRETIRE_W'(1) : IRETIRE_W'(2));
        b.ilastsize = commit_i[i].compressed ? 1'b0 : 1'b1;
        if ((commit_i[i].itype != IT_NONE) || (b.iretire >= IRET_LIMIT)) begin
          b.itype = commit_i[i].itype;
          push_blk[i+1] = b;
          push_vld[i+1] = 1'b1;
          o = 1'b0;
        end
      end
    end
    if (trap_valid_i) begin
      if (!o) begin
        b = '0;
        b.iaddr = trap_epc_i;
        b.priv  = priv_i;
      end
      b.itype = trap_interrupt_i ? IT_INT : IT_EXC;
      b.cause = trap_cause_i;
      b.tval  = trap_tval_i;
      push_blk[NPUSH-1] = b;
      push_vld[NPUSH-1] = 1'b1;
      o = 1'b0;
    end
    open_d    = b;
    is_open_d = o;
  end

  // FIFO with NPUSH ordered write ports and NOUT read ports.
  logic [PTR_W:0]   npop;
  assign lost_cnt_o = lost_q;

  always_comb begin
    logic [PTR_W:0] r;
    npop = '0;
    for (int i = 0; i < NOUT; i++) begin
      r = (PTR_W+1)'(rd_q) + (PTR_W+1)'(i);
      if (r >= (PTR_W+1)'(DEPTH)) r = r - (PTR_W+1)'(DEPTH);
      block_valid_o[i] = (cnt_q > (PTR_W+1)'(i));
      block_o[i]       = mem_q[PTR_W'(r)];
      if (block_valid_o[i] && block_ready_i) npop = npop + 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      open_q    <= '0;
      is_open_q <= 1'b0;
      rd_q      <= '0;
      wr_q      <= '0;
      cnt_q     <= '0;
      lost_q    <= '0;
    end else begin
      logic [PTR_W-1:0] wp;
      logic [PTR_W:0]   c;
      logic [15:0]      lost;
      open_q    <= open_d;
      is_open_q <= is_open_d;
      wp   = wr_q;
      c    = cnt_q - npop;
      lost = lost_q;
      for (int k = 0; k < NPUSH; k++) begin
        if (push_vld[k]) begin
          if (c < (PTR_W+1)'(DEPTH)) begin
            mem_q[wp] <= push_blk[k];
            wp = (wp == PTR_W'(DEPTH-1)) ? '0 : wp + 1'b1;
            c  = c + 1'b1;
          end else if (lost != '1) begin
            lost = lost + 1'b1;
          end
        end
      end
      rd_q <= PTR_W'(((PTR_W+1)'(rd_q) + npop) % (PTR_W+1)'(DEPTH));
      wr_q   <= wp;
      cnt_q  <= c;
      lost_q <= lost;
    end
  end

endmodule

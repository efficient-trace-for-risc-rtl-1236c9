// tb_trace_workloads: runs program-shaped instruction streams through the
// tracing system at its default parameters and measures how well the trace
// compresses them. Three kernels stand for the kinds of test program the
// design is meant for:
//   matmul - a triple loop nest (12 x 12 x 12) with a 4-instruction inner
//            body; one conditional branch per inner iteration
//   calls  - a character loop that calls a short output routine per
//            character; every return is an uninferable jump
//   timer  - the loop nest again, interrupted by a timer every 200
//            instructions; the handler runs 6 instructions and returns
// Inferable jumps (direct calls and jumps) do not end a block, as in
// instruction branch tracing. The core model retires up to two instructions
// per cycle; the AXI slave is always ready. For each kernel the testbench
// checks that no block is lost, that the branch outcomes in the format 1
// packets number exactly as many as the traced branches, and that the
// compression against 32 bits per instruction reaches a floor chosen for the
// kernel (matmul 98 %, calls 85 %, timer 95 %). Trace is enabled in
// differential mode with a resync every 256 packets; after each kernel it is
// disabled, which makes the encoder report the last block.
module tb_trace_workloads;
  import te_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  tip_commit_t [1:0] cm;
  logic [1:0] priv;
  logic tv, ti;
  logic [4:0] tcause;
  logic [63:0] ttval, tepc;
  logic [11:0] paddr;
  logic psel, pen, pwr, pready, perr;
  logic [31:0] pwdata, prdata;
  logic awv, awr, wv, wr, bv, brd;
  axi_aw_t aw;
  axi_w_t w;
  axi_b_t b;

  trace_system dut (.clk_i(clk), .rst_ni(rst_n), .commit_i(cm), .priv_i(priv),
    .trap_valid_i(tv), .trap_interrupt_i(ti), .trap_cause_i(tcause), .trap_tval_i(ttval),
    .trap_epc_i(tepc), .paddr_i(paddr), .psel_i(psel), .penable_i(pen), .pwrite_i(pwr),
    .pwdata_i(pwdata), .prdata_o(prdata), .pready_o(pready), .pslverr_o(perr),
    .aw_valid_o(awv), .aw_ready_i(awr), .aw_o(aw), .w_valid_o(wv), .w_ready_i(wr), .w_o(w),
    .b_valid_i(bv), .b_ready_o(brd), .b_i(b));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- program model
  typedef struct {
    bit          trap;
    logic [63:0] pc;
    itype_e      it;
  } ev_t;
  ev_t    prog[$];
  longint n_instr = 0, n_branch = 0;
  int     since_irq = 0, irq_period = 0;

  function automatic void ins(logic [63:0] pc, itype_e it = IT_NONE);
    ev_t e;
    if (irq_period != 0 && since_irq >= irq_period) begin
      // timer interrupt before this instruction, handler at 0x8000_9000
      e.trap = 1; e.pc = pc; e.it = IT_INT;
      prog.push_back(e);
      for (int h = 0; h < 5; h++) ins_raw(64'h8000_9000 + 64'(h * 4), IT_NONE);
      ins_raw(64'h8000_9014, IT_ERET);
      since_irq = 0;
    end
    ins_raw(pc, it);
    since_irq++;
  endfunction

  function automatic void ins_raw(logic [63:0] pc, itype_e it);
    ev_t e;
    e.trap = 0; e.pc = pc; e.it = it;
    prog.push_back(e);
    n_instr++;
    if (it == IT_TBR || it == IT_NTBR) n_branch++;
  endfunction

  function automatic void gen_matmul(int n);
    for (int i = 0; i < n; i++) begin
      ins(64'h8000_1000); ins(64'h8000_1004);
      for (int j = 0; j < n; j++) begin
        ins(64'h8000_1008); ins(64'h8000_100C);
        for (int k = 0; k < n; k++) begin
          for (int x = 0; x < 4; x++) ins(64'h8000_1010 + 64'(x * 4));
          ins(64'h8000_1020, (k < n - 1) ? IT_TBR : IT_NTBR);
        end
        ins(64'h8000_1024); ins(64'h8000_1028);
        ins(64'h8000_102C, (j < n - 1) ? IT_TBR : IT_NTBR);
      end
      ins(64'h8000_1030); ins(64'h8000_1034);
      ins(64'h8000_1038, (i < n - 1) ? IT_TBR : IT_NTBR);
    end
    ins(64'h8000_103C, IT_UJUMP);  // return to the caller
  endfunction

  function automatic void gen_calls(int m);
    for (int c = 0; c < m; c++) begin
      ins(64'h8000_2000);                                  // load character
      ins(64'h8000_2004, (c == m - 1) ? IT_TBR : IT_NTBR); // end of string?
      if (c == m - 1) break;
      ins(64'h8000_2008);                                  // direct call
      for (int x = 0; x < 9; x++) ins(64'h8000_3000 + 64'(x * 4));
      ins(64'h8000_3024, IT_UJUMP);                        // return
      ins(64'h8000_200C);
      ins(64'h8000_2010);                                  // direct jump back
    end
    ins(64'h8000_2014, IT_UJUMP);
  endfunction

  // two instructions per cycle; a trap is taken after the cycle's retirement
  always @(negedge clk) begin
    cm = '0; tv = 0;
    for (int p = 0; p < 2; p++) begin
      if (prog.size() == 0) break;
      if (prog[0].trap) begin
        tv = 1; ti = 1; tcause = 5'd7; ttval = '0; tepc = prog[0].pc;
        void'(prog.pop_front());
        break;
      end
      cm[p].valid = 1; cm[p].pc = prog[0].pc; cm[p].compressed = 0; cm[p].itype = prog[0].it;
      void'(prog.pop_front());
    end
  end

  // ---------------------------------------------------------------- APB
  task automatic apb(bit wr_, logic [11:0] a, logic [31:0] d, output logic [31:0] r);
    @(negedge clk); paddr = a; pwr = wr_; pwdata = d; psel = 1; pen = 0;
    @(negedge clk); pen = 1;
    @(posedge clk); r = prdata;
    @(negedge clk); psel = 0; pen = 0;
  endtask

  // ---------------------------------------------------------------- packet probes
  longint n_bytes = 0, n_brrep = 0, n_pkts = 0;
  always @(posedge clk) if (rst_n && dut.pkt_ready) begin
    for (int i = 0; i < 2; i++) if (dut.pkt_valid[i]) begin
      n_pkts++;
      n_bytes += longint'(dut.pkt_len[i]);
      if (dut.pkt_type[i].fmt == F_BRANCH)
        n_brrep += (dut.pkt_payload[i][6:2] == 5'd0) ? 31 : longint'(dut.pkt_payload[i][6:2]);
    end
  end

  // ---------------------------------------------------------------- AXI slave
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) bv <= 0;
    else if (wv && wr && w.last) bv <= 1;
    else if (bv && brd) bv <= 0;
  end
  assign awr = 1'b1;
  assign wr  = 1'b1;
  assign b   = '0;

  // ---------------------------------------------------------------- kernels
  task automatic run_kernel(string name, int kind, real floor);
    logic [31:0] r;
    longint i0, b0, by0, br0, p0;
    real rate;
    int t0;
    apb(1, 12'h00, 32'h05, r);        // enable, differential, resync counts packets
    repeat (5) @(posedge clk);
    i0 = n_instr; b0 = n_branch; by0 = n_bytes; br0 = n_brrep; p0 = n_pkts;
    t0 = $time;
    case (kind)
      0: gen_matmul(12);
      1: gen_calls(200);
      default: begin irq_period = 200; since_irq = 0; gen_matmul(12); irq_period = 0; end
    endcase
    while (prog.size() != 0) @(posedge clk);
    repeat (20) @(posedge clk);
    apb(1, 12'h00, 32'h04, r);        // trace off: the last block is reported
    ins_raw(64'h8000_F000, IT_NONE); ins_raw(64'h8000_F004, IT_UJUMP);
    n_instr -= 2;
    while (prog.size() != 0) @(posedge clk);
    repeat (200) @(posedge clk);
    rate = 100.0 * (1.0 - real'((n_bytes - by0) * 8) / real'((n_instr - i0) * 32));
    $display("%-7s instructions=%0d branches=%0d packets=%0d bytes=%0d cycles=%0d compression=%0.2f%%",
             name, n_instr - i0, n_branch - b0, n_pkts - p0, n_bytes - by0,
             ($time - t0) / 10, rate);
    check(n_brrep - br0 == n_branch - b0,
          $sformatf("%s: %0d branch outcomes reported of %0d", name, n_brrep - br0, n_branch - b0));
    check(rate >= floor, $sformatf("%s: compression %0.2f%% below %0.1f%%", name, rate, floor));
    apb(0, 12'h20, 0, r);
    check(r == 0, $sformatf("%s: %0d blocks lost", name, r));
  endtask

  logic [31:0] r;
  initial begin
    cm = '0; priv = 2'd3; tv = 0; ti = 0; tcause = 0; ttval = 0; tepc = 0;
    psel = 0; pen = 0; pwr = 0; paddr = 0; pwdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    apb(1, 12'h04, 32'd256, r);
    run_kernel("matmul", 0, 98.0);
    run_kernel("calls", 1, 85.0);
    run_kernel("timer", 2, 95.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

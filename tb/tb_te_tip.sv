// tb_te_tip: random retirement streams (two commit ports, compressed and
// full-size instructions, branches, jumps, traps and privilege changes) with
// random back-pressure. Every block leaving either output lane of te_tip is
// compared with a reference block builder, lane 0 the oldest; a phase with the consumer stalled checks that a
// full FIFO drops blocks and counts them.
module tb_te_tip;
  import te_pkg::*;
  localparam int NRET = 2, NOUT = 2, DEPTH = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  tip_commit_t [NRET-1:0] cm;
  logic [1:0] priv;
  logic tv, ti, br;
  logic [NOUT-1:0] bv;
  logic [4:0] tc;
  logic [63:0] ttv, tepc, pc;
  te_block_t [NOUT-1:0] bo;
  logic [15:0] lost;

  te_tip #(.NRET(NRET), .NOUT(NOUT), .DEPTH(DEPTH)) dut (.clk_i(clk), .rst_ni(rst_n), .commit_i(cm),
    .priv_i(priv), .trap_valid_i(tv), .trap_interrupt_i(ti), .trap_cause_i(tc),
    .trap_tval_i(ttv), .trap_epc_i(tepc), .block_valid_o(bv), .block_o(bo),
    .block_ready_i(br), .lost_cnt_o(lost));

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  te_block_t exp_q[$];
  te_block_t ob;
  bit        is_open = 0;
  int        mlost = 0, nblk = 0, npair = 0, npriv = 0, ntrap = 0, nempty = 0;

  function automatic void add(te_block_t b, int occ);
    if (occ + 0 < DEPTH) exp_q.push_back(b); else mlost++;
  endfunction

  task automatic cycle(bit stall);
    int occ;
    te_block_t pushes[$];
    // random inputs
    priv = ($urandom_range(0, 30) == 0) ? ~priv : priv;
    for (int i = 0; i < NRET; i++) begin
      cm[i].valid = $urandom_range(0, 3) != 0;
      cm[i].compressed = $urandom_range(0, 1);
      cm[i].itype = itype_e'(($urandom_range(0, 2) == 0) ?
                    ($urandom_range(0, 1) ? $urandom_range(4, 6) : 3) : 0);
      cm[i].pc = pc;
      if (cm[i].valid) pc = pc + (cm[i].compressed ? 2 : 4);
    end
    tv = $urandom_range(0, 25) == 0; ti = $urandom_range(0, 1);
    tc = 5'($urandom); ttv = {$urandom, $urandom}; tepc = pc;
    br = stall ? 0 : ($urandom_range(0, 3) != 0);
    #1;
    // reference block builder
    if (is_open && ob.priv != priv) begin
      ob.itype = IT_NONE; pushes.push_back(ob); is_open = 0; npriv++;
    end
    for (int i = 0; i < NRET; i++) if (cm[i].valid) begin
      if (!is_open) begin ob = '0; ob.iaddr = cm[i].pc; ob.priv = priv; is_open = 1; end
      ob.iretire += cm[i].compressed ? 1 : 2;
      ob.ilastsize = !cm[i].compressed;
      if (cm[i].itype != IT_NONE || ob.iretire >= 254) begin
        ob.itype = cm[i].itype; pushes.push_back(ob); is_open = 0;
      end
    end
    if (tv) begin
      if (!is_open) begin ob = '0; ob.iaddr = tepc; ob.priv = priv; nempty++; end
      ob.itype = ti ? IT_INT : IT_EXC; ob.cause = tc; ob.tval = ttv;
      pushes.push_back(ob); is_open = 0; ntrap++;
    end
    // pop happens at the coming edge
    for (int i = 0; i < NOUT; i++) begin
      checks++;
      if (bv[i] !== (exp_q.size() > i)) begin
        failures++;
        if (failures < 6) $display("lane %0d valid %0b with %0d queued", i, bv[i], exp_q.size());
      end
    end
    if (br) begin
      int n;
      n = 0;
      for (int i = 0; i < NOUT; i++) if (bv[i]) begin
        checks++;
        if (exp_q.size() <= i || bo[i] !== exp_q[i]) begin
          failures++;
          if (failures < 6) $display("block mismatch lane %0d: got iaddr=%h iret=%0d it=%0d", i,
                                     bo[i].iaddr, bo[i].iretire, bo[i].itype);
        end
        n++;
        nblk++;
        if (i > 0) npair++;
      end
      repeat (n) if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
    occ = exp_q.size();
    foreach (pushes[k]) begin add(pushes[k], occ); occ = exp_q.size(); end
    @(negedge clk);
  endtask

  initial begin
    cm = '0; priv = 2'd3; tv = 0; ti = 0; tc = 0; ttv = 0; tepc = 0; br = 0;
    pc = 64'h8000_0000;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    repeat (3000) cycle(0);
    repeat (100) cycle(1);       // stalled consumer: FIFO fills, blocks are lost
    repeat (3000) cycle(0);
    checks++; if (lost !== 16'(mlost)) begin failures++; $display("lost %0d vs %0d", lost, mlost); end
    checks++; if (mlost == 0) failures++;
    checks++; if (npriv == 0 || ntrap == 0 || nempty == 0 || npair == 0) failures++;
    $display("pairs=%0d", npair);
    $display("blocks=%0d lost=%0d privchg=%0d traps=%0d empty=%0d", nblk, mlost, npriv, ntrap, nempty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

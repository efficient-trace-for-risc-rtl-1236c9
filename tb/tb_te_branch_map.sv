// tb_te_branch_map: feeds random branch outcomes, flushes and holds into both
// lanes of te_branch_map and checks every lane's maps, counts and full flag
// against a queue-based reference that applies the lanes one after the other.
// Also checks that a 31st branch sets full.
module tb_te_branch_map;
  import te_pkg::*;
  localparam int N = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] upd, brv, brt, fa, fk, hold;
  logic [N-1:0][30:0] me, mi;
  logic [N-1:0][4:0]  ce, ci;
  logic [N-1:0]       full;
  bit          ref_q[$];
  int          nfull = 0, nboth = 0;

  te_branch_map #(.NLANES(N)) dut (.clk_i(clk), .rst_ni(rst_n), .upd_i(upd),
    .br_valid_i(brv), .br_taken_i(brt), .flush_all_i(fa), .flush_keep_i(fk),
    .hold_i(hold), .map_excl_o(me), .cnt_excl_o(ce), .map_incl_o(mi),
    .cnt_incl_o(ci), .full_o(full));

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [30:0] to_map(bit q[$]);
    logic [30:0] m;
    m = '0;
    foreach (q[i]) m[i] = q[i];
    return m;
  endfunction

  initial begin
    upd = 0; brv = 0; brt = 0; fa = 0; fk = 0; hold = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 20000; it++) begin
      bit q[$];
      @(negedge clk);
      q = ref_q;
      // lanes are set one after the other, each seeing the earlier ones
      for (int i = 0; i < N; i++) begin
        bit qi[$];
        bit nt, f;
        upd[i]  = $urandom_range(0, 3) != 0;
        brv[i]  = $urandom_range(0, 1) == 1;
        brt[i]  = $urandom_range(0, 1) == 1;
        hold[i] = upd[i] && ($urandom_range(0, 30) == 0);
        nt = brv[i] && !brt[i];
        qi = q;
        if (upd[i] && brv[i]) qi.push_back(nt);
        f = (qi.size() == 31);
        fa[i] = 0; fk[i] = 0;
        if (upd[i]) begin
          // a full map is always flushed, as the encoder does
          if (f && !hold[i]) begin
            if ($urandom_range(0, 1)) fa[i] = 1; else fk[i] = 1;
          end
          else if ($urandom_range(0, 40) == 0) fa[i] = 1;
          else if ($urandom_range(0, 40) == 0) fk[i] = 1;
        end
        #1;
        checks++;
        if (me[i] !== to_map(q) || ce[i] !== 5'(q.size())) begin
          failures++;
          if (failures < 5) $display("excl mismatch lane %0d", i);
        end
        checks++;
        if (mi[i] !== to_map(qi) || ci[i] !== 5'(qi.size()) || full[i] !== f) begin
          failures++;
          if (failures < 5) $display("incl mismatch lane %0d %h %0d vs %h %0d", i, mi[i], ci[i],
                                     to_map(qi), qi.size());
        end
        if (f) nfull++;
        if (upd[i]) begin
          if (fa[i] || hold[i]) q.delete();
          else if (fk[i]) begin q.delete(); if (brv[i]) q.push_back(nt); end
          else q = qi;
        end
      end
      if (upd[0] && upd[1]) nboth++;
      ref_q = q;
    end
    checks++; if (nfull == 0) failures++;
    checks++; if (nboth == 0) failures++;
    $display("full reached %0d times, both lanes used %0d times", nfull, nboth);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

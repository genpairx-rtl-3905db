// tb_paf_unit -- loads random sorted location lists for read 1 and read 2
// into one Paired-Adjacency Filtering instance and checks the emitted
// candidates against a reference walk of the same two-pointer rule, checks
// that every candidate lies within Delta, that pairs without candidates are
// reported for fallback, and the compare-cycle budget (n1 + n2 + 2 cycles
// when the output is never stalled).
module tb_paf_unit;
  import genpairx_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  loc_t delta = 500;
  logic idle, ld_valid [2], ld_done = 0, cand_valid, cand_ready = 1, fb_valid, fb_ready = 1;
  seed_loc_t ld_loc [2];
  pair_id_t ld_pair_id;
  read_seq_t ld_r1, ld_r2;
  paf_cand_t cand;
  fallback_t fb;
  int checks = 0, failures = 0;
  int n_fb = 0, n_cand = 0;

  always #5 clk = ~clk;
  paf_unit dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  seed_loc_t la[$], lb[$];
  seed_loc_t exp_a[$], exp_b[$];
  bit got_fb;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic void sorted_list(ref seed_loc_t q[$], input int n, input int span);
    q.delete();
    for (int i = 0; i < n; i++) q.push_back('{loc: LOC_W'($urandom % span), sidx: 2'($urandom % 3)});
    q.sort() with (item.loc);
  endfunction

  // Collect outputs.
  always @(negedge clk) begin
    if (rst_n && cand_valid && cand_ready) begin
      n_cand++;
      if (exp_a.size() == 0) chk(0, "unexpected candidate");
      else begin
        seed_loc_t ea, eb;
        ea = exp_a.pop_front();
        eb = exp_b.pop_front();
        chk(cand.l1 == ea && cand.l2 == eb, $sformatf("cand %0d/%0d exp %0d/%0d", cand.l1.loc, cand.l2.loc, ea.loc, eb.loc));
        chk(((cand.l1.loc > cand.l2.loc) ? cand.l1.loc - cand.l2.loc : cand.l2.loc - cand.l1.loc) < delta, "within delta");
        chk(cand.pair_id == ld_pair_id && cand.r1 == ld_r1 && cand.r2 == ld_r2, "pair id and reads");
      end
    end
    if (rst_n && fb_valid && fb_ready) begin
      n_fb++;
      got_fb = 1;
      chk(fb.pair_id == ld_pair_id && fb.reason == FB_NO_ADJACENT, "fallback record");
    end
  end

  task automatic run_pair(int n1, int n2, int span, bit stall_out);
    int i = 0, j = 0, t0, ncand;
    sorted_list(la, n1, span);
    sorted_list(lb, n2, span);
    // reference walk
    exp_a.delete(); exp_b.delete();
    while (i < n1 && j < n2) begin
      int unsigned d = (la[i].loc > lb[j].loc) ? la[i].loc - lb[j].loc : lb[j].loc - la[i].loc;
      if (d < delta) begin exp_a.push_back(la[i]); exp_b.push_back(lb[j]); end
      if (la[i].loc <= lb[j].loc) i++; else j++;
    end
    ncand = exp_a.size();
    got_fb = 0;
    @(negedge clk);
    while (!idle) @(negedge clk);
    ld_pair_id = $urandom;
    ld_r1 = rand_read();
    ld_r2 = rand_read();
    for (int k = 0; k < ((n1 > n2) ? n1 : n2); k++) begin
      ld_valid[0] = k < n1; ld_valid[1] = k < n2;
      ld_loc[0] = (k < n1) ? la[k] : '0;
      ld_loc[1] = (k < n2) ? lb[k] : '0;
      @(negedge clk);
    end
    ld_valid[0] = 0; ld_valid[1] = 0;
    ld_done = 1;
    @(negedge clk);
    ld_done = 0;
    t0 = cyc;
    cand_ready = 1;
    while (!idle) begin
      if (stall_out) cand_ready = ($urandom % 2) == 0;
      @(negedge clk);
    end
    cand_ready = 1;
    repeat (2) @(negedge clk);
    chk(exp_a.size() == 0, $sformatf("%0d candidates missing", exp_a.size()));
    chk(got_fb == (ncand == 0), "fallback iff no candidate");
    if (!stall_out)
      chk(cyc - t0 <= n1 + n2 + 2 + (ncand == 0), $sformatf("took %0d cycles for %0d+%0d", cyc - t0, n1, n2));
  endtask

  initial begin
    ld_valid[0] = 0; ld_valid[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      delta = 200 + $urandom % 301;
      run_pair(1 + $urandom % 40, 1 + $urandom % 40, (p % 3 == 0) ? 100000 : 8000, p % 2);
    end
    run_pair(3, 3, 100000000, 0);  // far apart: fallback
    run_pair(1500, 1500, 3000000, 0);  // full FIFOs
    chk(n_fb > 0 && n_cand > 0, "both outcomes seen");
    $display("candidates %0d fallbacks %0d", n_cand, n_fb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

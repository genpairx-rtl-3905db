// tb_light_align_unit -- drives one Light Alignment instance with reads cut
// from a random reference segment and given one known edit (none, 1-2
// mismatches, 1-5 consecutive deletions, 1-2 consecutive insertions) or an
// edit mix it must reject. Checks the edit type and length, the score
// against the literal values of the paper's edit table, that the reported
// edit reproduces the read from the reference, the 154-cycle result latency
// and the 156-cycle spacing of back-to-back alignments.
module tb_light_align_unit;
  import genpairx_pkg::*;

  localparam int L = READ_LEN;
  localparam int GLEN = 220;
  localparam int START = 20;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  read_seq_t in_read;
  ref_win_t in_ref;
  la_tag_t in_tag;
  la_result_t out_res;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  light_align_unit dut (.*);

  initial begin
    #5000000;
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

  base_t g [GLEN];
  base_t rd [L];

  // Scores of the paper's edit table, written out literally.
  function automatic int table_score(edit_t e, int k);
    case (e)
      EDIT_NONE:      return 300;
      EDIT_MISMATCH:  return (k == 1) ? 290 : 280;
      EDIT_DELETION:  case (k) 1: return 286; 2: return 284; 3: return 282; 4: return 280; default: return 278; endcase
      default:        return (k == 1) ? 284 : 280;
    endcase
  endfunction

  // Rebuild what the reported edit says the read is and compare.
  function automatic bit reproduces(la_result_t r);
    int loc = int'(r.location);
    int p = int'(r.edit_pos);
    int k = int'(r.edit_len);
    int mm = 0;
    for (int i = 0; i < L; i++) begin
      case (r.edit)
        EDIT_NONE:     if (rd[i] != g[loc+i]) return 0;
        EDIT_MISMATCH: if (rd[i] != g[loc+i]) mm++;
        EDIT_DELETION: if (rd[i] != g[(i < p) ? loc+i : loc+i+k]) return 0;
        default:       if (i < p || i >= p + k) if (rd[i] != g[(i < p) ? loc+i : loc+i-k]) return 0;
      endcase
    end
    if (r.edit == EDIT_MISMATCH) return mm == k;
    return 1;
  endfunction

  int t_acc, t_out, t_prev_acc;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_case(edit_t e, int k, bit expect_ok, bit back_to_back);
    int p;
    base_t nb;
    for (int i = 0; i < GLEN; i++) g[i] = base_t'($urandom);
    p = 20 + ($urandom % (L - 45));
    for (int i = 0; i < L; i++) begin
      case (e)
        EDIT_DELETION:  rd[i] = g[(i < p) ? START+i : START+i+k];
        EDIT_INSERTION: rd[i] = (i < p) ? g[START+i] : (i < p + k) ? base_t'($urandom) : g[START+i-k];
        default:        rd[i] = g[START+i];
      endcase
    end
    if (e == EDIT_MISMATCH) begin
      for (int j = 0; j < k; j++) begin
        nb = rd[p + 11*j] ^ base_t'(1 + $urandom % 3);
        rd[p + 11*j] = nb;
      end
    end
    if (!expect_ok && e == EDIT_NONE) begin
      // one mismatch plus a deletion further on: two edit types
      for (int i = p + 10; i < L; i++) rd[i] = g[START+i+1];
      rd[p] = rd[p] ^ 2'b01;
    end
    for (int i = 0; i < L; i++) in_read[2*i +: 2] = rd[i];
    for (int i = 0; i < REF_WIN; i++) in_ref[2*i +: 2] = g[START - IMAX + i];
    in_tag = '{pair_id: 32'(e) * 10 + 32'(k), read_sel: 1'(k), start: LOC_W'(START)};
    @(negedge clk);
    in_valid = 1;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    t_prev_acc = t_acc;
    t_acc = cyc;
    if (back_to_back) chk(t_acc - t_prev_acc == 156, $sformatf("initiation interval %0d", t_acc - t_prev_acc));
    in_valid = 0;
    out_ready = 1;
    while (!out_valid) @(negedge clk);
    t_out = cyc;
    chk(t_out - t_acc == 154, $sformatf("latency %0d", t_out - t_acc));
    chk(out_res.aligned == expect_ok, $sformatf("aligned %0d for edit %s k=%0d (got %s len %0d pos %0d p %0d)",
        out_res.aligned, e.name(), k, out_res.edit.name(), out_res.edit_len, out_res.edit_pos, p));
    chk(out_res.pair_id == in_tag.pair_id && out_res.read_sel == in_tag.read_sel, "tag");
    if (expect_ok) begin
      chk(out_res.edit == e, $sformatf("edit %s exp %s", out_res.edit.name(), e.name()));
      chk(int'(out_res.edit_len) == k, $sformatf("edit len %0d exp %0d", out_res.edit_len, k));
      chk(int'(out_res.score) == table_score(e, k), $sformatf("score %0d exp %0d", out_res.score, table_score(e, k)));
      chk(reproduces(out_res), $sformatf("edit %s k=%0d pos %0d does not reproduce the read", e.name(), k, out_res.edit_pos));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      run_case(EDIT_NONE, 0, 1, 0);
      run_case(EDIT_MISMATCH, 1, 1, 1);
      run_case(EDIT_MISMATCH, 2, 1, 1);
      for (int k = 1; k <= 5; k++) run_case(EDIT_DELETION, k, 1, 1);
      for (int k = 1; k <= 2; k++) run_case(EDIT_INSERTION, k, 1, 1);
      run_case(EDIT_NONE, 0, 0, 1);
      run_case(EDIT_MISMATCH, 3, 0, 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

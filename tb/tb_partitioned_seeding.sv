// tb_partitioned_seeding -- checks the six-way seeding stage.
//
// Random read pairs go in; for every pair that comes out the testbench
// recomputes the six seed hashes with its own xxHash32 (three 50-base seeds
// from each read, at offsets 0, 50 and 100) and compares them, together with
// the pair id and both reads. In the first phase the output is always ready
// and every pair must come out exactly 10 cycles after it was accepted, one
// pair per cycle. In the second phase input valid and output ready toggle at
// random to exercise the stall path (the whole pipeline holds when the
// output is not taken).
module tb_partitioned_seeding;
  import genpairx_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  pair_id_t in_pair_id = 0, out_pair_id;
  read_seq_t in_r1 = '0, in_r2 = '0, out_r1, out_r2;
  hash_t out_hash [SEEDS_PER_PAIR];

  partitioned_seeding dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  bit random_mode = 0;

  typedef struct {
    pair_id_t  id;
    read_seq_t r1, r2;
    longint    t;
    bit        timed;
  } exp_t;
  exp_t exp_q[$];
  int n_out = 0, n_stall = 0;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Handshakes are sampled at the rising edge and processed at the falling
  // edge, where the inputs are also changed.
  logic acc_in = 0, acc_out = 0;
  pair_id_t  o_id;
  read_seq_t o_r1, o_r2;
  hash_t     o_hash [SEEDS_PER_PAIR];
  always @(posedge clk) begin
    acc_in  <= rst_n && in_valid && in_ready;
    acc_out <= rst_n && out_valid && out_ready;
    o_id    <= out_pair_id;
    o_r1    <= out_r1;
    o_r2    <= out_r2;
    o_hash  <= out_hash;
  end

  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      if (acc_out) begin
        exp_t e;
        bit ok;
        e = exp_q.pop_front();
        ok = (o_id == e.id) && (o_r1 == e.r1) && (o_r2 == e.r2);
        for (int s = 0; s < SEEDS_PER_PAIR; s++) begin
          read_seq_t r;
          r = (s < 3) ? e.r1 : e.r2;
          ok &= (o_hash[s] == seed_hash(r[2*SEED_LEN*(s%3) +: 2*SEED_LEN]));
        end
        checks++;
        if (!ok) begin
          failures++;
          if (failures < 10) $display("FAIL pair %0d: wrong hash or sideband", e.id);
        end
        // ten register stages: the output handshake is 10 edges after the
        // input handshake
        if (e.timed && !random_mode) begin
          checks++;
          if (cyc - e.t != 10) begin
            failures++;
            $display("FAIL pair %0d: latency %0d, expected 10", e.id, cyc - e.t);
          end
        end
        n_out++;
      end
      if (out_valid && !out_ready) n_stall++;
      if (acc_in) begin
        exp_q.push_back('{id: in_pair_id, r1: in_r1, r2: in_r2, t: cyc, timed: !random_mode});
        in_pair_id = in_pair_id + 1;
        in_r1 = rand_read();
        in_r2 = rand_read();
      end
      if (random_mode) begin
        in_valid  = ($urandom % 3) != 0;
        out_ready = ($urandom % 2) != 0;
      end
    end
  end

  initial begin
    in_r1 = rand_read();
    in_r2 = rand_read();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    while (n_out < 200) @(posedge clk);
    // back to back: 200 pairs in about 210 cycles
    checks++;
    if (cyc > 225) begin
      failures++;
      $display("FAIL 200 pairs took %0d cycles", cyc);
    end
    @(negedge clk);
    random_mode = 1;
    while (n_out < 800) @(posedge clk);
    @(negedge clk);
    random_mode = 0;
    in_valid = 0;
    out_ready = 1;
    repeat (20) @(posedge clk);
    @(negedge clk);
    checks++;
    if (exp_q.size() != 0 || n_stall == 0) begin
      failures++;
      $display("FAIL %0d pairs left, %0d stall cycles", exp_q.size(), n_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_xxhash32_unit -- checks the pipelined hashing unit against a plain
// byte-wise xxHash32, with random stalls, and checks the 10-cycle latency.
module tb_xxhash32_unit;
  import genpairx_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, out_valid;
  seed_seq_t in_seed;
  hash_t out_hash;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  xxhash32_unit dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected hashes, in order of entry.
  hash_t exp_q[$];
  int    lat_q[$];
  int    en_cycles = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    // The reference itself against published xxHash32 values.
    chk(xxh32_str("") == 32'h02CC5D05, "ref empty");
    chk(xxh32_str("a") == 32'h550D7456, "ref a");
    chk(xxh32_str("abc") == 32'h32D153FF, "ref abc");
    chk(xxh32_str("Nobody inspects the spammish repetition") == 32'hE2293B2F, "ref long");

    in_seed = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 420; n++) begin
      @(negedge clk);
      if (en) en_cycles++;               // an enabled edge just passed
      // An entry is visible exactly 10 enabled edges after it entered.
      if (exp_q.size() != 0 && en_cycles - lat_q[0] == 10) begin
        hash_t e;
        e = exp_q.pop_front();
        void'(lat_q.pop_front());
        chk(out_valid, "output valid after 10 enabled cycles");
        chk(out_hash == e, $sformatf("hash %h exp %h", out_hash, e));
      end else if (en) begin
        // (with en low the last output simply holds)
        chk(!out_valid, "no output when none is due");
      end
      en       = (n >= 400) || (($urandom % 4) != 0);
      in_valid = (n < 400) && (($urandom % 3) != 0);
      in_seed  = {$urandom, $urandom, $urandom, $urandom};
      if (n < 3) in_seed = '0;
      if (en && in_valid) begin
        exp_q.push_back(seed_hash(in_seed));
        lat_q.push_back(en_cycles);
      end
    end
    chk(exp_q.size() == 0, "all hashes came out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

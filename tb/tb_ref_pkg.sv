// tb_ref_pkg -- reference functions for the GenPairX testbenches.
//
// A plain byte-at-a-time xxHash32 (the general algorithm, including the
// 16-byte-stripe path the hardware never needs), the seed-to-bytes packing
// used by the hashing unit, and helpers to build random DNA. These are
// written independently of the RTL so the testbenches can compare against
// them.
package tb_ref_pkg;
  import genpairx_pkg::*;

  localparam logic [31:0] P1 = 32'h9E3779B1;
  localparam logic [31:0] P2 = 32'h85EBCA77;
  localparam logic [31:0] P3 = 32'hC2B2AE3D;
  localparam logic [31:0] P4 = 32'h27D4EB2F;
  localparam logic [31:0] P5 = 32'h165667B1;

  function automatic logic [31:0] rl(logic [31:0] x, int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  function automatic logic [31:0] rd32(byte unsigned b[$], int i);
    return {b[i+3], b[i+2], b[i+1], b[i]};
  endfunction

  function automatic logic [31:0] xxh32(byte unsigned b[$], logic [31:0] seed);
    int n = b.size();
    int i = 0;
    logic [31:0] h, v0, v1, v2, v3;
    if (n >= 16) begin
      v0 = seed + P1 + P2; v1 = seed + P2; v2 = seed; v3 = seed - P1;
      while (i + 16 <= n) begin
        v0 = rl(v0 + rd32(b, i) * P2, 13) * P1; i += 4;
        v1 = rl(v1 + rd32(b, i) * P2, 13) * P1; i += 4;
        v2 = rl(v2 + rd32(b, i) * P2, 13) * P1; i += 4;
        v3 = rl(v3 + rd32(b, i) * P2, 13) * P1; i += 4;
      end
      h = rl(v0, 1) + rl(v1, 7) + rl(v2, 12) + rl(v3, 18);
    end else begin
      h = seed + P5;
    end
    h = h + 32'(n);
    while (i + 4 <= n) begin
      h = rl(h + rd32(b, i) * P3, 17) * P4; i += 4;
    end
    while (i < n) begin
      h = rl(h + 32'(b[i]) * P5, 11) * P1; i += 1;
    end
    h = h ^ (h >> 15); h = h * P2;
    h = h ^ (h >> 13); h = h * P3;
    h = h ^ (h >> 16);
    return h;
  endfunction

  function automatic logic [31:0] xxh32_str(string s);
    byte unsigned b[$];
    for (int i = 0; i < s.len(); i++) b.push_back(s[i]);
    return xxh32(b, 0);
  endfunction

  // 50 bases = 100 bits, sent as 13 little-endian bytes.
  function automatic hash_t seed_hash(seed_seq_t sd);
    byte unsigned b[$];
    logic [103:0] x = {4'b0, sd};
    for (int i = 0; i < 13; i++) b.push_back(x[8*i +: 8]);
    return xxh32(b, 0);
  endfunction

  function automatic read_seq_t rand_read();
    read_seq_t r;
    for (int i = 0; i < READ_LEN; i++) r[2*i +: 2] = 2'($urandom);
    return r;
  endfunction
endpackage

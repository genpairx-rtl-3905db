// xxhash32_unit -- pipelined xxHash32 of one 50-base seed.
//
// The seed's 100 bits (2 bits per base, base 0 in the low bits) are hashed
// as a 13-byte little-endian message (the top byte holds the last 4 bits,
// zero padded) with xxHash32 and seed value 0. A 13-byte message takes the
// short-input path of xxHash32: three 4-byte rounds, one 1-byte round and the
// final avalanche. The work is split over LATENCY = 10 register stages so a
// new seed can enter every cycle; `en` advances all stages together (it is
// the stall control of the enclosing pipeline). out_valid/out_hash appear 10
// enabled cycles after in_valid/in_seed.
//
// Hashing with xxHash32 to a 32-bit value, pipelining and the 10-cycle
// latency follow the paper; the byte packing of the seed and the split into
// stages are this design's choices.
module xxhash32_unit
  import genpairx_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      en,
  input  logic      in_valid,
  input  seed_seq_t in_seed,
  output logic      out_valid,
  output hash_t     out_hash
);
  localparam logic [31:0] P1 = 32'h9E3779B1;
  localparam logic [31:0] P2 = 32'h85EBCA77;
  localparam logic [31:0] P3 = 32'hC2B2AE3D;
  localparam logic [31:0] P4 = 32'h27D4EB2F;
  localparam logic [31:0] P5 = 32'h165667B1;
  localparam int          NBYTES  = 13;
  localparam int          LATENCY = 10;

  function automatic logic [31:0] rotl(logic [31:0] x, int r);
    return (x << r) | (x >> (32 - r));
  endfunction

  // Stage registers: running hash, valid, and the message words still
  // needed by later stages.
  logic [31:0] h   [1:LATENCY];
  logic        v   [1:LATENCY];
  logic [31:0] w1  [1:4];
  logic [31:0] w2  [1:6];
  logic [7:0]  b12 [1:6];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= LATENCY; i++) v[i] <= 1'b0;
    end else if (en) begin
      v[1] <= in_valid;
      for (int i = 2; i <= LATENCY; i++) v[i] <= v[i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      // stage 1: h = seed + P5 + len, then the first 4-byte lane
      h[1]   <= 32'(NBYTES) + P5 + in_seed[31:0] * P3;
      w1[1]  <= in_seed[63:32];
      w2[1]  <= in_seed[95:64];
      b12[1] <= {4'b0, in_seed[99:96]};
      // stage 2
      h[2]   <= rotl(h[1], 17) * P4;
      w1[2]  <= w1[1];
      w2[2]  <= w2[1];
      b12[2] <= b12[1];
      // stage 3: second lane
      h[3]   <= h[2] + w1[2] * P3;
      w2[3]  <= w2[2];
      b12[3] <= b12[2];
      // stage 4
      h[4]   <= rotl(h[3], 17) * P4;
      w2[4]  <= w2[3];
      b12[4] <= b12[3];
      // stage 5: third lane
      h[5]   <= h[4] + w2[4] * P3;
      b12[5] <= b12[4];
      // stage 6
      h[6]   <= rotl(h[5], 17) * P4;
      b12[6] <= b12[5];
      // stage 7: the trailing byte
      h[7]   <= rotl(h[6] + {24'b0, b12[6]} * P5, 11) * P1;
      // stages 8-10: avalanche
      h[8]   <= (h[7] ^ (h[7] >> 15)) * P2;
      h[9]   <= (h[8] ^ (h[8] >> 13)) * P3;
      h[10]  <= h[9] ^ (h[9] >> 16);
    end
  end

  assign out_valid = v[LATENCY];
  assign out_hash  = h[LATENCY];
endmodule

// xoshiro128p: xoshiro128+ pseudorandom number generator.
//
// Each p-bit owns one generator that supplies the uniform random number its
// comparator needs. The original design names xoshiro as its generator
// without the variant; this implementation uses xoshiro128+ (Blackman and
// Vigna), 128 bits of state and a 32-bit output:
//   rnd = s0 + s3;  t = s1 << 9;  s2 ^= s0;  s3 ^= s1;  s1 ^= s2;  s0 ^= s3;
//   s2 ^= t;  s3 = rotl(s3, 11)
// Interface: rnd shows the output of the current state; when en is high the
// state advances at the next rising edge. rst_n (active low, synchronous)
// loads SEED, which must not be zero.
module xoshiro128p #(
  parameter logic [127:0] SEED = 128'h0123_4567_89ab_cdef_fedc_ba98_7654_3210
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);
  logic [31:0] s0, s1, s2, s3;
  logic [31:0] n0, n1, n2, n3, t;

  assign rnd = s0 + s3;

  always_comb begin
    t  = s1 << 9;
    n2 = s2 ^ s0;
    n3 = s3 ^ s1;
    n1 = s1 ^ n2;
    n0 = s0 ^ n3;
    n2 = n2 ^ t;
    n3 = {n3[20:0], n3[31:21]};   // rotl(n3, 11)
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {s0, s1, s2, s3} <= SEED;
    end else if (en) begin
      s0 <= n0; s1 <= n1; s2 <= n2; s3 <= n3;
    end
  end

  initial assert (SEED != '0) else $error("xoshiro128p: SEED must be non-zero");
endmodule

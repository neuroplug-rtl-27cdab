// noise_gen: key-dependent additive noise for bin padding.
//
// Each bin leaves N = alpha + N' bytes empty. alpha is a constant taken from
// the model key, N' is drawn from a heteroskedastic distribution: a uniform
// draw u in [0, sigma_max) sets the spread sigma of a roughly Gaussian draw,
// so the variance itself changes from sample to sample. This follows the
// design: "a combination of the uniform and Gaussian distributions ... We use
// the uniform distribution to set the variance of the Gaussian distribution".
// Because alpha, the support bound R and the seed all come from the key, no
// noise parameter is hardwired.
//
// How the two distributions are made is this implementation's choice:
//   * three 32-bit Galois LFSRs (x^32+x^22+x^2+x+1), seeded from the key;
//   * sigma = (u16 * sigma_max) >> 16 with u16 uniform;
//   * z = sum of four 12-bit uniforms - 8192 (Irwin-Hall, close to Gaussian,
//     standard deviation about 2365);
//   * N' = clamp(R/2 + (sigma * z) >>> 12, 0, R), so N' stays in [0, R];
//   * N  = min(alpha + N', 65535).
//
// Interface: pulse seed_load to load the generators from key.seed; each cycle
// with req high produces one sample, presented on noise with valid high in
// the next cycle (latency one cycle, one sample per cycle).
module noise_gen
  import neuroplug_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  noise_key_t  key,
  input  logic        seed_load,
  input  logic        req,
  output logic        valid,
  output logic [15:0] noise
);

  localparam logic [31:0] POLY = 32'h8020_0003;

  function automatic logic [31:0] lfsr_next(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ POLY) : (s >> 1);
  endfunction

  // A zero state would lock an LFSR: force a non-zero seed.
  function automatic logic [31:0] nz(input logic [31:0] s);
    return (s == '0) ? 32'h1 : s;
  endfunction

  logic [31:0] lfsr_a, lfsr_b, lfsr_c;

  logic [15:0]        sigma;
  logic signed [15:0] z;
  logic signed [47:0] dev;
  logic signed [47:0] np_raw;
  logic [15:0]        np;
  logic [16:0]        sum;

  always_comb begin
    sigma  = 16'((32'(lfsr_a[15:0]) * 32'(key.sigma_max)) >> 16);
    z      = 16'(signed'({4'b0, lfsr_b[11:0]}) + signed'({4'b0, lfsr_b[27:16]})
                + signed'({4'b0, lfsr_c[11:0]}) + signed'({4'b0, lfsr_c[27:16]})) - 16'sd8192;
    dev    = (signed'({32'b0, sigma}) * 48'(z)) >>> 12;
    np_raw = signed'(48'({key.range_r >> 1})) + dev;
    if (np_raw < 0)                          np = '0;
    else if (np_raw > 48'(key.range_r))      np = key.range_r;
    else                                     np = np_raw[15:0];
    sum    = 17'(key.alpha) + 17'(np);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_a <= 32'h1;
      lfsr_b <= 32'h2;
      lfsr_c <= 32'h4;
      valid  <= 1'b0;
      noise  <= '0;
    end else begin
      valid <= 1'b0;
      if (seed_load) begin
        lfsr_a <= nz(key.seed);
        lfsr_b <= nz(key.seed ^ 32'h9E37_79B9);
        lfsr_c <= nz(key.seed ^ 32'h7F4A_7C15);
      end else if (req) begin
        valid  <= 1'b1;
        noise  <= sum[16] ? 16'hFFFF : sum[15:0];
        lfsr_a <= lfsr_next(lfsr_a);
        lfsr_b <= lfsr_next(lfsr_b);
        lfsr_c <= lfsr_next(lfsr_c);
      end
    end
  end

endmodule

// uniform_rng: uniform random threshold U of the Metropolis-Hastings test,
// and its natural logarithm.
//
// U = u / 2^16 with u the state of a 16-bit Galois LFSR (polynomial
// x^16 + x^14 + x^13 + x^11 + 1, taps 0xB400), so u runs over 1..65535. The
// acceptance test is done in the log domain, so the block also provides
// ln U in Q10: log2 u is approximated as k + f (Mitchell), where k is the
// position of the leading one and f the bits below it, and
//     ln_u = ((k + f - 16) * 710) >>> 10   (710 = round(1024 ln 2)).
// The LFSR advances on each cycle where next is high; u and ln_u are
// combinational from the state. The source only names a uniform random number
// generator; the LFSR and the log approximation are this design's own.
module uniform_rng
  import mc2_pkg::*;
#(
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        next,
  output logic [15:0] u,
  output eval_t       ln_u
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    u <= (SEED == 0) ? 16'h1 : SEED;
    else if (next) u <= u[0] ? ((u >> 1) ^ 16'hB400) : (u >> 1);
  end

  always_comb begin
    int unsigned k;
    logic [15:0] norm;
    eval_t log2u;
    k = 0;
    for (int unsigned i = 0; i < 16; i++) if (u[i]) k = i;
    norm  = u << (15 - k);                 // leading one at bit 15
    log2u = eval_t'(k << 10) + eval_t'(norm[14:5]);
    ln_u  = ((log2u - eval_t'(16 << 10)) * 710) >>> 10;
  end
endmodule

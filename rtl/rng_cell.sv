// rng_cell: BEHAVIOURAL MODEL of the SRAM-embedded random number generator
// cell (cross-coupled inverters with precharge).
//
// In silicon both ends Q and QB are precharged to VDD while the cell clock is
// low; when it goes high the metastable pair is released and thermal noise
// decides which side falls, giving one fresh random bit. Thermal noise has no
// logic equivalent, so this model draws the bit from a private 32-bit
// xorshift generator seeded per cell (SEED must be non-zero and should differ
// from cell to cell). The bit is resolved on a rising clock edge where eval
// and rng_en are both high and is held on Q/QB until the next evaluation.
// Precharge, bias current and the calibrating loop of the real cell are not
// modelled.
module rng_cell #(
  parameter logic [31:0] SEED = 32'h0000_0001
) (
  input  logic clk,
  input  logic rst_n,
  input  logic eval,     // CLK = 1 phase of the cell: resolve a new bit
  input  logic rng_en,   // RNG_EN: cell enabled
  output logic q,
  output logic qb
);
  logic [31:0] noise;

  function automatic logic [31:0] xorshift32(logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) noise <= xorshift32(SEED);
    else if (eval && rng_en) noise <= xorshift32(noise);
  end

  assign q  = noise[31];
  assign qb = ~noise[31];
endmodule

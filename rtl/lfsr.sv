// lfsr: Galois linear feedback shift register used as the pseudorandom number generator.
//
// WIDTH bits with feedback polynomial TAPS (default x^16 + x^14 + x^13 + x^11 + 1, maximal
// length). Each 'step' advances the register SHIFTS times in one clock, so every value drawn
// from the low bits is made of fresh bits. 'load' writes 'seed' (a zero seed, which would lock
// the register, is replaced by 1); two parties that load the same seed see the same sequence.
// Reset loads RESET_SEED. One cycle per step; 'state' is the registered value.
module lfsr #(
  parameter int unsigned       WIDTH      = 16,
  parameter logic [WIDTH-1:0]  TAPS       = 16'hB400,
  parameter int unsigned       SHIFTS     = 5,
  parameter logic [WIDTH-1:0]  RESET_SEED = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] seed,
  input  logic             step,
  output logic [WIDTH-1:0] state
);
  logic [WIDTH-1:0] next;

  always_comb begin
    next = state;
    for (int i = 0; i < int'(SHIFTS); i++) next = (next >> 1) ^ (next[0] ? TAPS : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= RESET_SEED;
    else if (load) state <= (seed == '0) ? WIDTH'(1) : seed;
    else if (step) state <= next;
  end
endmodule

// xorshift64: 64-bit xorshift pseudo-random generator (shifts 13, 7, 17).
//
// Supplies the uniform random numbers behind the STDP Bernoulli variables;
// the generator type is this design's choice.  `load` seeds the state with
// `seed` (a zero seed is replaced by a fixed non-zero constant, since zero
// is a fixed point); each cycle with `advance` high moves to the next state.
// `state` is the current 64-bit random word.
module xorshift64 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [63:0] seed,
  input  logic        advance,
  output logic [63:0] state
);

  logic [63:0] nxt, s1, s2;

  always_comb begin
    s1  = state ^ (state << 13);
    s2  = s1 ^ (s1 >> 7);
    nxt = s2 ^ (s2 << 17);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= 64'h2545_F491_4F6C_DD1D;
    else if (load)    state <= (seed == '0) ? 64'h2545_F491_4F6C_DD1D : seed;
    else if (advance) state <= nxt;
  end

endmodule

// jass_prng -- complex pseudorandom number generator for the power-method
// start vectors a_i (Algorithm 1, line 6).
//
// A 32-bit state register feeds two xorshift stages in series, each computing
// x ^= x<<13; x ^= x>>17; x ^= x<<5. The first stage's output gives the real
// part, the second stage's output the imaginary part, so one complex number
// is produced per clock. The second stage's output is fed back into the
// state register. A programmable seed is loaded with `load`; afterwards the
// state only advances through the feedback (the seed is not reloaded between
// delay indices). The chain, the shift constants and the 21-bit outputs
// follow the paper; taking the top 21 bits of each 32-bit word is this
// design's choice.
//
// Interface: load/seed load the state; en advances it by one step. re/im
// are combinational from the current state and valid in the same cycle.
module jass_prng #(
  parameter int unsigned OW = 21
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [31:0]          seed,
  input  logic                 en,
  output logic signed [OW-1:0] re,
  output logic signed [OW-1:0] im
);

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] t;
    t = x ^ (x << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  logic [31:0] state, xs1, xs2;

  assign xs1 = xorshift32(state);
  assign xs2 = xorshift32(xs1);
  assign re  = xs1[31 -: OW];
  assign im  = xs2[31 -: OW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= 32'h1;
    else if (load)  state <= (seed == 32'd0) ? 32'h1 : seed;  // all-zero is a fixed point
    else if (en)    state <= xs2;
  end

endmodule

// xorshift32: random-number source of the annealing controller.
//
// A 32-bit xorshift generator (x ^= x << 13; x ^= x >> 17; x ^= x << 5),
// advanced every clock while en is high. load copies seed into the state; a
// zero seed, which would lock the generator, is replaced by a fixed non-zero
// constant. The source of randomness is this design's choice: the annealing
// flow needs random moves and random acceptance but does not say how they
// are produced.
module xorshift32 (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] seed,
  input  logic        en,
  output logic [31:0] rnd
);

  timeunit 1ns;
  timeprecision 1ps;

  localparam logic [31:0] NONZERO = 32'h2545_F491;

  function automatic logic [31:0] step(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rnd <= NONZERO;
    else if (load)  rnd <= (seed == '0) ? NONZERO : seed;
    else if (en)    rnd <= step(rnd);
  end

endmodule

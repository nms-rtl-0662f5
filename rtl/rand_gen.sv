// rand_gen: the pseudo-random number generator ("Rand") attached to RA1.
//
// The paper uses it to draw the random individuals a, b, c of the DE mutation and the
// crossover probabilities, four at a time (Fig. 10). This design builds it from NOUT
// independent 32-bit xorshift generators (x ^= x<<13; x ^= x>>17; x ^= x<<5), lane j seeded
// with seed ^ (j+1)*0x9E3779B9 (a zero seed is replaced by 1). The generator kind and the
// seeding are this design's choices.
// Interface: load seeds on the clock edge; each cycle with next high every lane steps once.
// rnd shows the current state; a random fraction in [0,1) is rnd[j][15:0] read as Q0.16.
module rand_gen #(
  parameter int unsigned NOUT = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic [31:0]            seed,
  input  logic                   next,
  output logic [NOUT-1:0][31:0]  rnd
);
  function automatic logic [31:0] xs(logic [31:0] x);
    logic [31:0] t;
    t = x ^ (x << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  function automatic logic [31:0] seed_of(logic [31:0] s, int unsigned j);
    logic [31:0] v;
    v = s ^ (32'(j + 1) * 32'h9E37_79B9);
    return (v == 0) ? 32'd1 : v;
  endfunction

  logic [NOUT-1:0][31:0] st;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < int'(NOUT); j++) st[j] <= seed_of(32'd0, j);
    end else if (load) begin
      for (int j = 0; j < int'(NOUT); j++) st[j] <= seed_of(seed, j);
    end else if (next) begin
      for (int j = 0; j < int'(NOUT); j++) st[j] <= xs(st[j]);
    end
  end
  assign rnd = st;
endmodule

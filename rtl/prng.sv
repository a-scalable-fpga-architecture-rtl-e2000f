// prng -- pseudorandom number generator of the one-qubit gate pool.
//
// A 32-bit xorshift generator (x ^= x<<13; x ^= x>>17; x ^= x<<5) that
// steps every clock. Its value, read as a fraction in [0,1), is compared
// with the zero-probability of a measured qubit and with the error
// probability of the error gates. The paper names a PRNG; the generator
// type and seed are this design's choices. The seed must be non-zero.
module prng #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [31:0] rnd_o
);
  logic [31:0] x, x1, x2, x3;

  always_comb begin
    x1 = x  ^ (x  << 13);
    x2 = x1 ^ (x1 >> 17);
    x3 = x2 ^ (x2 << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) x <= SEED;
    else        x <= x3;
  end

  assign rnd_o = x;
endmodule

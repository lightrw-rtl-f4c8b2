// thundering_prng: K independent 32-bit pseudo-random streams for the WRS sampler.
//
// Organised the way the paper shows its random number generator: one State Generator
// shared by all lanes and one Decorrelator per lane.  The algorithm inside is this
// design's own stand-in (the paper reuses a generator published elsewhere and does not
// describe it):
//   * State generator: 64-bit linear congruential generator,
//       s' = s * 6364136223846793005 + 1442695040888963407.
//   * Lane j first offsets the shared state by an odd constant (golden-ratio multiple),
//     then permutes it with the PCG "xorshift high, random rotate" output function.
//   * Decorrelator j: a 32-bit xorshift generator with its own seed whose output is
//     XORed onto the permuted value, breaking the correlation between lanes.
// All K values advance together when `advance` is high and are registered, so `r` is
// valid from reset and changes only after an advance.
module thundering_prng #(
  parameter int          K    = 16,
  parameter logic [63:0] SEED = 64'd1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        advance,
  output logic [31:0] r [K]
);
  localparam logic [63:0] MUL = 64'd6364136223846793005;
  localparam logic [63:0] INC = 64'd1442695040888963407;
  localparam logic [63:0] PHI = 64'h9E37_79B9_7F4A_7C15;

  logic [63:0] state;
  logic [31:0] deco [K];

  function automatic logic [31:0] pcg_out(input logic [63:0] x);
    logic [31:0] xs;
    logic [4:0]  rot;
    xs  = 32'(((x >> 18) ^ x) >> 27);
    rot = x[63:59];
    return (xs >> rot) | (xs << ((6'd32 - {1'b0, rot}) & 6'd31));
  endfunction

  function automatic logic [31:0] xorshift32(input logic [31:0] v);
    logic [31:0] t;
    t = v ^ (v << 13);
    t = t ^ (t >> 17);
    return t ^ (t << 5);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= SEED;
      for (int j = 0; j < K; j++) begin
        deco[j] <= 32'h2545_F491 ^ (32'(j + 1) * 32'h9E37_79B9);
        r[j]    <= '0;
      end
    end else if (advance) begin
      state <= state * MUL + INC;
      for (int j = 0; j < K; j++) begin
        deco[j] <= xorshift32(deco[j]);
        r[j]    <= pcg_out(state + ((64'(j) * PHI) | 64'd1)) ^ deco[j];
      end
    end
  end

endmodule

// wrs_selector: the Selector of the parallel WRS sampler.
//
// Item j of a beat replaces the reservoir when p_j = w_j / acc_j exceeds a uniform random
// number.  With a 32-bit random integer r*_j the paper rewrites the test without division:
//     2^32 * w_j  >  r*_j * acc_j + w_j
// (step c): the left side is a shift, the right one multiply-add.  Lanes that pass are
// candidates; a tree comparator (step d) whose every level keeps the higher-indexed of two
// adjacent candidates returns the latest candidate, the only one that matters because a
// later acceptance overwrites an earlier one within the beat.
//
// Interface: valid/ready; random numbers `in_r` must belong to the beat being accepted
// (`rng_advance` tells the generator that they were used).  Latency 2 cycles: step c is
// registered, then the tree is registered.  Outputs `out_hit` (some lane passed) and
// `out_sel` (its index).  Splitting step c and step d into two registers is this design's
// choice.
module wrs_selector #(
  parameter int K      = 16,
  parameter int W_W    = 32,
  parameter int SUM_W  = 32,
  parameter int SIDE_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [SUM_W-1:0]   in_acc [K],
  input  logic [W_W-1:0]     in_w   [K],
  input  logic               in_last,
  input  logic [SIDE_W-1:0]  in_side,
  input  logic [31:0]        in_r   [K],
  output logic               rng_advance,
  output logic               out_valid,
  input  logic               out_ready,
  output logic               out_hit,
  output logic [$clog2(K)-1:0] out_sel,
  output logic               out_last,
  output logic [SIDE_W-1:0]  out_side
);
  localparam int IW   = $clog2(K);
  localparam int PROD = 32 + SUM_W + 1;

  logic              c_valid;
  logic [K-1:0]      c_cand;
  logic              c_last;
  logic [SIDE_W-1:0] c_side;
  logic              en;
  logic [K-1:0]      cand;

  assign en          = !out_valid || out_ready;
  assign in_ready    = en;
  assign rng_advance = en && in_valid;

  // step c: division-free acceptance test, one multiply-add per lane
  always_comb begin
    for (int j = 0; j < K; j++) begin
      logic [PROD-1:0] lhs, rhs;
      lhs     = PROD'(in_w[j]) << 32;
      rhs     = PROD'(in_r[j]) * PROD'(in_acc[j]) + PROD'(in_w[j]);
      cand[j] = lhs > rhs;
    end
  end

  // step d: tree of pairwise comparisons keeping the later candidate
  logic          lvl_hit [2*K];
  logic [IW-1:0] lvl_idx [2*K];
  always_comb begin
    for (int j = 0; j < K; j++) begin
      lvl_hit[K+j] = c_cand[j];
      lvl_idx[K+j] = IW'(j);
    end
    lvl_hit[0] = 1'b0;
    lvl_idx[0] = '0;
    for (int n = K - 1; n >= 1; n--) begin
      lvl_hit[n] = lvl_hit[2*n] || lvl_hit[2*n+1];
      lvl_idx[n] = lvl_hit[2*n+1] ? lvl_idx[2*n+1] : lvl_idx[2*n];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_valid   <= 1'b0;
      c_cand    <= '0;
      c_last    <= 1'b0;
      out_valid <= 1'b0;
      out_hit   <= 1'b0;
      out_sel   <= '0;
      out_last  <= 1'b0;
    end else if (en) begin
      c_valid <= in_valid;
      if (in_valid) begin
        c_cand <= cand;
        c_last <= in_last;
        c_side <= in_side;
      end
      out_valid <= c_valid;
      if (c_valid) begin
        out_hit  <= lvl_hit[1];
        out_sel  <= lvl_idx[1];
        out_last <= c_last;
        out_side <= c_side;
      end
    end
  end

endmodule

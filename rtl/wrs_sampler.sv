// wrs_sampler: parallel weighted reservoir sampler (WRS Sampler).
//
// Picks one item of a stream of (item, weight) pairs with probability w / sum(w), reading
// K pairs per cycle.  Weighted reservoir sampling keeps a single candidate: item i
// replaces it with probability w_i / (w_1 + ... + w_i), which needs the running weight
// total; the sampler breaks that dependency with a prefix sum so K items are tested in
// the same cycle (Algorithm "parallel WRS" of the LightRW paper):
//   Weight Accumulator (prefix sum + running total, 2 cycles)
//   -> Selector (division-free test against K random numbers, tree max, 2 cycles)
//   -> Output (reservoir, emits at the end of the stream).
// The PRNG block supplies the K independent random numbers.
//
// Interface: a beat is {in_items[K], in_w[K], in_last, in_ctx}; in_last marks the final
// beat of a neighbor stream.  valid/ready on both sides.  Throughput one beat per cycle;
// the sample leaves 5 cycles after the last beat enters when the output is not held.
module wrs_sampler #(
  parameter int          K     = 16,
  parameter int          W_W   = 32,
  parameter int          SUM_W = 32,
  parameter logic [63:0] SEED  = 64'd1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [31:0]          in_items [K],
  input  logic [W_W-1:0]       in_w     [K],
  input  logic                 in_last,
  input  lightrw_pkg::ctx_t    in_ctx,
  output logic                 out_valid,
  input  logic                 out_ready,
  output lightrw_pkg::sample_t out_sample
);
  import lightrw_pkg::*;
  localparam int SIDE_W = CTX_W + 32 * K;

  logic [SIDE_W-1:0] in_side;
  always_comb begin
    in_side[SIDE_W-1 -: CTX_W] = in_ctx;
    for (int j = 0; j < K; j++) in_side[32*j +: 32] = in_items[j];
  end

  // Weight Accumulator
  logic              acc_valid, acc_ready, acc_last;
  logic [SUM_W-1:0]  acc_acc [K];
  logic [W_W-1:0]    acc_w   [K];
  logic [SIDE_W-1:0] acc_side;

  wrs_weight_accumulator #(.K(K), .W_W(W_W), .SUM_W(SUM_W), .SIDE_W(SIDE_W)) u_acc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_w, .in_last, .in_side,
    .out_valid(acc_valid), .out_ready(acc_ready), .out_acc(acc_acc), .out_w(acc_w),
    .out_last(acc_last), .out_side(acc_side)
  );

  // PRNG
  logic        rng_advance;
  logic [31:0] rnd [K];
  thundering_prng #(.K(K), .SEED(SEED)) u_prng (.clk, .rst_n, .advance(rng_advance), .r(rnd));

  // Selector
  logic                 sel_valid, sel_ready, sel_hit, sel_last;
  logic [$clog2(K)-1:0] sel_idx;
  logic [SIDE_W-1:0]    sel_side;

  wrs_selector #(.K(K), .W_W(W_W), .SUM_W(SUM_W), .SIDE_W(SIDE_W)) u_sel (
    .clk, .rst_n,
    .in_valid(acc_valid), .in_ready(acc_ready), .in_acc(acc_acc), .in_w(acc_w),
    .in_last(acc_last), .in_side(acc_side), .in_r(rnd), .rng_advance,
    .out_valid(sel_valid), .out_ready(sel_ready), .out_hit(sel_hit), .out_sel(sel_idx),
    .out_last(sel_last), .out_side(sel_side)
  );

  // Output (reservoir)
  logic [31:0] sel_items [K];
  ctx_t        sel_ctx;
  always_comb begin
    sel_ctx = sel_side[SIDE_W-1 -: CTX_W];
    for (int j = 0; j < K; j++) sel_items[j] = sel_side[32*j +: 32];
  end

  wrs_output #(.K(K)) u_out (
    .clk, .rst_n,
    .in_valid(sel_valid), .in_ready(sel_ready), .in_hit(sel_hit), .in_sel(sel_idx),
    .in_last(sel_last), .in_items(sel_items), .in_ctx(sel_ctx),
    .out_valid, .out_ready, .out_sample
  );

endmodule

// wrs_weight_accumulator: the Weight Accumulator of the parallel WRS sampler.
//
// For every beat of K weights it forms the accumulated weight of each item,
// acc[j] = w_sum + (w[0] + ... + w[j]), where w_sum is the total of all earlier beats of
// the same neighbor stream.  As in the paper this is done in two registered steps:
//   step a: prefix sum of the K weights of the beat,
//   step b: K parallel adders add w_sum to every prefix; the last prefix (the beat total)
//           is added to w_sum for the next beat.
// w_sum returns to zero after the beat flagged `last` (end of a vertex's neighbor list);
// clearing it there is this design's choice.  The prefix sum is written as a linear sum
// and left for synthesis to balance.  A side-band (`in_side`: items, last flag, query
// context) travels unchanged with the beat.
//
// Interface: valid/ready in and out; one beat accepted per cycle, latency 2 cycles.
// The whole pipe stalls when the output is held.
module wrs_weight_accumulator #(
  parameter int K      = 16,
  parameter int W_W    = 32,
  parameter int SUM_W  = 32,
  parameter int SIDE_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [W_W-1:0]    in_w   [K],
  input  logic              in_last,
  input  logic [SIDE_W-1:0] in_side,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [SUM_W-1:0]  out_acc [K],
  output logic [W_W-1:0]    out_w   [K],
  output logic              out_last,
  output logic [SIDE_W-1:0] out_side
);
  // step a registers
  logic              a_valid;
  logic [SUM_W-1:0]  a_ps [K];
  logic [W_W-1:0]    a_w  [K];
  logic              a_last;
  logic [SIDE_W-1:0] a_side;
  // running sum of earlier beats
  logic [SUM_W-1:0]  w_sum;

  logic              en;
  logic [SUM_W-1:0]  ps [K];

  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  always_comb begin
    logic [SUM_W-1:0] run;
    run = '0;
    for (int j = 0; j < K; j++) begin
      run   = run + SUM_W'(in_w[j]);
      ps[j] = run;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid   <= 1'b0;
      out_valid <= 1'b0;
      w_sum     <= '0;
      a_last    <= 1'b0;
      out_last  <= 1'b0;
    end else if (en) begin
      a_valid <= in_valid;
      if (in_valid) begin
        a_ps   <= ps;
        a_w    <= in_w;
        a_last <= in_last;
        a_side <= in_side;
      end
      out_valid <= a_valid;
      if (a_valid) begin
        for (int j = 0; j < K; j++) out_acc[j] <= w_sum + a_ps[j];
        out_w    <= a_w;
        out_last <= a_last;
        out_side <= a_side;
        w_sum    <= a_last ? '0 : w_sum + a_ps[K-1];
      end
    end
  end

endmodule

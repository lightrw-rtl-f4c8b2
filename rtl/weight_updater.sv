// weight_updater: computes the dynamic sampling weight of every neighbor in a beat.
//
// The application-specific update function of graph dynamic random walks, applied to K
// neighbors per cycle.  Each col_index entry carries {static weight w*, relation label,
// vertex}; the query context of the current step comes from the context queue and is
// released with the beat flagged `last`.
//   MetaPath : w = w*  if the edge's relation equals R[step] of the relation schema,
//              w = 0   otherwise.
//   Node2Vec : with p = 2 and q = 0.5 the three cases w*/p, w*, w*/q are produced as
//              w*, 2w*, 4w* (the same ratios, without fractions):
//              b == previous vertex -> w*;  (prev, b) is an edge -> 2w*;  else -> 4w*.
//              At step 0 there is no previous vertex and every neighbor gets 2w*.
//              Whether (prev, b) is an edge needs a look-up in the previous vertex's
//              neighbor list, which this block does not perform: it arrives as the
//              per-lane input `prev_adj`.
// Masked lanes (outside the vertex's neighbor range) get weight 0.
// The edge word layout, the 2x scaling and the prev_adj input are this design's choices;
// the two weight functions are the paper's.
//
// Timing: one beat per cycle, registered output (latency 1), valid/ready.
module weight_updater #(
  parameter int               K   = 16,
  parameter lightrw_pkg::app_e APP = lightrw_pkg::APP_METAPATH
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [lightrw_pkg::REL_W-1:0] rel_path [lightrw_pkg::MAX_PATH],
  // neighbor beats
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [31:0]         in_items [K],
  input  logic [K-1:0]        in_mask,
  input  logic                in_last,
  input  logic [K-1:0]        prev_adj,
  // step context
  input  logic                ctx_valid,
  output logic                ctx_ready,
  input  lightrw_pkg::ctx_t   ctx,
  // weighted beats to the sampler
  output logic                out_valid,
  input  logic                out_ready,
  output logic [31:0]         out_items [K],
  output logic [31:0]         out_w     [K],
  output logic                out_last,
  output lightrw_pkg::ctx_t   out_ctx
);
  import lightrw_pkg::*;

  wire fire = in_valid && ctx_valid && (!out_valid || out_ready);
  assign in_ready  = fire;
  assign ctx_ready = fire && in_last;

  logic [31:0] w [K];
  logic [31:0] vid [K];
  always_comb begin
    for (int j = 0; j < K; j++) begin
      logic [31:0] ws;
      ws     = 32'(edge_weight(in_items[j]));
      vid[j] = 32'(edge_vid(in_items[j]));
      if (!in_mask[j]) begin
        w[j] = '0;
      end else if (APP == APP_METAPATH) begin
        w[j] = (edge_rel(in_items[j]) == rel_path[ctx.step[$clog2(MAX_PATH)-1:0]]) ? ws : '0;
      end else begin
        if (ctx.v_prev == NO_VERTEX)   w[j] = ws << 1;
        else if (vid[j] == ctx.v_prev) w[j] = ws;
        else if (prev_adj[j])          w[j] = ws << 1;
        else                           w[j] = ws << 2;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_ctx   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        out_items <= vid;
        out_w     <= w;
        out_last  <= in_last;
        out_ctx   <= ctx;
      end
    end
  end

endmodule

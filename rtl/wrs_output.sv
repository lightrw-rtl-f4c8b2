// wrs_output: the Output stage (reservoir) of the parallel WRS sampler.
//
// Holds the reservoir of one neighbor stream.  When the selector reports an accepted
// lane, the item of that lane (taken from the item side-band) overwrites the reservoir.
// On the beat flagged `last` the reservoir, including a hit in that very beat, is emitted
// with the query context and cleared for the next stream.  A stream in which no item was
// ever accepted (all weights zero) gives found = 0; that rule is this design's choice.
//
// Interface: valid/ready in, valid/ready out of lightrw_pkg::sample_t; one beat per
// cycle, result one cycle after the last beat.
module wrs_output #(
  parameter int K = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic                        in_hit,
  input  logic [$clog2(K)-1:0]        in_sel,
  input  logic                        in_last,
  input  logic [31:0]                 in_items [K],
  input  lightrw_pkg::ctx_t           in_ctx,
  output logic                        out_valid,
  input  logic                        out_ready,
  output lightrw_pkg::sample_t        out_sample
);
  logic        res_found;
  logic [31:0] res_item;
  logic        en;

  assign en       = !out_valid || out_ready;
  assign in_ready = en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_found  <= 1'b0;
      res_item   <= '0;
      out_valid  <= 1'b0;
      out_sample <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && en) begin
        if (in_last) begin
          out_valid         <= 1'b1;
          out_sample.ctx    <= in_ctx;
          out_sample.found  <= in_hit || res_found;
          out_sample.v_next <= in_hit ? in_items[in_sel] : (res_found ? res_item : lightrw_pkg::NO_VERTEX);
          res_found         <= 1'b0;
          res_item          <= '0;
        end else if (in_hit) begin
          res_found <= 1'b1;
          res_item  <= in_items[in_sel];
        end
      end
    end
  end

endmodule

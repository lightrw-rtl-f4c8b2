// intra_burst_merge: rebuilds each vertex's neighbor stream from the two burst pipelines.
//
// Reads the order records written by the burst command generator; for each record it
// takes `beats` beats from the long or the short pipeline (as the record says) and passes
// them on in that order, so neighbors leave in col_index order even though the two
// pipelines run independently.  For every beat it computes the mask of the K items that
// lie inside [address, address + degree) of the vertex, and flags the final beat of the
// vertex with `last`.  An empty record (degree 0) yields one all-masked beat.
// The paper gives the merge's function only; masking here is this design's choice.
//
// Output: registered, valid/ready; one beat per cycle.
module intra_burst_merge #(
  parameter int K = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    ord_valid,
  output logic                    ord_ready,
  input  lightrw_pkg::burst_ord_t ord,
  input  logic                    long_valid,
  output logic                    long_ready,
  input  logic [511:0]            long_data,
  input  logic                    short_valid,
  output logic                    short_ready,
  input  logic [511:0]            short_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [31:0]             out_items [K],
  output logic [K-1:0]            out_mask,
  output logic                    out_last
);
  localparam int LK = $clog2(K);

  logic [7:0] beat_cnt;

  wire         src_valid = ord.empty ? 1'b1 : (ord.is_long ? long_valid : short_valid);
  wire [511:0] src_data  = ord.is_long ? long_data : short_data;
  wire         fire      = ord_valid && src_valid && (!out_valid || out_ready);
  wire         rec_done  = (beat_cnt + 8'd1 == ord.beats);
  wire [31:0]  line      = ord.line + 32'(beat_cnt);

  assign long_ready  = fire && !ord.empty && ord.is_long;
  assign short_ready = fire && !ord.empty && !ord.is_long;
  assign ord_ready   = fire && rec_done;

  logic [K-1:0] mask;
  always_comb begin
    for (int j = 0; j < K; j++) begin
      logic [31:0] idx;
      idx     = (line << LK) + 32'(j);
      mask[j] = !ord.empty && (idx >= ord.vinfo.addr) && (idx - ord.vinfo.addr < ord.vinfo.deg);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat_cnt  <= '0;
      out_valid <= 1'b0;
      out_mask  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        out_valid <= 1'b1;
        for (int j = 0; j < K; j++) out_items[j] <= ord.empty ? '0 : src_data[32*j +: 32];
        out_mask  <= mask;
        out_last  <= ord.last && rec_done;
        beat_cnt  <= rec_done ? '0 : beat_cnt + 8'd1;
      end
    end
  end

endmodule

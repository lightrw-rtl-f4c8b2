// burst_cmd_generator: plans the DRAM bursts that fetch one vertex's neighbor list.
//
// The neighbors of a vertex occupy the col_index lines first..last, where
// first = address / K and last = (address + degree - 1) / K (K = 16 neighbors per
// 512-bit line), n = last - first + 1 lines.  Following the paper's dynamic burst rule,
// floor(n / S1) bursts of S1 beats go to the long-burst pipeline and the remainder is
// covered by ceil(rest / S2) bursts of S2 beats on the short-burst pipeline, so at most
// one short burst's worth of unused data is fetched.  Long bursts are issued first, in
// address order, then the short ones.  Counting in whole 512-bit lines rather than bytes
// is this design's choice, as is sending a vertex of degree 0 as one "empty" record.
//
// One command leaves per cycle; each also pushes an order record (lightrw_pkg::
// burst_ord_t) that tells the intra burst merge how to rebuild the stream.
module burst_cmd_generator #(
  parameter int K  = 16,
  parameter int S1 = 32,
  parameter int S2 = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  lightrw_pkg::ninfo_t     in_info,
  output logic                    long_valid,
  input  logic                    long_ready,
  output logic [31:0]             long_line,
  output logic                    short_valid,
  input  logic                    short_ready,
  output logic [31:0]             short_line,
  output logic                    ord_valid,
  input  logic                    ord_ready,
  output lightrw_pkg::burst_ord_t ord,
  output logic [31:0]             n_long,
  output logic [31:0]             n_short
);
  import lightrw_pkg::*;
  localparam int LK = $clog2(K);

  logic        busy, empty_q;
  logic [31:0] line_q, rem_q;
  ninfo_t      vinfo_q;

  wire use_long  = busy && !empty_q && (rem_q >= 32'(S1));
  wire use_short = busy && !empty_q && !use_long;
  wire [31:0] short_beats = (rem_q < 32'(S2)) ? rem_q : 32'(S2);

  assign in_ready    = !busy;
  assign long_valid  = use_long && ord_ready;
  assign short_valid = use_short && ord_ready;
  assign long_line   = line_q;
  assign short_line  = line_q;
  assign ord_valid   = busy && (empty_q || (use_long ? long_ready : short_ready));

  always_comb begin
    ord         = '0;
    ord.is_long = use_long;
    ord.empty   = empty_q;
    ord.line    = line_q;
    ord.vinfo   = vinfo_q;
    ord.beats   = empty_q ? 8'd1 : (use_long ? 8'(S1) : 8'(S2));
    ord.last    = empty_q || (use_long ? (rem_q == 32'(S1)) : (rem_q <= 32'(S2)));
  end

  wire fire = ord_valid && ord_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      empty_q <= 1'b0;
      line_q  <= '0;
      rem_q   <= '0;
      vinfo_q <= '0;
      n_long  <= '0;
      n_short <= '0;
    end else if (in_valid && in_ready) begin
      busy    <= 1'b1;
      vinfo_q <= in_info;
      empty_q <= (in_info.deg == '0);
      line_q  <= in_info.addr >> LK;
      rem_q   <= (in_info.deg == '0) ? '0
               : ((in_info.addr + in_info.deg - 1) >> LK) - (in_info.addr >> LK) + 1;
    end else if (fire) begin
      if (empty_q) begin
        busy <= 1'b0;
      end else if (use_long) begin
        n_long <= n_long + 1;
        line_q <= line_q + 32'(S1);
        rem_q  <= rem_q - 32'(S1);
        if (rem_q == 32'(S1)) busy <= 1'b0;
      end else begin
        n_short <= n_short + 1;
        line_q  <= line_q + short_beats;
        rem_q   <= rem_q - short_beats;
        if (rem_q <= 32'(S2)) busy <= 1'b0;
      end
    end
  end

endmodule

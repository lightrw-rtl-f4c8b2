// degree_aware_cache: on-chip cache of row_index entries that keeps high-degree vertices.
//
// Input: a vertex id (plus a side-band that is returned with the answer).  Output: the
// vertex's neighbor info {address, degree}.  The cache is direct mapped: line
// vid % LINES holds {tag, address, degree} and a valid bit.
//   a) the line is read and its tag compared with the vertex;
//   b/c) on a hit the stored info is returned;
//   d) on a miss the vertex goes out on the miss port and the request waits;
//   e) the returned info is output at once and its degree is compared with the degree in
//      the line;
//   f) the line is overwritten only when the new vertex has the larger degree (or the
//      line is empty), so high-degree vertices, which random walks visit most, stay.
// The replacement rule is the paper's.  Direct-mapped indexing, blocking on a miss (so
// answers leave in request order) and clearing the valid bits at reset are choices of this
// design.
//
// Timing: the line is read in the cycle after a request is accepted and a hit is answered
// in that same cycle, so a hit answers one cycle after acceptance, as in the paper; a new
// request is accepted while a hit leaves, so hits flow at one per cycle.  A miss answers,
// registered, the cycle after the fill arrives; requests behind a miss wait.  Counters report hits,
// misses and line replacements.
module degree_aware_cache #(
  parameter int LINES  = 4096,
  parameter int SIDE_W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // lookup request
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [31:0]         req_vid,
  input  logic [SIDE_W-1:0]   req_side,
  // answer
  output logic                resp_valid,
  input  logic                resp_ready,
  output lightrw_pkg::ninfo_t resp_info,
  output logic [SIDE_W-1:0]   resp_side,
  // miss path to row_index in DRAM
  output logic                miss_valid,
  input  logic                miss_ready,
  output logic [31:0]         miss_vid,
  input  logic                fill_valid,
  output logic                fill_ready,
  input  lightrw_pkg::ninfo_t fill_info,
  // statistics
  output logic [31:0]         n_hit,
  output logic [31:0]         n_miss,
  output logic [31:0]         n_replace
);
  import lightrw_pkg::*;
  localparam int IW = $clog2(LINES);
  localparam int TW = 32 - IW;

  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_MISS_REQ, S_MISS_WAIT} state_e;
  state_e state;

  logic [TW-1:0]  tag_ram  [LINES];
  ninfo_t         info_ram [LINES];
  logic [LINES-1:0] line_valid;

  logic [31:0]       vid_q;
  logic [SIDE_W-1:0] side_q;
  logic [TW-1:0]     tag_q;
  ninfo_t            info_q;
  logic              lv_q;

  wire [IW-1:0] idx_in  = req_vid[IW-1:0];
  wire [IW-1:0] idx_q   = vid_q[IW-1:0];
  wire          hit     = lv_q && (tag_q == vid_q[31:IW]);
  // a miss answer is registered; a hit is answered straight from the line read
  logic              mresp_valid;
  ninfo_t            mresp_info;
  logic [SIDE_W-1:0] mresp_side;
  wire lookup_out = (state == S_LOOKUP) && hit && !mresp_valid;
  wire hit_done   = lookup_out && resp_ready;

  assign resp_valid = mresp_valid || lookup_out;
  assign resp_info  = mresp_valid ? mresp_info : info_q;
  assign resp_side  = mresp_valid ? mresp_side : side_q;
  assign req_ready  = (state == S_IDLE) || hit_done;
  assign miss_valid = (state == S_MISS_REQ);
  assign miss_vid   = vid_q;
  assign fill_ready = (state == S_MISS_WAIT) && (!mresp_valid || resp_ready);

  // line RAM: registered read (step a), write on replacement (step f)
  always_ff @(posedge clk) begin
    if (req_valid && req_ready) begin
      tag_q  <= tag_ram[idx_in];
      info_q <= info_ram[idx_in];
    end
    if (fill_valid && fill_ready && (!lv_q || fill_info.deg > info_q.deg)) begin
      tag_ram[idx_q]  <= vid_q[31:IW];
      info_ram[idx_q] <= fill_info;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      line_valid <= '0;
      lv_q       <= 1'b0;
      vid_q      <= '0;
      side_q     <= '0;
      mresp_valid <= 1'b0;
      mresp_info  <= '0;
      mresp_side  <= '0;
      n_hit      <= '0;
      n_miss     <= '0;
      n_replace  <= '0;
    end else begin
      if (mresp_valid && resp_ready) mresp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          vid_q  <= req_vid;
          side_q <= req_side;
          lv_q   <= line_valid[idx_in];
          state  <= S_LOOKUP;
        end
        S_LOOKUP: if (hit) begin
          if (hit_done) begin
            n_hit <= n_hit + 1;
            if (req_valid) begin            // next request accepted in the same cycle
              vid_q  <= req_vid;
              side_q <= req_side;
              lv_q   <= line_valid[idx_in];
            end else begin
              state  <= S_IDLE;
            end
          end
        end else begin
          n_miss <= n_miss + 1;
          state  <= S_MISS_REQ;
        end
        S_MISS_REQ: if (miss_ready) state <= S_MISS_WAIT;
        S_MISS_WAIT: if (fill_valid && fill_ready) begin
          mresp_valid <= 1'b1;
          mresp_info  <= fill_info;
          mresp_side  <= side_q;
          if (!lv_q || fill_info.deg > info_q.deg) begin
            line_valid[idx_q] <= 1'b1;
            n_replace         <= n_replace + 1;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

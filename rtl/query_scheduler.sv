// query_scheduler: runs the random-walk queries of one instance through the pipeline.
//
// After `start` it reads the start vertices of `num_queries` queries from DRAM (16 per
// 512-bit line at query_base), and injects one step request (query context) per query.
// Each sampled result coming back from the WRS sampler is written to the result array:
// word result_base + qid * query_len + step holds the vertex reached by that step, or
// 0xFFFFFFFF when the walk hit a vertex with no usable neighbor.  If the walk goes on, the
// query is re-injected with step + 1, v_curr = sampled vertex and v_prev = old v_curr.
// Continuing queries go first; new queries enter while fewer than MAX_INFLIGHT are in the
// pipeline.  Because the loop-back queue holds MAX_INFLIGHT entries, a returning result
// can always be taken and the loop cannot deadlock.  `done` rises when every query has
// finished.  The paper gives the scheduler's role only; the record layouts, the priority
// rule and the in-flight bound are this design's choices.
//
// Ports: query read port (one line per request), result write port (32-bit word writes),
// step requests out, samples in, all valid/ready.
module query_scheduler #(
  parameter int MAX_INFLIGHT = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [31:0]          num_queries,
  input  logic [7:0]           query_len,
  input  logic [31:0]          query_base,
  input  logic [31:0]          result_base,
  output logic                 done,
  // query read port
  output logic                 q_req_valid,
  input  logic                 q_req_ready,
  output logic [31:0]          q_req_addr,
  output logic [7:0]           q_req_len,
  input  logic                 q_resp_valid,
  output logic                 q_resp_ready,
  input  logic [511:0]         q_resp_data,
  // result write port
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [31:0]          wr_addr,
  output logic [31:0]          wr_data,
  // step requests into the pipeline
  output logic                 step_valid,
  input  logic                 step_ready,
  output lightrw_pkg::ctx_t    step_ctx,
  // samples from the WRS sampler
  input  logic                 smp_valid,
  output logic                 smp_ready,
  input  lightrw_pkg::sample_t smp,
  // statistics
  output logic [31:0]          n_steps,
  output logic [31:0]          n_dead_ends
);
  import lightrw_pkg::*;
  localparam int IFW = $clog2(MAX_INFLIGHT + 1);

  logic        running;
  logic [31:0] next_qid;        // next query to inject
  logic [31:0] lines_req;       // query lines requested
  logic        line_pending;    // a query line read is outstanding
  logic [31:0] qbuf [16];
  logic [4:0]  qbuf_cnt;        // start vertices left in the buffer
  logic [3:0]  qbuf_ptr;
  logic [IFW-1:0] inflight;
  logic [31:0] n_finished;

  // loop-back queue of continuing queries
  logic lb_in_valid, lb_in_ready, lb_valid, lb_ready;
  ctx_t lb_in, lb_ctx;

  sync_fifo #(.WIDTH(CTX_W), .DEPTH(MAX_INFLIGHT)) u_lb (
    .clk, .rst_n,
    .in_valid(lb_in_valid), .in_ready(lb_in_ready), .in_data(lb_in),
    .out_valid(lb_valid), .out_ready(lb_ready), .out_data(lb_ctx), .count()
  );

  // query line fetch
  assign q_req_valid  = running && !line_pending && (qbuf_cnt == '0)
                        && ((lines_req << 4) < num_queries);
  assign q_req_addr   = query_base + lines_req;
  assign q_req_len    = 8'd1;
  assign q_resp_ready = line_pending;

  // injection: loop-back first, then new queries
  wire new_ok = running && (qbuf_cnt != '0) && (inflight < IFW'(MAX_INFLIGHT));
  ctx_t new_ctx;
  always_comb begin
    new_ctx        = '0;
    new_ctx.qid    = next_qid;
    new_ctx.step   = '0;
    new_ctx.len    = query_len;
    new_ctx.v_curr = qbuf[qbuf_ptr];
    new_ctx.v_prev = NO_VERTEX;
  end
  assign step_valid = lb_valid || new_ok;
  assign step_ctx   = lb_valid ? lb_ctx : new_ctx;
  assign lb_ready   = step_ready;
  wire   inject_new = step_ready && !lb_valid && new_ok;

  // results
  wire go_on = smp.found && (smp.ctx.step + 8'd1 < smp.ctx.len);
  assign wr_valid    = smp_valid && lb_in_ready;
  assign wr_addr     = result_base + smp.ctx.qid * 32'(smp.ctx.len) + 32'(smp.ctx.step);
  assign wr_data     = smp.found ? smp.v_next : NO_VERTEX;
  assign smp_ready   = wr_ready && lb_in_ready;
  assign lb_in_valid = smp_valid && wr_ready && go_on;
  always_comb begin
    lb_in        = smp.ctx;
    lb_in.step   = smp.ctx.step + 8'd1;
    lb_in.v_prev = smp.ctx.v_curr;
    lb_in.v_curr = smp.v_next;
  end
  wire retire = smp_valid && smp_ready && !go_on;

  assign done = running && (n_finished == num_queries);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running      <= 1'b0;
      next_qid     <= '0;
      lines_req    <= '0;
      line_pending <= 1'b0;
      qbuf_cnt     <= '0;
      qbuf_ptr     <= '0;
      inflight     <= '0;
      n_finished   <= '0;
      n_steps      <= '0;
      n_dead_ends  <= '0;
      for (int i = 0; i < 16; i++) qbuf[i] <= '0;
    end else begin
      if (start) begin
        running    <= 1'b1;
        next_qid   <= '0;
        lines_req  <= '0;
        qbuf_cnt   <= '0;
        n_finished <= '0;
      end
      if (q_req_valid && q_req_ready) begin
        line_pending <= 1'b1;
        lines_req    <= lines_req + 1;
      end
      if (q_resp_valid && q_resp_ready) begin
        line_pending <= 1'b0;
        for (int i = 0; i < 16; i++) qbuf[i] <= q_resp_data[32*i +: 32];
        qbuf_ptr <= '0;
        qbuf_cnt <= ((num_queries - next_qid) >= 32'd16) ? 5'd16 : 5'(num_queries - next_qid);
      end else if (inject_new) begin
        qbuf_ptr <= qbuf_ptr + 1'b1;
        qbuf_cnt <= qbuf_cnt - 1'b1;
      end
      if (inject_new) next_qid <= next_qid + 1;
      inflight <= inflight + (inject_new ? IFW'(1) : '0) - (retire ? IFW'(1) : '0);
      if (retire) n_finished <= n_finished + 1;
      if (smp_valid && smp_ready) begin
        n_steps <= n_steps + 1;
        if (!smp.found) n_dead_ends <= n_dead_ends + 1;
      end
    end
  end

endmodule

// tb_query_scheduler: checks query injection, loop-back and result writing.
// The pipeline is replaced by a testbench model that takes step requests, holds each for
// a random time and returns a sample: v_next = (v_curr * 7 + step + 1) % 1000, or "not
// found" for contexts whose v_curr is a multiple of 37.  With MAX_INFLIGHT = 8 and 100
// queries of length 6 read from a behavioural DRAM, it checks: every result word equals
// the walk computed here (0xFFFFFFFF at a dead end and nothing after), every step request
// carries the right step, previous and current vertex, the number in flight never exceeds
// 8 and reaches it, and `done` rises at the end.
module tb_query_scheduler;
  import lightrw_pkg::*;
  localparam int NQ = 100, QLEN = 6, MAXF = 8, RES = 256;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  logic start, done, st_valid, st_ready, sm_valid, sm_ready;
  ctx_t st_ctx;
  sample_t sm;
  logic rqv [1], rqr [1], rsv [1], rsr [1];
  logic [31:0] rqa [1];
  logic [7:0] rql [1];
  logic [511:0] rsd [1];
  logic wv, wrdy;
  logic [31:0] wa, wd, n_steps, n_dead;

  query_scheduler #(.MAX_INFLIGHT(MAXF)) dut (.clk, .rst_n, .start, .num_queries(32'(NQ)),
    .query_len(8'(QLEN)), .query_base(32'd4), .result_base(32'(RES * 16)), .done,
    .q_req_valid(rqv[0]), .q_req_ready(rqr[0]), .q_req_addr(rqa[0]), .q_req_len(rql[0]),
    .q_resp_valid(rsv[0]), .q_resp_ready(rsr[0]), .q_resp_data(rsd[0]),
    .wr_valid(wv), .wr_ready(wrdy), .wr_addr(wa), .wr_data(wd),
    .step_valid(st_valid), .step_ready(st_ready), .step_ctx(st_ctx),
    .smp_valid(sm_valid), .smp_ready(sm_ready), .smp(sm), .n_steps, .n_dead_ends(n_dead));

  dram_model #(.DEPTH(1024), .NRD(1)) mem (.clk, .rd_req_valid(rqv), .rd_req_ready(rqr),
    .rd_req_addr(rqa), .rd_req_len(rql), .rd_resp_valid(rsv), .rd_resp_ready(rsr), .rd_resp_data(rsd),
    .wr_valid(wv), .wr_ready(wrdy), .wr_addr(wa), .wr_data(wd));

  function automatic int next_v(int v, int step);
    return (v * 7 + step + 1) % 1000;
  endfunction

  // pipeline model: a queue with random hold times, in order
  ctx_t pipe [$];
  int   hold;
  int   inflight = 0, max_inflight = 0;
  logic [31:0] starts [NQ];

  assign st_ready = (pipe.size() < 20);
  always @(posedge clk) if (rst_n) begin
    if (st_valid && st_ready) begin
      int exp_curr, exp_prev;
      exp_prev = -1; exp_curr = int'(starts[st_ctx.qid]);
      for (int s = 0; s < int'(st_ctx.step); s++) begin exp_prev = exp_curr; exp_curr = next_v(exp_curr, s); end
      check(st_ctx.v_curr == 32'(exp_curr) && (st_ctx.step == 0 ? st_ctx.v_prev == NO_VERTEX : st_ctx.v_prev == 32'(exp_prev)),
            $sformatf("step request q %0d step %0d", st_ctx.qid, st_ctx.step));
      pipe.push_back(st_ctx);
      if (st_ctx.step == 0) inflight++;
    end
    if (sm_valid && sm_ready) begin
      void'(pipe.pop_front());
      if (!sm.found || sm.ctx.step + 1 >= sm.ctx.len) inflight--;
    end
    if (inflight > max_inflight) max_inflight = inflight;
  end
  initial hold = 0;
  always @(posedge clk) hold <= (hold == 0) ? $urandom_range(5) : hold - 1;
  always_comb begin
    sm_valid = (pipe.size() > 0) && (hold == 0);
    sm = '0;
    if (pipe.size() > 0) begin
      sm.ctx = pipe[0];
      sm.found = (pipe[0].v_curr % 37) != 0;
      sm.v_next = sm.found ? 32'(next_v(int'(pipe[0].v_curr), int'(pipe[0].step))) : NO_VERTEX;
    end
  end

  initial begin
    start = 0;
    for (int q = 0; q < NQ; q++) begin
      starts[q] = (q % 10 == 3) ? 32'd74 : 32'($urandom_range(999));
      mem.mem[4 + q / 16][32*(q%16) +: 32] = starts[q];
    end
    for (int w = 0; w < NQ * QLEN; w++) mem.mem[RES + w / 16][32*(w%16) +: 32] = 32'hDEAD_BEEF;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1 start = 1;
    @(posedge clk); #1 start = 0;
    while (!done) @(posedge clk);
    repeat (3) @(posedge clk);
    for (int q = 0; q < NQ; q++) begin
      int v;
      bit ended;
      v = int'(starts[q]); ended = 0;
      for (int s = 0; s < QLEN; s++) begin
        logic [31:0] got;
        got = mem.mem[RES + (q * QLEN + s) / 16][32*((q * QLEN + s) % 16) +: 32];
        if (ended) check(got == 32'hDEAD_BEEF, "written after dead end");
        else if (v % 37 == 0) begin check(got == NO_VERTEX, $sformatf("q %0d step %0d dead end", q, s)); ended = 1; end
        else begin
          v = next_v(v, s);
          check(got == 32'(v), $sformatf("q %0d step %0d: %0d expected %0d", q, s, got, v));
        end
      end
    end
    check(max_inflight == MAXF, $sformatf("max in flight %0d", max_inflight));
    check(n_dead > 0, "dead ends exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_neighbor_info_loader: checks the neighbor-information fetch with a small cache.
// A row_index table of 200 vertices ({degree, offset} per 64-bit entry, eight per line)
// sits in a behavioural DRAM.  800 step requests with random current vertices (half from
// a small hot set) go in; the info output (to the burst engine) and the context output
// (to the context queue) are drained with independent random back-pressure.  Checks:
// each info equals the table entry of the request's vertex and each context equals the
// request, both in request order; hits + misses equal the number of requests; the number
// of row_index reads equals the number of misses.
module tb_neighbor_info_loader;
  import lightrw_pkg::*;
  localparam int NV = 200, NREQ = 800, R_BASE = 10;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  logic in_valid, in_ready, info_valid, info_ready, ctx_valid, ctx_ready;
  ctx_t in_ctx, ctx_out;
  ninfo_t info;
  logic rqv [1], rqr [1], rsv [1], rsr [1];
  logic [31:0] rqa [1];
  logic [7:0] rql [1];
  logic [511:0] rsd [1];
  logic [31:0] n_hit, n_miss, n_replace;
  logic wv = 0, wrdy;

  neighbor_info_loader #(.LINES(16)) dut (.clk, .rst_n, .row_base(32'(R_BASE)),
    .in_valid, .in_ready, .in_ctx, .info_valid, .info_ready, .info, .ctx_valid, .ctx_ready, .ctx_out,
    .rd_req_valid(rqv[0]), .rd_req_ready(rqr[0]), .rd_req_addr(rqa[0]), .rd_req_len(rql[0]),
    .rd_resp_valid(rsv[0]), .rd_resp_ready(rsr[0]), .rd_resp_data(rsd[0]), .n_hit, .n_miss, .n_replace);

  dram_model #(.DEPTH(64), .NRD(1)) mem (.clk, .rd_req_valid(rqv), .rd_req_ready(rqr),
    .rd_req_addr(rqa), .rd_req_len(rql), .rd_resp_valid(rsv), .rd_resp_ready(rsr), .rd_resp_data(rsd),
    .wr_valid(wv), .wr_ready(wrdy), .wr_addr(32'd0), .wr_data(32'd0));

  logic [31:0] tdeg [NV], toff [NV];
  ctx_t sent_info [$], sent_ctx [$];
  int n_info = 0, n_ctx = 0;

  always @(posedge clk) begin
    info_ready <= ($urandom_range(3) != 0);
    ctx_ready  <= ($urandom_range(2) != 0);
  end
  always @(posedge clk) if (rst_n) begin
    if (info_valid && info_ready) begin
      ctx_t e;
      e = sent_info.pop_front();
      check(info.deg == tdeg[e.v_curr] && info.addr == toff[e.v_curr],
            $sformatf("info %0d for vertex %0d: {%0d,%0d} expected {%0d,%0d}", n_info, e.v_curr,
                      info.deg, info.addr, tdeg[e.v_curr], toff[e.v_curr]));
      n_info++;
    end
    if (ctx_valid && ctx_ready) begin
      ctx_t e;
      e = sent_ctx.pop_front();
      check(ctx_out == e, $sformatf("context %0d differs", n_ctx));
      n_ctx++;
    end
  end

  initial begin
    info_ready = 0; ctx_ready = 0; in_valid = 0; in_ctx = '0;
    for (int v = 0; v < NV; v++) begin
      tdeg[v] = $urandom_range(3000);
      toff[v] = $urandom;
      mem.mem[R_BASE + v / 8][64*(v%8) +: 64] = {tdeg[v], toff[v]};
    end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < NREQ; n++) begin
      ctx_t c;
      c = '0;
      c.qid = 32'(n); c.step = 8'($urandom_range(7)); c.len = 8'd8;
      c.v_curr = ($urandom_range(1) == 0) ? 32'($urandom_range(7)) : 32'($urandom_range(NV - 1));
      c.v_prev = $urandom;
      in_ctx = c; in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent_info.push_back(c); sent_ctx.push_back(c);
      #1 in_valid = 0;
      if ($urandom_range(3) == 0) repeat ($urandom_range(4)) @(posedge clk);
      #1;
    end
    while (n_info < NREQ || n_ctx < NREQ) @(posedge clk);
    repeat (3) @(posedge clk);
    check(n_hit + n_miss == NREQ, $sformatf("hits %0d + misses %0d", n_hit, n_miss));
    check(mem.n_req[0] == n_miss, $sformatf("row reads %0d, misses %0d", mem.n_req[0], n_miss));
    check(n_hit > 100 && n_miss > 100 && n_replace > 0, "hits, misses and replacements seen");
    $display("hits %0d misses %0d replacements %0d", n_hit, n_miss, n_replace);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

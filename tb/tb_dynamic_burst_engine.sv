// tb_dynamic_burst_engine: checks the neighbor loader against a behavioural DRAM.
// col_index word e holds the value e, so every item names its own position.  Random
// {address, degree} requests (degree 0, small, around the 512-neighbor long-burst size,
// and up to 1400) are streamed; the output must list exactly address .. address+degree-1
// in order in its unmasked lanes, with one `last` per request.  The long- and short-burst
// counts must equal floor(n/32) and n - 32*floor(n/32) for the n lines each list touches,
// the memory ports must deliver exactly those beats (so at most one line of waste per
// tail beat), and the output must be held correctly under random back-pressure.
module tb_dynamic_burst_engine;
  import lightrw_pkg::*;
  localparam int K = 16;
  localparam int DEPTH = 2048;
  localparam int NREQ = 120;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready, out_last;
  ninfo_t in_info;
  logic [31:0] out_items [K];
  logic [K-1:0] out_mask;
  logic [31:0] n_long, n_short;
  logic rqv [2], rqr [2], rsv [2], rsr [2];
  logic [31:0] rqa [2];
  logic [7:0] rql [2];
  logic [511:0] rsd [2];
  logic wr_ready;

  dynamic_burst_engine #(.K(K)) dut (.clk, .rst_n, .col_base(32'd8), .in_valid, .in_ready, .in_info,
    .l_req_valid(rqv[0]), .l_req_ready(rqr[0]), .l_req_addr(rqa[0]), .l_req_len(rql[0]),
    .l_resp_valid(rsv[0]), .l_resp_ready(rsr[0]), .l_resp_data(rsd[0]),
    .s_req_valid(rqv[1]), .s_req_ready(rqr[1]), .s_req_addr(rqa[1]), .s_req_len(rql[1]),
    .s_resp_valid(rsv[1]), .s_resp_ready(rsr[1]), .s_resp_data(rsd[1]),
    .out_valid, .out_ready, .out_items, .out_mask, .out_last, .n_long, .n_short);

  dram_model #(.DEPTH(DEPTH), .NRD(2)) mem (.clk, .rd_req_valid(rqv), .rd_req_ready(rqr),
    .rd_req_addr(rqa), .rd_req_len(rql), .rd_resp_valid(rsv), .rd_resp_ready(rsr), .rd_resp_data(rsd),
    .wr_valid(1'b0), .wr_ready, .wr_addr(32'd0), .wr_data(32'd0));

  ninfo_t reqs [NREQ];
  int exp_long = 0, exp_short = 0;

  initial begin
    in_valid = 0; in_info = '0; out_ready = 1;
    for (int l = 0; l < DEPTH; l++)
      for (int j = 0; j < K; j++) mem.mem[l][32*j +: 32] = 32'((l - 8) * K + j);
    for (int n = 0; n < NREQ; n++) begin
      int unsigned d, lines;
      case (n % 6)
        0: d = 0;
        1: d = 1 + $urandom_range(15);
        2: d = 500 + $urandom_range(40);
        3: d = 1 + $urandom_range(1400);
        4: d = 16 * 32;
        default: d = 1 + $urandom_range(60);
      endcase
      reqs[n].deg = d;
      reqs[n].addr = $urandom_range(30000 - d);
      if (d != 0) begin
        lines = (reqs[n].addr + d - 1) / 16 - reqs[n].addr / 16 + 1;
        exp_long += lines / 32;
        exp_short += lines % 32;
      end
    end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < NREQ; n++) begin
      in_valid = 1; in_info = reqs[n];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0;
  end

  // output checker
  initial begin
    int n, pos;
    n = 0; pos = 0;
    @(posedge rst_n);
    while (n < NREQ) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        for (int j = 0; j < K; j++)
          if (out_mask[j]) begin
            check(out_items[j] == reqs[n].addr + 32'(pos) && pos < int'(reqs[n].deg),
                  $sformatf("request %0d item %0d: got %0d", n, pos, out_items[j]));
            pos++;
          end
        if (out_last) begin
          check(pos == int'(reqs[n].deg), $sformatf("request %0d: %0d of %0d items", n, pos, reqs[n].deg));
          n++; pos = 0;
        end
      end
      #1 out_ready = ($urandom_range(4) != 0);
    end
    repeat (5) @(posedge clk);
    check(n_long == 32'(exp_long), $sformatf("long bursts %0d expected %0d", n_long, exp_long));
    check(n_short == 32'(exp_short), $sformatf("short bursts %0d expected %0d", n_short, exp_short));
    check(mem.n_beats[0] == 32 * exp_long && mem.n_req[0] == exp_long, "long port beats");
    check(mem.n_beats[1] == exp_short && mem.n_req[1] == exp_short, "short port beats");
    $display("long %0d short %0d", n_long, n_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

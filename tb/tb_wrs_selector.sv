// tb_wrs_selector: checks the division-free acceptance test and the latest-candidate tree.
// Random beats of K = 16 (weights, accumulated weights, random numbers) are applied; the
// reference decides each lane with real-number division, p = w/acc > r/(2^32-1), and
// takes the highest passing lane.  Lanes within 1e-6 of the threshold are nudged away so
// rounding cannot decide.  Also checks the 2-cycle latency and that rng_advance follows
// accepted beats.
module tb_wrs_selector;
  localparam int K = 16;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  logic iv, ir, il, ov, orr, hit, ol, adv;
  logic [31:0] acc [K], w [K], r [K];
  logic [3:0] sel;
  logic [7:0] side, oside;

  wrs_selector #(.K(K), .SIDE_W(8)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_acc(acc),
    .in_w(w), .in_last(il), .in_side(side), .in_r(r), .rng_advance(adv), .out_valid(ov),
    .out_ready(orr), .out_hit(hit), .out_sel(sel), .out_last(ol), .out_side(oside));

  initial begin
    int n_hits, n_miss;
    iv = 0; il = 0; orr = 1; side = 0;
    for (int j = 0; j < K; j++) begin acc[j] = 1; w[j] = 0; r[j] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    n_hits = 0; n_miss = 0;
    for (int n = 0; n < 400; n++) begin
      bit exp_hit;
      int exp_sel;
      exp_hit = 0; exp_sel = 0;
      for (int j = 0; j < K; j++) begin
        real p, q;
        w[j]   = ($urandom_range(2) == 0) ? 0 : $urandom_range(50);
        acc[j] = w[j] + $urandom_range((n % 4 == 0) ? 20 : 5000);
        if (acc[j] == 0) acc[j] = 1;
        r[j]   = $urandom;
        p = real'(w[j]) / real'(acc[j]);
        q = real'(r[j]) / 4294967295.0;
        if (p - q < 1e-6 && q - p < 1e-6) begin r[j] = r[j] ^ 32'h8000_0000; q = real'(r[j]) / 4294967295.0; end
        if (p > q) begin exp_hit = 1; exp_sel = j; end
      end
      iv = 1; side = 8'(n); il = n[0];
      #1 check(adv, "rng_advance with an accepted beat");
      @(posedge clk); #1 iv = 0;
      check(!ov || oside != 8'(n), "not ready after 1 cycle");
      @(posedge clk); #1;
      check(ov && oside == 8'(n) && ol == n[0], $sformatf("beat %0d after 2 cycles", n));
      check(hit == exp_hit && (!exp_hit || sel == 4'(exp_sel)),
            $sformatf("beat %0d: hit %0d sel %0d, expected %0d %0d", n, hit, sel, exp_hit, exp_sel));
      if (exp_hit) n_hits++; else n_miss++;
    end
    check(n_hits > 20 && n_miss > 20, $sformatf("both outcomes exercised (%0d/%0d)", n_hits, n_miss));
    check(!adv, "no advance when idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_wrs_weight_accumulator: checks the prefix-sum weight accumulator.
// First with K = 4 on the worked example of the paper's sampler figure (weights
// {0,0,3,4}, {2,1,2,3}, {2,1,0,0}: the second beat must give 9, 10, 12, 15 and the
// third 17, 18, 18, 18), then with K = 16 on random streams against a running-sum model,
// including the reset of the running total after `last`, the 2-cycle latency and a
// held output.
module tb_wrs_weight_accumulator;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // K = 4 instance
  logic a_iv, a_ir, a_il, a_ov, a_or, a_ol;
  logic [31:0] a_w [4], a_acc [4], a_ow [4];
  logic [7:0] a_side, a_oside;
  wrs_weight_accumulator #(.K(4), .SIDE_W(8)) u4 (.clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir),
    .in_w(a_w), .in_last(a_il), .in_side(a_side), .out_valid(a_ov), .out_ready(a_or),
    .out_acc(a_acc), .out_w(a_ow), .out_last(a_ol), .out_side(a_oside));

  // K = 16 instance
  logic b_iv, b_ir, b_il, b_ov, b_or, b_ol;
  logic [31:0] b_w [16], b_acc [16], b_ow [16];
  logic [7:0] b_side, b_oside;
  wrs_weight_accumulator #(.K(16), .SIDE_W(8)) u16 (.clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir),
    .in_w(b_w), .in_last(b_il), .in_side(b_side), .out_valid(b_ov), .out_ready(b_or),
    .out_acc(b_acc), .out_w(b_ow), .out_last(b_ol), .out_side(b_oside));

  // expected outputs of the random test, queued in input order
  logic [16*32-1:0] exp_q [$];
  int n_out = 0;
  always @(posedge clk) if (rst_n && b_ov && b_or) begin
    logic [16*32-1:0] e;
    e = exp_q.pop_front();
    for (int j = 0; j < 16; j++) check(b_acc[j] == e[32*j +: 32], $sformatf("random beat %0d lane %0d: %0d vs %0d", n_out, j, b_acc[j], e[32*j +: 32]));
    check(b_oside == 8'(n_out), "side-band order");
    n_out++;
  end

  initial begin
    int unsigned run;
    a_iv = 0; a_il = 0; a_or = 1; a_side = 0; b_iv = 0; b_il = 0; b_or = 1; b_side = 0;
    for (int j = 0; j < 4; j++) a_w[j] = 0;
    for (int j = 0; j < 16; j++) b_w[j] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;

    // paper example, K = 4, one beat per cycle
    @(posedge clk); #1;
    a_iv = 1; a_w = '{0, 0, 3, 4};
    @(posedge clk); #1 a_w = '{2, 1, 2, 3};
    @(posedge clk); #1 a_w = '{2, 1, 0, 0}; a_il = 1;
    @(posedge clk); #1 a_iv = 0; a_il = 0;
    // first result leaves 2 cycles after the first beat: now valid with beat 2
    check(a_ov && a_acc[0] == 9 && a_acc[1] == 10 && a_acc[2] == 12 && a_acc[3] == 15,
          $sformatf("figure beat t2: %0d %0d %0d %0d", a_acc[0], a_acc[1], a_acc[2], a_acc[3]));
    @(posedge clk); #1;
    check(a_ov && a_ol && a_acc[0] == 17 && a_acc[1] == 18 && a_acc[2] == 18 && a_acc[3] == 18, "figure beat t3");
    // after last the total restarts at zero
    a_iv = 1; a_w = '{1, 1, 1, 1};
    @(posedge clk); #1 a_iv = 0;
    @(posedge clk); #1;
    check(a_ov && a_acc[3] == 4 && a_acc[0] == 1, "running total cleared after last");

    // random K = 16 streams with random output stalls
    run = 0;
    fork
      for (int n = 0; n < 200; n++) begin
        logic [16*32-1:0] e;
        b_iv = 1; b_il = ($urandom_range(3) == 0); b_side = 8'(n);
        for (int j = 0; j < 16; j++) begin
          b_w[j] = $urandom_range(1000);
          run += b_w[j];
          e[32*j +: 32] = run;
        end
        exp_q.push_back(e);
        if (b_il) run = 0;
        @(posedge clk);
        while (!b_ir) @(posedge clk);
        #1;
        if (n == 199) b_iv = 0;
      end
      repeat (400) begin @(posedge clk); #1 b_or = ($urandom_range(3) != 0); end
    join
    b_iv = 0; b_or = 1;
    repeat (10) @(posedge clk);
    check(n_out == 200, $sformatf("beats out %0d", n_out));
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

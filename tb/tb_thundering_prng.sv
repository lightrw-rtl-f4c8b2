// tb_thundering_prng: statistical sanity checks of the K-lane random number generator.
// 20000 draws of 16 lanes: every lane's mean near 2^31 (within 1%), every bit set about
// half the time, lanes pairwise distinct and uncorrelated (sample correlation < 0.05),
// no change while `advance` is low, and the same sequence after a second reset.
module tb_thundering_prng;
  localparam int K = 16;
  localparam int N = 20000;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  logic adv;
  logic [31:0] r [K];
  thundering_prng #(.K(K)) dut (.clk, .rst_n, .advance(adv), .r);

  real sum [K], sxy [K], sq [K];
  int  ones [32];
  logic [31:0] first [8];
  int same;

  initial begin
    adv = 0;
    for (int j = 0; j < K; j++) begin sum[j] = 0; sxy[j] = 0; sq[j] = 0; end
    for (int b = 0; b < 32; b++) ones[b] = 0;
    same = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    adv = 1;
    for (int n = 0; n < N; n++) begin
      @(posedge clk); #1;
      if (n < 8) first[n] = r[0];
      for (int j = 0; j < K; j++) begin
        real x, y;
        x = real'(r[j]) / 4294967296.0 - 0.5;
        y = real'(r[(j + 1) % K]) / 4294967296.0 - 0.5;
        sum[j] += x; sq[j] += x * x; sxy[j] += x * y;
        if (r[j] == r[(j + 1) % K]) same++;
      end
      for (int b = 0; b < 32; b++) ones[b] += int'(r[3][b]);
    end
    for (int j = 0; j < K; j++) begin
      check(sum[j] / N < 0.01 && sum[j] / N > -0.01, $sformatf("lane %0d mean offset %f", j, sum[j] / N));
      check((sxy[j] / sq[j]) < 0.05 && (sxy[j] / sq[j]) > -0.05, $sformatf("lane %0d/%0d correlation %f", j, (j + 1) % K, sxy[j] / sq[j]));
    end
    for (int b = 0; b < 32; b++) check(ones[b] > N * 0.47 && ones[b] < N * 0.53, $sformatf("bit %0d ones %0d", b, ones[b]));
    check(same == 0, "neighbouring lanes equal");
    // hold
    adv = 0;
    begin
      logic [31:0] h;
      h = r[5];
      repeat (5) @(posedge clk);
      #1 check(r[5] == h, "value changed without advance");
    end
    // reproducible
    rst_n = 0; #1 rst_n = 1; adv = 1;
    for (int n = 0; n < 8; n++) begin @(posedge clk); #1 check(r[0] == first[n], "sequence not reproducible"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

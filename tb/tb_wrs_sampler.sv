// tb_wrs_sampler: checks the parallel weighted reservoir sampler (K = 16).
//
//  1. Directed: a stream whose only non-zero weight sits at a known position must return
//     that item, wherever the position (first beat, later beat, lane 0, lane 15).
//  2. All-zero stream: found = 0.
//  3. Throughput/latency: 64 back-to-back single-beat streams are accepted one per cycle
//     and the first sample appears 5 cycles after its beat.
//  4. Distribution: a 3-beat stream with weights 1..48 (sum 1176) sampled 6000 times; the
//     share of each weight class (items grouped by beat) must match w / sum within 4
//     standard deviations, and the mean sampled weight must match sum(w^2)/sum(w).
//  5. Back-pressure: with the output held, nothing is lost.
module tb_wrs_sampler;
  import lightrw_pkg::*;
  localparam int K = 16;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;    // falling edge applies the asynchronous reset
  int checks = 0, failures = 0;

  logic        in_valid, in_ready, in_last, out_valid, out_ready;
  logic [31:0] in_items [K];
  logic [31:0] in_w [K];
  ctx_t        in_ctx;
  sample_t     smp;

  wrs_sampler #(.K(K)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_items, .in_w, .in_last,
                            .in_ctx, .out_valid, .out_ready, .out_sample(smp));

  task automatic check(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // send one beat (blocking on ready)
  task automatic send(input logic [31:0] w [K], input logic [31:0] base, input bit last, input int qid);
    in_valid = 1; in_last = last; in_w = w;
    for (int j = 0; j < K; j++) in_items[j] = base + 32'(j);
    in_ctx = '0; in_ctx.qid = 32'(qid);
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic get(output sample_t s);
    out_ready = 1;
    @(posedge clk);
    while (!out_valid) @(posedge clk);
    s = smp;
    #1;
  endtask

  logic [31:0] w [K];
  sample_t s;
  int hist [3];
  longint wsum_sel;

  initial begin
    in_valid = 0; in_last = 0; out_ready = 1; in_ctx = '0;
    for (int j = 0; j < K; j++) begin in_items[j] = 0; in_w[j] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;

    // 1. single non-zero weight
    for (int pos = 0; pos < 3 * K; pos += 5) begin
      for (int b = 0; b < 3; b++) begin
        for (int j = 0; j < K; j++) w[j] = (b * K + j == pos) ? 32'd7 : 32'd0;
        fork
          send(w, 32'(1000 + 100 * b), b == 2, pos);
        join
      end
      get(s);
      check(s.found && s.v_next == 32'(1000 + 100 * (pos / K) + pos % K) && s.ctx.qid == 32'(pos),
            $sformatf("single weight at %0d: got %0d", pos, s.v_next));
    end
    for (int j = 0; j < K; j++) w[j] = (j == K - 1) ? 32'd1 : 32'd0;
    send(w, 32'd50, 1, 99); get(s);
    check(s.found && s.v_next == 32'd65, "single weight at lane 15");

    // 2. all zero
    for (int j = 0; j < K; j++) w[j] = 0;
    send(w, 32'd0, 0, 1); send(w, 32'd0, 1, 1); get(s);
    check(!s.found, "all-zero stream must give no sample");

    // 3. throughput and latency
    begin
      int t0, t_first, got;
      logic [31:0] ww [K];
      for (int j = 0; j < K; j++) ww[j] = 32'(j + 1);
      got = 0; t_first = -1;
      t0 = $time;
      fork
        begin
          in_valid = 1; in_last = 1; in_w = ww;
          for (int n = 0; n < 64; n++) begin
            for (int j = 0; j < K; j++) in_items[j] = 32'(n * K + j);
            in_ctx.qid = 32'(n);
            @(posedge clk);
            checks++; if (!in_ready) begin failures++; $display("FAIL: stall at beat %0d", n); end
            #1;
          end
          in_valid = 0;
        end
        begin
          while (got < 64) begin
            @(posedge clk);
            if (out_valid) begin
              if (t_first < 0) t_first = ($time - t0) / 10;
              check(smp.found && smp.ctx.qid == 32'(got) && smp.v_next / K == smp.ctx.qid,
                    $sformatf("streamed sample %0d", got));
              got++;
            end
          end
        end
      join
      check(t_first == 5, $sformatf("latency from first beat: %0d cycles (expected 5)", t_first));
    end

    // 4. distribution over a 3-beat stream, weights 1..48
    hist = '{0, 0, 0}; wsum_sel = 0;
    for (int t = 0; t < 6000; t++) begin
      for (int b = 0; b < 3; b++) begin
        for (int j = 0; j < K; j++) w[j] = 32'(b * K + j + 1);
        send(w, 32'(b * K), b == 2, t);
      end
      get(s);
      hist[s.v_next / K]++;
      wsum_sel += s.v_next + 1;
    end
    begin
      // class shares: beat0 sum 136, beat1 392, beat2 648 of 1176
      real e [3], sd;
      e[0] = 6000.0 * 136 / 1176; e[1] = 6000.0 * 392 / 1176; e[2] = 6000.0 * 648 / 1176;
      for (int c = 0; c < 3; c++) begin
        sd = $sqrt(e[c] * (1.0 - e[c] / 6000.0));
        check((hist[c] > e[c] - 4 * sd) && (hist[c] < e[c] + 4 * sd),
              $sformatf("class %0d: %0d samples, expected %.1f", c, hist[c], e[c]));
      end
      // mean weight: sum w^2 / sum w = 38024/1176 = 32.33
      check((real'(wsum_sel) / 6000.0 > 31.3) && (real'(wsum_sel) / 6000.0 < 33.4),
            $sformatf("mean sampled weight %.2f, expected 32.33", real'(wsum_sel) / 6000.0));
    end

    // 5. back-pressure: output held for 20 cycles while 8 streams are offered
    out_ready = 0;
    fork
      for (int n = 0; n < 8; n++) begin
        for (int j = 0; j < K; j++) w[j] = (j == n) ? 32'd3 : 32'd0;
        send(w, 32'(n * 100), 1, n);
      end
      begin
        int got;
        got = 0;
        repeat (20) @(posedge clk);
        #1 out_ready = 1;
        while (got < 8) begin
          @(posedge clk);
          if (out_valid) begin
            check(smp.v_next == 32'(got * 100 + got) && smp.ctx.qid == 32'(got), $sformatf("held sample %0d", got));
            got++;
          end
        end
      end
    join

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// token_bucket_tb: self-checking test of the per-flow token-bucket rate limiter.
//
// A source offers a request every cycle. A cycle-accurate reference model of
// the bucket, written independently here with plain integers, predicts each
// pass decision and is compared with the block every cycle. On top of that,
// each phase checks an aggregate against numbers worked out by hand:
//  - the four rows of the paper's shaping parameter table (1, 10, 100 and
//    1000 Gbps at 250 MHz with one token per byte) must deliver
//    min(Refill_Rate, Bkt_Size) bytes per Interval, within 1 % of the target;
//  - IOPS mode at 3 tokens per 2500 cycles must give 300 K messages/s;
//  - a full bucket lets a burst of Bkt_Size bytes through back to back;
//  - bypass mode passes every request;
//  - a reconfiguration mid-run takes effect without a reset.
module token_bucket_tb;
  import arcus_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;   // 4 ns period: 250 MHz

  shape_mode_e  mode;
  logic [31:0]  bkt_size, refill_rate, cost;
  logic [15:0]  interval;
  logic         in_valid, in_ready, out_valid, out_ready;
  logic [31:0]  tokens;
  logic         refill_tick;

  token_bucket dut (
    .clk, .rst_n, .mode, .bkt_size, .refill_rate, .interval,
    .in_valid, .in_cost(cost), .in_ready, .out_valid, .out_ready,
    .tokens, .refill_tick
  );

  int checks = 0;
  int failures = 0;
  int mismatches = 0;

  // ---------------- reference model ----------------
  longint m_tokens;
  int     m_timer;
  longint passed_bytes;
  longint passed_msgs;

  function automatic bit m_allow();
    longint c;
    c = (mode == SHAPE_IOPS) ? 1 : longint'(cost);
    return (mode == SHAPE_OFF) || (m_tokens >= c);
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      m_tokens <= 0;
      m_timer  <= 0;
    end else begin
      longint t;
      bit     tick;
      int     ivl;
      ivl  = (interval == 0) ? 1 : int'(interval);
      tick = (m_timer + 1 >= ivl);
      t = m_tokens;
      if (in_valid && out_ready && m_allow()) begin
        if (mode != SHAPE_OFF) t -= (mode == SHAPE_IOPS) ? 1 : longint'(cost);
      end
      if (tick) t += longint'(refill_rate);
      if (t > longint'(bkt_size)) t = longint'(bkt_size);
      m_tokens <= t;
      m_timer  <= tick ? 0 : m_timer + 1;
      // compare the decision the block made in this cycle
      if (out_valid !== (in_valid && m_allow())) begin
        mismatches++;
        if (mismatches < 5)
          $display("mismatch at %0t: dut=%0b model=%0b tokens=%0d model=%0d",
                   $time, out_valid, m_allow(), tokens, m_tokens);
      end
      if (out_valid && out_ready) begin
        passed_bytes += longint'(cost);
        passed_msgs  += 1;
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input int cycles);
    repeat (cycles) @(negedge clk);
  endtask

  // Measures bytes passed over `n` intervals once the bucket has drained.
  task automatic rate_row(input int unsigned r, input int unsigned b, input int unsigned ivl,
                          input int unsigned c, input real gbps_target);
    longint start, got, expect_b;
    real    gbps;
    @(negedge clk);
    mode = SHAPE_GBPS; refill_rate = r; bkt_size = b; interval = 16'(ivl); cost = c;
    in_valid = 1'b1;
    run(4 * ivl + 8 * b / c + 8);           // settle: empty the initial burst
    start = passed_bytes;
    run(200 * ivl);
    got      = passed_bytes - start;
    expect_b = 200 * longint'((r < b) ? r : b);
    gbps     = real'(got) * 8.0 * 250.0e6 / (200.0 * real'(ivl)) / 1.0e9;
    $display("row %0d Gbps target: %0d bytes in %0d cycles = %.3f Gbps", int'(gbps_target),
             got, 200 * ivl, gbps);
    check(got >= expect_b - c && got <= expect_b + c, "table row byte count");
    check(gbps > 0.99 * gbps_target * 1.024 && gbps < 1.01 * gbps_target * 1.024,
          "table row rate within 1 %");
  endtask

  initial begin
    mode = SHAPE_OFF; bkt_size = 0; refill_rate = 0; interval = 16'd1; cost = 64;
    in_valid = 1'b0; out_ready = 1'b1;
    passed_bytes = 0; passed_msgs = 0;
    run(4);
    rst_n = 1'b1;
    run(2);

    // ---- bypass: every request passes ----
    @(negedge clk);
    in_valid = 1'b1;
    begin
      longint s;
      s = passed_msgs;
      run(100);
      check(passed_msgs - s == 100, "bypass passes one request per cycle");
    end

    // ---- the paper's table rows (token = byte) ----
    rate_row(1024,  512,     1000, 64,   1.0);
    rate_row(4096,  4096,    800,  64,   10.0);
    rate_row(16384, 65536,   320,  64,   100.0);
    rate_row(32768, 1048576, 64,   4096, 1000.0);

    // ---- burst: a full bucket lets Bkt_Size bytes pass back to back ----
    @(negedge clk);
    in_valid = 1'b0; mode = SHAPE_GBPS; refill_rate = 256; bkt_size = 2048; interval = 16'd100;
    cost = 64;
    run(1200);                                 // fill the bucket
    check(tokens == 2048, "bucket saturates at Bkt_Size");
    @(negedge clk);
    refill_rate = 0;                           // no refill while bursting
    in_valid = 1'b1;
    begin
      longint s;
      s = passed_msgs;
      run(32);
      check(passed_msgs - s == 32, "burst of Bkt_Size/cost requests back to back");
      run(50);
      check(passed_msgs - s == 32, "nothing more passes with refill 0");
    end

    // ---- IOPS mode: 3 messages per 2500 cycles = 300 K IOPS ----
    @(negedge clk);
    mode = SHAPE_IOPS; refill_rate = 3; bkt_size = 3; interval = 16'd2500; cost = 4096;
    run(5000);
    begin
      longint s;
      real kiops;
      s = passed_msgs;
      run(250000);                             // 1 ms
      kiops = real'(passed_msgs - s);   // messages per millisecond = KIOPS
      $display("IOPS mode: %0d messages in 1 ms = %.1f KIOPS", passed_msgs - s, kiops);
      check(passed_msgs - s >= 297 && passed_msgs - s <= 303, "300 KIOPS within 1 %");
    end

    // ---- reconfiguration on the fly: 200 K IOPS ----
    @(negedge clk);
    refill_rate = 1; bkt_size = 1; interval = 16'd1250;
    run(2500);
    begin
      longint s;
      s = passed_msgs;
      run(250000);
      check(passed_msgs - s >= 198 && passed_msgs - s <= 202, "200 KIOPS after reconfiguration");
    end

    // ---- smaller bucket clamps the token count at once ----
    @(negedge clk);
    in_valid = 1'b0; mode = SHAPE_GBPS; refill_rate = 1000; bkt_size = 5000; interval = 16'd10;
    run(100);
    @(negedge clk);
    bkt_size = 700;
    @(negedge clk);
    check(tokens <= 700, "token count clamped to a smaller bucket");

    // ---- downstream stall: nothing passes, no tokens spent ----
    @(negedge clk);
    refill_rate = 0; out_ready = 1'b0; in_valid = 1'b1; cost = 64;
    begin
      logic [31:0] t0;
      t0 = tokens;
      run(20);
      check(tokens == t0 && !in_ready, "stalled output keeps tokens");
    end
    out_ready = 1'b1;

    check(mismatches == 0, "cycle-by-cycle agreement with the reference model");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

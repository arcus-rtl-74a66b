// slo_monitor_tb: self-checking test of the per-flow SLO counters.
//
// Four flows raise random payload and completion events. The testbench keeps
// its own running totals and per-window sums and compares them with the
// block's outputs after every clock edge. It also checks that a window closes
// exactly every `window` cycles, that changing the window length takes effect,
// and that a window of 0 stops the windowed values.
module slo_monitor_tb;
  import arcus_pkg::*;

  localparam int N = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [31:0]      window;
  logic [N-1:0]     pay_fire, cmpl_fire;
  logic [LEN_W-1:0] pay_len [N];
  flow_cnt_t        cnt [N];
  logic             win_tick;

  slo_monitor #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  longint tot_b[N], tot_m[N], tot_c[N], acc_b[N], acc_m[N], win_b[N], win_m[N];
  int ticks = 0, last_tick = -1, cyc = 0, bad_period = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int f = 0; f < N; f++) begin
      if (pay_fire[f]) begin
        tot_b[f] += pay_len[f]; tot_m[f] += 1;
        acc_b[f] += pay_len[f]; acc_m[f] += 1;
      end
      if (cmpl_fire[f]) tot_c[f] += 1;
      if (win_tick) begin
        win_b[f] = acc_b[f]; win_m[f] = acc_m[f];
        acc_b[f] = 0; acc_m[f] = 0;
      end
    end
    if (win_tick) begin
      if (last_tick >= 0 && cyc - last_tick != int'(window)) bad_period++;
      last_tick = cyc;
      ticks++;
    end
  end

  task automatic compare();
    for (int f = 0; f < N; f++) begin
      check(cnt[f].bytes == 64'(tot_b[f]) && cnt[f].msgs == 64'(tot_m[f]), "totals");
      check(cnt[f].cmpls == 32'(tot_c[f]), "completions");
      check(cnt[f].win_bytes == 32'(win_b[f]) && cnt[f].win_msgs == 32'(win_m[f]), "window");
    end
  endtask

  task automatic drive(input int cycles);
    repeat (cycles) begin
      @(negedge clk);
      compare();
      for (int f = 0; f < N; f++) begin
        pay_fire[f]  = $urandom_range(0, 2) == 0;
        pay_len[f]   = $urandom_range(0, 4096);
        cmpl_fire[f] = $urandom_range(0, 4) == 0;
      end
    end
  endtask

  initial begin
    pay_fire = '0; cmpl_fire = '0; window = 100;
    for (int f = 0; f < N; f++) begin
      pay_len[f] = 0; tot_b[f] = 0; tot_m[f] = 0; tot_c[f] = 0;
      acc_b[f] = 0; acc_m[f] = 0; win_b[f] = 0; win_m[f] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    drive(1000);
    check(ticks >= 9 && ticks <= 10, "ten windows of 100 cycles in 1000 cycles");
    @(negedge clk);
    window = 37;
    last_tick = -1;
    drive(740);
    check(bad_period == 0, "window period exact");
    @(negedge clk);
    window = 0;
    begin
      int t0;
      t0 = ticks;
      drive(300);
      check(ticks == t0, "window 0 stops the windowed sample");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

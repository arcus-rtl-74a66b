// rr_arbiter_tb: self-checking test of the round-robin SR-IOV arbiter.
//
// Random request vectors and random `advance`. The expected grant is worked
// out here by scanning from the flow after the last used grant. Also checked:
// with all flows requesting, every flow is granted exactly once in each
// window of N cycles (fair share), and an unused grant keeps its turn.
module rr_arbiter_tb;

  localparam int N = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [N-1:0] req, gnt;
  logic         advance, gnt_valid;
  logic [3:0]   gnt_idx;

  rr_arbiter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int last = N - 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  function automatic int expected(input logic [N-1:0] r, input int l);
    for (int k = 1; k <= N; k++) if (r[(l + k) % N]) return (l + k) % N;
    return -1;
  endfunction

  initial begin
    int cnt[N];
    req = '0; advance = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int e;
      @(negedge clk);
      req = N'({$urandom} & {$urandom});
      advance = $urandom_range(0, 3) != 0;
      #1;
      e = expected(req, last);
      check(gnt_valid == (e >= 0), "gnt_valid");
      if (e >= 0) check(gnt == N'(1) << e && gnt_idx == 4'(e), "granted index");
      else        check(gnt == '0, "no grant");
      if (e >= 0 && advance) last = e;
    end
    // fairness with all requesting
    @(negedge clk);
    req = '1; advance = 1;
    for (int w = 0; w < 4; w++) begin
      foreach (cnt[i]) cnt[i] = 0;
      for (int c = 0; c < N; c++) begin
        @(posedge clk);
        cnt[gnt_idx]++;
      end
      begin
        bit ok;
        ok = 1;
        foreach (cnt[i]) if (cnt[i] != 1) ok = 0;
        check(ok, "each flow granted once per N cycles");
      end
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

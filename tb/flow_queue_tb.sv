// flow_queue_tb: self-checking test of the per-flow hardware queue.
//
// Random pushes and pops against a SystemVerilog queue as the reference:
// order and contents of popped entries, the occupancy count, that a full
// queue refuses a push unless a pop frees a slot in the same cycle, and that
// an empty queue offers nothing.
module flow_queue_tb;

  localparam int DEPTH = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  logic              in_valid, in_ready, out_valid, out_ready;
  logic [255:0]      in_data, out_data;
  logic [4:0]        count;

  flow_queue #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [255:0] model[$];
  int fulls = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      int phase;
      phase = (c / 500) % 3;          // fill-heavy, drain-heavy, balanced
      @(negedge clk);
      in_valid  = (phase == 0) ? ($urandom_range(0, 9) < 8) :
                  (phase == 1) ? ($urandom_range(0, 9) < 2) : $urandom_range(0, 1);
      out_ready = (phase == 0) ? ($urandom_range(0, 9) < 2) :
                  (phase == 1) ? ($urandom_range(0, 9) < 8) : $urandom_range(0, 1);
      in_data   = {8{$urandom}};
      #1;
      check(count == model.size(), "count");
      check(out_valid == (model.size() != 0), "out_valid");
      check(in_ready == (model.size() < DEPTH || out_ready), "in_ready");
      if (model.size() == DEPTH) fulls++;
      if (out_valid) check(out_data == model[0], "head data");
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(fulls > 0, "queue was full at least once");
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

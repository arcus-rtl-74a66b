// msg_resizer_tb: self-checking test of the message resizer.
//
// Random messages (random address, length 0..5000 bytes, random header) are fed
// with random gaps, under random segment sizes (including 0 = no split), and
// the output is stalled at random. For every message the testbench works out
// the expected segments itself: ceil(len / seg) segments (one for len 0 or
// seg 0), each at addr + k*seg with length min(seg, rest), header copied,
// first/last marked. Each output segment is compared with the next expected
// one. Back-to-back throughput (one segment per cycle) is checked too.
module msg_resizer_tb;
  import arcus_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  logic [LEN_W-1:0] seg_size;
  logic   in_valid, in_ready, out_valid, out_ready, out_first, out_last;
  desc_t  in_desc, out_desc;

  msg_resizer dut (.*);

  int checks = 0, failures = 0;

  typedef struct {
    desc_t d;
    logic  first;
    logic  last;
  } exp_t;
  exp_t exp_q[$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // expected segments of one message
  task automatic expect_msg(input desc_t d, input logic [LEN_W-1:0] seg);
    longint rest, a;
    bit first;
    exp_t e;
    rest = d.len; a = d.addr; first = 1;
    do begin
      e.d = d;
      e.d.addr = a;
      e.d.len = (seg == 0 || rest <= seg) ? LEN_W'(rest) : seg;
      e.first = first;
      e.last  = (seg == 0 || rest <= seg);
      exp_q.push_back(e);
      a += e.d.len;
      rest -= e.d.len;
      first = 0;
    end while (!e.last);
  endtask

  int segs_seen = 0;
  bit random_stall = 1;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      exp_t e;
      segs_seen++;
      if (exp_q.size() == 0) check(0, "unexpected segment");
      else begin
        e = exp_q.pop_front();
        check(out_desc == e.d && out_first == e.first && out_last == e.last, "segment content");
      end
    end
    out_ready <= random_stall ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  initial begin
    in_valid = 0; in_desc = '0; seg_size = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 300; m++) begin
      desc_t d;
      logic [LEN_W-1:0] s;
      d = desc_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      d.len  = $urandom_range(0, 5000);
      d.addr = {$urandom, $urandom};
      case ($urandom_range(0, 3))
        0: s = 0;
        1: s = 64;
        2: s = 1024;
        default: s = $urandom_range(1, 3000);
      endcase
      @(negedge clk);
      seg_size = s; in_desc = d; in_valid = 1;
      expect_msg(d, s);
      do @(posedge clk); while (!in_ready);
      @(negedge clk);
      in_valid = 0;
      seg_size = $urandom;       // may change freely once the message is taken
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    wait (exp_q.size() == 0);
    // throughput: 4096-byte message in 64-byte segments, no stall
    random_stall = 0;
    @(negedge clk);
    @(negedge clk);
    begin
      desc_t d;
      int t0;
      d = '0; d.len = 4096; d.addr = 64'h1000;
      seg_size = 64; in_desc = d; in_valid = 1;
      expect_msg(d, 64);
      t0 = segs_seen;
      @(negedge clk);
      in_valid = 0;
      repeat (64) @(negedge clk);
      check(segs_seen - t0 == 64, "one segment per cycle");
    end
    check(exp_q.size() == 0, "all expected segments seen");
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

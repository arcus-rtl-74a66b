// cmpl_writer_tb: self-checking test of the completion writer.
//
// Four flows, each with its own completion ring base and size, receive random
// result messages (1..6 beats, interleaved between flows at message
// boundaries) while the DMA write channel stalls at random. The testbench
// computes where every beat and every completion record must land (base +
// slot * 32, slot wrapping at the ring size) and what each record holds
// (flow, sequence number, beat count), and compares every DMA write in order.
module cmpl_writer_tb;
  import arcus_pkg::*;

  localparam int N = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  flow_cfg_t            cfg [N];
  logic                 res_valid, res_ready, res_last;
  logic [DATA_W-1:0]    res_data;
  logic [FLOW_IW-1:0]   res_flow;
  logic                 wr_valid, wr_ready;
  logic [ADDR_W-1:0]    wr_addr;
  logic [DATA_W-1:0]    wr_data;
  logic [N-1:0]         cmpl_fire;

  cmpl_writer #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  typedef struct {
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] data;
  } wr_t;
  wr_t exp_q[$];
  int  slot[N], seq[N], fired[N], want_fired[N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  function automatic logic [ADDR_W-1:0] where(input int f);
    return cfg[f].cmpl_base + 64'((slot[f] % (1 << cfg[f].cmpl_log2)) * 32);
  endfunction

  always @(posedge clk) begin
    if (rst_n && wr_valid && wr_ready) begin
      wr_t e;
      if (exp_q.size() == 0) check(0, "unexpected write");
      else begin
        e = exp_q.pop_front();
        check(wr_addr == e.addr && wr_data == e.data, "write address and data");
      end
    end
    for (int f = 0; f < N; f++) if (rst_n && cmpl_fire[f]) fired[f]++;
    wr_ready <= $urandom_range(0, 3) != 0;
  end

  initial begin
    wr_ready = 1; res_valid = 0; res_last = 0; res_data = '0; res_flow = '0;
    for (int f = 0; f < N; f++) begin
      cfg[f] = '0;
      cfg[f].cmpl_base = 64'h1_0000_0000 * (f + 1) + 64'h40 * f;
      cfg[f].cmpl_log2 = 5'(2 + f);
      slot[f] = 0; seq[f] = 0; fired[f] = 0; want_fired[f] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 200; m++) begin
      int f, beats;
      f = $urandom_range(0, N - 1);
      beats = $urandom_range(1, 6);
      for (int b = 0; b < beats; b++) begin
        wr_t e;
        @(negedge clk);
        res_valid = 1; res_flow = FLOW_IW'(f); res_last = (b == beats - 1);
        res_data = {8{$urandom}};
        e.addr = where(f); e.data = res_data;
        exp_q.push_back(e);
        slot[f]++;
        do @(posedge clk); while (!res_ready);
      end
      begin
        wr_t e;
        cmpl_t r;
        r = '0; r.valid = 1; r.flow = 8'(f); r.seq = seq[f]; r.beats = beats;
        e.addr = where(f); e.data = DATA_W'(r);
        exp_q.push_back(e);
        slot[f]++; seq[f]++; want_fired[f]++;
      end
      @(negedge clk);
      res_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "all writes done");
    for (int f = 0; f < N; f++) check(fired[f] == want_fired[f], "completion strobes per flow");
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

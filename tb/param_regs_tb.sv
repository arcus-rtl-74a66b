// param_regs_tb: self-checking test of the MMIO register file.
//
// Writes random values to every writable register of every flow, reads them
// back over MMIO (one-cycle read latency) and checks the values driven to the
// datapath, including the field truncation of CTRL, INTERVAL and the LOG2
// registers. Read-only registers are checked against status inputs set by the
// testbench; writes to them and to unmapped addresses must change nothing.
module param_regs_tb;
  import arcus_pkg::*;

  localparam int N = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  logic        mmio_valid, mmio_we, mmio_rvalid;
  logic [15:0] mmio_addr;
  logic [31:0] mmio_wdata, mmio_rdata;
  flow_cfg_t   cfg [N];
  logic [31:0] window;
  flow_cnt_t   cnt [N];
  logic [31:0] head [N];
  logic [N-1:0] q_full;
  logic [TOK_W-1:0] tokens [N];

  param_regs #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 0; mmio_we = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 0; mmio_addr = a;
    @(negedge clk);
    mmio_valid = 0;
    check(mmio_rvalid, "read valid one cycle later");
    d = mmio_rdata;
  endtask

  initial begin
    logic [31:0] v[N][11];
    logic [31:0] d;
    logic [7:0]  offs[11];
    offs = '{REG_CTRL, REG_BKT_SIZE, REG_REFILL, REG_INTERVAL, REG_SEG_SIZE, REG_RING_LO,
             REG_RING_HI, REG_RING_LOG2, REG_CMPL_LO, REG_CMPL_HI, REG_CMPL_LOG2};
    mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0; q_full = '0;
    for (int f = 0; f < N; f++) begin
      cnt[f] = '0; head[f] = 0; tokens[f] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg[0] == '0 && window == 0, "reset values");

    for (int f = 0; f < N; f++)
      for (int r = 0; r < 11; r++) begin
        v[f][r] = $urandom;
        wr(16'(f * 'h100) | 16'(offs[r]), v[f][r]);
      end
    wr(REG_WINDOW, 32'd5000);
    wr(16'h0070, 32'hFFFF_FFFF);          // unmapped
    wr(16'(N * 'h100), 32'hFFFF_FFFF);    // beyond the last flow
    wr(REG_BYTES_LO, 32'h1234_5678);      // read-only

    for (int f = 0; f < N; f++) begin
      check(cfg[f].enable == v[f][0][0] && cfg[f].mode == shape_mode_e'(v[f][0][2:1]), "ctrl");
      check(cfg[f].bkt_size == v[f][1] && cfg[f].refill_rate == v[f][2], "bucket registers");
      check(cfg[f].interval == v[f][3][15:0] && cfg[f].seg_size == v[f][4], "interval/seg");
      check(cfg[f].ring_base == {v[f][6], v[f][5]} && cfg[f].ring_log2 == v[f][7][4:0], "ring");
      check(cfg[f].cmpl_base == {v[f][9], v[f][8]} && cfg[f].cmpl_log2 == v[f][10][4:0], "cmpl");
      for (int r = 0; r < 11; r++) begin
        logic [31:0] want;
        case (offs[r])
          REG_CTRL:                    want = {29'd0, v[f][r][2:0]};
          REG_INTERVAL:                want = {16'd0, v[f][r][15:0]};
          REG_RING_LOG2, REG_CMPL_LOG2: want = {27'd0, v[f][r][4:0]};
          default:                     want = v[f][r];
        endcase
        rd(16'(f * 'h100) | 16'(offs[r]), d);
        check(d == want, "parameter read back");
      end
    end
    rd(REG_WINDOW, d);
    check(d == 5000 && window == 5000, "window register");
    rd(REG_NFLOWS, d);
    check(d == N, "number of flows");
    rd(16'h0070, d);
    check(d == 0, "unmapped reads 0");

    // status registers
    for (int f = 0; f < N; f++) begin
      cnt[f].bytes = {$urandom, $urandom}; cnt[f].msgs = {$urandom, $urandom};
      cnt[f].win_bytes = $urandom; cnt[f].win_msgs = $urandom; cnt[f].cmpls = $urandom;
      head[f] = $urandom; tokens[f] = $urandom; q_full[f] = $urandom_range(0, 1);
    end
    for (int f = 0; f < N; f++) begin
      logic [15:0] b;
      b = 16'(f * 'h100);
      rd(b | 16'(REG_BYTES_LO), d);  check(d == cnt[f].bytes[31:0], "bytes lo");
      rd(b | 16'(REG_BYTES_HI), d);  check(d == cnt[f].bytes[63:32], "bytes hi");
      rd(b | 16'(REG_MSGS_HI), d);   check(d == cnt[f].msgs[63:32], "msgs hi");
      rd(b | 16'(REG_WIN_BYTES), d); check(d == cnt[f].win_bytes, "win bytes");
      rd(b | 16'(REG_WIN_MSGS), d);  check(d == cnt[f].win_msgs, "win msgs");
      rd(b | 16'(REG_CMPLS), d);     check(d == cnt[f].cmpls, "cmpls");
      rd(b | 16'(REG_HEAD), d);      check(d == head[f], "head");
      rd(b | 16'(REG_STATUS), d);    check(d == {31'd0, q_full[f]}, "status");
      rd(b | 16'(REG_TOKENS), d);    check(d == tokens[f], "tokens");
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

// arcus_top_tb: end-to-end test of the interface with all 16 flows.
//
// The top is instantiated with its default parameters, together with a host
// memory / DMA model and a streaming accelerator model. Each flow gets its own
// descriptor ring and completion region, programmed over MMIO like the
// control-plane software would. VM driver models write descriptors (no
// doorbells); the interface fetches, shapes, streams the payloads through the
// accelerator model and writes results and completion records back.
//
//  flow 0   Gbps mode, the paper's 10 Gbps row (4,096 tokens / 800 cycles,
//           bucket 4,096), 24 messages of 4 KB into a 32-slot ring
//  flow 1   IOPS mode, 1 message / 400 cycles, 1 KB messages resized to 512 B,
//           sped up to 1 / 200 cycles halfway by an MMIO write
//  2..15    bypass mode, 8 random messages each, 4-slot rings (they wrap),
//           various resize limits, enabled at staggered times (empty rings
//           are polled)
//
// Checked: every result beat and every completion record in host memory
// (data = payload XOR key, sequence numbers, beat counts), the per-flow
// counters read back over MMIO, flow 0's windowed byte count and request
// timing against the 10 Gbps rate, flow 1's message spacing before and after
// the reconfiguration. Each mechanism must occur at least once: shaper stall,
// empty-slot poll, ring wrap, message split, queue-full back-pressure,
// arbitration between several flows, accelerator back-pressure, bypass mode,
// IOPS mode, run-time reconfiguration, monitor window.
module arcus_top_tb;
  import arcus_pkg::*;

  localparam int N = 16;
  localparam logic [ADDR_W-1:0] RING = 64'h0000_0010_0000;
  localparam logic [ADDR_W-1:0] CMPL = 64'h0000_0100_0000;
  localparam logic [ADDR_W-1:0] PAY  = 64'h0000_1000_0000;
  localparam logic [DATA_W-1:0] KEY  = {8{32'hC3A5_96E1}};

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  logic               mmio_valid, mmio_we, mmio_rvalid;
  logic [15:0]        mmio_addr;
  logic [31:0]        mmio_wdata, mmio_rdata;
  logic               rd_valid, rd_ready, rsp_valid, rsp_ready, rsp_last;
  logic [ADDR_W-1:0]  rd_addr, wr_addr;
  logic [LEN_W-1:0]   rd_len;
  dma_tag_t           rd_tag, rsp_tag;
  logic [DATA_W-1:0]  rsp_data, wr_data;
  logic               wr_valid, wr_ready;
  logic               acc_tx_valid, acc_tx_ready, acc_tx_seg_last, acc_tx_last;
  logic [DATA_W-1:0]  acc_tx_data, acc_rx_data;
  logic [FLOW_IW-1:0] acc_tx_flow, acc_rx_flow;
  logic [7:0]         acc_tx_type;
  logic               acc_rx_valid, acc_rx_ready, acc_rx_last;
  logic [N-1:0]       q_full;

  arcus_top dut (.*);

  host_dma_model #(.LAT(24)) host (
    .clk, .rst_n, .rd_valid, .rd_ready, .rd_addr, .rd_len, .rd_tag,
    .rsp_valid, .rsp_ready, .rsp_data, .rsp_tag, .rsp_last,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  acc_model #(.LAT(8), .KEY(KEY)) acc (
    .clk, .rst_n,
    .in_valid(acc_tx_valid), .in_ready(acc_tx_ready), .in_data(acc_tx_data),
    .in_flow(acc_tx_flow), .in_last(acc_tx_last),
    .out_valid(acc_rx_valid), .out_ready(acc_rx_ready), .out_data(acc_rx_data),
    .out_flow(acc_rx_flow), .out_last(acc_rx_last)
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // ---------------- MMIO ----------------
  task automatic wr(input int f, input logic [7:0] off, input logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 1; mmio_addr = 16'(f * 'h100) | 16'(off); mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 0; mmio_we = 0;
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 0; mmio_addr = a;
    @(negedge clk);
    mmio_valid = 0;
    d = mmio_rdata;
  endtask

  // ---------------- per-flow driver state ----------------
  int           n_msgs   [N];
  int           written  [N];
  int           consumed [N];
  logic [31:0]  head_prev[N];
  int           ring_log2[N];
  int           seg_sz   [N];
  longint       msg_len  [N][$];
  longint       tot_bytes[N];
  int           slow_mode[N];   // 0 bypass, 1 gbps, 2 iops

  function automatic logic [ADDR_W-1:0] pay_addr(input int f, input int m);
    return PAY + 64'(f) * 64'h100_0000 + 64'(m) * 64'h1_0000;
  endfunction

  task automatic put_desc(input int f, input int len);
    desc_t d;
    int slots;
    slots = 1 << ring_log2[f];
    d = '0;
    d.phase    = ((written[f] / slots) % 2 == 0);
    d.acc_type = 8'(f % 3);
    d.len      = len;
    d.addr     = pay_addr(f, written[f]);
    d.cookie   = 32'(written[f]);
    host.poke(RING + 64'(f) * 64'h1000 + 64'((written[f] % slots) * 32), DATA_W'(d));
    msg_len[f].push_back(len);
    tot_bytes[f] += len;
    written[f]++;
  endtask

  // ---------------- mechanism counters ----------------
  longint cyc = 0;
  longint n_stall = 0, n_poll = 0, n_wrap = 0, n_split = 0, n_qfull = 0, n_arb = 0;
  longint n_accbp = 0, n_bypass = 0, n_iops = 0, n_reconf = 0, n_win = 0;
  longint f0_last_req = 0, f0_reqs = 0;
  longint f1_prev = -1, f1_first = -1, f1_sum_a = 0, f1_cnt_a = 0;
  longint f1_sum_b = 0, f1_cnt_b = 0, f1_reconf_at = -1;
  longint enable_at[N];

  for (genvar g = 0; g < N; g++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_flow[g].u_ctx.seg_valid && !dut.g_flow[g].u_ctx.u_bucket.allow) n_stall++;
      if (dut.g_flow[g].u_ctx.desc_valid && dut.g_flow[g].u_ctx.st_q == 2'd2 &&
          !dut.g_flow[g].u_ctx.desc_take) n_poll++;
      if (dut.g_flow[g].u_ctx.desc_take && dut.g_flow[g].u_ctx.head_q != 0 &&
          (dut.g_flow[g].u_ctx.head_q & dut.g_flow[g].u_ctx.ring_mask) ==
           dut.g_flow[g].u_ctx.ring_mask) n_wrap++;
      if (dut.g_flow[g].u_ctx.pay_fire) begin
        if (slow_mode[g] == 0) n_bypass++;
        if (slow_mode[g] == 2) n_iops++;
      end
      if (dut.head[g] != head_prev[g]) consumed[g]++;
      head_prev[g] = dut.head[g];
    end
  end

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (q_full != '0) n_qfull++;
    if ($countones(dut.c_rd_valid) > 1) n_arb++;
    if (acc_tx_valid && !acc_tx_ready) n_accbp++;
    if (dut.u_mon.win_tick) n_win++;
    if (rd_valid && rd_ready && !rd_tag.is_desc) begin
      if (!rd_tag.seg_last) n_split++;
      if (rd_tag.flow == 0) begin
        f0_last_req = cyc - enable_at[0];
        f0_reqs++;
      end
      if (rd_tag.flow == 1) begin
        if (f1_prev >= 0) begin
          if (f1_reconf_at < 0 || f1_prev < f1_reconf_at + 400) begin
            if (f1_reconf_at < 0 && f1_prev > f1_first) begin
              f1_sum_a += cyc - f1_prev;
              f1_cnt_a++;
            end
          end else begin
            f1_sum_b += cyc - f1_prev;
            f1_cnt_b++;
          end
        end
        if (f1_prev < 0) f1_first = cyc;
        f1_prev = cyc;
      end
    end
  end

  // ---------------- drivers ----------------
  task automatic drive_flow(input int f);
    int slots;
    slots = 1 << ring_log2[f];
    for (int m = 0; m < n_msgs[f]; m++) begin
      int len;
      while (written[f] - consumed[f] >= slots) @(negedge clk);
      if (f == 0)      len = 4096;
      else if (f == 1) len = 1024;
      else             len = $urandom_range(1, 3000);
      put_desc(f, len);
      if (f >= 2) repeat ($urandom_range(0, 30)) @(negedge clk);
    end
  endtask

  // ---------------- result checking ----------------
  task automatic check_results(input int f);
    logic [ADDR_W-1:0] base;
    int slot, bad, badrec;
    base = CMPL + 64'(f) * 64'h10_0000;
    slot = 0; bad = 0; badrec = 0;
    for (int m = 0; m < n_msgs[f]; m++) begin
      longint rest, a;
      int beats;
      cmpl_t r;
      rest = msg_len[f][m]; a = pay_addr(f, m); beats = 0;
      while (rest > 0) begin
        longint sl;
        sl = (seg_sz[f] == 0 || rest <= seg_sz[f]) ? rest : seg_sz[f];
        for (longint j = 0; j < (sl + 31) / 32; j++) begin
          if (host.peek(base + 64'(slot * 32)) != (host.pattern(a + 64'(j * 32)) ^ KEY)) bad++;
          slot++; beats++;
        end
        a += sl; rest -= sl;
      end
      r = cmpl_t'(host.peek(base + 64'(slot * 32)));
      if (!r.valid || r.flow != 8'(f) || r.seq != 32'(m) || r.beats != 32'(beats)) badrec++;
      slot++;
    end
    check(bad == 0, $sformatf("flow %0d result beats", f));
    check(badrec == 0, $sformatf("flow %0d completion records", f));
  endtask

  initial begin
    logic [31:0] d, w0;
    mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    host.stall_pct = 10;
    acc.stall_pct  = 20;
    for (int f = 0; f < N; f++) begin
      written[f] = 0; consumed[f] = 0; head_prev[f] = 0; tot_bytes[f] = 0;
      n_msgs[f]    = (f == 0) ? 24 : (f == 1) ? 16 : 8;
      ring_log2[f] = (f < 2) ? 5 : 2;
      seg_sz[f]    = (f == 0) ? 0 : (f == 1) ? 512 : (f % 3 == 0) ? 0 : (f % 3 == 1) ? 256 : 1024;
      slow_mode[f] = (f == 0) ? 1 : (f == 1) ? 2 : 0;
      enable_at[f] = 0;
      for (int s = 0; s < 32; s++) host.poke(RING + 64'(f) * 64'h1000 + 64'(s * 32), '0);
    end
    repeat (4) @(posedge clk);
    rst_n = 1;

    // program every flow
    for (int f = 0; f < N; f++) begin
      wr(f, REG_RING_LO,   32'(RING + 64'(f) * 64'h1000));
      wr(f, REG_RING_HI,   32'((RING + 64'(f) * 64'h1000) >> 32));
      wr(f, REG_RING_LOG2, 32'(ring_log2[f]));
      wr(f, REG_CMPL_LO,   32'(CMPL + 64'(f) * 64'h10_0000));
      wr(f, REG_CMPL_HI,   32'((CMPL + 64'(f) * 64'h10_0000) >> 32));
      wr(f, REG_CMPL_LOG2, 32'd13);
      wr(f, REG_SEG_SIZE,  32'(seg_sz[f]));
    end
    wr(0, REG_BKT_SIZE, 4096); wr(0, REG_REFILL, 4096); wr(0, REG_INTERVAL, 800);
    wr(1, REG_BKT_SIZE, 1);    wr(1, REG_REFILL, 1);    wr(1, REG_INTERVAL, 400);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 1; mmio_addr = REG_WINDOW; mmio_wdata = 8000;
    @(negedge clk);
    mmio_valid = 0; mmio_we = 0;

    // (MMIO accesses below never overlap in time)
    wr(0, REG_CTRL, {29'd0, SHAPE_GBPS, 1'b1});
    enable_at[0] = cyc;
    wr(1, REG_CTRL, {29'd0, SHAPE_IOPS, 1'b1});
    fork
      drive_flow(0);
      drive_flow(1);
      begin   // bypass flows join after flows 0 and 1 have filled their queues
        repeat (3000) @(negedge clk);
        for (int f = 2; f < N; f++) begin
          wr(f, REG_CTRL, {29'd0, SHAPE_OFF, 1'b1});
          repeat (100) @(negedge clk);
        end
      end
      for (int f = 2; f < N; f++) begin
        automatic int ff = f;
        fork drive_flow(ff); join_none
      end
      begin   // run-time reconfiguration of flow 1: 1 message per 200 cycles
        repeat (6000) @(negedge clk);
        f1_reconf_at = cyc;
        wr(1, REG_INTERVAL, 200);
        n_reconf++;
      end
      begin   // flow 0's windowed throughput, read like the runtime would
        repeat (12000) @(negedge clk);
        rd(16'(REG_WIN_BYTES), w0);
      end
    join
    wait fork;

    // wait for every completion record
    begin
      int all;
      do begin
        repeat (200) @(negedge clk);
        all = 1;
        for (int f = 0; f < N; f++) if (dut.cnt[f].cmpls != 32'(n_msgs[f])) all = 0;
      end while (!all && cyc < 400000);
    end

    for (int f = 0; f < N; f++) check_results(f);
    for (int f = 0; f < N; f++) begin
      rd(16'(f * 'h100) | 16'(REG_BYTES_LO), d);
      check(d == 32'(tot_bytes[f]), $sformatf("flow %0d byte counter over MMIO", f));
      rd(16'(f * 'h100) | 16'(REG_CMPLS), d);
      check(d == 32'(n_msgs[f]), $sformatf("flow %0d completion counter over MMIO", f));
    end

    // flow 0: 10 Gbps row = 4096 bytes per 800 cycles
    $display("flow 0: window bytes %0d (expect 40960), last request at %0d cycles (expect ~19200)",
             w0, f0_last_req);
    check(w0 >= 40960 - 4096 && w0 <= 40960 + 4096, "flow 0 windowed throughput at 10 Gbps");
    check(f0_last_req >= 23 * 800 - 100 && f0_last_req <= 24 * 800 + 400, "flow 0 paced at 10 Gbps");
    // flow 1: IOPS pacing before and after reconfiguration
    $display("flow 1: mean gap %0d before, %0d after reconfiguration",
             (f1_cnt_a > 0) ? f1_sum_a / f1_cnt_a : 0, (f1_cnt_b > 0) ? f1_sum_b / f1_cnt_b : 0);
    check(f1_cnt_a > 3 && f1_sum_a / f1_cnt_a >= 395 && f1_sum_a / f1_cnt_a <= 410,
          "flow 1 at 1 message per 400 cycles");
    check(f1_cnt_b > 3 && f1_sum_b / f1_cnt_b >= 195 && f1_sum_b / f1_cnt_b <= 215,
          "flow 1 at 1 message per 200 cycles after reconfiguration");

    $display("mechanisms: stall=%0d poll=%0d wrap=%0d split=%0d qfull=%0d arb=%0d accbp=%0d",
             n_stall, n_poll, n_wrap, n_split, n_qfull, n_arb, n_accbp);
    $display("            bypass=%0d iops=%0d reconf=%0d window=%0d cycles=%0d",
             n_bypass, n_iops, n_reconf, n_win, cyc);
    check(n_stall  > 0, "shaper stall happened");
    check(n_poll   > 0, "empty-slot poll happened");
    check(n_wrap   > 0, "ring wrap happened");
    check(n_split  > 0, "message split happened");
    check(n_qfull  > 0, "queue-full back-pressure happened");
    check(n_arb    > 0, "arbitration between flows happened");
    check(n_accbp  > 0, "accelerator back-pressure happened");
    check(n_bypass > 0, "bypass mode used");
    check(n_iops   > 0, "IOPS mode used");
    check(n_reconf > 0, "run-time reconfiguration happened");
    check(n_win    > 0, "monitor window closed");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

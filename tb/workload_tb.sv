// workload_tb: the evaluated sharing scenarios, run through the whole
// interface at its default size, with the achieved rates checked.
//
// Two flows (two VMs) share one accelerator. Their drivers keep their
// descriptor rings topped up, so both flows are always backlogged and the
// rates seen on the DMA request channel are set by the shapers alone. Four
// scenarios run one after the other; between them both flows are disabled,
// their rings cleared and the registers reprogrammed over MMIO.
//
//  A  IOPS targets of 300K and 200K requests/s for two streams of 4 KB
//     requests. Refill 1 token every 833 cycles (300.12K/s at 250 MHz) and
//     every 1,250 cycles (200.00K/s), bucket of 1. The rate is sampled every
//     500 requests, as in the evaluation; every sample must lie within 1% of
//     the target.
//  B  Gbps targets of 10 and 20 Gbps, 256-byte and 512-byte messages, on an
//     accelerator that refuses 40% of the beats offered to it (about 38 Gbps
//     of capacity). Flow 0 uses the 10 Gbps row of the parameter table
//     (4,096 tokens every 800 cycles, bucket 4,096 = 10.24 Gbps), flow 1
//     twice the refill (20.48 Gbps). Bytes over 200,000 cycles after a
//     warm-up must lie within 1% of the programmed rate.
//  D  As B, but the 20 Gbps flow sends 64-byte messages (40M messages/s,
//     one every 6.25 cycles) and the accelerator never refuses: this tests
//     that batched descriptor fetches keep a small-message flow supplied.
//     (It runs before C: a disabled flow still serves what it has queued,
//     and C's queued 512 KB messages would occupy the DMA channel.)
//  C  Large messages: flow 0 sends 4 KB messages, flow 1 512 KB messages
//     resized into 4 KB segments; both get 8,192 tokens every 1,024 cycles
//     (16 Gbps). Each must get its rate within 1%, i.e. half each.
//
// Host memory latency is 24 cycles; the accelerator has 8 cycles of latency.
// The payload requests are observed at the top's DMA request port.
module workload_tb;
  import arcus_pkg::*;

  localparam int N_USED = 2;
  localparam int RING_LOG2 = 6;
  localparam int SLOTS = 1 << RING_LOG2;
  localparam logic [ADDR_W-1:0] CMPL = 64'h0000_0100_0000;
  localparam logic [ADDR_W-1:0] PAY  = 64'h0000_1000_0000;

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
  logic [15:0]        q_full;

  arcus_top dut (.*);

  host_dma_model #(.LAT(24)) host (
    .clk, .rst_n, .rd_valid, .rd_ready, .rd_addr, .rd_len, .rd_tag,
    .rsp_valid, .rsp_ready, .rsp_data, .rsp_tag, .rsp_last,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  acc_model #(.LAT(8)) acc (
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

  task automatic wr(input int f, input logic [7:0] off, input logic [31:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 1; mmio_addr = 16'(f * 'h100) | 16'(off); mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 0; mmio_we = 0;
  endtask

  // ---------------- drivers ----------------
  logic [ADDR_W-1:0] ring_base [N_USED];
  int                written   [N_USED];
  int                consumed  [N_USED];
  int                msg_bytes [N_USED];
  bit                driving   [N_USED];
  logic [31:0]       head_prev [N_USED];

  function automatic logic [31:0] head_of(input int f);
    return (f == 0) ? dut.g_flow[0].u_ctx.head : dut.g_flow[1].u_ctx.head;
  endfunction

  task automatic put_desc(input int f);
    desc_t d;
    d = '0;
    d.phase    = ((written[f] / SLOTS) % 2 == 0);
    d.acc_type = 8'd1;
    d.len      = msg_bytes[f];
    d.addr     = PAY + 64'(f) * 64'h1000_0000 + 64'(written[f] % 256) * 64'h8_0000;
    d.cookie   = 32'(written[f]);
    host.poke(ring_base[f] + 64'((written[f] % SLOTS) * 32), DATA_W'(d));
    written[f]++;
  endtask

  for (genvar g = 0; g < N_USED; g++) begin : g_drv
    initial begin
      forever begin
        @(negedge clk);
        if (driving[g])
          while (written[g] - consumed[g] < SLOTS) put_desc(g);
      end
    end
  end

  // ---------------- measurement at the DMA request port ----------------
  longint cyc = 0;
  longint t_msg [N_USED][$];       // cycle of each message's last payload request
  longint bytes [N_USED];
  bit     measuring = 0;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int f = 0; f < N_USED; f++) begin
      if (head_of(f) != head_prev[f]) consumed[f]++;
      head_prev[f] = head_of(f);
    end
    if (rd_valid && rd_ready && !rd_tag.is_desc && int'(rd_tag.flow) < N_USED) begin
      if (measuring) bytes[rd_tag.flow] += rd_len;
      if (rd_tag.seg_last) t_msg[rd_tag.flow].push_back(cyc);
    end
  end

  // ---------------- scenario set-up ----------------
  task automatic setup(input int f, input shape_mode_e mode, input int bkt, input int refill,
                       input int interval, input int len, input int seg);
    wr(f, REG_CTRL, 32'd0);
    driving[f] = 0;
    repeat (400) @(negedge clk);                  // let queued work drain
    ring_base[f] = ring_base[f] + 64'h1_0000;     // fresh ring
    for (int s = 0; s < SLOTS; s++) host.poke(ring_base[f] + 64'(s * 32), '0);
    written[f] = 0; consumed[f] = 0; msg_bytes[f] = len;
    wr(f, REG_BKT_SIZE, 32'(bkt));
    wr(f, REG_REFILL, 32'(refill));
    wr(f, REG_INTERVAL, 32'(interval));
    wr(f, REG_SEG_SIZE, 32'(seg));
    wr(f, REG_RING_LO, ring_base[f][31:0]);
    wr(f, REG_RING_HI, ring_base[f][63:32]);
    wr(f, REG_RING_LOG2, 32'(RING_LOG2));
    wr(f, REG_CMPL_LO, 32'(CMPL) + 32'(f) * 32'h10_0000);
    wr(f, REG_CMPL_HI, 32'd0);
    wr(f, REG_CMPL_LOG2, 32'd8);
    t_msg[f].delete();
    bytes[f] = 0;
    driving[f] = 1;
    wr(f, REG_CTRL, {29'd0, mode, 1'b1});
  endtask

  function automatic real pct(input real got, input real want);
    return 100.0 * (got - want) / want;
  endfunction

  initial begin
    mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    for (int f = 0; f < N_USED; f++) begin
      ring_base[f] = 64'h0000_0010_0000 + 64'(f) * 64'h100_0000;
      written[f] = 0; consumed[f] = 0; driving[f] = 0; head_prev[f] = 0; bytes[f] = 0;
      msg_bytes[f] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n = 1;

    // ---- A: 300K / 200K IOPS, 4 KB requests ----
    setup(0, SHAPE_IOPS, 1, 1, 833, 4096, 0);
    setup(1, SHAPE_IOPS, 1, 1, 1250, 4096, 0);
    while (t_msg[1].size() < 1010 && cyc < 3_000_000) @(negedge clk);
    begin
      real want[2];
      want[0] = 250.0e6 / 833.0;
      want[1] = 250.0e6 / 1250.0;
      for (int f = 0; f < N_USED; f++) begin
        int samples = 0;
        real dmax = 0.0;
        // skip the first requests (bucket and queue fill), then 500 per sample
        for (int k = 10; k + 500 < t_msg[f].size(); k += 500) begin
          real iops, d;
          iops = 500.0 * 250.0e6 / real'(t_msg[f][k + 500] - t_msg[f][k]);
          d = pct(iops, want[f]);
          if (d < 0) d = -d;
          if (d > dmax) dmax = d;
          samples++;
          check(d <= 1.0, "IOPS sample within 1% of the target");
        end
        $display("A flow %0d: %0d samples of 500 requests, target %0.0f IOPS, worst deviation %0.2f%%",
                 f, samples, want[f], dmax);
        check(samples >= 2, "enough IOPS samples");
      end
    end

    // ---- B: 10 and 20 Gbps, 256 B and 512 B messages, busy accelerator ----
    acc.stall_pct = 40;
    setup(0, SHAPE_GBPS, 4096, 4096, 800, 256, 0);
    setup(1, SHAPE_GBPS, 8192, 8192, 800, 512, 0);
    repeat (20_000) @(negedge clk);
    measuring = 1;
    repeat (200_000) @(negedge clk);
    measuring = 0;
    for (int f = 0; f < N_USED; f++) begin
      real gbps, want;
      gbps = real'(bytes[f]) * 8.0 * 250.0e6 / 200_000.0 / 1.0e9;
      want = (f == 0) ? 10.24 : 20.48;
      $display("B flow %0d: %0.3f Gbps (programmed %0.2f), deviation %0.2f%%", f, gbps, want,
               pct(gbps, want));
      check(pct(gbps, want) <= 1.0 && pct(gbps, want) >= -1.0, "Gbps rate within 1%");
    end
    check(acc.n_in > 0, "accelerator used");

    // ---- D: 64 B messages at 20 Gbps next to 256 B at 10 Gbps ----
    acc.stall_pct = 0;
    setup(0, SHAPE_GBPS, 4096, 4096, 800, 256, 0);
    setup(1, SHAPE_GBPS, 8192, 8192, 800, 64, 0);
    repeat (20_000) @(negedge clk);
    measuring = 1;
    repeat (100_000) @(negedge clk);
    measuring = 0;
    for (int f = 0; f < N_USED; f++) begin
      real gbps, want;
      gbps = real'(bytes[f]) * 8.0 * 250.0e6 / 100_000.0 / 1.0e9;
      want = (f == 0) ? 10.24 : 20.48;
      $display("D flow %0d: %0.3f Gbps (programmed %0.2f), deviation %0.2f%%", f, gbps, want,
               pct(gbps, want));
      check(pct(gbps, want) <= 1.0 && pct(gbps, want) >= -1.0, "small-message rate within 1%");
    end

    // ---- C: 4 KB against 512 KB messages resized to 4 KB, half each ----
    acc.stall_pct = 0;
    setup(0, SHAPE_GBPS, 8192, 8192, 1024, 4096, 0);
    setup(1, SHAPE_GBPS, 8192, 8192, 1024, 512 * 1024, 4096);
    repeat (20_000) @(negedge clk);
    measuring = 1;
    repeat (150_000) @(negedge clk);
    measuring = 0;
    begin
      real g0, g1;
      g0 = real'(bytes[0]) * 8.0 * 250.0e6 / 150_000.0 / 1.0e9;
      g1 = real'(bytes[1]) * 8.0 * 250.0e6 / 150_000.0 / 1.0e9;
      $display("C flow 0 (4 KB): %0.3f Gbps, flow 1 (512 KB): %0.3f Gbps, programmed 16 each", g0, g1);
      check(pct(g0, 16.0) <= 1.0 && pct(g0, 16.0) >= -1.0, "4 KB flow at its rate");
      check(pct(g1, 16.0) <= 1.0 && pct(g1, 16.0) >= -1.0, "512 KB flow at its rate");
      check(t_msg[1].size() >= 1, "a 512 KB message completed its payload requests");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

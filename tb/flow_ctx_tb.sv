// flow_ctx_tb: self-checking test of one per-flow context against a host model.
//
// A VM driver model writes descriptors into an 8-slot ring in host memory with
// the phase-bit convention and never rings a doorbell. The testbench checks:
//  - polling: an empty slot is read again and again, the head stays put;
//  - every payload request equals the next expected segment (address, length,
//    accelerator type, last-segment flag), worked out from the descriptors
//    and the segment size; descriptor fetches read ring slots in order,
//    across wraps (phase flip), several slots per fetch but never past the
//    ring's end or beyond the queue's room;
//  - shaping: at every payload request the bytes released so far never exceed
//    the tokens refilled so far (the bucket starts empty);
//  - back-pressure: with the refill stopped, the queue fills, q_full rises and
//    the head stops advancing; restoring the refill drains everything;
//  - latency: in bypass mode a descriptor returned by DMA leads to its payload
//    request within 9 cycles (the paper quotes 36 ns for the shaping mechanism
//    at 250 MHz).
module flow_ctx_tb;
  import arcus_pkg::*;

  localparam int QD = 4;
  localparam logic [ADDR_W-1:0] RING = 64'h0001_0000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #2 clk = ~clk;

  flow_cfg_t          cfg;
  logic               rd_valid, rd_ready;
  logic [ADDR_W-1:0]  rd_addr;
  logic [LEN_W-1:0]   rd_len;
  dma_tag_t           rd_tag;
  logic               rsp_valid, rsp_last;
  logic [DATA_W-1:0]  rsp_data;
  dma_tag_t           rsp_tag;
  logic [31:0]        head;
  logic               q_full, pay_fire;
  logic [LEN_W-1:0]   pay_len;
  logic [TOK_W-1:0]   tokens;
  logic               wr_ready_unused;

  flow_ctx #(.FLOW_ID(0), .Q_DEPTH(QD), .POLL_GAP(16)) dut (
    .clk, .rst_n, .cfg, .rd_valid, .rd_ready, .rd_addr, .rd_len, .rd_tag,
    .desc_valid(rsp_valid && rsp_tag.is_desc), .desc_data(desc_t'(rsp_data)),
    .head, .q_full, .pay_fire, .pay_len, .tokens
  );

  host_dma_model #(.LAT(6)) host (
    .clk, .rst_n, .rd_valid, .rd_ready, .rd_addr, .rd_len, .rd_tag,
    .rsp_valid, .rsp_ready(1'b1), .rsp_data, .rsp_tag, .rsp_last,
    .wr_valid(1'b0), .wr_ready(wr_ready_unused), .wr_addr('0), .wr_data('0)
  );

  int checks = 0, failures = 0;

  typedef struct {
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;
    logic [7:0]        acc;
    logic              last;
  } seg_t;
  seg_t   exp_q[$];
  int     written = 0;         // descriptors the driver has written
  int     consumed = 0;        // descriptors the context has taken
  int     batch_reads = 0;
  int     desc_reads = 0, slot0_reads = 0, seg_errors = 0, slot_errors = 0;
  longint bytes = 0, ticks = 0, over = 0;
  logic [31:0] head_prev = 0;
  int     expect_slot = 0;
  longint cyc = 0, t_desc = -1;
  int     max_lat = 0;
  int     tq = 0;
  bit     measure_lat = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  // driver: writes descriptor number n into its slot with the lap's phase
  task automatic put_desc(input int len, input logic [7:0] acc);
    desc_t d;
    int s;
    longint rest, a;
    d = '0;
    s = written % 8;
    d.phase = ((written / 8) % 2 == 0);
    d.acc_type = acc;
    d.len = len;
    d.addr = 64'h0100_0000 + 64'(written) * 64'h1_0000;
    d.cookie = written;
    host.poke(RING + 64'(s * 32), DATA_W'(d));
    rest = len; a = d.addr;
    do begin
      seg_t e;
      e.addr = a; e.acc = acc;
      e.len  = (cfg.seg_size == 0 || rest <= cfg.seg_size) ? LEN_W'(rest) : cfg.seg_size;
      e.last = (cfg.seg_size == 0 || rest <= cfg.seg_size);
      exp_q.push_back(e);
      a += e.len; rest -= e.len;
    end while (rest > 0);
    written++;
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    // the bucket's refill timer, modelled: a refill every `interval` cycles
    if (tq + 1 >= int'(cfg.interval)) begin
      tq = 0;
      if (cfg.mode == SHAPE_GBPS) ticks++;
    end else tq++;
    // the head moves the cycle after a descriptor response beat is taken
    if (head != head_prev) begin
      consumed++;
      if (measure_lat) t_desc = cyc - 1;
    end
    head_prev = head;
    if (rd_valid && rd_ready) begin
      if (rd_tag.is_desc) begin
        desc_reads++;
        if (rd_len > 32) batch_reads++;
        if (rd_len == 0 || rd_len > 32 * QD || rd_len % 32 != 0 ||
            (rd_addr - RING) / 32 + rd_len / 32 > 8) slot_errors++;
        if (rd_addr != RING + 64'((consumed % 8) * 32)) slot_errors++;
        if (rd_addr == RING) slot0_reads++;
      end else begin
        seg_t e;
        bytes += rd_len;
        if (cfg.mode == SHAPE_GBPS && bytes > ticks * longint'(cfg.refill_rate)) over++;
        if (exp_q.size() == 0) seg_errors++;
        else begin
          e = exp_q.pop_front();
          if (rd_addr != e.addr || rd_len != e.len || rd_tag.acc_type != e.acc ||
              rd_tag.seg_last != e.last) begin
            seg_errors++;
            $display("segment mismatch: got %h/%0d want %h/%0d", rd_addr, rd_len, e.addr, e.len);
          end
        end
        if (measure_lat && t_desc >= 0) begin
          if (int'(cyc - t_desc) > max_lat) max_lat = int'(cyc - t_desc);
          t_desc = -1;
        end
      end
    end
  end

  initial begin
    cfg = '0;
    cfg.ring_base = RING; cfg.ring_log2 = 3;
    cfg.mode = SHAPE_GBPS; cfg.bkt_size = 4096; cfg.refill_rate = 1024; cfg.interval = 100;
    cfg.seg_size = 1024;
    for (int s = 0; s < 8; s++) host.poke(RING + 64'(s * 32), '0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg.enable = 1;

    // ---- polling an empty ring ----
    repeat (200) @(negedge clk);
    check(head == 0 && slot0_reads >= 3, "empty slot is polled, head stays");

    // ---- shaped traffic, 24 descriptors through an 8-slot ring ----
    for (int i = 0; i < 24; i++) begin
      while (written - consumed >= 8 && cyc < 200000) @(negedge clk);
      put_desc($urandom_range(32, 3000), 8'($urandom_range(0, 3)));
      repeat ($urandom_range(0, 40)) @(negedge clk);
    end
    while (exp_q.size() != 0 && cyc < 200000) @(negedge clk);
    check(exp_q.size() == 0, "all segments requested");
    check(seg_errors == 0, "segments match descriptors");
    check(slot_errors == 0, "ring slots read in order across wraps, batches within the ring");
    check(batch_reads > 0, "several slots read by one fetch");
    check(over == 0, "released bytes never exceed refilled tokens");
    check(bytes > 0 && bytes >= (ticks - 60) * 1024, "flow kept up with its rate");

    // ---- back-pressure: stop the refill ----
    @(negedge clk);
    cfg.refill_rate = 0;
    repeat (300) @(negedge clk);                 // spend what is left
    begin
      int c0;
      bit saw_full;
      for (int i = 0; i < 8; i++) put_desc(2048, 8'd1);
      saw_full = 0;
      repeat (100) @(negedge clk);
      c0 = consumed;
      repeat (400) begin
        @(negedge clk);
        saw_full |= q_full;
      end
      check(saw_full, "queue fills when the shaper holds the flow");
      check(consumed == c0 && written - consumed > 0, "head stops advancing (back-pressure)");
      cfg.refill_rate = 1024;
      while (exp_q.size() != 0 && cyc < 400000) @(negedge clk);
      check(exp_q.size() == 0 && consumed == written, "flow resumes after reconfiguration");
    end

    // ---- latency through the context in bypass mode ----
    @(negedge clk);
    cfg.mode = SHAPE_OFF;
    measure_lat = 1;
    for (int i = 0; i < 6; i++) begin
      put_desc(512, 8'd2);
      repeat (60) @(negedge clk);
    end
    check(exp_q.size() == 0, "bypass mode drains");
    $display("descriptor-to-payload-request latency: %0d cycles", max_lat);
    check(max_lat > 0 && max_lat <= 9, "latency within 9 cycles (36 ns)");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

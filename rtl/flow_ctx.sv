// flow_ctx: the per-flow context of the interface (function-call mode).
//
// One instance serves one flow. It does three things:
//  1. Proactive descriptor fetch. The VM driver writes descriptors into a ring
//     in its DMA buffer and rings no doorbell. Whenever its queue has room for
//     FETCH_MIN descriptors this block reads, in one DMA request, the slots
//     from its head pointer on: as
//     many as the queue can take, at most FETCH_MAX, never past the ring's
//     end. A slot whose phase bit equals the expected phase holds a new
//     descriptor: it is queued and the head advances (the expected phase
//     flips at each wrap). The first slot that is not new ends the batch; the
//     slots after it are ignored and read again later. If a fetch found
//     nothing new, the block waits POLL_GAP cycles before reading again.
//  2. Queueing and resizing. Fetched descriptors wait in the flow's queue; the
//     resizer turns each into segments of at most `seg_size` bytes.
//  3. Shaping. Each segment's payload fetch passes the flow's token bucket
//     before it is offered to the DMA engine, so the flow's DMA traffic follows
//     the pattern set in its registers, not the one the VM submits in.
// Because a fetch is issued only into free queue space, a flow whose shaper
// holds it back stops consuming its ring: the driver sees the ring fill up
// (the head pointer and the `q_full` flag report this), which is the
// back-pressure towards the VM.
//
// Interface: one DMA read-request channel (descriptor fetches have priority
// over payload fetches, at most one descriptor fetch in flight) and the
// descriptor response input, one descriptor per beat, always accepted.
// Timing: with tokens available, the payload fetch for a descriptor beat that
// arrives in cycle t is offered in cycle t+2 (queue write, resizer register).
// The tag's flow field is the constant FLOW_ID: the top routes responses by it.
//
// From the paper: descriptors fetched proactively instead of on doorbells,
// a queue and a rate limiter per flow, payload fetches after descriptor
// fetches, message resizing. This design's own choices: the phase-bit ring
// protocol, batched slot reads, the poll gap, shaping applied at the payload fetches (the queue
// bound then paces the descriptor fetches), and clearing `enable` rewinding
// the ring to slot 0, phase 1.
module flow_ctx
  import arcus_pkg::*;
#(
  parameter int unsigned FLOW_ID  = 0,
  parameter int unsigned Q_DEPTH  = 16,
  parameter int unsigned POLL_GAP = 64,
  parameter int unsigned FETCH_MAX = 16,    // most ring slots read by one fetch
  parameter int unsigned FETCH_MIN = Q_DEPTH / 2  // queue room needed to start one
) (
  input  logic              clk,
  input  logic              rst_n,
  input  flow_cfg_t         cfg,
  // DMA read request
  output logic              rd_valid,
  input  logic              rd_ready,
  output logic [ADDR_W-1:0] rd_addr,
  output logic [LEN_W-1:0]  rd_len,
  output dma_tag_t          rd_tag,
  // descriptor returned by a descriptor fetch
  input  logic              desc_valid,
  input  desc_t             desc_data,
  // status
  output logic [31:0]       head,
  output logic              q_full,       // queue too full to fetch more
  output logic              pay_fire,     // a payload fetch left this cycle
  output logic [LEN_W-1:0]  pay_len,
  output logic [TOK_W-1:0]  tokens
);

  typedef enum logic [1:0] {F_IDLE, F_REQ, F_WAIT, F_POLL} fetch_st_e;

  fetch_st_e                       st_q;
  logic [31:0]                     head_q;
  logic                            phase_q;
  logic [15:0]                     poll_q;
  logic [$clog2(Q_DEPTH+1)-1:0]    q_count;
  logic [31:0]                     ring_mask;
  logic [31:0]                     room, to_end, batch;
  logic [31:0]                     batch_q;     // slots requested by the fetch in flight
  logic [31:0]                     left_q;      // of those, beats still to come
  logic                            ok_q;        // every beat so far held a new descriptor
  logic                            got_q;       // at least one was taken

  desc_t  q_out;
  logic   q_out_valid, q_out_ready, q_in_ready;
  desc_t  seg;
  logic   seg_valid, seg_ready, seg_first, seg_last;
  logic   tb_out_valid, tb_out_ready;
  logic   desc_take;
  logic   dfetch;

  assign ring_mask = (32'd1 << cfg.ring_log2) - 32'd1;
  assign head      = head_q;
  // full for fetching: too little room to start another descriptor fetch
  assign q_full    = (room < FETCH_MIN) && (room != Q_DEPTH);
  assign dfetch    = (st_q == F_REQ);
  assign desc_take = desc_valid && (st_q == F_WAIT) && cfg.enable && ok_q &&
                     (desc_data.phase == phase_q);

  // a fetch reads as many slots as the queue can take, up to FETCH_MAX and
  // never past the end of the ring (so a phase flip can only follow the last)
  always_comb begin
    room   = Q_DEPTH - 32'(q_count);
    to_end = ring_mask - (head_q & ring_mask) + 32'd1;
    batch  = room;
    if (batch > FETCH_MAX) batch = FETCH_MAX;
    if (batch > to_end)    batch = to_end;
  end

  // ---------------- descriptor fetch state machine ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= F_IDLE;
      head_q  <= '0;
      phase_q <= 1'b1;
      poll_q  <= '0;
      batch_q <= '0;
      left_q  <= '0;
      ok_q    <= 1'b0;
      got_q   <= 1'b0;
    end else begin
      unique case (st_q)
        F_IDLE: begin
          if (!cfg.enable) begin
            head_q  <= '0;
            phase_q <= 1'b1;
          end else if (!q_full) begin
            st_q    <= F_REQ;
            batch_q <= batch;
          end
        end
        F_REQ: if (rd_ready) begin
          st_q   <= F_WAIT;
          left_q <= batch_q;
          ok_q   <= 1'b1;
          got_q  <= 1'b0;
        end
        F_WAIT: if (desc_valid) begin
          left_q <= left_q - 32'd1;
          if (desc_take) begin
            got_q <= 1'b1;
            if ((head_q & ring_mask) == ring_mask) begin
              head_q  <= '0;
              phase_q <= ~phase_q;
            end else begin
              head_q  <= head_q + 32'd1;
            end
          end else begin
            ok_q <= 1'b0;               // the rest of this batch is not new yet
          end
          if (left_q == 32'd1) begin
            // nothing new in the whole batch: wait before reading the slot again
            if (desc_take || got_q) st_q <= F_IDLE;
            else begin
              st_q   <= F_POLL;
              poll_q <= 16'(POLL_GAP);
            end
          end
        end
        F_POLL: begin
          if (poll_q <= 16'd1) st_q <= F_IDLE;
          poll_q <= poll_q - 16'd1;
        end
        default: st_q <= F_IDLE;
      endcase
    end
  end

  // ---------------- per-flow queue ----------------
  flow_queue #(.T(desc_t), .DEPTH(Q_DEPTH)) u_queue (
    .clk, .rst_n,
    .in_valid (desc_take),
    .in_data  (desc_data),
    .in_ready (q_in_ready),
    .out_valid(q_out_valid),
    .out_data (q_out),
    .out_ready(q_out_ready),
    .count    (q_count)
  );

  // ---------------- resizer ----------------
  msg_resizer u_resize (
    .clk, .rst_n,
    .seg_size (cfg.seg_size),
    .in_valid (q_out_valid),
    .in_desc  (q_out),
    .in_ready (q_out_ready),
    .out_valid(seg_valid),
    .out_desc (seg),
    .out_first(seg_first),
    .out_last (seg_last),
    .out_ready(seg_ready)
  );

  // ---------------- rate limiter ----------------
  logic refill_tick_unused;
  token_bucket #(.TW(TOK_W)) u_bucket (
    .clk, .rst_n,
    .mode       (cfg.mode),
    .bkt_size   (cfg.bkt_size),
    .refill_rate(cfg.refill_rate),
    .interval   (cfg.interval),
    .in_valid   (seg_valid),
    .in_cost    (TOK_W'(seg.len)),
    .in_ready   (seg_ready),
    .out_valid  (tb_out_valid),
    .out_ready  (tb_out_ready),
    .tokens     (tokens),
    .refill_tick(refill_tick_unused)
  );

  // ---------------- request mux: descriptor fetch first ----------------
  assign tb_out_ready = rd_ready && !dfetch;

  always_comb begin
    rd_valid = dfetch || tb_out_valid;
    rd_tag   = '0;
    rd_tag.flow = FLOW_IW'(FLOW_ID);
    if (dfetch) begin
      rd_addr        = cfg.ring_base + (ADDR_W'(head_q & ring_mask) << $clog2(BEAT_B));
      rd_len         = LEN_W'(batch_q) << $clog2(BEAT_B);
      rd_tag.is_desc = 1'b1;
    end else begin
      rd_addr         = seg.addr;
      rd_len          = seg.len;
      rd_tag.acc_type = seg.acc_type;
      rd_tag.seg_last = seg_last;
    end
  end

  assign pay_fire = tb_out_valid && tb_out_ready;
  assign pay_len  = seg.len;

  a_queue_room: assert property (@(posedge clk) disable iff (!rst_n)
    desc_take |-> q_in_ready);

endmodule

// token_bucket: the per-flow rate limiter of the traffic-shaping mechanism.
//
// A flow's requests pass through this block on a valid/ready channel. The block
// holds a token count. A hardware timer counts cycles and, once every
// `interval` cycles, adds `refill_rate` tokens; the count never exceeds
// `bkt_size`, so `bkt_size` is the largest burst the flow may send at once. A
// request passes only while the bucket holds at least its cost, and passing it
// removes that many tokens. In Gbps mode a request costs its byte length, in
// IOPS mode it costs one token, and in bypass mode nothing is limited.
//
// Long-run rate: min(refill_rate, bkt_size) tokens per `interval` cycles. With
// one token per byte at 250 MHz this reproduces the paper's parameter table,
// e.g. 4,096 tokens every 800 cycles is 1.28 GB/s, about 10 Gbps; in the 1 Gbps
// row the 512-token bucket caps each 1,024-token refill at 512.
//
// Interface: in_valid/in_cost/in_ready upstream, out_valid/out_ready
// downstream; the payload travels beside this block and is not seen by it.
// Timing: the pass decision is combinational (zero added cycles); tokens spent
// in a cycle and a refill in the same cycle are both applied at the clock edge.
// Parameters may change at any time; the new values apply from the next cycle
// and the token count is clamped to a smaller bucket at once.
//
// From the paper: the algorithm, the two registers Bkt_Size and Refill_Rate,
// the Interval timer and the Gbps/IOPS modes. This design's own choices: the
// bypass mode, the token count starting empty after reset, a request passing
// only when its whole cost is present (so a message larger than the bucket
// must first be split by the resizer) and interval values 0 and 1 both meaning
// a refill every cycle.
module token_bucket
  import arcus_pkg::*;
#(
  parameter int unsigned TW = TOK_W     // token count and register width
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  shape_mode_e       mode,
  input  logic [TW-1:0]     bkt_size,
  input  logic [TW-1:0]     refill_rate,
  input  logic [15:0]       interval,
  // request channel
  input  logic              in_valid,
  input  logic [TW-1:0]     in_cost,      // byte length of the request
  output logic              in_ready,
  output logic              out_valid,
  input  logic              out_ready,
  // observation
  output logic [TW-1:0]     tokens,
  output logic              refill_tick
);

  logic [15:0]   timer_q;
  logic [TW-1:0] cost;
  logic          allow;
  logic          spend;
  logic [TW:0]   after_spend;
  logic [TW+1:0] after_refill;

  // cycle timer: one refill every `interval` cycles
  assign refill_tick = (timer_q + 16'd1 >= interval);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           timer_q <= '0;
    else if (refill_tick) timer_q <= '0;
    else                  timer_q <= timer_q + 16'd1;
  end

  always_comb begin
    cost      = (mode == SHAPE_IOPS) ? TW'(1) : in_cost;
    allow     = (mode == SHAPE_OFF) || (tokens >= cost);
    in_ready  = out_ready && allow;
    out_valid = in_valid && allow;
    spend     = in_valid && in_ready && (mode != SHAPE_OFF);
  end

  always_comb begin
    after_spend  = {1'b0, tokens} - (spend ? {1'b0, cost} : '0);
    after_refill = {1'b0, after_spend} + (refill_tick ? {2'b00, refill_rate} : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tokens <= '0;
    else if (after_refill > {2'b00, bkt_size}) tokens <= bkt_size;
    else tokens <= after_refill[TW-1:0];
  end

  // tokens are never spent beyond what the bucket holds
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    spend |-> tokens >= cost);

endmodule

// msg_resizer: splits one accelerator message into bounded-size segments.
//
// Traffic shaping changes not only the rate of a flow but also the size of its
// messages. This block takes one descriptor at a time and emits it as a train of
// segments, each at most `seg_size` bytes long. Every segment carries a copy of
// the descriptor's header (accelerator type, pattern tag, cookie) with its own
// address and length, so a downstream consumer sees a sequence of ordinary,
// smaller messages. `seg_size` of 0, or one not smaller than the message, passes
// the message through unchanged. A message of length 0 still yields one
// segment of length 0.
//
// Interface: in_* is a valid/ready channel of desc_t; out_* is a valid/ready
// channel of desc_t plus `out_first` and `out_last`, which mark the first and
// last segment of a message. Timing: one segment per cycle, no bubble between
// messages; the first segment appears the cycle after the descriptor is taken.
// `seg_size` is sampled when a message is taken and held for all its segments.
//
// From the paper: splitting payloads and duplicating the header. This design's
// own choices: the segment-size register, one segment per cycle and the
// first/last markers.
module msg_resizer
  import arcus_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LEN_W-1:0]  seg_size,
  input  logic              in_valid,
  input  desc_t             in_desc,
  output logic              in_ready,
  output logic              out_valid,
  output desc_t             out_desc,
  output logic              out_first,
  output logic              out_last,
  input  logic              out_ready
);

  desc_t             cur_q;      // header and remaining address/length
  logic              busy_q;
  logic              first_q;
  logic [LEN_W-1:0]  seg_q;      // sampled segment size
  logic              whole;      // remaining part fits in one segment

  assign whole = (seg_q == '0) || (cur_q.len <= seg_q);

  always_comb begin
    out_valid     = busy_q;
    out_desc      = cur_q;
    out_desc.len  = whole ? cur_q.len : seg_q;
    out_first     = first_q;
    out_last      = whole;
    in_ready      = !busy_q || (out_ready && whole);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      first_q <= 1'b0;
      seg_q   <= '0;
      cur_q   <= '0;
    end else begin
      if (in_valid && in_ready) begin
        busy_q  <= 1'b1;
        first_q <= 1'b1;
        seg_q   <= seg_size;
        cur_q   <= in_desc;
      end else if (busy_q && out_ready) begin
        if (whole) begin
          busy_q <= 1'b0;
        end else begin
          first_q     <= 1'b0;
          cur_q.addr  <= cur_q.addr + ADDR_W'(seg_q);
          cur_q.len   <= cur_q.len - seg_q;
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_desc));

endmodule

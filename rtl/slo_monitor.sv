// slo_monitor: per-flow hardware performance counters for SLO monitoring.
//
// The control-plane software checks each flow against its SLO by reading
// counters that the hardware keeps. For every flow this block counts the
// payload bytes and the messages (segments) that the flow's shaper released
// to the DMA engine, and the completions written back. Besides the running
// totals it keeps a windowed sample: a global timer closes a window every
// `window` cycles; at that edge the bytes and messages of the window just
// ended are latched into `win_bytes`/`win_msgs` and the window counters
// restart. Software reading the windowed values sees the flow's throughput
// over a fixed, hardware-timed period, free of CPU timing jitter.
//
// Interface: per-flow event strobes with byte lengths; `cnt[f]` outputs.
// Timing: counters update at the clock edge after an event; an event in the
// window's last cycle is counted in that window. `window` of 0 disables
// windowing (the latched values hold).
//
// From the paper: an SLO monitor with hardware performance counters per flow,
// read by the runtime. What is counted and the fixed window are this design's
// own choices.
module slo_monitor
  import arcus_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       window,
  input  logic [N-1:0]      pay_fire,
  input  logic [LEN_W-1:0]  pay_len [N],
  input  logic [N-1:0]      cmpl_fire,
  output flow_cnt_t         cnt [N],
  output logic              win_tick
);

  logic [31:0] timer_q;
  logic [31:0] acc_bytes_q [N];
  logic [31:0] acc_msgs_q  [N];

  assign win_tick = (window != '0) && (timer_q + 32'd1 >= window);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           timer_q <= '0;
    else if (win_tick || window == '0)    timer_q <= '0;
    else                                  timer_q <= timer_q + 32'd1;
  end

  for (genvar f = 0; f < N; f++) begin : g_flow
    logic [31:0] add_b;
    logic [31:0] add_m;
    assign add_b = pay_fire[f] ? 32'(pay_len[f]) : 32'd0;
    assign add_m = pay_fire[f] ? 32'd1 : 32'd0;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt[f]         <= '0;
        acc_bytes_q[f] <= '0;
        acc_msgs_q[f]  <= '0;
      end else begin
        cnt[f].bytes <= cnt[f].bytes + 64'(add_b);
        cnt[f].msgs  <= cnt[f].msgs  + 64'(add_m);
        if (cmpl_fire[f]) cnt[f].cmpls <= cnt[f].cmpls + 32'd1;
        if (win_tick) begin
          cnt[f].win_bytes <= acc_bytes_q[f] + add_b;
          cnt[f].win_msgs  <= acc_msgs_q[f]  + add_m;
          acc_bytes_q[f]   <= '0;
          acc_msgs_q[f]    <= '0;
        end else begin
          acc_bytes_q[f]   <= acc_bytes_q[f] + add_b;
          acc_msgs_q[f]    <= acc_msgs_q[f]  + add_m;
        end
      end
    end
  end

endmodule

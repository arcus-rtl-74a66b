// cmpl_writer: writes accelerator results and completions back to the VMs.
//
// In function-call mode the result of an accelerator invocation returns to a
// memory region the VM driver has set aside, and the driver polls it. Each
// flow's completion region is a ring of 2**cmpl_log2 slots of one datapath
// beat (32 bytes). Every result beat the accelerator returns for flow f is
// written by DMA into the next slot of f's ring; after the last beat of a
// message, one more slot receives a completion record (cmpl_t: valid bit,
// flow, per-flow sequence number, number of result beats). The driver polls
// for the record, reads the beats before it, and learns from the sequence
// number whether the ring has lapped its read position.
//
// Interface: the accelerator result stream (valid/ready, data, flow, last) in;
// one DMA write channel (valid/ready, address, one beat of data) out;
// `cmpl_fire` pulses for the flow whose completion record was accepted.
// Timing: one DMA write per cycle; the record costs one extra cycle, during
// which the result stream is held.
//
// From the paper: the completion is a DMA write to a dedicated memory region
// that the driver polls. The slot ring, the record layout and writing the
// result in the same ring are this design's own choices.
module cmpl_writer
  import arcus_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  flow_cfg_t            cfg [N],
  // accelerator results
  input  logic                 res_valid,
  output logic                 res_ready,
  input  logic [DATA_W-1:0]    res_data,
  input  logic [FLOW_IW-1:0]   res_flow,
  input  logic                 res_last,
  // DMA write
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [DATA_W-1:0]    wr_data,
  // per-flow completion strobe
  output logic [N-1:0]         cmpl_fire
);

  localparam int unsigned FW = $clog2(N > 1 ? N : 2);

  logic [31:0]   wptr_q  [N];
  logic [31:0]   seq_q   [N];
  logic [31:0]   beats_q [N];
  logic          rec_q;          // completion record pending
  logic [FW-1:0] rec_flow_q;
  logic [FW-1:0] fsel;
  cmpl_t         rec;

  assign fsel = rec_q ? rec_flow_q : FW'(res_flow);

  function automatic logic [ADDR_W-1:0] slot_addr(input flow_cfg_t c, input logic [31:0] p);
    logic [31:0] mask;
    mask = (32'd1 << c.cmpl_log2) - 32'd1;
    return c.cmpl_base + (ADDR_W'(p & mask) << $clog2(BEAT_B));
  endfunction

  always_comb begin
    rec        = '0;
    rec.valid  = 1'b1;
    rec.flow   = 8'(rec_flow_q);
    rec.seq    = seq_q[rec_flow_q];
    rec.beats  = beats_q[rec_flow_q];

    res_ready  = !rec_q && wr_ready;
    wr_valid   = rec_q || res_valid;
    wr_addr    = slot_addr(cfg[fsel], wptr_q[fsel]);
    wr_data    = rec_q ? DATA_W'(rec) : res_data;
    cmpl_fire  = '0;
    if (rec_q && wr_ready) cmpl_fire[rec_flow_q] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        wptr_q[i]  <= '0;
        seq_q[i]   <= '0;
        beats_q[i] <= '0;
      end
      rec_q      <= 1'b0;
      rec_flow_q <= '0;
    end else if (rec_q) begin
      if (wr_ready) begin
        rec_q               <= 1'b0;
        wptr_q[rec_flow_q]  <= wptr_q[rec_flow_q] + 32'd1;
        seq_q[rec_flow_q]   <= seq_q[rec_flow_q] + 32'd1;
        beats_q[rec_flow_q] <= '0;
      end
    end else if (res_valid && res_ready) begin
      wptr_q[fsel]  <= wptr_q[fsel] + 32'd1;
      beats_q[fsel] <= beats_q[fsel] + 32'd1;
      if (res_last) begin
        rec_q      <= 1'b1;
        rec_flow_q <= fsel;
      end
    end
  end

  a_flow_range: assert property (@(posedge clk) disable iff (!rst_n)
    res_valid |-> 32'(res_flow) < N);

endmodule

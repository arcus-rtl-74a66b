// arcus_top: the Arcus accelerator interface, function-call mode.
//
// The interface stands between the VMs' DMA buffers and a set of shared
// accelerators and turns whatever traffic the VMs submit into the traffic
// pattern the control plane has set for each flow. Per flow it holds a context
// (flow_ctx) that proactively fetches descriptors from the flow's ring, queues
// them, resizes them and releases their payload fetches through a token
// bucket. A round-robin SR-IOV arbiter (rr_arbiter) places the flows' read
// requests on the single DMA read-request channel. DMA responses are routed by
// their tag: descriptor beats back to their flow, payload beats out on the
// accelerator stream with the flow, accelerator type and message boundaries.
// Accelerator results return on a second stream and the completion writer
// (cmpl_writer) puts them and a completion record into the flow's completion
// ring. The register file (param_regs) exposes every per-flow parameter and
// the SLO monitor's counters (slo_monitor) over MMIO.
//
// Ports: MMIO; the DMA engine's read request, read response and write
// channels (the DMA engine, PCIe core and accelerators are outside); the
// accelerator request and result streams; and per-flow queue-full flags.
// All channels are valid/ready. DMA read responses must return each request's
// beats contiguously with its tag; `rsp_last` marks a request's last beat.
// Timing: one request, one response beat and one write beat per cycle at most;
// a descriptor returned by DMA becomes a payload request two cycles later
// when tokens are available.
// Payload beats are not buffered here: acc_tx_data, acc_tx_flow, acc_tx_type
// and acc_tx_seg_last are the DMA response's data and tag fields passed
// through, and rsp_ready follows acc_tx_ready for payload beats.
//
// From the paper: per-flow queues with a rate limiter each, a round-robin
// arbiter in front of the DMA engine, proactive descriptor fetch followed by
// payload fetch and a completion write, MMIO registers and performance
// counters, a 256-bit datapath. The default of 16 flows is the largest flow
// count the paper evaluates. The inline NIC and peer-to-peer paths are not
// built here: this top serves the function-call path only.
module arcus_top
  import arcus_pkg::*;
#(
  parameter int unsigned N_FLOWS  = 16,
  parameter int unsigned Q_DEPTH  = 16,
  parameter int unsigned POLL_GAP = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // MMIO
  input  logic                 mmio_valid,
  input  logic                 mmio_we,
  input  logic [15:0]          mmio_addr,
  input  logic [31:0]          mmio_wdata,
  output logic                 mmio_rvalid,
  output logic [31:0]          mmio_rdata,
  // DMA read request
  output logic                 rd_valid,
  input  logic                 rd_ready,
  output logic [ADDR_W-1:0]    rd_addr,
  output logic [LEN_W-1:0]     rd_len,
  output dma_tag_t             rd_tag,
  // DMA read response
  input  logic                 rsp_valid,
  output logic                 rsp_ready,
  input  logic [DATA_W-1:0]    rsp_data,
  input  dma_tag_t             rsp_tag,
  input  logic                 rsp_last,
  // DMA write
  output logic                 wr_valid,
  input  logic                 wr_ready,
  output logic [ADDR_W-1:0]    wr_addr,
  output logic [DATA_W-1:0]    wr_data,
  // to the accelerators
  output logic                 acc_tx_valid,
  input  logic                 acc_tx_ready,
  output logic [DATA_W-1:0]    acc_tx_data,
  output logic [FLOW_IW-1:0]   acc_tx_flow,
  output logic [7:0]           acc_tx_type,
  output logic                 acc_tx_seg_last,  // last beat of a segment
  output logic                 acc_tx_last,      // last beat of a message
  // from the accelerators
  input  logic                 acc_rx_valid,
  output logic                 acc_rx_ready,
  input  logic [DATA_W-1:0]    acc_rx_data,
  input  logic [FLOW_IW-1:0]   acc_rx_flow,
  input  logic                 acc_rx_last,
  // back-pressure status
  output logic [N_FLOWS-1:0]   q_full
);

  localparam int unsigned FW = $clog2(N_FLOWS > 1 ? N_FLOWS : 2);

  flow_cfg_t          cfg      [N_FLOWS];
  flow_cnt_t          cnt      [N_FLOWS];
  logic [31:0]        window;
  logic [31:0]        head     [N_FLOWS];
  logic [TOK_W-1:0]   tokens   [N_FLOWS];
  logic [LEN_W-1:0]   pay_len  [N_FLOWS];
  logic [N_FLOWS-1:0] pay_fire;
  logic [N_FLOWS-1:0] cmpl_fire;

  logic [N_FLOWS-1:0] c_rd_valid, c_rd_ready;
  logic [ADDR_W-1:0]  c_rd_addr [N_FLOWS];
  logic [LEN_W-1:0]   c_rd_len  [N_FLOWS];
  dma_tag_t           c_rd_tag  [N_FLOWS];
  logic [N_FLOWS-1:0] c_desc_valid;

  logic [N_FLOWS-1:0] gnt;
  logic [FW-1:0]      gnt_idx;
  logic               gnt_valid;
  logic               win_tick_unused;

  // ---------------- per-flow contexts ----------------
  for (genvar f = 0; f < N_FLOWS; f++) begin : g_flow
    flow_ctx #(.FLOW_ID(f), .Q_DEPTH(Q_DEPTH), .POLL_GAP(POLL_GAP)) u_ctx (
      .clk, .rst_n,
      .cfg       (cfg[f]),
      .rd_valid  (c_rd_valid[f]),
      .rd_ready  (c_rd_ready[f]),
      .rd_addr   (c_rd_addr[f]),
      .rd_len    (c_rd_len[f]),
      .rd_tag    (c_rd_tag[f]),
      .desc_valid(c_desc_valid[f]),
      .desc_data (desc_t'(rsp_data)),
      .head      (head[f]),
      .q_full    (q_full[f]),
      .pay_fire  (pay_fire[f]),
      .pay_len   (pay_len[f]),
      .tokens    (tokens[f])
    );
    assign c_rd_ready[f]   = gnt[f] && rd_ready;
    assign c_desc_valid[f] = rsp_valid && rsp_tag.is_desc && (32'(rsp_tag.flow) == f);
  end

  // ---------------- SR-IOV round-robin arbiter ----------------
  rr_arbiter #(.N(N_FLOWS)) u_arb (
    .clk, .rst_n,
    .req      (c_rd_valid),
    .advance  (rd_ready),
    .gnt      (gnt),
    .gnt_idx  (gnt_idx),
    .gnt_valid(gnt_valid)
  );

  assign rd_valid = gnt_valid;
  assign rd_addr  = c_rd_addr[gnt_idx];
  assign rd_len   = c_rd_len[gnt_idx];
  assign rd_tag   = c_rd_tag[gnt_idx];

  // ---------------- DMA response routing ----------------
  always_comb begin
    acc_tx_valid    = rsp_valid && !rsp_tag.is_desc;
    acc_tx_data     = rsp_data;
    acc_tx_flow     = rsp_tag.flow;
    acc_tx_type     = rsp_tag.acc_type;
    acc_tx_seg_last = rsp_last;
    acc_tx_last     = rsp_last && rsp_tag.seg_last;
    rsp_ready       = rsp_tag.is_desc ? 1'b1 : acc_tx_ready;
  end

  // ---------------- completions ----------------
  cmpl_writer #(.N(N_FLOWS)) u_cmpl (
    .clk, .rst_n,
    .cfg      (cfg),
    .res_valid(acc_rx_valid),
    .res_ready(acc_rx_ready),
    .res_data (acc_rx_data),
    .res_flow (acc_rx_flow),
    .res_last (acc_rx_last),
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .cmpl_fire(cmpl_fire)
  );

  // ---------------- SLO monitor and registers ----------------
  slo_monitor #(.N(N_FLOWS)) u_mon (
    .clk, .rst_n,
    .window   (window),
    .pay_fire (pay_fire),
    .pay_len  (pay_len),
    .cmpl_fire(cmpl_fire),
    .cnt      (cnt),
    .win_tick (win_tick_unused)
  );

  param_regs #(.N(N_FLOWS)) u_regs (
    .clk, .rst_n,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rvalid, .mmio_rdata,
    .cfg    (cfg),
    .window (window),
    .cnt    (cnt),
    .head   (head),
    .q_full (q_full),
    .tokens (tokens)
  );

  a_rsp_flow: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid |-> 32'(rsp_tag.flow) < N_FLOWS);

endmodule

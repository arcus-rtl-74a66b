// param_regs: the MMIO register file of the interface.
//
// The control-plane software programs each flow and reads its counters through
// a memory-mapped window (a PCIe BAR in the prototype). Flow f owns 256 bytes
// at f * 'h100: its enable bit and shaping mode, the token-bucket parameters
// Bkt_Size, Refill_Rate and Interval, the resize limit, the descriptor ring
// and completion region addresses and sizes, and read-only views of the SLO
// monitor counters, the ring head, the queue-full flag and the token count.
// Global registers sit at 'h8000 (monitor window, number of flows). The map
// is listed in arcus_pkg. Writes reach the datapath the next cycle and do not
// stop it, so parameters can be changed while a flow runs.
//
// Interface: a simple MMIO port: `mmio_valid` with `mmio_we`, a byte address
// and 32-bit data. A read returns `mmio_rdata` with `mmio_rvalid` one cycle
// later. Unmapped addresses read 0 and ignore writes. Reset clears every
// register, so all flows start disabled, with an empty bucket and in bypass
// mode, and the window is 0 (off).
//
// From the paper: the shaping parameters held in separate registers exposed
// as BAR addresses and read/written by MMIO at run time, plus readable
// performance counters. The address map and reset values are this design's.
module param_regs
  import arcus_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // MMIO
  input  logic              mmio_valid,
  input  logic              mmio_we,
  input  logic [15:0]       mmio_addr,
  input  logic [31:0]       mmio_wdata,
  output logic              mmio_rvalid,
  output logic [31:0]       mmio_rdata,
  // to the datapath
  output flow_cfg_t         cfg [N],
  output logic [31:0]       window,
  // status from the datapath
  input  flow_cnt_t         cnt [N],
  input  logic [31:0]       head [N],
  input  logic [N-1:0]      q_full,
  input  logic [TOK_W-1:0]  tokens [N]
);

  localparam int unsigned FW = $clog2(N > 1 ? N : 2);

  logic          is_global;
  logic [7:0]    flow_sel;
  logic [7:0]    off;
  logic          flow_hit;
  logic [FW-1:0] f;

  assign is_global = mmio_addr[15];
  assign flow_sel  = mmio_addr[15:8];
  assign off       = mmio_addr[7:0];
  assign flow_hit  = !is_global && (32'(flow_sel) < N);
  assign f         = FW'(flow_sel);

  // ---------------- writes ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) cfg[i] <= '0;
      window <= '0;
    end else if (mmio_valid && mmio_we) begin
      if (mmio_addr == REG_WINDOW) window <= mmio_wdata;
      if (flow_hit) begin
        unique case (off)
          REG_CTRL: begin
            cfg[f].enable <= mmio_wdata[0];
            cfg[f].mode   <= shape_mode_e'(mmio_wdata[2:1]);
          end
          REG_BKT_SIZE:  cfg[f].bkt_size          <= mmio_wdata;
          REG_REFILL:    cfg[f].refill_rate       <= mmio_wdata;
          REG_INTERVAL:  cfg[f].interval          <= mmio_wdata[15:0];
          REG_SEG_SIZE:  cfg[f].seg_size          <= mmio_wdata;
          REG_RING_LO:   cfg[f].ring_base[31:0]   <= mmio_wdata;
          REG_RING_HI:   cfg[f].ring_base[63:32]  <= mmio_wdata;
          REG_RING_LOG2: cfg[f].ring_log2         <= mmio_wdata[4:0];
          REG_CMPL_LO:   cfg[f].cmpl_base[31:0]   <= mmio_wdata;
          REG_CMPL_HI:   cfg[f].cmpl_base[63:32]  <= mmio_wdata;
          REG_CMPL_LOG2: cfg[f].cmpl_log2         <= mmio_wdata[4:0];
          default: ;
        endcase
      end
    end
  end

  // ---------------- reads ----------------
  logic [31:0] rd;
  always_comb begin
    rd = '0;
    if (mmio_addr == REG_WINDOW)      rd = window;
    else if (mmio_addr == REG_NFLOWS) rd = 32'(N);
    else if (flow_hit) begin
      unique case (off)
        REG_CTRL:      rd = {29'd0, cfg[f].mode, cfg[f].enable};
        REG_BKT_SIZE:  rd = cfg[f].bkt_size;
        REG_REFILL:    rd = cfg[f].refill_rate;
        REG_INTERVAL:  rd = {16'd0, cfg[f].interval};
        REG_SEG_SIZE:  rd = cfg[f].seg_size;
        REG_RING_LO:   rd = cfg[f].ring_base[31:0];
        REG_RING_HI:   rd = cfg[f].ring_base[63:32];
        REG_RING_LOG2: rd = {27'd0, cfg[f].ring_log2};
        REG_CMPL_LO:   rd = cfg[f].cmpl_base[31:0];
        REG_CMPL_HI:   rd = cfg[f].cmpl_base[63:32];
        REG_CMPL_LOG2: rd = {27'd0, cfg[f].cmpl_log2};
        REG_BYTES_LO:  rd = cnt[f].bytes[31:0];
        REG_BYTES_HI:  rd = cnt[f].bytes[63:32];
        REG_MSGS_LO:   rd = cnt[f].msgs[31:0];
        REG_MSGS_HI:   rd = cnt[f].msgs[63:32];
        REG_WIN_BYTES: rd = cnt[f].win_bytes;
        REG_WIN_MSGS:  rd = cnt[f].win_msgs;
        REG_CMPLS:     rd = cnt[f].cmpls;
        REG_HEAD:      rd = head[f];
        REG_STATUS:    rd = {31'd0, q_full[f]};
        REG_TOKENS:    rd = 32'(tokens[f]);
        default:       rd = '0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mmio_rvalid <= 1'b0;
      mmio_rdata  <= '0;
    end else begin
      mmio_rvalid <= mmio_valid && !mmio_we;
      if (mmio_valid && !mmio_we) mmio_rdata <= rd;
    end
  end

endmodule

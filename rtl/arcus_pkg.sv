// arcus_pkg: shared types and constants of the Arcus traffic-shaping interface.
//
// The interface sits between VM-owned DMA rings and the accelerators. Each flow
// owns a descriptor ring in host memory, a completion region, a token-bucket
// rate limiter and a hardware queue. This package holds what those pieces share:
// the 256-bit datapath width (the width of the FPGA prototype), the descriptor
// and completion-record layouts, the DMA tag, the shaping mode and the per-flow
// configuration bundle that the register file drives into the datapath.
//
// The datapath width follows the paper. The descriptor layout, the tag and the
// register bundle are this design's own choices: the paper only says that a
// descriptor carries the accelerator type, the traffic pattern and a pointer to
// the DMA buffer.
package arcus_pkg;

  localparam int unsigned DATA_W   = 256;          // datapath width in bits
  localparam int unsigned BEAT_B   = DATA_W / 8;   // bytes per datapath beat (32)
  localparam int unsigned ADDR_W   = 64;           // host DMA address width
  localparam int unsigned LEN_W    = 32;           // byte length of a message
  localparam int unsigned TOK_W    = 32;           // token counters and shaping registers
  localparam int unsigned MAX_FLOWS = 64;          // flow index space of the tag
  localparam int unsigned FLOW_IW  = $clog2(MAX_FLOWS);

  // Shaping mode of one flow's token bucket.
  typedef enum logic [1:0] {
    SHAPE_OFF  = 2'd0,   // bypass: no rate limit
    SHAPE_GBPS = 2'd1,   // one token per byte
    SHAPE_IOPS = 2'd2    // one token per message
  } shape_mode_e;

  // One descriptor, one datapath beat, as the VM driver writes it into its ring.
  // The phase bit marks a slot as written in the current lap of the ring: the
  // interface polls the slot and accepts it when the bit equals its expected
  // phase, which flips at every wrap.
  typedef struct packed {
    logic                phase;      // [255]
    logic [6:0]          rsvd0;
    logic [7:0]          acc_type;   // accelerator selector
    logic [7:0]          pattern;    // VM-declared traffic pattern tag (informational)
    logic [7:0]          rsvd1;
    logic [31:0]         cookie;     // opaque to the hardware, returned in the completion
    logic [95:0]         rsvd2;
    logic [LEN_W-1:0]    len;        // payload bytes
    logic [ADDR_W-1:0]   addr;       // payload address in the VM DMA buffer
  } desc_t;

  // Completion record written after the last result beat of a message.
  typedef struct packed {
    logic                valid;      // [255] always 1 in a written record
    logic [6:0]          rsvd0;
    logic [7:0]          flow;
    logic [15:0]         rsvd1;
    logic [31:0]         seq;        // per-flow completion sequence number
    logic [31:0]         beats;      // result beats written before this record
    logic [159:0]        rsvd2;
  } cmpl_t;

  // Tag carried by a DMA read request and returned with its response beats.
  typedef struct packed {
    logic                is_desc;    // 1: descriptor fetch, 0: payload fetch
    logic [FLOW_IW-1:0]  flow;
    logic [7:0]          acc_type;
    logic                seg_last;   // last segment of the original message
  } dma_tag_t;

  // Per-flow configuration as programmed over MMIO.
  typedef struct packed {
    logic                enable;
    shape_mode_e         mode;
    logic [TOK_W-1:0]    bkt_size;     // Bkt_Size (tokens)
    logic [TOK_W-1:0]    refill_rate;  // Refill_Rate (tokens per interval)
    logic [15:0]         interval;     // Interval (cycles)
    logic [LEN_W-1:0]    seg_size;     // resize limit in bytes, 0 = no splitting
    logic [ADDR_W-1:0]   ring_base;    // descriptor ring base address
    logic [4:0]          ring_log2;    // ring holds 2**ring_log2 descriptors
    logic [ADDR_W-1:0]   cmpl_base;    // completion region base address
    logic [4:0]          cmpl_log2;    // completion region holds 2**cmpl_log2 beats
  } flow_cfg_t;

  // Per-flow counters reported by the SLO monitor.
  typedef struct packed {
    logic [63:0]         bytes;        // payload bytes released by the shaper
    logic [63:0]         msgs;         // segments released by the shaper
    logic [31:0]         win_bytes;    // bytes in the last completed window
    logic [31:0]         win_msgs;     // segments in the last completed window
    logic [31:0]         cmpls;        // completions written
  } flow_cnt_t;

  // MMIO register map (byte addresses, 32-bit registers). Flow f occupies
  // f * 'h100 .. f * 'h100 + 'hFF; global registers start at REG_GLOBAL.
  localparam logic [7:0] REG_CTRL       = 8'h00;  // [0] enable, [2:1] mode
  localparam logic [7:0] REG_BKT_SIZE   = 8'h04;
  localparam logic [7:0] REG_REFILL     = 8'h08;
  localparam logic [7:0] REG_INTERVAL   = 8'h0C;
  localparam logic [7:0] REG_SEG_SIZE   = 8'h10;
  localparam logic [7:0] REG_RING_LO    = 8'h14;
  localparam logic [7:0] REG_RING_HI    = 8'h18;
  localparam logic [7:0] REG_RING_LOG2  = 8'h1C;
  localparam logic [7:0] REG_CMPL_LO    = 8'h20;
  localparam logic [7:0] REG_CMPL_HI    = 8'h24;
  localparam logic [7:0] REG_CMPL_LOG2  = 8'h28;
  localparam logic [7:0] REG_BYTES_LO   = 8'h40;  // read-only from here on
  localparam logic [7:0] REG_BYTES_HI   = 8'h44;
  localparam logic [7:0] REG_MSGS_LO    = 8'h48;
  localparam logic [7:0] REG_MSGS_HI    = 8'h4C;
  localparam logic [7:0] REG_WIN_BYTES  = 8'h50;
  localparam logic [7:0] REG_WIN_MSGS   = 8'h54;
  localparam logic [7:0] REG_CMPLS      = 8'h58;
  localparam logic [7:0] REG_HEAD       = 8'h5C;
  localparam logic [7:0] REG_STATUS     = 8'h60;  // [0] queue too full to fetch
  localparam logic [7:0] REG_TOKENS     = 8'h64;
  localparam logic [15:0] REG_GLOBAL    = 16'h8000;
  localparam logic [15:0] REG_WINDOW    = 16'h8000; // SLO monitor window (cycles)
  localparam logic [15:0] REG_NFLOWS    = 16'h8004; // read-only: number of flows

endpackage

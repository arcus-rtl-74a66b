// host_dma_model: behavioural model of host memory behind the FPGA's DMA engine.
//
// Not synthesizable; used by testbenches only. It stands in for the DMA
// engine, the PCIe link and host DRAM. Memory is sparse, one 256-bit beat per
// 32-byte address; a beat never written reads as a pattern derived from its
// address (pattern()). Read requests are queued and answered in order after
// LAT cycles, one beat per cycle, ceil(len/32) beats with the request's tag
// and `rsp_last` on the final beat (0 bytes still return one beat). Writes are
// stored and counted. `stall_pct` makes the request channel refuse requests at
// random. Testbenches place descriptors with poke() and inspect with peek().
module host_dma_model
  import arcus_pkg::*;
#(
  parameter int LAT = 20
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 rd_valid,
  output logic                 rd_ready,
  input  logic [ADDR_W-1:0]    rd_addr,
  input  logic [LEN_W-1:0]     rd_len,
  input  dma_tag_t             rd_tag,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output logic [DATA_W-1:0]    rsp_data,
  output dma_tag_t             rsp_tag,
  output logic                 rsp_last,
  input  logic                 wr_valid,
  output logic                 wr_ready,
  input  logic [ADDR_W-1:0]    wr_addr,
  input  logic [DATA_W-1:0]    wr_data
);

  logic [DATA_W-1:0] mem [logic [ADDR_W-1:0]];
  int stall_pct = 0;
  longint n_writes = 0;
  longint n_req = 0;
  longint n_rsp_beats = 0;
  longint cyc = 0;

  typedef struct {
    logic [ADDR_W-1:0] addr;
    int                beats;
    dma_tag_t          tag;
    longint            due;
  } req_t;
  req_t pend[$];
  int   beat_i = 0;

  initial begin
    rsp_valid = 1'b0; rsp_data = '0; rsp_tag = '0; rsp_last = 1'b0; rd_ready = 1'b1;
  end

  function automatic logic [DATA_W-1:0] pattern(input logic [ADDR_W-1:0] a);
    logic [31:0] w;
    w = a[36:5] ^ 32'h5A5A_0000;
    return {w, ~w, w + 32'd1, w ^ 32'hFFFF, w, ~w, w + 32'd7, w ^ 32'h1234};
  endfunction

  function automatic void poke(input logic [ADDR_W-1:0] a, input logic [DATA_W-1:0] d);
    mem[a >> 5] = d;
  endfunction

  function automatic logic [DATA_W-1:0] peek(input logic [ADDR_W-1:0] a);
    if (mem.exists(a >> 5)) return mem[a >> 5];
    return pattern(a);
  endfunction

  assign wr_ready = 1'b1;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (rd_valid && rd_ready) begin
        req_t r;
        r.addr  = rd_addr;
        r.beats = (rd_len == 0) ? 1 : int'((rd_len + 31) / 32);
        r.tag   = rd_tag;
        r.due   = cyc + LAT;
        pend.push_back(r);
        n_req++;
      end
      if (rsp_valid && rsp_ready) begin
        n_rsp_beats++;
        if (rsp_last) begin
          void'(pend.pop_front());
          beat_i = 0;
        end else beat_i++;
      end
      if (wr_valid && wr_ready) begin
        mem[wr_addr >> 5] = wr_data;
        n_writes++;
      end
    end
    rd_ready <= ($urandom_range(0, 99) >= stall_pct);
    // present the response beat for the next cycle (registered outputs)
    if (rst_n && pend.size() != 0 && pend[0].due <= cyc) begin
      rsp_valid <= 1'b1;
      rsp_data  <= peek(pend[0].addr + 64'(beat_i * 32));
      rsp_tag   <= pend[0].tag;
      rsp_last  <= (beat_i == pend[0].beats - 1);
    end else begin
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      rsp_tag   <= '0;
      rsp_last  <= 1'b0;
    end
  end

endmodule

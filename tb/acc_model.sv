// acc_model: behavioural model of a shared streaming accelerator.
//
// Not synthesizable; used by testbenches only. It stands for the accelerators
// the interface feeds (encryption, hashing and so on), which are outside this
// design. Every input beat is transformed (data XOR KEY, as a length-preserving
// cipher would be) and returned on the result stream after LAT cycles with its
// flow; the result `last` marks the end of each message. When `stall_pct` is
// set the model refuses input at random, which exercises back-pressure.
module acc_model
  import arcus_pkg::*;
#(
  parameter int LAT = 8,
  parameter logic [DATA_W-1:0] KEY = {8{32'hC3A5_96E1}}
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [DATA_W-1:0]    in_data,
  input  logic [FLOW_IW-1:0]   in_flow,
  input  logic                 in_last,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [DATA_W-1:0]    out_data,
  output logic [FLOW_IW-1:0]   out_flow,
  output logic                 out_last
);

  typedef struct {
    logic [DATA_W-1:0]  data;
    logic [FLOW_IW-1:0] flow;
    logic               last;
    longint             due;
  } beat_t;
  beat_t  q[$];
  longint cyc = 0;
  int     stall_pct = 0;
  longint n_in = 0;

  initial begin
    in_ready = 1'b1; out_valid = 1'b0; out_data = '0; out_flow = '0; out_last = 1'b0;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (in_valid && in_ready) begin
        beat_t b;
        b.data = in_data ^ KEY; b.flow = in_flow; b.last = in_last; b.due = cyc + LAT;
        q.push_back(b);
        n_in++;
      end
      if (out_valid && out_ready) void'(q.pop_front());
    end
    in_ready <= ($urandom_range(0, 99) >= stall_pct) && (q.size() < 64);
    if (rst_n && q.size() != 0 && q[0].due <= cyc) begin
      out_valid <= 1'b1;
      out_data  <= q[0].data;
      out_flow  <= q[0].flow;
      out_last  <= q[0].last;
    end else begin
      out_valid <= 1'b0;
    end
  end

endmodule

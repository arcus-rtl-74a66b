// flow_queue: the hardware queue of one flow.
//
// Every flow in the interface is bound to one of these queues. It holds
// descriptors fetched from the flow's ring until the flow's shaper releases
// them. It is a synchronous first-in first-out buffer of DEPTH entries of type
// T, written as a register array. `count` reports the occupancy; the flow
// context uses it to keep the number of descriptor fetches in flight within
// the free space, which is how a full queue stops fetching and pushes back
// on the VM's ring.
//
// Interface: valid/ready on both sides. Timing: a pushed entry can be popped
// the next cycle; push and pop may happen in the same cycle, also when full.
//
// From the paper: a queue per flow, bound to a software queue. Depth, width
// and the register-array build are this design's own choices.
module flow_queue #(
  parameter type         T     = logic [255:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  T                           in_data,
  output logic                       in_ready,
  output logic                       out_valid,
  output T                           out_data,
  input  logic                       out_ready,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [AW-1:0]   rd_q, wr_q;
  logic            push, pop;

  assign out_valid = (count != '0);
  assign in_ready  = (count != ($clog2(DEPTH+1))'(DEPTH)) || out_ready;
  assign out_data  = mem[rd_q];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      count <= '0;
    end else begin
      if (push) wr_q <= next_ptr(wr_q);
      if (pop)  rd_q <= next_ptr(rd_q);
      count <= count + ($bits(count))'(push) - ($bits(count))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= in_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    count <= ($clog2(DEPTH+1))'(DEPTH));

endmodule

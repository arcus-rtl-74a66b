// rr_arbiter: the SR-IOV arbiter, a round-robin choice among flows.
//
// All flows share one DMA read-request channel. Each cycle this block grants
// one of the requesting flows, searching from the flow after the one granted
// last, so that every requester is served within N grants. The pointer moves
// only when a grant is used (`advance`), so a request held back by the DMA
// engine keeps its turn.
//
// Interface: `req` one bit per flow, `gnt` one-hot, `gnt_idx` its index and
// `gnt_valid` when any bit is set. Timing: combinational from req to gnt;
// the pointer updates at the clock edge after `advance`.
//
// From the paper: a simple round-robin policy in front of the DMA engine. The
// pointer rule is this design's own choice.
module rr_arbiter #(
  parameter int unsigned N = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 req,
  input  logic                         advance,
  output logic [N-1:0]                 gnt,
  output logic [$clog2(N>1?N:2)-1:0]   gnt_idx,
  output logic                         gnt_valid
);

  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] last_q;   // index granted last

  always_comb begin
    logic [IW-1:0] idx;
    logic          found;
    gnt     = '0;
    gnt_idx = '0;
    found   = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      idx = IW'((int'(last_q) + k) % N);
      if (!found && req[idx]) begin
        found        = 1'b1;
        gnt_idx      = idx;
        gnt[idx]     = 1'b1;
      end
    end
    gnt_valid = found;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      last_q <= IW'(N - 1);
    else if (advance && gnt_valid)   last_q <= gnt_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(gnt));

endmodule

// transfer_arbiter: schedules the four stream targets (Upstream, Downstream,
// Select Map Read, Select Map Write) onto the single bus-master PCI interface.
//
// Whenever the Busmaster Initiator is idle (busy low) and at least one target
// requests, one grant pulse is given for one cycle. The rule is the design's:
// a target may not be granted twice in a row while another one is waiting.
// It is met here with round-robin order: the search for the next grant starts
// at the target after the one granted last, so every waiting target is
// served within NUM_TARGETS grants. A lone requester is granted again at
// once. The length of the granted request is passed along with the grant.
//
// Timing: req and req_len are sampled combinationally; gnt/gnt_idx/gnt_len
// are combinational in the cycle busy is low, and the initiator goes busy on
// the next edge. The round-robin pointer is this implementation's choice of
// scheduling that satisfies the rule.
module transfer_arbiter #(
  parameter int unsigned N     = proteus_pkg::NUM_TARGETS,
  parameter int unsigned LEN_W = 9,
  localparam int unsigned IW   = $clog2(N)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [N-1:0]             req,
  input  logic [N-1:0][LEN_W-1:0]  req_len,
  input  logic                     busy,
  output logic                     gnt,
  output logic [IW-1:0]            gnt_idx,
  output logic [LEN_W-1:0]         gnt_len
);

  logic [IW-1:0] last;

  always_comb begin
    logic [IW-1:0] idx;
    gnt     = 1'b0;
    gnt_idx = last;
    // scan from last+1 round to last itself (last only if nobody else waits)
    for (int k = N; k >= 1; k--) begin
      idx = IW'((32'(last) + k) % N);
      if (!busy && req[idx]) begin
        gnt     = 1'b1;
        gnt_idx = idx;
      end
    end
    gnt_len = req_len[gnt_idx];
  end

  always_ff @(posedge clk) begin
    if (rst)      last <= IW'(N - 1);
    else if (gnt) last <= gnt_idx;
  end

endmodule

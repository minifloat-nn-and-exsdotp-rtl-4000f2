// mfnn_rr_arbiter: round-robin arbiter for the FPU's single result port.
//
// N requesters (the operation groups) may hold a finished result at the same
// time; one is granted per cycle. The search for a grant starts at the
// requester after the one last served, so every requester that keeps asking
// is served within N grants. The pointer advances only when the granted
// result is actually taken (valid_o && ready_i), so a stalled output does not
// change who is first. The grant is combinational from req_i.
// The paper names this block (round-robin output arbitration); the pointer
// rule and the interface are this design's own. Verilator reports rst_ni
// as SYNCASYNCNET because the grant assertion is disabled by the
// asynchronous reset; the assertion is simulation only. Only the low bits
// of the loop variable cand are used (UNUSEDSIGNAL).
module mfnn_rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 ready_i,   // downstream takes the granted item
  output logic [N-1:0]         gnt_o,     // one-hot
  output logic [$clog2(N)-1:0] idx_o,
  output logic                 valid_o
);

  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] prio_q;  // requester with the highest priority

  logic        found;
  logic [31:0] cand;

  always_comb begin
    gnt_o = '0;
    idx_o = '0;
    found = 1'b0;
    cand  = 0;
    for (int unsigned k = 0; k < N; k++) begin
      cand = (int'(prio_q) + k) % N;
      if (!found && req_i[cand]) begin
        found       = 1'b1;
        gnt_o[cand] = 1'b1;
        idx_o       = IW'(cand);
      end
    end
    valid_o = found;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q <= '0;
    end else if (valid_o && ready_i) begin
      prio_q <= IW'((int'(idx_o) + 1) % N);
    end
  end

  // At most one grant, and only to a requester.
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o) && ((gnt_o & ~req_i) == '0));

endmodule

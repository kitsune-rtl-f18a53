// rr_arbiter -- round-robin arbiter over N requesters.
//
// The grid scheduler finds the SM for the next CTA with a round-robin arbiter:
// among the SMs that request (those whose free resources fit the CTA), it grants
// the first one at or after its priority pointer. When the grant is taken
// (`advance` high), the pointer moves to the requester just after the winner, so
// the next search starts there. The scheduler holds two of these, one per kernel
// type, and a third to pick one CTA completion per cycle among the SMs.
//
// Interface: `req` is a request vector; `gnt` is one-hot (or zero when nothing
// requests), `gnt_idx` its index and `gnt_valid` high when any request is granted.
// The grant is combinational from `req` and the pointer; the pointer updates on the
// clock edge at which `advance && gnt_valid`.
//
// The round-robin policy is the paper's description of the grid scheduler's
// arbiter; the pointer-after-winner rule and the reset value (pointer at 0) are this
// design's choice.
module rr_arbiter #(
  parameter int unsigned N     = 108,
  parameter int unsigned IDX_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     req,
  input  logic             advance,
  output logic [N-1:0]     gnt,
  output logic [IDX_W-1:0] gnt_idx,
  output logic             gnt_valid,
  output logic [IDX_W-1:0] ptr
);

  // Search from ptr upwards, wrapping around at N.
  always_comb begin
    gnt       = '0;
    gnt_idx   = '0;
    gnt_valid = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      int unsigned idx;
      idx = int'(ptr) + i;
      if (idx >= N) idx = idx - N;
      if (!gnt_valid && req[idx]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IDX_W'(idx);
      end
    end
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (advance && gnt_valid) begin
      ptr <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
    end
  end

  // A grant always goes to a requester, and at most one is granted.
  always_comb begin
    assert (!gnt_valid || req[gnt_idx]) else $error("rr_arbiter: grant to idle requester");
    assert ($onehot0(gnt)) else $error("rr_arbiter: grant not one-hot");
  end

endmodule

// rr_arbiter: round-robin arbiter for one scratchpad bank.
//
// Each cycle it grants the first requester found when scanning from the priority
// pointer upwards (wrapping at N). The grant is combinational (gnt is valid in
// the same cycle as req). When advance is high at a clock edge and a grant was
// given, the pointer moves to the requester after the one granted, so a core that
// keeps requesting waits at most N-1 grants. A synchronous active-low reset puts the pointer at 0.
//
// The paper says only that all cores of a stack may access each other's data in
// the shared memory; round-robin is this design's choice of a fair, simple policy.
module rr_arbiter #(
  parameter int unsigned N = ndft_pkg::CORES_PER_STACK,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [IW-1:0] gnt_idx
);

  logic [IW-1:0] ptr;
  logic          found;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    found   = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IW:0] j;
      j = {1'b0, ptr} + (IW+1)'(k);
      if (j >= (IW+1)'(N)) j = j - (IW+1)'(N);
      if (!found && req[j[IW-1:0]]) begin
        found            = 1'b1;
        gnt[j[IW-1:0]]   = 1'b1;
        gnt_idx          = j[IW-1:0];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (advance && found) begin
      ptr <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + 1'b1;
    end
  end

  // At most one grant, and only to a requester.
  a_one_grant : assert property (@(posedge clk) disable iff (!rst_n) (gnt & (gnt - 1'b1)) == '0)
    else $error("rr_arbiter: more than one grant");
  a_gnt_req   : assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0)
    else $error("rr_arbiter: grant without request");

endmodule

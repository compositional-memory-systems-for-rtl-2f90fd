// rr_arbiter: round-robin arbiter used by the processor-to-bank interconnect and by
// the off-chip memory arbiter.
//
// Among the asserted request bits it grants the first one at or after the priority
// pointer (one-hot gnt plus its index). The pointer moves to the position after the
// granted requester only when the owner of the arbiter reports a completed transfer
// with `advance`, so a requester that waits keeps its turn. Combinational grant,
// pointer updated on the rising clock edge; pointer 0 after reset. Round robin is
// this design's choice; the paper does not describe arbitration.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N-1:0]                  req,
  input  logic                          advance,
  output logic [N-1:0]                  gnt,
  output logic [(N > 1 ? $clog2(N) : 1)-1:0] gnt_idx,
  output logic                          any
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] ptr_q;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      automatic int unsigned j = (int'(ptr_q) + k) % N;
      if (!any && req[j]) begin
        any     = 1'b1;
        gnt[j]  = 1'b1;
        gnt_idx = IW'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0;
    end else if (advance && any) begin
      ptr_q <= IW'((int'(gnt_idx) + 1) % N);
    end
  end

endmodule

// mem_arbiter: shares the single off-chip main-memory port among the L2 banks.
//
// Banks raise b_req_valid with a line write-back (we=1) or a line refill (we=0).
// A round-robin arbiter picks one and drives it onto mem_req; once a request is
// shown to memory it stays until mem_req_ready, even if other banks start asking.
// A write-back is finished when it is accepted. A refill keeps the port busy until
// memory returns the line with mem_rvalid, which is passed to the owning bank as
// b_rvalid (the line itself, b_rdata, goes to all banks). So at most one transaction
// is in flight at a time. The paper only places main memory outside the chip behind
// the L2; this port protocol and arbitration are this design's choices.
module mem_arbiter
  import l2p_pkg::*;
#(
  parameter int unsigned N_BANKS = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // bank side
  input  logic     [N_BANKS-1:0]            b_req_valid,
  output logic     [N_BANKS-1:0]            b_req_ready,
  input  mem_req_t [N_BANKS-1:0]            b_req,
  output logic     [N_BANKS-1:0]            b_rvalid,
  output logic     [LINE_W-1:0]             b_rdata,
  // off-chip side
  output logic                              mem_req_valid,
  input  logic                              mem_req_ready,
  output mem_req_t                          mem_req,
  input  logic                              mem_rvalid,
  input  logic     [LINE_W-1:0]             mem_rdata
);
  localparam int unsigned BIW = (N_BANKS > 1) ? $clog2(N_BANKS) : 1;

  logic             busy_q;     // refill in flight
  logic             hold_q;     // request shown but not yet accepted
  logic [BIW-1:0]   owner_q;
  logic [N_BANKS-1:0] gnt;
  logic [BIW-1:0]   gnt_idx;
  logic             any;
  logic [BIW-1:0]   sel;
  logic             accept;

  rr_arbiter #(.N(N_BANKS)) u_arb (
    .clk     (clk),
    .rst_n   (rst_n),
    .req     (b_req_valid),
    .advance (accept),
    .gnt     (gnt),
    .gnt_idx (gnt_idx),
    .any     (any)
  );

  assign sel           = hold_q ? owner_q : gnt_idx;
  assign mem_req_valid = !busy_q && (hold_q || any);
  assign mem_req       = b_req[sel];
  assign accept        = mem_req_valid && mem_req_ready;

  always_comb begin
    b_req_ready = '0;
    b_rvalid    = '0;
    if (accept) b_req_ready[sel] = 1'b1;
    if (busy_q && mem_rvalid) b_rvalid[owner_q] = 1'b1;
  end
  assign b_rdata = mem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      hold_q  <= 1'b0;
      owner_q <= '0;
    end else begin
      if (accept) begin
        hold_q  <= 1'b0;
        owner_q <= sel;
        busy_q  <= !mem_req.we;
      end else if (mem_req_valid) begin
        hold_q  <= 1'b1;
        owner_q <= sel;
      end
      if (busy_q && mem_rvalid) busy_q <= 1'b0;
    end
  end

  a_rvalid_expected : assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> busy_q);

endmodule

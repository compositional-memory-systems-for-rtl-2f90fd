// l2_interconnect: crossbar between the processor ports and the L2 memory banks.
//
// Each processor port presents a translated request (m_valid/m_req) together with
// the bank that holds its translated set (m_bank). Every bank has a round-robin
// arbiter over the ports that address it; the winner's request is forwarded with the
// port number written into its src field, and the port sees m_ready in the cycle the
// bank accepts it (valid/ready, request held until accepted). A bank's response is
// steered back to the port named in its src field. Ports on different banks proceed
// in parallel; ports on the same bank wait (a stall), which is the only contention
// point. Each port may have at most one request outstanding. The paper names a
// high-bandwidth interconnection network between processors and memory banks; the
// crossbar topology and arbitration are this design's choices, and there is no
// snooping since no first-level caches sit on these ports.
module l2_interconnect
  import l2p_pkg::*;
#(
  parameter int unsigned N_CPU   = 4,
  parameter int unsigned N_BANKS = 4
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  // processor side
  input  logic      [N_CPU-1:0]                         m_valid,
  output logic      [N_CPU-1:0]                         m_ready,
  input  bank_req_t [N_CPU-1:0]                         m_req,
  input  logic      [N_CPU-1:0][(N_BANKS > 1 ? $clog2(N_BANKS) : 1)-1:0] m_bank,
  output logic      [N_CPU-1:0]                         m_rsp_valid,
  output bank_rsp_t [N_CPU-1:0]                         m_rsp,
  // bank side
  output logic      [N_BANKS-1:0]                       s_valid,
  input  logic      [N_BANKS-1:0]                       s_ready,
  output bank_req_t [N_BANKS-1:0]                       s_req,
  input  logic      [N_BANKS-1:0]                       s_rsp_valid,
  input  bank_rsp_t [N_BANKS-1:0]                       s_rsp
);
  localparam int unsigned CIW = (N_CPU > 1) ? $clog2(N_CPU) : 1;

  logic [N_BANKS-1:0][N_CPU-1:0] bank_req;
  logic [N_BANKS-1:0][N_CPU-1:0] bank_gnt;
  logic [N_BANKS-1:0][CIW-1:0]   bank_gnt_idx;

  always_comb begin
    for (int unsigned b = 0; b < N_BANKS; b++) begin
      for (int unsigned m = 0; m < N_CPU; m++) begin
        bank_req[b][m] = m_valid[m] && (int'(m_bank[m]) == b);
      end
    end
  end

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    rr_arbiter #(.N(N_CPU)) u_arb (
      .clk     (clk),
      .rst_n   (rst_n),
      .req     (bank_req[b]),
      .advance (s_valid[b] && s_ready[b]),
      .gnt     (bank_gnt[b]),
      .gnt_idx (bank_gnt_idx[b]),
      .any     (s_valid[b])
    );

    always_comb begin
      s_req[b]     = m_req[bank_gnt_idx[b]];
      s_req[b].src = SRC_W'(bank_gnt_idx[b]);
    end
  end

  always_comb begin
    m_ready     = '0;
    m_rsp_valid = '0;
    m_rsp       = '0;
    for (int unsigned m = 0; m < N_CPU; m++) begin
      for (int unsigned b = 0; b < N_BANKS; b++) begin
        if (bank_gnt[b][m] && s_ready[b]) m_ready[m] = 1'b1;
        if (s_rsp_valid[b] && (int'(s_rsp[b].src) == m)) begin
          m_rsp_valid[m] = 1'b1;
          m_rsp[m]       = s_rsp[b];
        end
      end
    end
  end

  // A port has one request outstanding, so two banks never answer it together.
  for (genvar m = 0; m < N_CPU; m++) begin : g_chk
    logic [N_BANKS-1:0] to_m;
    always_comb begin
      for (int unsigned b = 0; b < N_BANKS; b++) begin
        to_m[b] = s_rsp_valid[b] && (int'(s_rsp[b].src) == m);
      end
    end
    a_one_rsp : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(to_m));
    a_hold    : assert property (@(posedge clk) disable iff (!rst_n)
                                 m_valid[m] && !m_ready[m] |=> m_valid[m] && $stable(m_req[m]));
  end

endmodule

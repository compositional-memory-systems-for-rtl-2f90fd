// range_table: table of shared-memory intervals that gives communication buffers
// (and shared static data) their own id.
//
// The operating system loads up to N_RANGES entries, each an inclusive address
// interval first..last with the buffer id it belongs to (cfg_we/cfg_idx/cfg_entry,
// written on the rising edge). For each of the N_PORTS lookup ports the table
// compares the address with every valid entry in parallel and reports whether it
// lies in one (lk_hit) and the buffer id of the lowest-numbered matching entry
// (lk_id). Lookup is purely combinational. All entries are invalid after reset.
// The interval table loaded by the operating system is the paper's chosen way to
// find buffer ids; entry count, inclusive bounds and the priority rule are this
// design's choices.
module range_table
  import l2p_pkg::*;
#(
  parameter int unsigned N_RANGES = 32,
  parameter int unsigned N_PORTS  = 4
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  input  logic                                         cfg_we,
  input  logic [(N_RANGES > 1 ? $clog2(N_RANGES) : 1)-1:0] cfg_idx,
  input  range_entry_t                                 cfg_entry,
  input  logic [N_PORTS-1:0][ADDR_W-1:0]               lk_addr,
  output logic [N_PORTS-1:0]                           lk_hit,
  output logic [N_PORTS-1:0][ID_W-1:0]                 lk_id
);

  range_entry_t tab_q [N_RANGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned e = 0; e < N_RANGES; e++) begin
        tab_q[e] <= '0;
      end
    end else if (cfg_we && (int'(cfg_idx) < N_RANGES)) begin
      tab_q[cfg_idx] <= cfg_entry;
    end
  end

  always_comb begin
    lk_hit = '0;
    lk_id  = '0;
    for (int unsigned p = 0; p < N_PORTS; p++) begin
      // scan from the top so that the lowest matching entry is the one that remains
      for (int e = N_RANGES - 1; e >= 0; e--) begin
        if (tab_q[e].valid && (lk_addr[p] >= tab_q[e].first) && (lk_addr[p] <= tab_q[e].last)) begin
          lk_hit[p] = 1'b1;
          lk_id[p]  = tab_q[e].id;
        end
      end
    end
  end

endmodule

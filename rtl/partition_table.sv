// partition_table: per-id cache partition table and set-index translation.
//
// Entry i says which group of L2 sets belongs to id i: its first set (base) and its
// size as a power of two (log2 of the number of sets). For each lookup port the
// conventional set index taken from the address is replaced by
//     set = base + (index mod 2^log2)
// so an id only ever touches its own sets. The operating system writes entries with
// cfg_we/cfg_id/cfg_base/cfg_log2 (rising edge); lookups are combinational. After
// reset every entry covers the whole cache (base 0, 2^SET_W sets): the conventional
// shared cache. Replacing the index by a new one through a table indexed by a task or
// buffer id, and power-of-two partition sizes, come from the paper; the exact
// translation formula and the reset contents are this design's.
module partition_table
  import l2p_pkg::*;
#(
  parameter int unsigned N_IDS   = 64,
  parameter int unsigned SET_W   = 11,
  parameter int unsigned N_PORTS = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              cfg_we,
  input  logic [ID_W-1:0]                   cfg_id,
  input  logic [SET_W-1:0]                  cfg_base,
  input  logic [$clog2(SET_W+1)-1:0]        cfg_log2,
  input  logic [N_PORTS-1:0][ID_W-1:0]      lk_id,
  input  logic [N_PORTS-1:0][SET_W-1:0]     lk_index,
  output logic [N_PORTS-1:0][SET_W-1:0]     lk_set
);
  localparam int unsigned LOG_W = $clog2(SET_W + 1);

  logic [SET_W-1:0] base_q [N_IDS];
  logic [LOG_W-1:0] log2_q [N_IDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N_IDS; i++) begin
        base_q[i] <= '0;
        log2_q[i] <= LOG_W'(SET_W);
      end
    end else if (cfg_we && (int'(cfg_id) < N_IDS)) begin
      base_q[cfg_id] <= cfg_base;
      log2_q[cfg_id] <= (int'(cfg_log2) > SET_W) ? LOG_W'(SET_W) : cfg_log2;
    end
  end

  always_comb begin
    for (int unsigned p = 0; p < N_PORTS; p++) begin
      automatic logic [SET_W:0]   span = '0;
      automatic logic [SET_W-1:0] mask;
      automatic logic [SET_W-1:0] base = '0;
      if (int'(lk_id[p]) < N_IDS) begin
        span = (SET_W + 1)'(1) << log2_q[lk_id[p]];
        base = base_q[lk_id[p]];
      end
      mask      = SET_W'(span - (SET_W + 1)'(1));
      lk_set[p] = base + (lk_index[p] & mask);
    end
  end

endmodule

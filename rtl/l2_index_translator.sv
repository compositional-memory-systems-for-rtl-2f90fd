// l2_index_translator: labels each processor access with an id and translates its
// set index into that id's cache partition.
//
// For every port the address is looked up in the shared-memory interval table
// (range_table). If it lies in an interval the access carries that buffer's id,
// otherwise the task id of the issuing processor. The id then selects a
// partition_table entry that maps the conventional set index (address bits just
// above the line offset) into the partition. Purely combinational apart from the
// two tables' configuration writes. Using a task id or a buffer id per access and an
// operating-system-loaded interval table follows the paper; giving buffer ids
// priority over task ids and one shared id space are this design's choices.
module l2_index_translator
  import l2p_pkg::*;
#(
  parameter int unsigned N_PORTS  = 4,
  parameter int unsigned N_RANGES = 32,
  parameter int unsigned N_IDS    = 64,
  parameter int unsigned SET_W    = 11
) (
  input  logic                                         clk,
  input  logic                                         rst_n,
  // interval table configuration
  input  logic                                         cfg_rng_we,
  input  logic [(N_RANGES > 1 ? $clog2(N_RANGES) : 1)-1:0] cfg_rng_idx,
  input  range_entry_t                                 cfg_rng_entry,
  // partition table configuration
  input  logic                                         cfg_part_we,
  input  logic [ID_W-1:0]                              cfg_part_id,
  input  logic [SET_W-1:0]                             cfg_part_base,
  input  logic [$clog2(SET_W+1)-1:0]                   cfg_part_log2,
  // lookups
  input  logic [N_PORTS-1:0][ADDR_W-1:0]               addr,
  input  logic [N_PORTS-1:0][ID_W-1:0]                 task_id,
  output logic [N_PORTS-1:0][ID_W-1:0]                 acc_id,
  output logic [N_PORTS-1:0]                           is_buf,
  output logic [N_PORTS-1:0][SET_W-1:0]                set
);

  logic [N_PORTS-1:0][ID_W-1:0]  buf_id;
  logic [N_PORTS-1:0][SET_W-1:0] conv_index;

  range_table #(
    .N_RANGES (N_RANGES),
    .N_PORTS  (N_PORTS)
  ) u_ranges (
    .clk       (clk),
    .rst_n     (rst_n),
    .cfg_we    (cfg_rng_we),
    .cfg_idx   (cfg_rng_idx),
    .cfg_entry (cfg_rng_entry),
    .lk_addr   (addr),
    .lk_hit    (is_buf),
    .lk_id     (buf_id)
  );

  always_comb begin
    for (int unsigned p = 0; p < N_PORTS; p++) begin
      acc_id[p]     = is_buf[p] ? buf_id[p] : task_id[p];
      conv_index[p] = addr[p][OFF_W +: SET_W];
    end
  end

  partition_table #(
    .N_IDS   (N_IDS),
    .SET_W   (SET_W),
    .N_PORTS (N_PORTS)
  ) u_parts (
    .clk      (clk),
    .rst_n    (rst_n),
    .cfg_we   (cfg_part_we),
    .cfg_id   (cfg_part_id),
    .cfg_base (cfg_part_base),
    .cfg_log2 (cfg_part_log2),
    .lk_id    (acc_id),
    .lk_index (conv_index),
    .lk_set   (set)
  );

endmodule

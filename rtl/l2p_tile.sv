// l2p_tile: the shared L2 memory system of one multiprocessor tile, with the cache
// partitioned into groups of sets that belong exclusively to tasks and to the
// communication buffers between them.
//
// Data path of a processor word access:
//   1. the access is labelled with an id: the id of the shared-memory interval its
//      address falls in (communication buffer, shared static data), else the task id
//      held in the processor's task-id register;
//   2. the partition table replaces the conventional set index by base + (index mod
//      size) of that id's partition, so different ids never share a set;
//   3. the low bits of the translated set pick one of N_BANKS memory banks, the rest
//      the set inside it; a crossbar with round-robin arbitration per bank carries
//      the request there;
//   4. the bank (4-way, 64-byte lines, write-back, LRU) answers with the word and a
//      hit flag; misses and write-backs go through one shared off-chip memory port.
// The operating system writes the task-id registers, the interval table and the
// partition table through the cfg_* ports. After reset the partition table maps
// every id onto the whole cache, i.e. a conventional shared cache; init_done rises
// after the banks have cleared their state (one cycle per set of a bank).
// Latency of an uncontended hit: the response comes two cycles after the cycle in
// which cpu_req_ready was high. Processor ports: valid/ready request, one request
// outstanding, one-cycle response pulse without back-pressure.
// From the paper: four processors, 512 KB 4-way L2 built from memory banks behind an
// interconnection network, index replacement through an id-indexed table, task-id
// registers and an OS-loaded table of shared intervals. This design's choices: the
// number of banks, line size, id width, interval count, interconnect and memory port
// protocols.
module l2p_tile
  import l2p_pkg::*;
#(
  parameter int unsigned N_CPU    = 4,
  parameter int unsigned N_BANKS  = 4,
  parameter int unsigned L2_BYTES = 524288,
  parameter int unsigned WAYS     = 4,
  parameter int unsigned N_RANGES = 32,
  parameter int unsigned N_IDS    = 64,
  // derived
  localparam int unsigned SETS     = L2_BYTES / (LINE_BYTES * WAYS),
  localparam int unsigned SET_W    = $clog2(SETS),
  localparam int unsigned BANK_W   = (N_BANKS > 1) ? $clog2(N_BANKS) : 1,
  localparam int unsigned BSETS    = SETS / N_BANKS,
  localparam int unsigned BSET_W   = (BSETS > 1) ? $clog2(BSETS) : 1,
  localparam int unsigned CPU_W    = (N_CPU > 1) ? $clog2(N_CPU) : 1,
  localparam int unsigned RIDX_W   = (N_RANGES > 1) ? $clog2(N_RANGES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  output logic                          init_done,
  // processor ports
  input  logic     [N_CPU-1:0]          cpu_req_valid,
  output logic     [N_CPU-1:0]          cpu_req_ready,
  input  cpu_req_t [N_CPU-1:0]          cpu_req,
  output logic     [N_CPU-1:0]          cpu_rsp_valid,
  output cpu_rsp_t [N_CPU-1:0]          cpu_rsp,
  // operating-system configuration
  input  logic                          cfg_tid_we,
  input  logic     [CPU_W-1:0]          cfg_tid_cpu,
  input  logic     [ID_W-1:0]           cfg_tid_value,
  input  logic                          cfg_rng_we,
  input  logic     [RIDX_W-1:0]         cfg_rng_idx,
  input  range_entry_t                  cfg_rng_entry,
  input  logic                          cfg_part_we,
  input  logic     [ID_W-1:0]           cfg_part_id,
  input  logic     [SET_W-1:0]          cfg_part_base,
  input  logic     [$clog2(SET_W+1)-1:0] cfg_part_log2,
  // off-chip main memory
  output logic                          mem_req_valid,
  input  logic                          mem_req_ready,
  output mem_req_t                      mem_req,
  input  logic                          mem_rvalid,
  input  logic     [LINE_W-1:0]         mem_rdata
);

  // ---------------------------------------------------------------- labelling
  logic [N_CPU-1:0][ID_W-1:0]   task_id;
  logic [N_CPU-1:0][ADDR_W-1:0] lk_addr;
  logic [N_CPU-1:0][ID_W-1:0]   acc_id;
  logic [N_CPU-1:0]             is_buf;
  logic [N_CPU-1:0][SET_W-1:0]  tset;

  task_id_regs #(.N_CPU(N_CPU)) u_tid (
    .clk         (clk),
    .rst_n       (rst_n),
    .cfg_we      (cfg_tid_we),
    .cfg_cpu     (cfg_tid_cpu),
    .cfg_task_id (cfg_tid_value),
    .task_id     (task_id)
  );

  always_comb begin
    for (int unsigned p = 0; p < N_CPU; p++) lk_addr[p] = cpu_req[p].addr;
  end

  l2_index_translator #(
    .N_PORTS  (N_CPU),
    .N_RANGES (N_RANGES),
    .N_IDS    (N_IDS),
    .SET_W    (SET_W)
  ) u_xlate (
    .clk           (clk),
    .rst_n         (rst_n),
    .cfg_rng_we    (cfg_rng_we),
    .cfg_rng_idx   (cfg_rng_idx),
    .cfg_rng_entry (cfg_rng_entry),
    .cfg_part_we   (cfg_part_we),
    .cfg_part_id   (cfg_part_id),
    .cfg_part_base (cfg_part_base),
    .cfg_part_log2 (cfg_part_log2),
    .addr          (lk_addr),
    .task_id       (task_id),
    .acc_id        (acc_id),
    .is_buf        (is_buf),
    .set           (tset)
  );

  // ---------------------------------------------------------------- routing
  bank_req_t [N_CPU-1:0]              m_req;
  logic      [N_CPU-1:0][BANK_W-1:0]  m_bank;
  bank_rsp_t [N_CPU-1:0]              m_rsp;
  logic      [N_BANKS-1:0]            s_valid, s_ready, s_rsp_valid;
  bank_req_t [N_BANKS-1:0]            s_req;
  bank_rsp_t [N_BANKS-1:0]            s_rsp;

  always_comb begin
    for (int unsigned p = 0; p < N_CPU; p++) begin
      m_req[p]       = '0;
      m_req[p].addr  = cpu_req[p].addr;
      m_req[p].we    = cpu_req[p].we;
      m_req[p].wstrb = cpu_req[p].wstrb;
      m_req[p].wdata = cpu_req[p].wdata;
      m_req[p].id    = acc_id[p];
      m_req[p].set   = SETF_W'(tset[p]);
      m_bank[p]      = BANK_W'(int'(tset[p]) % N_BANKS);
    end
  end

  l2_interconnect #(.N_CPU(N_CPU), .N_BANKS(N_BANKS)) u_xbar (
    .clk         (clk),
    .rst_n       (rst_n),
    .m_valid     (cpu_req_valid & {N_CPU{init_done}}),
    .m_ready     (cpu_req_ready),
    .m_req       (m_req),
    .m_bank      (m_bank),
    .m_rsp_valid (cpu_rsp_valid),
    .m_rsp       (m_rsp),
    .s_valid     (s_valid),
    .s_ready     (s_ready),
    .s_req       (s_req),
    .s_rsp_valid (s_rsp_valid),
    .s_rsp       (s_rsp)
  );

  always_comb begin
    for (int unsigned p = 0; p < N_CPU; p++) begin
      cpu_rsp[p].rdata = m_rsp[p].rdata;
      cpu_rsp[p].hit   = m_rsp[p].hit;
      cpu_rsp[p].id    = m_rsp[p].id;
    end
  end

  // ---------------------------------------------------------------- banks
  logic     [N_BANKS-1:0] b_mem_valid, b_mem_ready, b_rvalid, b_init;
  mem_req_t [N_BANKS-1:0] b_mem_req;
  logic     [LINE_W-1:0]  b_rdata;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [BSET_W-1:0] local_set;
    assign local_set = BSET_W'(int'(s_req[b].set) / N_BANKS);

    l2_bank #(.SETS(BSETS), .WAYS(WAYS)) u_bank (
      .clk           (clk),
      .rst_n         (rst_n),
      .init_done     (b_init[b]),
      .req_valid     (s_valid[b]),
      .req_ready     (s_ready[b]),
      .req           (s_req[b]),
      .req_set       (local_set),
      .rsp_valid     (s_rsp_valid[b]),
      .rsp           (s_rsp[b]),
      .mem_req_valid (b_mem_valid[b]),
      .mem_req_ready (b_mem_ready[b]),
      .mem_req       (b_mem_req[b]),
      .mem_rvalid    (b_rvalid[b]),
      .mem_rdata     (b_rdata)
    );
  end

  assign init_done = &b_init;

  mem_arbiter #(.N_BANKS(N_BANKS)) u_marb (
    .clk           (clk),
    .rst_n         (rst_n),
    .b_req_valid   (b_mem_valid),
    .b_req_ready   (b_mem_ready),
    .b_req         (b_mem_req),
    .b_rvalid      (b_rvalid),
    .b_rdata       (b_rdata),
    .mem_req_valid (mem_req_valid),
    .mem_req_ready (mem_req_ready),
    .mem_req       (mem_req),
    .mem_rvalid    (mem_rvalid),
    .mem_rdata     (mem_rdata)
  );

  // the whole cache must divide evenly into banks
  if (SETS % N_BANKS != 0 || (1 << SET_W) != SETS) begin : g_bad_size
    $error("l2p_tile: L2 set count must be a power of two divisible by N_BANKS");
  end

endmodule

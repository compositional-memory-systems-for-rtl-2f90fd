// l2_bank: one memory bank of the shared, set-partitioned L2 cache.
//
// The bank holds SETS sets of WAYS lines of 64 bytes. Requests arrive already
// translated: req_set is the set inside this bank chosen by the partition table,
// so the bank itself knows nothing about partitions. The tag stored with a line is
// its whole line address; a partition of a single set uses no address bit as index,
// so nothing may be dropped from the tag.
//
// Controller (one request at a time):
//   INIT  after reset, one cycle per set clears the valid/dirty bits and sets the
//         LRU ages to 0..WAYS-1 (init_done rises when finished)
//   IDLE  req_ready=1; a request is latched
//   TAG   tag compare in all ways; hit -> ACCESS; miss -> victim is the first
//         invalid way, else the least recently used one; dirty victim -> WB
//   WB    write the victim line to main memory (mem_req.we=1) until mem_req_ready
//   FILL  request the missing line (mem_req.we=0); when mem_rvalid returns it, the
//         line is written into the victim way
//   ACCESS read the word or merge the write strobes (line becomes dirty), update
//         LRU, pulse rsp_valid for one cycle with the data and the hit flag
// A hit answers two cycles after the cycle the request was accepted in. The response
// has no back-pressure. Write-back, write-allocate, true LRU and 64-byte lines are
// this design's choices; the paper gives the bank structure (Figure 1) and the
// 4-way associativity. Tag, state and data storage are arrays that map onto SRAM.
module l2_bank
  import l2p_pkg::*;
#(
  parameter int unsigned SETS = 512,
  parameter int unsigned WAYS = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  output logic                                   init_done,
  // request / response
  input  logic                                   req_valid,
  output logic                                   req_ready,
  input  bank_req_t                              req,
  input  logic [(SETS > 1 ? $clog2(SETS) : 1)-1:0] req_set,
  output logic                                   rsp_valid,
  output bank_rsp_t                              rsp,
  // main memory side
  output logic                                   mem_req_valid,
  input  logic                                   mem_req_ready,
  output mem_req_t                               mem_req,
  input  logic                                   mem_rvalid,
  input  logic [LINE_W-1:0]                      mem_rdata
);
  localparam int unsigned LSET_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef struct packed {
    logic [WAYS-1:0]            valid;
    logic [WAYS-1:0]            dirty;
    logic [WAYS-1:0][WAY_W-1:0] age;     // 0 = most recently used
  } meta_t;

  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_TAG, S_WB, S_FILL_REQ, S_FILL_WAIT, S_ACCESS
  } state_t;

  // storage
  meta_t                          meta_mem [SETS];
  logic [WAYS-1:0][LADDR_W-1:0]   tag_mem  [SETS];
  logic [LINE_W-1:0]              data_mem [SETS*WAYS];

  // control registers
  state_t            state_q;
  bank_req_t         r_req_q;
  logic [LSET_W-1:0] r_set_q;
  logic [WAY_W-1:0]  r_way_q;
  logic              r_hit_q;
  logic [LSET_W-1:0] init_cnt_q;

  // read side of the arrays (current set / way)
  meta_t                        meta_rd;
  logic [WAYS-1:0][LADDR_W-1:0] tags_rd;
  logic [LINE_W-1:0]            line_rd;
  logic [LADDR_W-1:0]           r_laddr;
  logic [WOFF_W-1:0]            r_word;

  assign meta_rd = meta_mem[r_set_q];
  assign tags_rd = tag_mem[r_set_q];
  assign line_rd = data_mem[int'(r_set_q) * WAYS + int'(r_way_q)];
  assign r_laddr = r_req_q.addr[ADDR_W-1:OFF_W];
  assign r_word  = r_req_q.addr[OFF_W-1:$clog2(STRB_W)];

  // tag compare and victim choice
  logic             tag_hit;
  logic [WAY_W-1:0] hit_way;
  logic [WAY_W-1:0] victim_way;
  logic             victim_found;

  always_comb begin
    tag_hit      = 1'b0;
    hit_way      = '0;
    victim_way   = '0;
    victim_found = 1'b0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!tag_hit && meta_rd.valid[w] && (tags_rd[w] == r_laddr)) begin
        tag_hit = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!victim_found && !meta_rd.valid[w]) begin
        victim_found = 1'b1;
        victim_way   = WAY_W'(w);
      end
    end
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!victim_found && (meta_rd.age[w] == WAY_W'(WAYS - 1))) begin
        victim_found = 1'b1;
        victim_way   = WAY_W'(w);
      end
    end
  end

  // write data for an access: merge the strobed bytes into the line
  logic [LINE_W-1:0] line_merged;
  always_comb begin
    line_merged = line_rd;
    for (int unsigned b = 0; b < STRB_W; b++) begin
      if (r_req_q.wstrb[b]) begin
        line_merged[int'(r_word) * DATA_W + b * 8 +: 8] = r_req_q.wdata[b*8 +: 8];
      end
    end
  end

  // LRU update for the accessed way
  meta_t meta_acc;
  always_comb begin
    meta_acc = meta_rd;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (WAY_W'(w) == r_way_q) begin
        meta_acc.age[w] = '0;
      end else if (meta_rd.age[w] < meta_rd.age[r_way_q]) begin
        meta_acc.age[w] = meta_rd.age[w] + 1'b1;
      end
    end
    if (r_req_q.we) begin
      meta_acc.dirty[r_way_q] = 1'b1;
    end
  end

  // main FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_INIT;
      r_req_q    <= '0;
      r_set_q    <= '0;
      r_way_q    <= '0;
      r_hit_q    <= 1'b0;
      init_cnt_q <= '0;
    end else begin
      unique case (state_q)
        S_INIT: begin
          init_cnt_q <= init_cnt_q + 1'b1;
          if (int'(init_cnt_q) == SETS - 1) begin
            state_q <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (req_valid) begin
            r_req_q <= req;
            r_set_q <= req_set;
            state_q <= S_TAG;
          end
        end
        S_TAG: begin
          if (tag_hit) begin
            r_way_q <= hit_way;
            r_hit_q <= 1'b1;
            state_q <= S_ACCESS;
          end else begin
            r_way_q <= victim_way;
            r_hit_q <= 1'b0;
            state_q <= (meta_rd.valid[victim_way] && meta_rd.dirty[victim_way]) ? S_WB : S_FILL_REQ;
          end
        end
        S_WB: begin
          if (mem_req_ready) state_q <= S_FILL_REQ;
        end
        S_FILL_REQ: begin
          if (mem_req_ready) state_q <= S_FILL_WAIT;
        end
        S_FILL_WAIT: begin
          if (mem_rvalid) state_q <= S_ACCESS;
        end
        S_ACCESS: begin
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // array writes: one write per array per cycle
  always_ff @(posedge clk) begin
    if (state_q == S_INIT) begin
      meta_t m;
      m.valid = '0;
      m.dirty = '0;
      for (int unsigned w = 0; w < WAYS; w++) m.age[w] = WAY_W'(w);
      meta_mem[init_cnt_q] <= m;
    end else if (state_q == S_FILL_WAIT && mem_rvalid) begin
      meta_t m;
      m = meta_rd;
      m.valid[r_way_q] = 1'b1;
      m.dirty[r_way_q] = 1'b0;
      meta_mem[r_set_q] <= m;
    end else if (state_q == S_ACCESS) begin
      meta_mem[r_set_q] <= meta_acc;
    end
  end

  always_ff @(posedge clk) begin
    if (state_q == S_FILL_WAIT && mem_rvalid) begin
      logic [WAYS-1:0][LADDR_W-1:0] t;
      t = tags_rd;
      t[r_way_q] = r_laddr;
      tag_mem[r_set_q] <= t;
    end
  end

  always_ff @(posedge clk) begin
    if (state_q == S_FILL_WAIT && mem_rvalid) begin
      data_mem[int'(r_set_q) * WAYS + int'(r_way_q)] <= mem_rdata;
    end else if (state_q == S_ACCESS && r_req_q.we) begin
      data_mem[int'(r_set_q) * WAYS + int'(r_way_q)] <= line_merged;
    end
  end

  // outputs
  assign init_done = (state_q != S_INIT);
  assign req_ready = (state_q == S_IDLE);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    if (state_q == S_WB) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.laddr = tags_rd[r_way_q];
      mem_req.wline = line_rd;
    end else if (state_q == S_FILL_REQ) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b0;
      mem_req.laddr = r_laddr;
    end
  end

  assign rsp_valid = (state_q == S_ACCESS);
  always_comb begin
    rsp       = '0;
    rsp.rdata = line_rd[int'(r_word) * DATA_W +: DATA_W];
    rsp.hit   = r_hit_q;
    rsp.id    = r_req_q.id;
    rsp.src   = r_req_q.src;
  end

endmodule

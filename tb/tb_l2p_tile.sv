// tb_l2p_tile: end-to-end test of the partitioned L2 tile at its default size
// (4 processor ports, 512 KB, 4 ways, 4 banks).
//
// The operating-system side programs task-id registers, partitions sized like the
// jpeg/canny allocation (a few sets per task, exclusive, packed one after another)
// and a shared FIFO buffer whose partition is exactly as large as the FIFO. Four
// processor drivers then run three phases, each after a fresh reset:
//   0  partitioned, port 0 alone: a task re-reading a working set that fills its
//      32-set partition;
//   1  partitioned, all ports: port 0 as before; port 1 streams through memory and
//      writes the FIFO (producer); port 2 streams and reads the FIFO (consumer);
//      port 3 streams and switches task in the middle;
//   2  shared cache (partition table left at reset), same traffic as phase 1.
// Every response is checked against a golden word memory (data), an independent LRU
// model indexed by the independently computed partition set (hit flag), the expected
// id (buffer id inside the FIFO interval, task id elsewhere) and, for hits, a
// latency of two cycles after acceptance. Compositionality: port 0's hit/miss
// sequence in phase 1 must equal phase 0; in phase 2 the other ports must raise its
// misses. The FIFO must miss only on its cold lines. Mechanisms counted, each must
// occur: hits, misses, dirty write-backs, bank-contention stalls, buffer-labelled
// accesses, task switches, shared-cache interference.
module tb_l2p_tile;
  import l2p_pkg::*;
  import l2p_ref_pkg::*;

  localparam int unsigned NC = 4;
  localparam int unsigned SETS = 2048;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 init_done;
  logic     [NC-1:0]    cpu_req_valid, cpu_req_ready, cpu_rsp_valid;
  cpu_req_t [NC-1:0]    cpu_req;
  cpu_rsp_t [NC-1:0]    cpu_rsp;
  logic                 cfg_tid_we, cfg_rng_we, cfg_part_we;
  logic [1:0]           cfg_tid_cpu;
  logic [ID_W-1:0]      cfg_tid_value, cfg_part_id;
  logic [4:0]           cfg_rng_idx;
  range_entry_t         cfg_rng_entry;
  logic [10:0]          cfg_part_base;
  logic [3:0]           cfg_part_log2;
  logic                 mem_req_valid, mem_req_ready, mem_rvalid;
  mem_req_t             mem_req;
  logic [LINE_W-1:0]    mem_rdata;
  int unsigned          n_reads, n_writes;

  l2p_tile dut (.*);
  main_mem_model #(.LAT(4)) u_mem (.*);

  // ------------------------------------------------------------ bookkeeping
  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ids and partition sizes (sets): tasks of Table 1, static data, one FIFO
  localparam int NIDS = 21;
  int unsigned part_sets [NIDS] = '{8, 4, 1, 32, 16, 4, 1, 16, 16, 4, 16, 8, 16, 8, 8, 4, 2, 2, 4, 4, 4};
  localparam int ID_RASTER1 = 3, ID_BACKEND1 = 4, ID_LOWPASS = 10, ID_HSOBEL = 11, ID_VSOBEL = 12;
  localparam int ID_FIFO = 20;
  localparam logic [31:0] FIFO_BASE = 32'h0040_0000;
  localparam int FIFO_LINES = 16;                  // 1 KB FIFO = 4 sets x 4 ways

  int unsigned pbase [64];
  int unsigned plog  [64];
  int unsigned cur_tid [NC];
  logic [31:0] golden [int unsigned];
  cache_ref    ref_c = new(4);
  logic [31:0] phase_off;

  // mechanism counters
  int wb_total = 0;
  int n_hit = 0, n_miss = 0, n_stall = 0, n_buf = 0, n_switch = 0, fifo_miss = 0;
  bit seq0 [3][$];

  always @(posedge clk) begin
    if (init_done) for (int c = 0; c < NC; c++) if (cpu_req_valid[c] && !cpu_req_ready[c]) n_stall++;
  end

  function automatic int unsigned log2i(int unsigned v);
    int unsigned r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  function automatic int unsigned exp_id(int c, logic [31:0] a);
    if (a >= FIFO_BASE + phase_off && a < FIFO_BASE + phase_off + FIFO_LINES * LINE_BYTES) return ID_FIFO;
    return cur_tid[c];
  endfunction

  function automatic int unsigned exp_set(int unsigned id, logic [31:0] a);
    int unsigned idx = (a >> OFF_W) % SETS;
    return (pbase[id] + idx % (1 << plog[id])) % SETS;
  endfunction

  // ------------------------------------------------------------ configuration
  task automatic set_tid(int c, int unsigned t);
    @(negedge clk);
    cfg_tid_we = 1; cfg_tid_cpu = 2'(c); cfg_tid_value = ID_W'(t);
    @(posedge clk);
    #1 cfg_tid_we = 0;
    cur_tid[c] = t;
  endtask

  task automatic configure(bit partitioned);
    int unsigned nb = 0;
    for (int i = 0; i < 64; i++) begin pbase[i] = 0; plog[i] = 11; end
    if (partitioned) begin
      for (int i = 0; i < NIDS; i++) begin
        pbase[i] = nb;
        plog[i]  = log2i(part_sets[i]);
        nb += part_sets[i];
        @(negedge clk);
        cfg_part_we = 1; cfg_part_id = ID_W'(i);
        cfg_part_base = 11'(pbase[i]); cfg_part_log2 = 4'(plog[i]);
        @(posedge clk);
        #1 cfg_part_we = 0;
      end
    end
    @(negedge clk);
    cfg_rng_we = 1; cfg_rng_idx = 0;
    cfg_rng_entry.valid = 1;
    cfg_rng_entry.first = FIFO_BASE + phase_off;
    cfg_rng_entry.last  = FIFO_BASE + phase_off + FIFO_LINES * LINE_BYTES - 1;
    cfg_rng_entry.id    = ID_W'(ID_FIFO);
    @(posedge clk);
    #1 cfg_rng_we = 0;
    set_tid(0, ID_RASTER1);
    set_tid(1, ID_BACKEND1);
    set_tid(2, ID_LOWPASS);
    set_tid(3, ID_HSOBEL);
  endtask

  // ------------------------------------------------------------ processor drivers
  typedef struct {
    logic [31:0] addr;
    bit          we;
    logic [3:0]  strb;
    logic [31:0] wdata;
    int          new_tid;   // >= 0: switch task before this access
  } acc_t;

  acc_t prog [NC][$];
  bit   start [NC];
  bit   done  [NC];

  function automatic acc_t mk(logic [31:0] a, bit we);
    acc_t x;
    x.addr = {a[31:2], 2'b00};
    x.we = we;
    x.strb = we ? 4'($urandom_range(1, 15)) : 4'h0;
    x.wdata = $urandom;
    x.new_tid = -1;
    return x;
  endfunction

  task automatic gen(int phase, int unsigned n_stream);
    for (int c = 0; c < NC; c++) prog[c].delete();
    // port 0: six passes over 128 lines (4 per set of a 32-set partition)
    for (int pass = 0; pass < 6; pass++)
      for (int l = 0; l < 128; l++)
        prog[0].push_back(mk(phase_off + 32'h0010_0000 + l * 64 + 4 * ((l + pass) % 16), (pass == 1)));
    if (phase == 0) return;
    for (int c = 1; c < NC; c++) begin
      for (int unsigned l = 0; l < n_stream; l++) begin
        logic [31:0] a = phase_off + 32'h0100_0000 * c + l * 64 + 4 * (l % 16);
        prog[c].push_back(mk(a, (c == 1) || (l % 3 == 0)));
        if (c == 1 && l % 4 == 0)      // producer writes the FIFO
          prog[c].push_back(mk(FIFO_BASE + phase_off + ((l / 4) % FIFO_LINES) * 64 + 4 * ((l / 64) % 16), 1));
        if (c == 2 && l % 4 == 2)      // consumer reads the FIFO
          prog[c].push_back(mk(FIFO_BASE + phase_off + ((l / 4) % FIFO_LINES) * 64 + 4 * ((l / 64) % 16), 0));
      end
    end
    prog[3][n_stream / 2].new_tid = ID_VSOBEL;
  endtask

  for (genvar c = 0; c < NC; c++) begin : g_cpu
    initial begin
      cpu_req_valid[c] = 0;
      cpu_req[c] = '0;
      forever begin
        wait (start[c]);
        for (int k = 0; k < prog[c].size(); k++) begin
          acc_t x;
          int unsigned id, set;
          longint unsigned t_acc;
          logic [31:0] exp_d;
          bit exp_hit, wb;
          x = prog[c][k];
          if (x.new_tid >= 0) begin
            set_tid(c, x.new_tid);
            n_switch++;
          end
          @(negedge clk);
          cpu_req_valid[c] = 1;
          cpu_req[c].addr  = x.addr;
          cpu_req[c].we    = x.we;
          cpu_req[c].wstrb = x.strb;
          cpu_req[c].wdata = x.wdata;
          #1;
          while (!cpu_req_ready[c]) begin
            @(negedge clk);
            #1;
          end
          id = exp_id(c, x.addr);
          @(posedge clk);
          @(negedge clk);
          t_acc = cyc;
          cpu_req_valid[c] = 0;
          while (!cpu_rsp_valid[c]) @(negedge clk);
          // reference models, in the order the bank served the accesses
          set     = exp_set(id, x.addr);
          exp_hit = ref_c.access(set, x.addr >> OFF_W, x.we, wb);
          exp_d   = golden.exists(x.addr >> 2) ? golden[x.addr >> 2] : init_word(x.addr);
          check(cpu_rsp[c].rdata == exp_d, $sformatf("port %0d data %h exp %h addr %h", c, cpu_rsp[c].rdata, exp_d, x.addr));
          check(cpu_rsp[c].hit == exp_hit, $sformatf("port %0d hit %0d exp %0d addr %h", c, cpu_rsp[c].hit, exp_hit, x.addr));
          check(int'(cpu_rsp[c].id) == id, $sformatf("port %0d id %0d exp %0d", c, cpu_rsp[c].id, id));
          // accepted in cycle t_acc-1, answered in cycle cyc: two cycles for a hit
          if (exp_hit) check(cyc - t_acc + 1 == 2, $sformatf("hit latency %0d", cyc - t_acc + 1));
          if (x.we) begin
            logic [31:0] nv;
            nv = exp_d;
            for (int b = 0; b < 4; b++) if (x.strb[b]) nv[b*8 +: 8] = x.wdata[b*8 +: 8];
            golden[x.addr >> 2] = nv;
          end
          if (cpu_rsp[c].hit) n_hit++; else n_miss++;
          if (id == ID_FIFO) begin
            n_buf++;
            if (!cpu_rsp[c].hit) fifo_miss++;
          end
          if (c == 0) seq0[cur_phase].push_back(cpu_rsp[c].hit);
        end
        done[c] = 1;
        wait (!start[c]);
      end
    end
  end

  int cur_phase = 0;

  task automatic run_phase(int phase, bit partitioned, int unsigned n_stream);
    int unsigned init_cycles = 0;
    cur_phase = phase;
    phase_off = 32'h1000_0000 * phase;
    rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(negedge clk);
    while (!init_done) begin
      @(negedge clk);
      init_cycles++;
    end
    check(init_cycles == SETS / 4, $sformatf("init sweep %0d cycles", init_cycles));
    ref_c.reset();
    golden.delete();
    fifo_miss = 0;
    configure(partitioned);
    gen(phase, n_stream);
    for (int c = 0; c < NC; c++) begin done[c] = 0; start[c] = 1; end
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int c = 0; c < NC; c++) start[c] = 0;
    @(negedge clk);
    wb_total += n_writes;
    if (phase == 1)
      check(fifo_miss == FIFO_LINES, $sformatf("FIFO misses %0d, expected only the %0d cold ones", fifo_miss, FIFO_LINES));
    $display("phase %0d: cycles=%0d port0 misses=%0d fifo misses=%0d", phase, cyc,
             seq0[phase].size() - seq0[phase].sum() with (int'(item)), fifo_miss);
  endtask

  initial begin
    int m0, m1, m2;
    cfg_tid_we = 0; cfg_rng_we = 0; cfg_part_we = 0; cfg_tid_cpu = 0; cfg_tid_value = 0;
    cfg_part_id = 0; cfg_rng_idx = 0; cfg_rng_entry = '0; cfg_part_base = 0; cfg_part_log2 = 0;
    for (int c = 0; c < NC; c++) begin start[c] = 0; done[c] = 0; end
    run_phase(0, 1, 0);
    run_phase(1, 1, 4000);
    run_phase(2, 0, 4000);
    m0 = seq0[0].size() - seq0[0].sum() with (int'(item));
    m1 = seq0[1].size() - seq0[1].sum() with (int'(item));
    m2 = seq0[2].size() - seq0[2].sum() with (int'(item));
    check(seq0[0] == seq0[1], "compositional: port 0 hit/miss sequence unchanged by the other tasks");
    check(m0 == 128, $sformatf("port 0 alone misses only its 128 cold lines (%0d)", m0));
    check(m2 > m1, $sformatf("shared cache: other tasks evict port 0's data (%0d > %0d)", m2, m1));
    check(n_hit > 0, "hits happened");
    check(n_miss > 0, "misses happened");
    check(wb_total > 0, "dirty write-backs happened");
    check(n_stall > 0, "bank contention stalls happened");
    check(n_buf > 0, "buffer-labelled accesses happened");
    check(n_switch > 0, "task switch happened");
    $display("hits=%0d misses=%0d writebacks=%0d stalls=%0d buffer_accesses=%0d task_switches=%0d",
             n_hit, n_miss, wb_total, n_stall, n_buf, n_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

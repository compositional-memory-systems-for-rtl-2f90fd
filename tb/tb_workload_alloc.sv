// tb_workload_alloc: loads the two published partitionings into the default-size
// tile and runs a synthetic workload on each.
//
// Workload A is the two-jpeg-decoders-plus-canny application (15 tasks and 4 shared
// static-data sections), workload B the mpeg2 decoder (13 tasks, 4 data sections).
// Every task or data section gets its own id and an exclusive partition of the
// published number of sets, packed one after another from set 0; data sections are
// labelled through the shared-interval table, tasks through the task-id registers
// (entry k runs on processor k mod 4; the task-id register is rewritten when a processor
// switches task). Each entry then touches a working set of exactly its capacity
// (sets x 4 ways lines) three times (once writing), the accesses interleaved at random
// over the four processors. Because partitions are exclusive, every entry must miss
// exactly once per line (cold misses) and hit afterwards, whatever the interleaving;
// the test checks that per entry, plus data, hit flags and ids on every access.
module tb_workload_alloc;
  import l2p_pkg::*;
  import l2p_ref_pkg::*;

  localparam int unsigned NC = 4;

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

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Table 1: FrontEnd1 IDCT1 Raster1 BackEnd1 FrontEnd2 IDCT2 Raster2 BackEnd2
  //          Fr.canny LowPass HorizSobel VertSobel HorizNMS VertNMS MaxTreshold
  //          | appl_data appl_bss rt_data rt_bss
  int unsigned tab1 [19] = '{4, 1, 32, 16, 4, 1, 16, 16, 4, 16, 8, 16, 8, 8, 4, 2, 2, 4, 4};
  // Table 2: input vld hdr isiq memMan idct add decMV predict predictRD writeMB store
  //          output | appl_data appl_bss rt_data rt_bss
  int unsigned tab2 [17] = '{2, 4, 16, 8, 1, 4, 4, 8, 16, 2, 8, 2, 1, 4, 1, 8, 1};

  int unsigned sets [$];
  int unsigned n_tasks;
  int unsigned pbase [64], plog [64];
  int unsigned cur_tid [NC];
  int unsigned misses [64];
  logic [31:0] golden [int unsigned];
  cache_ref ref_c = new(4);
  logic [31:0] region_off;
  semaphore cfg_lock = new(1);

  function automatic int unsigned log2i(int unsigned v);
    int unsigned r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

  // entry i's data lives at region_off + 0x0100_0000 * (i+1); data sections are intervals
  function automatic logic [31:0] entry_addr(int unsigned i, int unsigned line, int unsigned word);
    return region_off + 32'h0100_0000 * (i + 1) + line * 64 + word * 4;
  endfunction

  task automatic set_tid(int c, int unsigned t);
    cfg_lock.get(1);
    @(negedge clk);
    cfg_tid_we = 1; cfg_tid_cpu = 2'(c); cfg_tid_value = ID_W'(t);
    @(posedge clk);
    #1 cfg_tid_we = 0;
    cur_tid[c] = t;
    cfg_lock.put(1);
  endtask

  typedef struct { int unsigned entry; logic [31:0] addr; bit we; } acc_t;
  acc_t prog [NC][$];
  bit start [NC], done [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cpu
    initial begin
      cpu_req_valid[c] = 0;
      cpu_req[c] = '0;
      forever begin
        wait (start[c]);
        for (int k = 0; k < prog[c].size(); k++) begin
          acc_t x;
          int unsigned id, idx, set;
          bit exp_hit, wb;
          logic [31:0] exp_d, wd;
          x = prog[c][k];
          id = x.entry + 1;
          if (x.entry < n_tasks && cur_tid[c] != id) set_tid(c, id);
          wd = $urandom;
          @(negedge clk);
          cpu_req_valid[c] = 1;
          cpu_req[c].addr = x.addr; cpu_req[c].we = x.we; cpu_req[c].wstrb = 4'hF; cpu_req[c].wdata = wd;
          #1;
          while (!cpu_req_ready[c]) begin
            @(negedge clk);
            #1;
          end
          @(posedge clk);
          @(negedge clk);
          cpu_req_valid[c] = 0;
          while (!cpu_rsp_valid[c]) @(negedge clk);
          idx = (x.addr >> OFF_W) % 2048;
          set = pbase[id] + idx % (1 << plog[id]);
          exp_hit = ref_c.access(set, x.addr >> OFF_W, x.we, wb);
          exp_d = golden.exists(x.addr >> 2) ? golden[x.addr >> 2] : init_word(x.addr);
          check(cpu_rsp[c].rdata == exp_d, $sformatf("data at %h", x.addr));
          check(cpu_rsp[c].hit == exp_hit, $sformatf("hit flag at %h", x.addr));
          check(int'(cpu_rsp[c].id) == id, $sformatf("id %0d exp %0d", cpu_rsp[c].id, id));
          if (x.we) golden[x.addr >> 2] = wd;
          if (!cpu_rsp[c].hit) misses[id]++;
        end
        done[c] = 1;
        wait (!start[c]);
      end
    end
  end

  task automatic run_workload(string name, int unsigned tab [], int unsigned ntask, int unsigned w);
    int unsigned nb = 0, total = 0;
    acc_t all [$];
    region_off = 32'h1000_0000 * w;
    rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    wait (init_done);
    ref_c.reset();
    golden.delete();
    n_tasks = ntask;
    for (int i = 0; i < 64; i++) begin pbase[i] = 0; plog[i] = 11; misses[i] = 0; end
    for (int c = 0; c < NC; c++) cur_tid[c] = 0;
    for (int i = 0; i < tab.size(); i++) begin
      int unsigned id = i + 1;
      pbase[id] = nb; plog[id] = log2i(tab[i]); nb += tab[i];
      @(negedge clk);
      cfg_part_we = 1; cfg_part_id = ID_W'(id); cfg_part_base = 11'(pbase[id]); cfg_part_log2 = 4'(plog[id]);
      @(posedge clk);
      #1 cfg_part_we = 0;
      if (i >= ntask) begin
        @(negedge clk);
        cfg_rng_we = 1; cfg_rng_idx = 5'(i - ntask);
        cfg_rng_entry.valid = 1;
        cfg_rng_entry.first = entry_addr(i, 0, 0);
        cfg_rng_entry.last  = entry_addr(i, tab[i] * 4, 0) - 1;
        cfg_rng_entry.id    = ID_W'(id);
        @(posedge clk);
        #1 cfg_rng_we = 0;
      end
    end
    check(nb <= 2048, $sformatf("%s: %0d sets allocated fit in 2048", name, nb));
    // three passes over each entry's capacity, shuffled
    for (int pass = 0; pass < 3; pass++)
      for (int i = 0; i < tab.size(); i++)
        for (int l = 0; l < tab[i] * 4; l++) begin
          acc_t x;
          x.entry = i; x.addr = entry_addr(i, l, (l + pass) % 16); x.we = (pass == 1);
          all.push_back(x);
        end
    for (int c = 0; c < NC; c++) prog[c].delete();
    // each entry runs on processor (entry mod 4); the order of all accesses on a
    // processor is random, so entries and passes interleave arbitrarily
    for (int k = 0; k < all.size(); k++) prog[all[k].entry % NC].push_back(all[k]);
    for (int c = 0; c < NC; c++) prog[c].shuffle();
    for (int c = 0; c < NC; c++) begin done[c] = 0; start[c] = 1; end
    wait (done[0] && done[1] && done[2] && done[3]);
    for (int c = 0; c < NC; c++) start[c] = 0;
    for (int i = 0; i < tab.size(); i++) begin
      check(misses[i + 1] == tab[i] * 4,
            $sformatf("%s entry %0d: %0d misses, expected only %0d cold ones", name, i, misses[i + 1], tab[i] * 4));
      total += misses[i + 1];
    end
    $display("%s: %0d sets allocated, %0d misses (all cold)", name, nb, total);
  endtask

  initial begin
    cfg_tid_we = 0; cfg_rng_we = 0; cfg_part_we = 0; cfg_tid_cpu = 0; cfg_tid_value = 0;
    cfg_part_id = 0; cfg_rng_idx = 0; cfg_rng_entry = '0; cfg_part_base = 0; cfg_part_log2 = 0;
    for (int c = 0; c < NC; c++) begin start[c] = 0; done[c] = 0; end
    run_workload("2jpeg+canny", tab1, 15, 0);
    run_workload("mpeg2", tab2, 13, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_l2_index_translator: programs buffer intervals and partitions for the ids of
// Table-1-like tasks and buffers, then drives random addresses with random task ids
// on four ports. Checked: a buffer address carries the buffer's id whatever task
// issues it (producer and consumer share the buffer's partition), any other address
// carries the task id, and the set is base + (address index mod partition size).
module tb_l2_index_translator;
  import l2p_pkg::*;
  localparam int unsigned SW = 11;
  localparam int unsigned NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_rng_we, cfg_part_we;
  logic [4:0] cfg_rng_idx;
  range_entry_t cfg_rng_entry;
  logic [ID_W-1:0] cfg_part_id;
  logic [SW-1:0] cfg_part_base;
  logic [3:0] cfg_part_log2;
  logic [NP-1:0][ADDR_W-1:0] addr;
  logic [NP-1:0][ID_W-1:0] task_id, acc_id;
  logic [NP-1:0] is_buf;
  logic [NP-1:0][SW-1:0] set;
  int unsigned pbase [64], plog [64];
  int checks = 0, failures = 0;

  l2_index_translator #(.N_PORTS(NP), .N_RANGES(32), .N_IDS(64), .SET_W(SW)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned next_base;
    cfg_rng_we = 0; cfg_part_we = 0; cfg_rng_idx = 0; cfg_rng_entry = '0;
    cfg_part_id = 0; cfg_part_base = 0; cfg_part_log2 = 0; addr = '0; task_id = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // partitions: id i gets 2^(i mod 6) sets, packed one after another
    next_base = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      cfg_part_we = 1; cfg_part_id = ID_W'(i);
      plog[i] = i % 6; pbase[i] = next_base;
      cfg_part_log2 = 4'(plog[i]); cfg_part_base = SW'(next_base);
      next_base += 1 << plog[i];
      @(posedge clk);
      #1 cfg_part_we = 0;
    end
    // buffers: 4 KB each at 0x80000 + k*0x10000, ids 40+k
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      cfg_rng_we = 1; cfg_rng_idx = 5'(k);
      cfg_rng_entry.valid = 1;
      cfg_rng_entry.first = 32'h80000 + k * 32'h10000;
      cfg_rng_entry.last  = 32'h80000 + k * 32'h10000 + 32'hFFF;
      cfg_rng_entry.id    = ID_W'(40 + k);
      @(posedge clk);
      #1 cfg_rng_we = 0;
    end
    for (int n = 0; n < 2000; n++) begin
      bit          exp_buf [NP];
      int unsigned exp_id [NP];
      for (int p = 0; p < NP; p++) begin
        task_id[p] = ID_W'($urandom_range(0, 39));
        if ($urandom_range(0, 1) == 1) begin
          automatic int k = $urandom_range(0, 7);
          addr[p] = 32'h80000 + k * 32'h10000 + $urandom_range(0, 32'h1FFF);
        end else begin
          addr[p] = $urandom_range(0, 32'h7FFFF);
        end
        exp_buf[p] = (addr[p] >= 32'h80000) && ((addr[p] & 32'hFFFF) <= 32'hFFF);
        exp_id[p]  = exp_buf[p] ? 40 + ((addr[p] - 32'h80000) >> 16) : task_id[p];
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        automatic int unsigned idx = (addr[p] >> OFF_W) % (1 << SW);
        automatic int unsigned exp_set = pbase[exp_id[p]] + idx % (1 << plog[exp_id[p]]);
        check(is_buf[p] == exp_buf[p], $sformatf("is_buf addr %h", addr[p]));
        check(int'(acc_id[p]) == exp_id[p], $sformatf("id %0d exp %0d addr %h", acc_id[p], exp_id[p], addr[p]));
        check(int'(set[p]) == exp_set, $sformatf("set %0d exp %0d", set[p], exp_set));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

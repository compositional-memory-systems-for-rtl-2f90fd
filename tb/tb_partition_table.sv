// tb_partition_table: checks the reset mapping (identity, the whole cache), then
// programs random partitions (base, power-of-two size) and checks on every port that
// the translated set is base + (index mod size) and always lies inside the id's
// partition. Uses the full 2048-set index and 64 ids.
module tb_partition_table;
  import l2p_pkg::*;
  localparam int unsigned SW = 11;
  localparam int unsigned NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [ID_W-1:0] cfg_id;
  logic [SW-1:0] cfg_base;
  logic [3:0] cfg_log2;
  logic [NP-1:0][ID_W-1:0] lk_id;
  logic [NP-1:0][SW-1:0] lk_index, lk_set;
  int unsigned mbase [64];
  int unsigned mlog [64];
  int checks = 0, failures = 0;

  partition_table #(.N_IDS(64), .SET_W(SW), .N_PORTS(NP)) dut (.*);

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

  task automatic probe(int n);
    for (int k = 0; k < n; k++) begin
      for (int p = 0; p < NP; p++) begin
        lk_id[p]    = ID_W'($urandom);
        lk_index[p] = SW'($urandom);
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        int unsigned sz  = 1 << mlog[lk_id[p]];
        automatic int unsigned exp = (mbase[lk_id[p]] + (int'(lk_index[p]) % sz)) % (1 << SW);
        automatic int unsigned off = (int'(lk_set[p]) - mbase[lk_id[p]] + (1 << SW)) % (1 << SW);
        check(int'(lk_set[p]) == exp, $sformatf("id %0d idx %0d set %0d exp %0d", lk_id[p], lk_index[p], lk_set[p], exp));
        check(off < sz, "translated set inside the partition");
      end
    end
  endtask

  initial begin
    cfg_we = 0; cfg_id = 0; cfg_base = 0; cfg_log2 = 0; lk_id = '0; lk_index = '0;
    for (int i = 0; i < 64; i++) begin mbase[i] = 0; mlog[i] = SW; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    probe(200);
    for (int round = 0; round < 5; round++) begin
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        cfg_we = 1; cfg_id = ID_W'(i);
        cfg_log2 = 4'($urandom_range(0, SW));
        cfg_base = SW'($urandom);
        mbase[i] = cfg_base; mlog[i] = cfg_log2;
        @(posedge clk);
        #1 cfg_we = 0;
      end
      probe(300);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

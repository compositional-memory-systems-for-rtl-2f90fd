// tb_range_table: loads random shared-memory intervals (some overlapping, some
// invalid) and checks every lookup port against a direct search of the same
// intervals: hit flag, and the id of the lowest-numbered matching valid entry.
// Addresses are drawn near interval bounds so that first/last are tested exactly.
module tb_range_table;
  import l2p_pkg::*;
  localparam int unsigned NR = 8;
  localparam int unsigned NP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [2:0] cfg_idx;
  range_entry_t cfg_entry;
  logic [NP-1:0][ADDR_W-1:0] lk_addr;
  logic [NP-1:0] lk_hit;
  logic [NP-1:0][ID_W-1:0] lk_id;
  range_entry_t model [NR];
  int checks = 0, failures = 0;

  range_table #(.N_RANGES(NR), .N_PORTS(NP)) dut (.*);

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
    cfg_we = 0; cfg_idx = 0; cfg_entry = '0; lk_addr = '0;
    for (int e = 0; e < NR; e++) model[e] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    #1 check(lk_hit == '0, "no hit after reset");
    for (int round = 0; round < 20; round++) begin
      for (int e = 0; e < NR; e++) begin
        range_entry_t r;
        r.valid = ($urandom_range(0, 4) != 0);
        r.first = 32'h1000 * $urandom_range(0, 15) + $urandom_range(0, 255);
        r.last  = r.first + $urandom_range(0, 32'h1800);
        r.id    = ID_W'($urandom);
        @(negedge clk);
        cfg_we = 1; cfg_idx = 3'(e); cfg_entry = r;
        @(posedge clk);
        #1 cfg_we = 0;
        model[e] = r;
      end
      for (int n = 0; n < 100; n++) begin
        for (int p = 0; p < NP; p++) begin
          automatic int e = $urandom_range(0, NR - 1);
          case ($urandom_range(0, 4))
            0: lk_addr[p] = model[e].first;
            1: lk_addr[p] = model[e].first - 1;
            2: lk_addr[p] = model[e].last;
            3: lk_addr[p] = model[e].last + 1;
            default: lk_addr[p] = $urandom_range(0, 32'h12000);
          endcase
        end
        #1;
        for (int p = 0; p < NP; p++) begin
          automatic bit h = 0;
          automatic logic [ID_W-1:0] id = '0;
          for (int e = 0; e < NR; e++) begin
            if (!h && model[e].valid && lk_addr[p] >= model[e].first && lk_addr[p] <= model[e].last) begin
              h = 1; id = model[e].id;
            end
          end
          check(lk_hit[p] == h, $sformatf("hit port %0d addr %h", p, lk_addr[p]));
          if (h) check(lk_id[p] == id, $sformatf("id port %0d addr %h", p, lk_addr[p]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

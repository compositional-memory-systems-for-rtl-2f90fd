// tb_l2_bank: self-checking test of one L2 bank.
//
// A small bank (8 sets, 4 ways) sees random reads and writes to a pool of lines
// larger than the bank, so hits, clean and dirty evictions all occur. Each line
// always goes to set (line address mod 8). Checked per access: read data against a
// golden word memory, the hit flag against the LRU reference model, the response
// latency of hits (two cycles after acceptance), and at the end the number of
// write-backs and refills seen by main memory against the reference counts. The
// initialisation sweep length (one cycle per set) is checked too.
module tb_l2_bank;
  import l2p_pkg::*;
  import l2p_ref_pkg::*;

  localparam int unsigned SETS = 8;
  localparam int unsigned WAYS = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         init_done, req_valid, req_ready, rsp_valid;
  bank_req_t    req;
  logic [2:0]   req_set;
  bank_rsp_t    rsp;
  logic         mem_req_valid, mem_req_ready, mem_rvalid;
  mem_req_t     mem_req;
  logic [LINE_W-1:0] mem_rdata;
  int unsigned  n_reads, n_writes;

  l2_bank #(.SETS(SETS), .WAYS(WAYS)) dut (.*);
  main_mem_model #(.LAT(3)) u_mem (.*);

  int checks = 0, failures = 0;
  logic [31:0] golden [int unsigned];
  cache_ref    ref_c = new(WAYS);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [31:0] gold(logic [31:0] a);
    return golden.exists(a >> 2) ? golden[a >> 2] : init_word(a);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned init_cycles;
    req_valid = 0;
    req = '0;
    req_set = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    init_cycles = 0;
    while (!init_done) begin
      @(posedge clk);
      init_cycles++;
    end
    check(init_cycles == SETS, $sformatf("init sweep took %0d cycles", init_cycles));

    for (int n = 0; n < 3000; n++) begin
      logic [LADDR_W-1:0] la;
      logic [31:0]        a, wd, exp;
      logic [3:0]         strb;
      bit                 we, exp_hit, wb;
      int unsigned        t_acc, t_rsp;
      la   = LADDR_W'(32'h100 + $urandom_range(0, 47));  // 48 lines over 8 sets x 4 ways
      a    = {la, OFF_W'($urandom_range(0, WORDS - 1) * 4)};
      we   = ($urandom_range(0, 2) == 0);
      strb = we ? 4'($urandom_range(1, 15)) : 4'h0;
      wd   = $urandom;
      @(negedge clk);
      req_valid = 1;
      req       = '0;
      req.addr  = a;
      req.we    = we;
      req.wstrb = strb;
      req.wdata = wd;
      req.id    = ID_W'(n);
      req.src   = SRC_W'(n);
      req_set   = 3'(la % SETS);
      #1;
      while (!req_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
      t_acc = 0;
      @(negedge clk);
      req_valid = 0;
      exp_hit = ref_c.access(int'(la % SETS), int'(la), we, wb);
      exp = gold(a);
      while (!rsp_valid) begin
        @(negedge clk);
        t_acc++;
      end
      t_rsp = t_acc + 1;
      check(rsp.rdata == exp, $sformatf("data %h exp %h at %h n=%0d we=%0d hit=%0d", rsp.rdata, exp, a, n, we, exp_hit));
      check(rsp.hit == exp_hit, $sformatf("hit %0d exp %0d at %h", rsp.hit, exp_hit, a));
      check(rsp.id == ID_W'(n) && rsp.src == SRC_W'(n), "id/src echoed");
      if (exp_hit) check(t_rsp == 2, $sformatf("hit latency %0d", t_rsp));
      if (we) begin
        logic [31:0] nv;
        nv = exp;
        for (int b = 0; b < 4; b++) if (strb[b]) nv[b*8 +: 8] = wd[b*8 +: 8];
        golden[a >> 2] = nv;
      end
    end
    @(negedge clk);
    check(n_writes == ref_c.n_wb, $sformatf("write-backs %0d exp %0d", n_writes, ref_c.n_wb));
    check(n_reads == ref_c.n_miss, $sformatf("refills %0d exp %0d", n_reads, ref_c.n_miss));
    check(ref_c.n_hit > 100 && ref_c.n_wb > 20, "mix of hits and dirty evictions occurred");
    $display("hits=%0d misses=%0d writebacks=%0d", ref_c.n_hit, ref_c.n_miss, ref_c.n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

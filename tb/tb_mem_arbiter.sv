// tb_mem_arbiter: four behavioural banks issue random line write-backs and refills
// to one main-memory model through the arbiter. Each bank keeps its own request
// stable until accepted and waits for its refill. Checked: every refill returns to
// the bank that asked for it with the line last written to that address (banks use
// disjoint addresses), only one refill is ever in flight, all transactions complete,
// and at least one cycle saw several banks asking at once.
module tb_mem_arbiter;
  import l2p_pkg::*;
  import l2p_ref_pkg::*;
  localparam int unsigned NB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     [NB-1:0]      b_req_valid, b_req_ready, b_rvalid;
  mem_req_t [NB-1:0]      b_req;
  logic     [LINE_W-1:0]  b_rdata;
  logic                   mem_req_valid, mem_req_ready, mem_rvalid;
  mem_req_t               mem_req;
  logic     [LINE_W-1:0]  mem_rdata;
  int unsigned            n_reads, n_writes;

  mem_arbiter #(.N_BANKS(NB)) dut (.*);
  main_mem_model #(.LAT(2)) u_mem (.*);

  int checks = 0, failures = 0, multi = 0, outstanding = 0;
  int done [NB];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if ($countones(b_req_valid) > 1) multi++;
    if (mem_req_valid && mem_req_ready && !mem_req.we) outstanding++;
    if (mem_rvalid) outstanding--;
    if (outstanding > 1) begin failures++; $display("FAIL: two refills in flight"); end
  end

  function automatic logic [LINE_W-1:0] default_line(logic [LADDR_W-1:0] la);
    logic [LINE_W-1:0] l;
    for (int w = 0; w < WORDS; w++) l[w*DATA_W +: DATA_W] = init_word({la, OFF_W'(w * STRB_W)});
    return l;
  endfunction

  for (genvar b = 0; b < NB; b++) begin : g_bank
    initial begin
      logic [LINE_W-1:0] written [int];
      b_req_valid[b] = 0; b_req[b] = '0; done[b] = 0;
      wait (rst_n);
      for (int n = 0; n < 200; n++) begin
        automatic logic [LADDR_W-1:0] la = LADDR_W'(b * 16 + $urandom_range(0, 15));
        automatic bit we = ($urandom_range(0, 1) == 1);
        @(negedge clk);
        b_req_valid[b] = 1;
        b_req[b].we = we; b_req[b].laddr = la;
        b_req[b].wline = {16{$urandom}};
        if (we) written[int'(la)] = b_req[b].wline;
        #1;
        while (!b_req_ready[b]) begin
          @(negedge clk);
          #1;
        end
        @(posedge clk);
        @(negedge clk);
        b_req_valid[b] = 0;
        if (!we) begin
          while (!b_rvalid[b]) @(negedge clk);
          check(b_rdata == (written.exists(int'(la)) ? written[int'(la)] : default_line(la)),
                $sformatf("bank %0d refill data for line %h", b, la));
        end
        repeat ($urandom_range(0, 3)) @(negedge clk);
      end
      done[b] = 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    @(negedge clk);
    check(n_reads + n_writes == NB * 200, "all transactions reached memory");
    check(multi > 0, "several banks asked at once");
    $display("reads=%0d writes=%0d multi=%0d", n_reads, n_writes, multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

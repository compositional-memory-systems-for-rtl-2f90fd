// tb_l2_interconnect: four processor ports, four banks. Each bank is a small
// behavioural responder that is ready only in some cycles and answers a fixed number
// of cycles after accepting, echoing the request's address as data. Ports send random
// requests to random banks (often the same bank, so arbitration stalls happen).
// Checked: every response returns to the port that issued it with that port's own
// address, each request reaches the bank it named with the right src, no port waits
// more than N_CPU grants on a bank (round-robin fairness), and the number of
// contended cycles is counted and must be non-zero.
module tb_l2_interconnect;
  import l2p_pkg::*;
  localparam int unsigned NC = 4, NB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      [NC-1:0]        m_valid, m_ready, m_rsp_valid;
  bank_req_t [NC-1:0]        m_req;
  logic      [NC-1:0][1:0]   m_bank;
  bank_rsp_t [NC-1:0]        m_rsp;
  logic      [NB-1:0]        s_valid, s_ready, s_rsp_valid;
  bank_req_t [NB-1:0]        s_req;
  bank_rsp_t [NB-1:0]        s_rsp;

  l2_interconnect #(.N_CPU(NC), .N_BANKS(NB)) dut (.*);

  int checks = 0, failures = 0;
  int contended = 0;
  int done [NC];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // behavioural banks
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic busy;
    int   cnt;
    bank_req_t held;
    int   waits [NC];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy <= 0; cnt <= 0; s_ready[b] <= 1; s_rsp_valid[b] <= 0; s_rsp[b] <= '0; held <= '0;
        for (int m = 0; m < NC; m++) waits[m] <= 0;
      end else begin
        s_rsp_valid[b] <= 0;
        if (s_valid[b] && s_ready[b]) begin
          check(s_req[b].set[1:0] == 2'(b), "request reached the bank it named");
          check(int'(s_req[b].src) < NC && s_req[b].addr[31:28] == 4'(s_req[b].src), "src field");
          for (int m = 0; m < NC; m++) begin
            if (m == int'(s_req[b].src)) waits[m] <= 0;
            else if (m_valid[m] && int'(m_bank[m]) == b) begin
              waits[m] <= waits[m] + 1;
              check(waits[m] < NC, "round-robin: a waiting port is served within N grants");
            end
          end
          held <= s_req[b]; busy <= 1; cnt <= $urandom_range(1, 3); s_ready[b] <= 0;
        end else if (busy) begin
          if (cnt == 0) begin
            s_rsp_valid[b] <= 1;
            s_rsp[b].rdata <= held.addr;
            s_rsp[b].src   <= held.src;
            s_rsp[b].id    <= held.id;
            s_rsp[b].hit   <= 1;
            busy <= 0;
          end else cnt <= cnt - 1;
        end else begin
          s_ready[b] <= ($urandom_range(0, 3) != 0);
        end
      end
    end
  end

  always @(posedge clk) begin
    for (int m = 0; m < NC; m++) if (m_valid[m] && !m_ready[m] && s_ready[m_bank[m]]) contended++;
  end

  for (genvar m = 0; m < NC; m++) begin : g_port
    initial begin
      m_valid[m] = 0; m_req[m] = '0; m_bank[m] = '0;
      done[m] = 0;
      wait (rst_n);
      for (int n = 0; n < 300; n++) begin
        logic [31:0] a;
        logic [1:0]  bk;
        bk = ($urandom_range(0, 1) == 1) ? 2'd0 : 2'($urandom_range(0, 3));
        a  = {4'(m), 12'($urandom), 8'($urandom), 6'($urandom), bk};
        @(negedge clk);
        m_valid[m] = 1; m_req[m] = '0; m_req[m].addr = a; m_req[m].set = SETF_W'(bk);
        m_req[m].id = ID_W'(m); m_bank[m] = bk;
        #1;
        while (!m_ready[m]) begin
          @(negedge clk);
          #1;
        end
        @(posedge clk);
        @(negedge clk);
        m_valid[m] = 0;
        while (!m_rsp_valid[m]) @(negedge clk);
        check(m_rsp[m].rdata == a && m_rsp[m].id == ID_W'(m), $sformatf("port %0d got its own response", m));
      end
      done[m] = 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done[0] && done[1] && done[2] && done[3]);
    check(contended > 0, $sformatf("bank contention happened (%0d cycles)", contended));
    $display("contended cycles=%0d", contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

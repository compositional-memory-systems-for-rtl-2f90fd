// main_mem_model: behavioural model of the off-chip main memory (not synthesizable,
// not part of the design).
//
// Accepts one line request at a time on the valid/ready port. A write-back (we=1)
// is stored on acceptance. A refill (we=0) returns the line LAT cycles later with a
// one-cycle mem_rvalid pulse; during that time mem_req_ready is low. Lines never
// written read as l2p_ref_pkg::init_word of each word's address. It counts reads and
// writes for the testbenches.
module main_mem_model
  import l2p_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_req_valid,
  output logic              mem_req_ready,
  input  mem_req_t          mem_req,
  output logic              mem_rvalid,
  output logic [LINE_W-1:0] mem_rdata,
  output int unsigned       n_reads,
  output int unsigned       n_writes
);
  logic [LINE_W-1:0] store [int unsigned];
  logic               pend;
  int unsigned        cnt;
  logic [LADDR_W-1:0] pend_laddr;

  function automatic logic [LINE_W-1:0] read_line(logic [LADDR_W-1:0] la);
    logic [LINE_W-1:0] l;
    if (store.exists(int'(la))) return store[int'(la)];
    for (int w = 0; w < WORDS; w++) begin
      l[w*DATA_W +: DATA_W] = l2p_ref_pkg::init_word({la, OFF_W'(w * STRB_W)});
    end
    return l;
  endfunction

  assign mem_req_ready = !pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend       <= 1'b0;
      cnt        <= 0;
      mem_rvalid <= 1'b0;
      mem_rdata  <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
      pend_laddr <= '0;
    end else begin
      mem_rvalid <= 1'b0;
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req.we) begin
          store[int'(mem_req.laddr)] = mem_req.wline;
          n_writes <= n_writes + 1;
        end else begin
          pend       <= 1'b1;
          cnt        <= LAT;
          pend_laddr <= mem_req.laddr;
          n_reads    <= n_reads + 1;
        end
      end
      if (pend) begin
        if (cnt <= 1) begin
          pend       <= 1'b0;
          mem_rvalid <= 1'b1;
          mem_rdata  <= read_line(pend_laddr);
        end else begin
          cnt <= cnt - 1;
        end
      end
    end
  end

endmodule

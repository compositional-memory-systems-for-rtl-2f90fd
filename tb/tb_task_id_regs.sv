// tb_task_id_regs: checks reset to 0, that a write changes only the addressed
// processor's register, and that it takes effect after one clock edge.
module tb_task_id_regs;
  import l2p_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  logic [1:0] cfg_cpu;
  logic [ID_W-1:0] cfg_task_id;
  logic [3:0][ID_W-1:0] task_id;
  logic [3:0][ID_W-1:0] model;
  int checks = 0, failures = 0;

  task_id_regs #(.N_CPU(4)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_cpu = 0; cfg_task_id = 0;
    model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(task_id == '0, "reset value");
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      cfg_we      = ($urandom_range(0, 1) == 1);
      cfg_cpu     = 2'($urandom_range(0, 3));
      cfg_task_id = ID_W'($urandom);
      check(task_id == model, "value before the edge");
      @(posedge clk);
      #1;
      if (cfg_we) model[cfg_cpu] = cfg_task_id;
      check(task_id == model, $sformatf("after write n=%0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

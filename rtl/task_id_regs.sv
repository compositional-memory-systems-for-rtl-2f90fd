// task_id_regs: the task-id register of every processor.
//
// The operating system writes the id of the task it switches to into the register
// of the processor that will run it (cfg_we, cfg_cpu, cfg_task_id; takes effect on
// the next rising edge). Every L2 access of that processor is then labelled with
// this id, which selects the task's private cache partition unless the address
// belongs to a shared buffer. Keeping the task id in a register follows the paper;
// the single write port, the id width and the reset value 0 are this design's.
module task_id_regs
  import l2p_pkg::*;
#(
  parameter int unsigned N_CPU = 4
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   cfg_we,
  input  logic [(N_CPU > 1 ? $clog2(N_CPU) : 1)-1:0] cfg_cpu,
  input  logic [ID_W-1:0]                        cfg_task_id,
  output logic [N_CPU-1:0][ID_W-1:0]             task_id
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      task_id <= '0;
    end else if (cfg_we && (int'(cfg_cpu) < N_CPU)) begin
      task_id[cfg_cpu] <= cfg_task_id;
    end
  end

endmodule

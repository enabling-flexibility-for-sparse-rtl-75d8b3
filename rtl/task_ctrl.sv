// task_ctrl: kernel task queue and dispatcher.
//
// Kernels waiting to run sit in a queue; the schedule (which tile runs on which
// sub-accelerator cluster, with which formats and split) is decided off-line,
// as in the paper, and written into each task.  The controller issues tasks in
// queue order: the head task is launched (cl_start pulse with cl_task) on its
// cluster as soon as that cluster is idle, so different clusters run different
// kernels in parallel (many-kernel scheduling) or the parts of one split
// kernel (single-kernel scheduling).  When the head task's cluster is busy,
// the queue waits (hol_stall), preserving order, which the merge of split-K
// partial outputs relies on.  Queue depth is this design's choice.
module task_ctrl
  import aespa_pkg::*;
#(
  parameter int QDEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push_valid,
  output logic        push_ready,
  input  task_t       push_task,
  input  logic [N_CL-1:0] cl_busy,
  output logic [N_CL-1:0] cl_start,
  output task_t       cl_task,
  output logic        queue_empty,
  output logic        hol_stall
);
  task_t head;
  logic  full, empty, launch;
  logic [N_CL-1:0] launched;   // start given last cycle, busy not yet visible

  sync_fifo #(.T(task_t), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n,
    .push(push_valid && !full), .push_data(push_task), .full,
    .pop(launch), .head, .empty, .count()
  );

  assign push_ready  = !full;
  assign queue_empty = empty;
  assign launch      = !empty && !cl_busy[head.cluster] && !launched[head.cluster];
  assign hol_stall   = !empty && !launch;
  assign cl_task     = head;

  always_comb begin
    cl_start = '0;
    if (launch) cl_start[head.cluster] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) launched <= '0;
    else        launched <= cl_start;
  end
endmodule

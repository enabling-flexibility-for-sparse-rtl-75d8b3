// task_ctrl_tb: self-checking testbench for the task queue and dispatcher.
//
// Pushes 400 tasks with random target clusters (tagged with a sequence number
// in a_base) at random times; behavioural clusters go busy the cycle after
// they are started and stay busy for a random time.  Checks that tasks launch
// in push order, each on the cluster it names, never on a busy cluster, at
// most one per cycle, that push_ready drops only when the queue is full, that
// hol_stall marks exactly the cycles in which a waiting head is held back,
// and that a free cluster never waits while its task is at the head.
module task_ctrl_tb;
  import aespa_pkg::*;

  localparam int QD = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic push_valid, push_ready, queue_empty, hol_stall;
  task_t push_task, cl_task;
  logic [N_CL-1:0] cl_busy, cl_start;
  int busy_left [N_CL];
  int checks = 0, failures = 0;
  int pushed = 0, launched = 0, stalls = 0, qcount = 0;
  cluster_e order [$];

  always #5 clk = ~clk;

  task_ctrl #(.QDEPTH(QD)) dut (.*);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // Behavioural clusters.
  always_ff @(posedge clk)
    for (int c = 0; c < N_CL; c++) begin
      if (!rst_n) begin
        cl_busy[c] <= 1'b0;
        busy_left[c] <= 0;
      end else if (cl_start[c]) begin
        cl_busy[c] <= 1'b1;
        busy_left[c] <= int'($urandom_range(1, 40));
      end else if (busy_left[c] > 1) busy_left[c] <= busy_left[c] - 1;
      else cl_busy[c] <= 1'b0;
    end

  initial begin
    push_valid = 0;
    push_task = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    while (launched < 400) begin
      @(negedge clk);
      // launch checks (combinational outputs, stable at negedge)
      check(hol_stall == (qcount > 0 && cl_start == '0), "hol_stall");
      if (hol_stall) stalls++;
      if (qcount > 0 && cl_start == '0)
        check(cl_busy[cl_task.cluster] || dut.launched[cl_task.cluster], "free cluster left waiting");
      check(queue_empty == (qcount == 0), "queue_empty");
      check(push_ready == (qcount < QD), "push_ready");
      check($onehot0(cl_start), "at most one start");
      if (cl_start != '0) begin
        check(cl_start[cl_task.cluster], "start goes to the task's cluster");
        check(!cl_busy[cl_task.cluster], "start on an idle cluster");
        check(int'(cl_task.a_base) == launched, $sformatf("launch order: got %0d expected %0d", cl_task.a_base, launched));
        launched++;
        qcount--;
      end
      if (push_valid && push_ready) begin
        pushed++;
        qcount++;
      end
      @(posedge clk);
      push_valid <= (pushed < 400) && ($urandom_range(99) < 40);
      push_task  <= '{cluster: cluster_e'($urandom_range(3)), a_base: addr_t'(pushed), default: '0};
    end
    check(stalls > 50, $sformatf("only %0d head-of-line stall cycles", stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

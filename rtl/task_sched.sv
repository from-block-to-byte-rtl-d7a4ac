// task_sched: scheduler of the SSD's internal tasks (garbage collection)
// under the Determinism annotation.
//
// Firmware queues internal tasks with task_req (one pulse per task, counted
// in a pending counter). A task is one block erase on the flash back end
// (erase_start with the block number; erase_done when the media finishes).
// Tasks are started only while no DT request is present, i.e. during idle
// periods or while ND requests are being served ("keep doing task"). While
// a DT request is present (dt_present: waiting at the controller's input or
// in service), a running erase is held with erase_suspend and no new task
// starts ("stop internal task"); the erase resumes once the DT request is
// done. Counters report started, completed and suspended tasks.
//
// Interface: task_req and erase_done are pulses, dt_present is a level.
// Timing: erase_start is a registered one-cycle pulse; erase_suspend follows
// dt_present combinationally so that a DT request reaches the media without
// waiting for a clock edge.
// From the paper: DT stops internal tasks, ND lets them run during requests or
// idle time. Own choices: a task is one erase, victim blocks are taken round
// robin, tasks are queued by firmware (the paper does not say what triggers
// garbage collection).
module task_sched #(
  parameter int unsigned BLK_W     = 16,
  parameter int unsigned PENDING_W = 8,
  parameter int unsigned STAT_W    = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              task_req,
  input  logic              dt_present,
  output logic              erase_start,
  output logic [BLK_W-1:0]  erase_blk,
  output logic              erase_suspend,
  input  logic              erase_done,
  output logic              task_running,
  output logic [PENDING_W-1:0] pending,
  output logic [STAT_W-1:0] n_started,
  output logic [STAT_W-1:0] n_done,
  output logic [STAT_W-1:0] n_suspended
);

  logic [BLK_W-1:0] next_blk;
  logic             start_now, susp_q;

  assign start_now     = (pending != '0) && !task_running && !dt_present && !erase_start;
  assign erase_suspend = task_running && dt_present;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending      <= '0;
      task_running <= 1'b0;
      erase_start  <= 1'b0;
      erase_blk    <= '0;
      next_blk     <= '0;
      susp_q       <= 1'b0;
      n_started    <= '0;
      n_done       <= '0;
      n_suspended  <= '0;
    end else begin
      erase_start <= 1'b0;
      susp_q      <= erase_suspend;
      if (erase_suspend && !susp_q) n_suspended <= n_suspended + 1'b1;
      if (start_now) begin
        erase_start  <= 1'b1;
        erase_blk    <= next_blk;
        next_blk     <= next_blk + 1'b1;
        task_running <= 1'b1;
        n_started    <= n_started + 1'b1;
      end else if (erase_done && task_running) begin
        task_running <= 1'b0;
        n_done       <= n_done + 1'b1;
      end
      // pending: +1 on request (saturating), -1 on start
      if (task_req && !start_now && (pending != '1)) pending <= pending + 1'b1;
      else if (!task_req && start_now)               pending <= pending - 1'b1;
    end
  end

  a_done_only_when_running: assert property (@(posedge clk) disable iff (!rst_n)
    erase_done |-> task_running);

endmodule

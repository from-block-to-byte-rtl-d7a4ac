// tb_task_sched: self-checking testbench for task_sched.
// A small erase counter in the testbench stands for the flash media. Checks:
// a queued task starts while no DT request is present; it is held
// (erase_suspend) for exactly as long as a DT request is present and its
// progress resumes afterwards; no task starts while DT is present; tasks
// queued while DT is present start after it leaves; the counters agree.
module tb_task_sched;
  localparam int unsigned BLK_W = 16;
  localparam int          T_ERASE = 40;

  logic              clk = 1'b0, rst_n = 1'b0;
  logic              task_req = 1'b0, dt_present = 1'b0;
  logic              erase_start, erase_suspend, erase_done, task_running;
  logic [BLK_W-1:0]  erase_blk;
  logic [7:0]        pending;
  logic [15:0]       n_started, n_done, n_suspended;

  int checks = 0, failures = 0;
  int er_cnt = 0;
  logic er_busy = 1'b0;
  int starts_seen = 0;
  int starts_during_dt = 0;

  task_sched #(.BLK_W(BLK_W), .PENDING_W(8), .STAT_W(16)) dut (.*);

  always #5 clk = ~clk;

  // media: erase progress frozen by erase_suspend
  always_ff @(posedge clk) begin
    erase_done <= 1'b0;
    if (erase_start) begin
      er_busy <= 1'b1;
      er_cnt  <= T_ERASE;
      starts_seen <= starts_seen + 1;
      if (dt_present) starts_during_dt <= starts_during_dt + 1;
    end else if (er_busy && !erase_suspend) begin
      if (er_cnt <= 1) begin
        er_busy    <= 1'b0;
        erase_done <= 1'b1;
      end else er_cnt <= er_cnt - 1;
    end
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (t=%0t)", msg, $time);
    end
  endtask

  task automatic pulse_req();
    task_req = 1'b1; @(posedge clk); #1; task_req = 1'b0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int held, cnt_before;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(!task_running && pending == 0, "idle after reset");

    // 1. task starts in idle time and completes after T_ERASE
    pulse_req();
    repeat (3) @(posedge clk); #1;
    check(task_running && starts_seen == 1, "task started while idle");
    check(erase_blk == 0, "first victim block 0");
    repeat (T_ERASE + 2) @(posedge clk); #1;
    check(!task_running && n_done == 1, "task completed");

    // 2. DT arrives while a task runs: held, then resumes
    pulse_req();
    repeat (10) @(posedge clk); #1;
    check(task_running, "second task running");
    cnt_before = er_cnt;
    dt_present = 1'b1;
    #1;
    check(erase_suspend, "suspend follows DT at once");
    held = 0;
    repeat (25) begin @(posedge clk); #1; held += int'(erase_suspend); end
    check(held == 25, "suspend held for whole DT period");
    check(er_cnt == cnt_before || er_cnt == cnt_before - 1, "erase progress frozen");
    check(n_suspended == 16'd1, "one suspension counted");
    // 3. new task queued during DT must not start
    pulse_req();
    repeat (5) @(posedge clk); #1;
    check(pending == 1, "queued during DT");
    dt_present = 1'b0;
    #1;
    check(!erase_suspend, "suspend released");
    // wait for current task, then queued one starts
    repeat (T_ERASE + 5) @(posedge clk); #1;
    check(starts_seen == 3, "queued task started after DT");
    check(erase_blk == 2, "round-robin victim block");
    repeat (T_ERASE + 5) @(posedge clk); #1;
    check(n_started == 3 && n_done == 3 && pending == 0, "counters");

    // 4. DT present before the request: no start until DT goes away
    dt_present = 1'b1;
    pulse_req(); pulse_req();
    repeat (20) @(posedge clk); #1;
    check(!task_running && pending == 2, "no start under DT");
    dt_present = 1'b0;
    repeat (3 * T_ERASE) @(posedge clk); #1;
    check(n_done == 5 && pending == 0, "both tasks ran after DT");
    check(starts_during_dt == 0, "no start ever seen while DT present");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

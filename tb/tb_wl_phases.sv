// tb_wl_phases: a two-phase workload through the whole CXL-SSD at default
// parameters and Z-NAND timings, after the paper's tail-latency run where a
// load-intensive phase turns, through a mixed phase, into a store-intensive
// one (the paper's phases "Load", "Ld&St" and "Store").
// Phase 1: 70% loads and 30% stores, with the instruction window equally
// load-heavy, so annot_gen marks every request DT. Phase 2: half loads, half
// stores; the window is exactly at the 50% threshold, which is not above it,
// so requests are ND. Phase 3: 30% loads and 70% stores, ND. All requests are
// BF, to random lines of a region larger than the SSD's DRAM. Firmware queues
// internal erases at the start of each phase.
// Checks: all load data against a reference; in phase 1 no request waits
// behind an erase (latency stays below tPROG + tR + margin, the worst case of
// a miss with a dirty victim); in phase 3 at least one request does, so the
// tail latency comes back when DT stops. Phase 2 is reported only.
module tb_wl_phases;
  import cxl_ssd_pkg::*;

  localparam int unsigned T_R    = 3000;
  localparam int unsigned T_PROG = 100000;
  localparam int unsigned T_BERS = 1000000;
  localparam int unsigned REGION = 2048;    // lines touched by the workload
  localparam int unsigned NREQ   = 120;     // requests per phase
  localparam int unsigned NOERASE_MAX = T_PROG + T_R + 200;
  localparam logic [HPA_W-1:0] BASE = 52'h1_0000_0000;
  localparam logic [HPA_W-1:0] SIZE = 52'h8_0000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [63:0] win_valid = '0, win_is_load = '0;
  logic cfg_we = 0, gpf_req = 0, gpf_busy;
  logic [HPA_W-1:0] cfg_hdm_base = BASE;
  logic host_req_valid = 0, host_req_ready, host_req_wr = 0;
  logic [HPA_W-1:0] host_req_addr = '0;
  line_t host_req_data = '0;
  logic [7:0] host_req_id = '0;
  logic host_req_persist = 0, host_req_sw_dt = 0;
  logic host_rsp_valid, host_rsp_wr, host_rsp_err;
  logic [7:0] host_rsp_id;
  line_t host_rsp_data;
  annot_t host_rsp_annot;
  logic fw_task_req = 0;
  logic nand_cmd_valid, nand_cmd_ready, nand_rsp_valid;
  nand_op_e nand_cmd_op;
  dla_t nand_cmd_addr;
  line_t nand_cmd_data, nand_rsp_data;
  logic nand_erase_start, nand_erase_suspend, nand_erase_done;
  logic [15:0] nand_erase_blk;
  logic dt_mode, decode_err;
  logic [31:0] n_hit, n_miss, n_bypass, n_writeback;
  logic [15:0] n_task_suspended, n_task_started, n_task_done;
  logic task_running;
  logic [7:0] task_pending;
  logic [HPA_W-1:0] dev_hdm_base, dev_hdm_size;

  cxl_ssd_system dut (.*);

  znand_model #(.T_R(T_R), .T_PROG(T_PROG), .T_BERS(T_BERS), .BLK_W(16)) u_nand (
    .clk, .rst_n,
    .cmd_valid (nand_cmd_valid), .cmd_ready (nand_cmd_ready), .cmd_op (nand_cmd_op),
    .cmd_addr (nand_cmd_addr), .cmd_data (nand_cmd_data),
    .rsp_valid (nand_rsp_valid), .rsp_data (nand_rsp_data),
    .erase_start (nand_erase_start), .erase_blk (nand_erase_blk),
    .erase_suspend (nand_erase_suspend), .erase_done (nand_erase_done)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  function automatic line_t init_line(dla_t a);
    return {16{32'(a) ^ 32'hC0DE_0000}};
  endfunction

  line_t ref_mem [dla_t];
  function automatic line_t ref_rd(dla_t a);
    return ref_mem.exists(a) ? ref_mem[a] : init_line(a);
  endfunction

  logic [7:0] next_id = 0;
  task automatic access(bit wr, dla_t a, line_t wdata, output int lat);
    logic [7:0] id;
    id = next_id; next_id++;
    host_req_valid = 1; host_req_wr = wr; host_req_addr = BASE + {17'b0, a, 6'b0};
    host_req_id = id; host_req_data = wdata;
    do @(posedge clk); while (!host_req_ready);
    #1 host_req_valid = 0;
    lat = 1;
    while (!(host_rsp_valid && host_rsp_id == id)) begin @(posedge clk); #1; lat++; end
    check(!host_rsp_err, "no error");
    if (wr) ref_mem[a] = wdata;
    else check(host_rsp_data == ref_rd(a), $sformatf("load data line %0d", a));
  endtask

  task automatic queue_tasks(int n);
    repeat (n) begin
      #1 fw_task_req = 1; @(posedge clk); #1 fw_task_req = 0; @(posedge clk);
    end
  endtask

  // run one phase; load_pct of the requests are loads
  task automatic phase(int load_pct, output int max_lat, output int n_blocked, output real mean_lat);
    longint sum;
    max_lat = 0; n_blocked = 0; sum = 0;
    for (int n = 0; n < int'(NREQ); n++) begin
      bit   wr;
      dla_t a;
      int   lat;
      wr = ($urandom_range(99) >= load_pct);
      a  = dla_t'($urandom_range(REGION - 1));
      access(wr, a, {16{$urandom}}, lat);
      sum += longint'(lat);
      if (lat > max_lat) max_lat = lat;
      if (lat > int'(NOERASE_MAX)) n_blocked++;
    end
    mean_lat = real'(sum) / real'(NREQ);
  endtask

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int max1, blk1, maxm, blkm, max2, blk2;
    real mean1, meanm, mean2;
    logic [15:0] s0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    cfg_we = 1; @(posedge clk); #1 cfg_we = 0;
    repeat (5) @(posedge clk); #1;

    // phase 1: load-intensive, DT
    win_valid = '1;
    for (int i = 0; i < 64; i++) win_is_load[i] = (i < 45);   // 70% loads
    repeat (3) @(posedge clk); #1;
    check(dt_mode, "phase 1 window gives DT");
    s0 = n_task_suspended;
    queue_tasks(2);
    phase(70, max1, blk1, mean1);
    $display("phase 1 (DT): max latency %0d, mean %f, blocked by erase %0d", max1, mean1, blk1);
    check(blk1 == 0, "phase 1: no request waits behind an erase");

    // phase 2: loads and stores, at the threshold, ND
    for (int i = 0; i < 64; i++) win_is_load[i] = (i < 32);   // 50% loads
    repeat (3) @(posedge clk); #1;
    check(!dt_mode, "phase 2 window (at the threshold) gives ND");
    phase(50, maxm, blkm, meanm);
    $display("phase 2 (ND): max latency %0d, mean %f, blocked by erase %0d", maxm, meanm, blkm);

    // phase 3: store-intensive, ND
    for (int i = 0; i < 64; i++) win_is_load[i] = (i < 19);   // 30% loads
    repeat (3) @(posedge clk); #1;
    check(!dt_mode, "phase 3 window gives ND");
    queue_tasks(2);
    phase(30, max2, blk2, mean2);
    $display("phase 3 (ND): max latency %0d, mean %f, blocked by erase %0d", max2, mean2, blk2);
    check(blk2 > 0 && max2 > int'(NOERASE_MAX), "phase 3: tail latency from erases returns");
    check(max2 > max1, "phase 3 tail above phase 1 tail");
    $display("erases started %0d done %0d, suspensions %0d", n_task_started, n_task_done, n_task_suspended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

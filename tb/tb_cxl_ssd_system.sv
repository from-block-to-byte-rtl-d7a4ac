// tb_cxl_ssd_system: end-to-end testbench of the CXL-SSD system at its default
// parameters, with the flash model at Z-NAND timings (tR 3 us, tPROG 100 us,
// tBERS 1 ms at 1 GHz).
// Host software maps the HDM window, then a transaction in the style of a
// key-value store runs against the device while the SSD performs an internal
// task: BeginTransaction and Put are BF+ND stores (buffered in the SSD's
// DRAM, the erase keeps running), Commit is an NB+DT store (DRAM bypass,
// erase suspended, persisted when the host sees the completion). Then loads
// are issued with a load-heavy instruction window (DT chosen by the
// threshold rule, erase suspended) and a store-heavy one (ND, the load waits
// for the erase: the tail latency the DT hint avoids). A read hit in the
// SSD's DRAM is checked for its exact round-trip time, GPF flushes the
// buffered stores, and an address outside the window is refused.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_cxl_ssd_system;
  import cxl_ssd_pkg::*;

  localparam int unsigned T_R    = 3000;
  localparam int unsigned T_PROG = 100000;
  localparam int unsigned T_BERS = 1000000;
  localparam logic [HPA_W-1:0] BASE = 52'h1_0000_0000;
  localparam logic [HPA_W-1:0] SIZE = 52'h8_0000_0000;   // 32 GB

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

  // mechanism counters
  int ev_buffered = 0, ev_hit = 0, ev_bypass = 0, ev_dt_suspend = 0, ev_nd_wait = 0;
  int ev_dt_threshold = 0, ev_gpf = 0, ev_window_err = 0, ev_fill = 0;

  line_t golden [dla_t];
  function automatic line_t init_line(dla_t a);
    return {16{32'(a) ^ 32'hC0DE_0000}};
  endfunction
  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction
  function automatic logic [HPA_W-1:0] hpa(dla_t a);
    return BASE + HPA_W'({a, 6'b0});
  endfunction
  function automatic logic in_flash(dla_t a, line_t d);
    return u_nand.mem.exists(a) && (u_nand.mem[a] == d);
  endfunction

  logic [7:0] next_id = 0;
  task automatic host_op(logic wr, logic [HPA_W-1:0] addr, logic persist, logic sw_dt,
                         line_t wd, output line_t rd, output int lat, output logic err);
    logic [7:0] id;
    id = next_id; next_id++;
    host_req_valid = 1; host_req_wr = wr; host_req_addr = addr; host_req_data = wd;
    host_req_id = id; host_req_persist = persist; host_req_sw_dt = sw_dt;
    do @(posedge clk); while (!host_req_ready);
    #1 host_req_valid = 0; host_req_persist = 0; host_req_sw_dt = 0;
    lat = 1;
    while (!(host_rsp_valid && host_rsp_id == id)) begin @(posedge clk); #1; lat++; end
    check(host_rsp_wr == wr, "response type");
    rd = host_rsp_data; err = host_rsp_err;
  endtask

  task automatic store(dla_t a, logic persist, logic sw_dt, output int lat);
    line_t d, rd;
    logic err;
    d = rnd_line();
    host_op(1, hpa(a), persist, sw_dt, d, rd, lat, err);
    check(!err, "store accepted");
    golden[a] = d;
  endtask

  task automatic load(dla_t a, output int lat);
    line_t rd;
    logic err;
    host_op(0, hpa(a), 0, 0, '0, rd, lat, err);
    check(!err, "load accepted");
    check(rd == (golden.exists(a) ? golden[a] : init_line(a)), $sformatf("load data %0h", a));
  endtask

  task automatic set_window(int loads);
    win_valid = '1;
    win_is_load = '0;
    for (int i = 0; i < loads; i++) win_is_load[i] = 1'b1;
    repeat (2) @(posedge clk); #1;
  endtask

  task automatic start_task();
    fw_task_req = 1; @(posedge clk); #1 fw_task_req = 0;
    repeat (5) @(posedge clk); #1;
    check(task_running, "internal task running");
  endtask

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, s0, b0;
    dla_t LOG_BEGIN, LOG_PUT, LOG_COMMIT;
    LOG_BEGIN = 29'h100; LOG_PUT = 29'h101; LOG_COMMIT = 29'h102;
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // 1. mapping sync
    cfg_we = 1; @(posedge clk); #1 cfg_we = 0;
    repeat (5) @(posedge clk); #1;
    check(dev_hdm_base == BASE && dev_hdm_size == SIZE, "HDM mapping synchronised to device");

    // 2. transaction while an internal task runs
    set_window(16);                       // 25 % loads: ND
    check(!dt_mode, "store-heavy window gives ND");
    start_task();
    store(LOG_BEGIN, 0, 0, lat);          // BeginTransaction: BF+ND
    check(lat < 100, $sformatf("BeginTransaction buffered (%0d cycles)", lat));
    check(task_running && n_task_suspended == 0, "task kept running under ND");
    if (lat < 100) ev_buffered++;
    store(LOG_PUT, 0, 0, lat);            // Put: BF+ND
    if (lat < 100) ev_buffered++;
    check(!u_nand.mem.exists(LOG_PUT), "Put only buffered");
    s0 = int'(n_task_suspended); b0 = n_bypass;
    store(LOG_COMMIT, 1, 1, lat);         // Commit: NB+DT
    check(host_rsp_annot.nb && host_rsp_annot.dt, "NDR echoes NB+DT");
    check(in_flash(LOG_COMMIT, golden[LOG_COMMIT]), "commit persisted at completion");
    check(lat >= int'(T_PROG) && lat < int'(T_PROG) + 200, $sformatf("commit latency %0d", lat));
    check(int'(n_task_suspended) == s0 + 1, "commit suspended the internal task");
    check(n_bypass == b0 + 1, "commit bypassed DRAM");
    if (n_bypass == b0 + 1) ev_bypass++;
    if (int'(n_task_suspended) == s0 + 1) ev_dt_suspend++;
    check(task_running, "task resumes after commit");

    // 3. load-heavy window: DT from the threshold rule
    set_window(48);                       // 75 % loads
    check(dt_mode, "load-heavy window gives DT");
    if (dt_mode) ev_dt_threshold++;
    s0 = int'(n_task_suspended);
    load(29'h2000, lat);                  // miss during erase
    check(lat < int'(T_R) + 200, $sformatf("DT load served at tR (%0d)", lat));
    check(int'(n_task_suspended) == s0 + 1, "DT load suspended the task");
    if (int'(n_task_suspended) == s0 + 1) ev_dt_suspend++;
    ev_fill++;

    // 4. store-heavy window: ND load waits behind the erase
    set_window(8);
    check(!dt_mode, "ND again");
    while (task_running) @(posedge clk);
    #1;
    start_task();
    load(29'h2001, lat);
    check(lat > int'(T_BERS) / 2, $sformatf("ND load waited for erase (%0d)", lat));
    if (lat > int'(T_BERS) / 2) ev_nd_wait++;

    // 5. DRAM hit round trip
    load(29'h2000, lat);
    check(lat == 19 + 6, $sformatf("hit round trip %0d", lat));
    if (lat == 25) ev_hit++;
    load(LOG_PUT, lat);

    // 6. GPF
    gpf_req = 1; @(posedge clk); #1 gpf_req = 0;
    repeat (3) @(posedge clk); #1;
    check(gpf_busy, "GPF in progress");
    while (gpf_busy) @(posedge clk);
    #1;
    check(in_flash(LOG_BEGIN, golden[LOG_BEGIN]) && in_flash(LOG_PUT, golden[LOG_PUT]), "GPF persisted buffered stores");
    if (in_flash(LOG_PUT, golden[LOG_PUT])) ev_gpf++;

    // 7. address outside the HDM window
    begin
      line_t rd; logic err;
      host_op(0, BASE + SIZE, 0, 0, '0, rd, lat, err);
      check(err, "outside window refused");
      if (err) ev_window_err++;
    end
    check(!decode_err, "no decode error at device");

    $display("mechanisms: buffered=%0d hit=%0d bypass=%0d dt_suspend=%0d nd_wait=%0d dt_threshold=%0d gpf=%0d window_err=%0d fill=%0d",
             ev_buffered, ev_hit, ev_bypass, ev_dt_suspend, ev_nd_wait, ev_dt_threshold, ev_gpf, ev_window_err, ev_fill);
    check(ev_buffered > 0, "mechanism: BF buffering");
    check(ev_hit > 0, "mechanism: DRAM hit");
    check(ev_bypass > 0, "mechanism: NB bypass");
    check(ev_dt_suspend > 0, "mechanism: DT suspends internal task");
    check(ev_nd_wait > 0, "mechanism: ND waits for internal task");
    check(ev_dt_threshold > 0, "mechanism: DT by load threshold");
    check(ev_gpf > 0, "mechanism: GPF flush");
    check(ev_window_err > 0, "mechanism: HDM window check");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_wl_stream: the STREAM kernels (copy, scale, add, triad) run through the
// whole CXL-SSD at default parameters and Z-NAND timings, with the hints the
// paper uses for its tail-latency runs: BF+DT. The instruction window is kept
// load-heavy, so annot_gen raises dt_mode and every request is DT. Firmware
// queues internal erases all through the run.
// Each array holds N lines of eight 64-bit elements. The testbench plays the
// CPU: it loads the operand lines, computes in integers (scale factor 3), and
// stores the result lines as BF stores. It checks every result line against a
// reference, checks that no request waited behind an erase (latency stays
// below tR plus a small margin), and that erases were suspended.
// The array size is scaled down; the paper does not give one.
module tb_wl_stream;
  import cxl_ssd_pkg::*;

  localparam int unsigned T_R    = 3000;
  localparam int unsigned T_PROG = 100000;
  localparam int unsigned T_BERS = 1000000;
  localparam int unsigned N      = 32;      // lines per array
  localparam logic [HPA_W-1:0] BASE = 52'h1_0000_0000;
  localparam logic [HPA_W-1:0] SIZE = 52'h8_0000_0000;
  // device line offsets, staggered so the three arrays use different DRAM sets
  localparam int unsigned A_OFS = 0, B_OFS = 4096 + N, C_OFS = 8192 + 2 * N;

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

  typedef logic [63:0] elem_t;

  line_t ref_mem [dla_t];
  function automatic line_t ref_rd(dla_t a);
    return ref_mem.exists(a) ? ref_mem[a] : init_line(a);
  endfunction

  int max_lat = 0;
  logic [7:0] next_id = 0;
  task automatic access(bit wr, dla_t a, line_t wdata, output line_t rdata);
    logic [7:0] id;
    int lat;
    id = next_id; next_id++;
    host_req_valid = 1; host_req_wr = wr; host_req_addr = BASE + {17'b0, a, 6'b0};
    host_req_id = id; host_req_data = wdata;
    do @(posedge clk); while (!host_req_ready);
    #1 host_req_valid = 0;
    lat = 1;
    while (!(host_rsp_valid && host_rsp_id == id)) begin @(posedge clk); #1; lat++; end
    if (lat > max_lat) max_lat = lat;
    rdata = host_rsp_data;
    if (wr) begin
      ref_mem[a] = wdata;
      check(!host_rsp_err && host_rsp_annot.dt && !host_rsp_annot.nb, "store completes as BF+DT");
    end else begin
      check(!host_rsp_err && rdata == ref_rd(a), $sformatf("load data line %0d", a));
    end
  endtask

  function automatic line_t lane_op(int kernel, line_t x, line_t y);
    line_t r;
    for (int e = 0; e < 8; e++) begin
      elem_t xe, ye;
      xe = x[e*64 +: 64]; ye = y[e*64 +: 64];
      case (kernel)
        0: r[e*64 +: 64] = xe;              // copy:  c = a
        1: r[e*64 +: 64] = 64'd3 * xe;      // scale: b = 3c
        2: r[e*64 +: 64] = xe + ye;         // add:   c = a + b
        default: r[e*64 +: 64] = xe + 64'd3 * ye;  // triad: a = b + 3c
      endcase
    end
    return r;
  endfunction

  // firmware keeps queueing erases
  always begin
    repeat (2000) @(posedge clk);
    #1 fw_task_req = 1; @(posedge clk); #1 fw_task_req = 0;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string names [4] = '{"copy", "scale", "add", "triad"};
  // operand and destination arrays per kernel
  int src1 [4] = '{A_OFS, C_OFS, A_OFS, B_OFS};
  int src2 [4] = '{0,     0,     B_OFS, C_OFS};
  int dst  [4] = '{C_OFS, B_OFS, C_OFS, A_OFS};
  int nsrc [4] = '{1, 1, 2, 2};

  initial begin
    win_valid = '1;
    win_is_load = 64'h0000_FFFF_FFFF_FFFF;  // 48 of 64 entries are loads
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    cfg_we = 1; @(posedge clk); #1 cfg_we = 0;
    repeat (5) @(posedge clk); #1;
    check(dt_mode, "load-heavy window gives DT");

    for (int k = 0; k < 4; k++) begin
      longint t0;
      t0 = $time;
      for (int i = 0; i < int'(N); i++) begin
        line_t x, y, r, dummy;
        access(0, dla_t'(src1[k] + i), '0, x);
        y = '0;
        if (nsrc[k] == 2) access(0, dla_t'(src2[k] + i), '0, y);
        r = lane_op(k, x, y);
        access(1, dla_t'(dst[k] + i), r, dummy);
      end
      $display("%s: %0d lines, %0d cycles", names[k], N, ($time - t0) / 10);
    end

    // read back every array and compare with the reference
    for (int i = 0; i < int'(N); i++) begin
      line_t d;
      access(0, dla_t'(A_OFS + i), '0, d);
      access(0, dla_t'(B_OFS + i), '0, d);
      access(0, dla_t'(C_OFS + i), '0, d);
    end
    $display("max request latency %0d cycles, erases started %0d suspended %0d",
             max_lat, n_task_started, n_task_suspended);
    check(max_lat < int'(T_R) + 200, "no DT request waited behind an erase");
    check(n_task_started > 0 && n_task_suspended > 0, "erases ran and were suspended");
    check(n_writeback == 0 && n_bypass == 0, "BF data stayed in DRAM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

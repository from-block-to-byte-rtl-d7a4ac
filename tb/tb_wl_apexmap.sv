// tb_wl_apexmap: Apex-Map style locality sweep through the whole CXL-SSD at
// default parameters and Z-NAND timings.
// Apex-Map draws addresses as index = floor(M * r^(1/alpha)), r uniform in
// [0,1): alpha = 1 is uniform random, small alpha concentrates the accesses
// on a few lines. 64-byte loads (BF+ND) are issued for four alpha values.
// The stream reaching the device is the CPU's last-level-cache misses;
// the CPU caches are not modelled, so every draw is sent. The testbench keeps
// its own copy of the SSD's direct-mapped DRAM tags, predicts hit or miss for
// every load and checks the controller's hit counter against it, checks the
// data, and checks that the DRAM hit ratio rises and the mean latency falls
// as alpha falls.
module tb_wl_apexmap;
  import cxl_ssd_pkg::*;

  localparam int unsigned T_R    = 3000;
  localparam int unsigned T_PROG = 100000;
  localparam int unsigned T_BERS = 1000000;
  localparam int unsigned M      = 8192;    // lines in the benchmark's array
  localparam int unsigned NREQ   = 300;     // loads per alpha value
  localparam int unsigned LINES  = 1024;    // CACHE_LINES default of the top
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

  // reference copy of the DRAM tags
  logic        ref_valid [LINES];
  logic [31:0] ref_line  [LINES];

  logic [7:0] next_id = 0;
  task automatic load(dla_t a, output int lat);
    logic [7:0] id;
    id = next_id; next_id++;
    host_req_valid = 1; host_req_wr = 0; host_req_addr = BASE + {17'b0, a, 6'b0}; host_req_id = id;
    do @(posedge clk); while (!host_req_ready);
    #1 host_req_valid = 0;
    lat = 1;
    while (!(host_rsp_valid && host_rsp_id == id)) begin @(posedge clk); #1; lat++; end
    check(!host_rsp_err && host_rsp_data == init_line(a), "load data");
  endtask

  real alphas [4] = '{1.0, 0.25, 0.05, 0.001};
  real hit_ratio [4];
  real mean_lat [4];

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < int'(LINES); i++) ref_valid[i] = 1'b0;
    win_valid = '1; win_is_load = '0;      // no DT in this sweep
    repeat (5) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    cfg_we = 1; @(posedge clk); #1 cfg_we = 0;
    repeat (5) @(posedge clk); #1;

    for (int k = 0; k < 4; k++) begin
      int hits_exp, lat, sum_lat;
      logic [31:0] h0;
      hits_exp = 0; sum_lat = 0;
      h0 = n_hit;
      for (int n = 0; n < int'(NREQ); n++) begin
        real r;
        int idx;
        int li;
        r = real'($urandom) / 4294967296.0;
        idx = int'($floor(real'(M) * (r ** (1.0 / alphas[k]))));
        if (idx >= int'(M)) idx = M - 1;
        li = idx % LINES;
        if (ref_valid[li] && ref_line[li] == 32'(idx)) hits_exp++;
        ref_valid[li] = 1'b1;
        ref_line[li]  = 32'(idx);
        load(dla_t'(idx), lat);
        sum_lat += lat;
      end
      check(n_hit - h0 == 32'(hits_exp), $sformatf("alpha %f: hits %0d expected %0d", alphas[k], n_hit - h0, hits_exp));
      hit_ratio[k] = real'(hits_exp) / real'(NREQ);
      mean_lat[k]  = real'(sum_lat) / real'(NREQ);
      $display("alpha=%f  DRAM hit ratio=%f  mean load latency=%f cycles", alphas[k], hit_ratio[k], mean_lat[k]);
    end
    for (int k = 1; k < 4; k++) begin
      check(hit_ratio[k] >= hit_ratio[k-1], "hit ratio rises as alpha falls");
      check(mean_lat[k] <= mean_lat[k-1], "latency falls as alpha falls");
    end
    check(hit_ratio[3] > 0.9 && hit_ratio[0] < 0.2, "locality extremes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ssd_ctrl: self-checking testbench for ssd_ctrl with the flash model.
// Uses a 16-line DRAM cache and shortened flash times so that conflicts,
// write-backs and erases happen quickly. A reference memory here tracks the
// last value written to every line; every read is checked against it. The
// directed part walks through the annotation cases of the design:
//   BF write buffered in DRAM (fast, flash untouched), BF read hit with its
//   exact latency, NB write persisted in flash before completion, NB read miss
//   bypassing the DRAM, BF read miss filling the DRAM, dirty-victim
//   write-back, GPF flushing all dirty lines, an ND read waiting behind an
//   erase and a DT read suspending it.
// A random part then mixes all four annotation combinations.
module tb_ssd_ctrl;
  import cxl_ssd_pkg::*;

  localparam int unsigned LINES  = 16;
  localparam int unsigned DLAT   = 19;
  localparam int unsigned T_R    = 50;
  localparam int unsigned T_PROG = 200;
  localparam int unsigned T_BERS = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 0, cmd_ready;
  io_cmd_t cmd = '0;
  line_t cmd_data = '0;
  logic cpl_valid, cpl_ready = 0;
  io_cpl_t cpl;
  logic gpf_start = 0, gpf_done, fw_task_req = 0;
  logic nand_cmd_valid, nand_cmd_ready, nand_rsp_valid;
  nand_op_e nand_cmd_op;
  dla_t nand_cmd_addr;
  line_t nand_cmd_data, nand_rsp_data;
  logic nand_erase_start, nand_erase_suspend, nand_erase_done;
  logic [15:0] nand_erase_blk;
  logic [31:0] n_hit, n_miss, n_bypass, n_writeback;
  logic [15:0] n_task_suspended, n_task_started, n_task_done;
  logic [7:0]  task_pending;
  logic        task_running;

  ssd_ctrl #(.CACHE_LINES(LINES), .DRAM_LAT(DLAT), .BLK_W(16), .STAT_W(32)) dut (.*);

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

  line_t golden [dla_t];

  function automatic line_t init_line(dla_t a);
    return {16{32'(a) ^ 32'hC0DE_0000}};
  endfunction
  function automatic line_t expect_line(dla_t a);
    return golden.exists(a) ? golden[a] : init_line(a);
  endfunction
  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction
  function automatic logic in_flash(dla_t a, line_t d);
    return u_nand.mem.exists(a) && (u_nand.mem[a] == d);
  endfunction

  // one command; lat = cycles from acceptance to cpl_valid
  task automatic run(logic wr, dla_t a, logic nb, logic dt, line_t wd, output line_t rd, output int lat);
    cmd_valid = 1; cmd.wr = wr; cmd.addr = a; cmd.annot.nb = nb; cmd.annot.dt = dt;
    cmd.tag = TAG_W'($urandom); cmd_data = wd;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    lat = 1;
    while (!cpl_valid) begin @(posedge clk); #1; lat++; end
    check(cpl.tag == cmd.tag && cpl.wr == wr && cpl.annot.nb == nb && cpl.annot.dt == dt, "completion fields");
    rd = cpl.data;
    cpl_ready = 1; @(posedge clk); #1 cpl_ready = 0;
    if (wr) golden[a] = wd;
    else check(rd == expect_line(a), $sformatf("read data line %0h", a));
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t rd, d;
    int lat, wb0, miss0, byp0, hit0;
    dla_t A, B, C, D, E;
    A = 29'h0000_1003; B = 29'h0000_2005; C = 29'h0000_3007; D = 29'h0000_4009;
    E = 29'h0000_5003;  // same DRAM line index as A
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // BF write: buffered, fast, not in flash
    d = rnd_line();
    run(1, A, 0, 0, d, rd, lat);
    check(lat < int'(T_PROG) && lat <= int'(DLAT) + 4, "BF write served from DRAM");
    check(!u_nand.mem.exists(A), "BF write not yet in flash");
    // BF read hit: exact latency DLAT + 3
    hit0 = n_hit;
    run(0, A, 0, 0, '0, rd, lat);
    check(lat == int'(DLAT) + 3, $sformatf("hit latency %0d", lat));
    check(n_hit == hit0 + 1, "hit counted");
    // NB write: persisted before completion
    d = rnd_line();
    run(1, B, 1, 0, d, rd, lat);
    check(in_flash(B, d), "NB write persisted at completion");
    check(lat >= int'(T_PROG), "NB write waited for program");
    // NB read miss: bypass, no allocation
    byp0 = n_bypass;
    run(0, C, 1, 0, '0, rd, lat);
    check(n_bypass == byp0 + 1 && lat >= int'(T_R), "NB read bypass");
    miss0 = n_miss;
    run(0, C, 0, 0, '0, rd, lat);
    check(n_miss == miss0 + 1, "NB read did not allocate");
    // BF read miss fills; next read hits
    hit0 = n_hit;
    run(0, D, 0, 0, '0, rd, lat);
    run(0, D, 0, 0, '0, rd, lat);
    check(n_hit == hit0 + 1 && lat == int'(DLAT) + 3, "BF read miss filled DRAM");
    // dirty victim write-back: A is dirty, E maps to the same line
    wb0 = n_writeback;
    d = rnd_line();
    run(1, E, 0, 0, d, rd, lat);
    check(n_writeback == wb0 + 1, "dirty victim written back");
    check(in_flash(A, golden[A]), "victim data in flash");
    run(0, A, 0, 0, '0, rd, lat);   // A comes back from flash
    // NB write to a cached line drops the cached copy
    d = rnd_line();
    run(1, A, 1, 0, d, rd, lat);
    run(0, A, 0, 0, '0, rd, lat);
    check(rd == d, "NB write not shadowed by stale DRAM copy");

    // GPF: all dirty lines reach flash
    for (int i = 0; i < 6; i++) begin
      dla_t a;
      a = dla_t'(32'h0000_7000 + i);
      run(1, a, 0, 0, rnd_line(), rd, lat);
    end
    gpf_start = 1; @(posedge clk); #1 gpf_start = 0;
    lat = 0;
    while (!gpf_done) begin @(posedge clk); #1; lat++; end
    for (int i = 0; i < 6; i++) begin
      dla_t a;
      a = dla_t'(32'h0000_7000 + i);
      check(in_flash(a, golden[a]), "GPF flushed dirty line");
    end
    check(in_flash(E, golden[E]), "GPF flushed E");
    wb0 = n_writeback;
    gpf_start = 1; @(posedge clk); #1 gpf_start = 0;
    while (!gpf_done) begin @(posedge clk); #1; end
    check(n_writeback == wb0, "second GPF finds nothing dirty");

    // ND read miss behind a running erase: waits
    fw_task_req = 1; @(posedge clk); #1 fw_task_req = 0;
    repeat (10) @(posedge clk); #1;
    check(task_running, "internal task running");
    run(0, dla_t'(29'h0000_9001), 0, 0, '0, rd, lat);
    check(lat > int'(T_BERS) / 2, $sformatf("ND read waited for erase (%0d)", lat));
    // DT read miss during an erase: erase suspended, read served at tR
    fw_task_req = 1; @(posedge clk); #1 fw_task_req = 0;
    repeat (10) @(posedge clk); #1;
    check(task_running, "second internal task running");
    run(0, dla_t'(29'h0000_9002), 0, 1, '0, rd, lat);
    check(lat < int'(T_R) + 40, $sformatf("DT read not delayed by erase (%0d)", lat));
    check(n_task_suspended == 1, "erase suspended once");
    check(task_running, "erase resumes after DT");
    while (task_running) @(posedge clk);
    #1 check(n_task_done == 2, "both tasks completed");

    // random mix
    for (int n = 0; n < 300; n++) begin
      dla_t a;
      a = dla_t'($urandom_range(0, 63)) + 29'h0000_A000;
      if ($urandom_range(9) == 0) begin
        fw_task_req = 1; @(posedge clk); #1 fw_task_req = 0;
      end
      run(1'($urandom_range(1)), a, 1'($urandom_range(1)), 1'($urandom_range(1)), rnd_line(), rd, lat);
    end
    $display("hits=%0d misses=%0d bypass=%0d writebacks=%0d suspended=%0d",
             n_hit, n_miss, n_bypass, n_writeback, n_task_suspended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_cxl_ep_ctrl: self-checking testbench for cxl_ep_ctrl.
// Checks the HDM capability register, writes the HDM base and size through
// configuration messages, sends random
// M2S requests and checks each I/O command (device line address = host line
// address minus HDM base, opcode, tag, annotation from the reserved field,
// write data). Random completions are then returned and checked as S2M DRS
// (read data) or NDR (annotation echoed in the reserved field), with random
// back-pressure on the S2M side. Also checks decode_err for an address
// outside the window and the GPF start/busy/done sequence.
module tb_cxl_ep_ctrl;
  import cxl_ssd_pkg::*;

  localparam logic [HPA_W-1:0] BASE = 52'h20_1234_5640;
  localparam logic [HPA_W-1:0] SIZE = 52'h8_0000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic dev_cfg_valid = 0;
  cfg_msg_t dev_cfg = '0;
  logic m2s_valid = 0, m2s_ready;
  m2s_req_t m2s_req = '0;
  line_t m2s_data = '0;
  logic s2m_ndr_valid, s2m_ndr_ready = 1, s2m_drs_valid, s2m_drs_ready = 1;
  s2m_ndr_t s2m_ndr;
  s2m_drs_t s2m_drs;
  logic cmd_valid, cmd_ready = 0;
  io_cmd_t cmd;
  line_t cmd_data;
  logic cpl_valid = 0, cpl_ready;
  io_cpl_t cpl = '0;
  logic gpf_start, gpf_done = 0, gpf_busy;
  logic [HPA_W-1:0] hdm_cap, hdm_base, hdm_size;
  logic decode_err;

  cxl_ep_ctrl dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic cfg(cfg_kind_e k, logic [HPA_W-1:0] v);
    dev_cfg_valid = 1; dev_cfg.kind = k; dev_cfg.value = v;
    @(posedge clk); #1 dev_cfg_valid = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    cfg(CFG_HDM_BASE, BASE);
    cfg(CFG_HDM_SIZE, SIZE);
    check(hdm_base == BASE && hdm_size == SIZE, "HDM registers");
    check(hdm_cap == 52'h8_0000_0000, "HDM capability reports 32 GB");

    for (int n = 0; n < 300; n++) begin
      m2s_req_t r;
      line_t d;
      logic [DLA_W-1:0] dla;
      dla = DLA_W'($urandom);
      r.op   = ($urandom_range(1) != 0) ? M2S_MEM_WR : M2S_MEM_RD;
      r.tag  = TAG_W'($urandom);
      r.addr = BASE[HPA_W-1:OFS_W] + HLA_W'(dla);
      r.rsvd = RSVD_W'($urandom_range(3));
      d = rnd_line();
      m2s_valid = 1; m2s_req = r; m2s_data = d;
      do @(posedge clk); while (!m2s_ready);
      #1 m2s_valid = 0;
      check(cmd_valid, "command presented");
      check(cmd.addr == dla, "HPA to DPA translation");
      check(cmd.wr == (r.op == M2S_MEM_WR), "command type");
      check(cmd.tag == r.tag, "tag");
      check(cmd.annot.nb == r.rsvd[RSVD_NB_BIT] && cmd.annot.dt == r.rsvd[RSVD_DT_BIT], "annotation extracted");
      if (cmd.wr) check(cmd_data == d, "write data");
      // hold cmd_ready low for a few cycles: command must stay
      repeat ($urandom_range(0, 3)) begin
        @(posedge clk); #1;
        check(cmd_valid && cmd.tag == r.tag, "command held");
      end
      cmd_ready = 1; @(posedge clk); #1 cmd_ready = 0;
      check(!cmd_valid, "command consumed");
      // completion
      begin
        io_cpl_t c;
        c.wr = (r.op == M2S_MEM_WR); c.annot = rsvd_to_annot(r.rsvd);
        c.tag = r.tag; c.data = ~d;
        s2m_ndr_ready = 0; s2m_drs_ready = 0;
        cpl_valid = 1; cpl = c;
        do @(posedge clk); while (!cpl_ready);
        #1 cpl_valid = 0;
        repeat ($urandom_range(0, 3)) @(posedge clk);
        #1;
        if (c.wr) begin
          check(s2m_ndr_valid && !s2m_drs_valid, "NDR for write");
          check(s2m_ndr.tag == r.tag && s2m_ndr.rsvd == r.rsvd, "NDR tag and annotation echo");
        end else begin
          check(s2m_drs_valid && !s2m_ndr_valid, "DRS for read");
          check(s2m_drs.tag == r.tag && s2m_drs.data == ~d, "DRS tag and data");
        end
        s2m_ndr_ready = 1; s2m_drs_ready = 1;
        @(posedge clk); #1;
        check(!s2m_ndr_valid && !s2m_drs_valid, "response consumed");
      end
    end
    check(!decode_err, "no decode error inside window");
    // outside the window
    m2s_valid = 1; m2s_req.addr = BASE[HPA_W-1:OFS_W] - 1; m2s_req.op = M2S_MEM_RD;
    @(posedge clk); #1 m2s_valid = 0;
    check(decode_err, "decode error outside window");
    cmd_ready = 1; @(posedge clk); #1 cmd_ready = 0;

    // GPF
    cfg(CFG_GPF, 1);
    check(gpf_start && gpf_busy, "GPF start");
    @(posedge clk); #1;
    check(!gpf_start && gpf_busy, "GPF start is a pulse");
    gpf_done = 1; @(posedge clk); #1 gpf_done = 0;
    check(!gpf_busy, "GPF done clears busy");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

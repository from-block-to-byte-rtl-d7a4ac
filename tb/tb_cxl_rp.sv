// tb_cxl_rp: self-checking testbench for cxl_rp.
// Programs the HDM base (the size comes from the device's reported capability)
// and checks the two configuration writes sent to the
// device, then issues random reads and writes inside the window with random
// annotations. A device responder here collects the M2S requests, checks
// opcode, line address and the annotation bits in the reserved field, and
// answers in reverse order (DRS with data for reads, NDR for writes). The
// host responses are checked against the ids and data. Also checks: an
// address outside the window gets an error response and no M2S request;
// the table fills up (back-pressure); GPF is forwarded.
module tb_cxl_rp;
  import cxl_ssd_pkg::*;

  localparam int unsigned MAXO = 4;
  localparam int unsigned ID_W = 8;
  localparam logic [HPA_W-1:0] BASE = 52'h10_0000_0000;
  localparam logic [HPA_W-1:0] SIZE = 52'h8_0000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 0, gpf_req = 0;
  logic [HPA_W-1:0] cfg_hdm_base = BASE, dev_hdm_cap = SIZE;
  logic host_req_valid = 0, host_req_ready, host_req_wr = 0;
  logic [HPA_W-1:0] host_req_addr = '0;
  line_t host_req_data = '0;
  logic [ID_W-1:0] host_req_id = '0;
  annot_t host_req_annot = '0;
  logic host_rsp_valid, host_rsp_wr, host_rsp_err;
  logic [ID_W-1:0] host_rsp_id;
  line_t host_rsp_data;
  annot_t host_rsp_annot;
  logic m2s_valid, m2s_ready = 1'b1;
  m2s_req_t m2s_req;
  line_t m2s_data;
  logic s2m_ndr_valid = 0, s2m_ndr_ready, s2m_drs_valid = 0, s2m_drs_ready;
  s2m_ndr_t s2m_ndr = '0;
  s2m_drs_t s2m_drs = '0;
  logic dev_cfg_valid;
  cfg_msg_t dev_cfg;

  cxl_rp #(.MAX_OUTSTANDING(MAXO), .ID_W(ID_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  // expected per id
  logic  exp_wr   [256];
  line_t exp_data [256];
  annot_t exp_an  [256];
  int    n_rsp = 0, n_m2s = 0, n_err = 0;
  m2s_req_t got_req [$];
  line_t    got_data[$];
  logic [HPA_W-1:0] exp_addr [256];
  logic [ID_W-1:0]  id_of_tag [16];
  int cfg_seen = 0;
  cfg_msg_t cfgs [4];

  always @(posedge clk) if (rst_n) begin
    if (m2s_valid && m2s_ready) begin
      got_req.push_back(m2s_req);
      got_data.push_back(m2s_data);
      n_m2s++;
    end
    if (host_rsp_valid) begin
      n_rsp++;
      if (host_rsp_err) n_err++;
      else begin
        check(host_rsp_wr == exp_wr[host_rsp_id], "rsp type");
        if (!host_rsp_wr) check(host_rsp_data == ~exp_data[host_rsp_id], "read data");
        else check(host_rsp_annot == exp_an[host_rsp_id], "NDR annotation echo");
      end
    end
    if (dev_cfg_valid && cfg_seen < 4) begin
      cfgs[cfg_seen] = dev_cfg;
      cfg_seen++;
    end
  end

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic issue(logic wr, logic [HPA_W-1:0] a, logic [ID_W-1:0] id, annot_t an);
    host_req_valid = 1; host_req_wr = wr; host_req_addr = a; host_req_id = id;
    host_req_annot = an; host_req_data = rnd_line();
    exp_wr[id] = wr; exp_data[id] = host_req_data; exp_an[id] = an; exp_addr[id] = a;
    do @(posedge clk); while (!host_req_ready);
    #1 host_req_valid = 0;
  endtask

  // answer all collected requests, newest first
  task automatic respond_all();
    while (got_req.size() > 0) begin
      m2s_req_t r;
      line_t d;
      r = got_req.pop_back();
      d = got_data.pop_back();
      if (r.op == M2S_MEM_RD) begin
        s2m_drs_valid = 1; s2m_drs.tag = r.tag; s2m_drs.data = ~exp_data[id_of_tag[4'(r.tag[1:0])]];
        do @(posedge clk); while (!s2m_drs_ready);
        #1 s2m_drs_valid = 0;
      end else begin
        s2m_ndr_valid = 1; s2m_ndr.tag = r.tag; s2m_ndr.rsvd = r.rsvd;
        do @(posedge clk); while (!s2m_ndr_ready);
        #1 s2m_ndr_valid = 0;
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expected_rsp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    cfg_we = 1; @(posedge clk); #1 cfg_we = 0;
    repeat (3) @(posedge clk); #1;
    check(cfg_seen == 2, "two config writes");
    check(cfgs[0].kind == CFG_HDM_BASE && cfgs[0].value == BASE, "HDM base synced");
    check(cfgs[1].kind == CFG_HDM_SIZE && cfgs[1].value == SIZE, "HDM size synced");

    expected_rsp = 0;
    for (int round = 0; round < 30; round++) begin
      int nreq;
      nreq = $urandom_range(1, MAXO);
      for (int k = 0; k < nreq; k++) begin
        logic [ID_W-1:0] id;
        logic [HPA_W-1:0] a;
        annot_t an;
        id = ID_W'(round * 8 + k);
        a  = BASE + HPA_W'({$urandom_range(0, 32'h7FFF_FFFF), 6'b0}) % SIZE;
        an = annot_t'($urandom_range(3));
        issue(1'($urandom_range(1)), a, id, an);
        // the request just taken is the last in got_req
        begin
          m2s_req_t r;
          r = got_req[got_req.size() - 1];
          id_of_tag[4'(r.tag[1:0])] = id;
          check(r.addr == a[HPA_W-1:OFS_W], "M2S line address");
          check(r.op == (exp_wr[id] ? M2S_MEM_WR : M2S_MEM_RD), "M2S opcode");
          check(r.rsvd[RSVD_NB_BIT] == an.nb && r.rsvd[RSVD_DT_BIT] == an.dt, "annotation in reserved field");
          check(r.rsvd[RSVD_W-1:2] == '0, "unused reserved bits zero");
          if (exp_wr[id]) check(got_data[got_data.size() - 1] == exp_data[id], "write payload");
        end
        expected_rsp++;
      end
      if (nreq == int'(MAXO)) begin
        // table full: a further request must be held back
        host_req_valid = 1; host_req_addr = BASE; host_req_wr = 0; host_req_id = 8'hFF;
        #1;
        check(!host_req_ready && !m2s_valid, "back-pressure when table full");
        host_req_valid = 0;
      end
      respond_all();
      repeat (2) @(posedge clk); #1;
    end
    check(n_rsp == expected_rsp, "all requests answered");

    // outside the window
    begin
      int n_before;
      n_before = n_m2s;
      issue(1'b0, BASE + SIZE + 64, 8'h77, '0);
      repeat (3) @(posedge clk); #1;
      check(n_m2s == n_before, "no M2S for address outside window");
      check(n_err == 1, "error response for address outside window");
    end
    // GPF forwarded
    gpf_req = 1; @(posedge clk); #1 gpf_req = 0;
    repeat (2) @(posedge clk); #1;
    check(cfg_seen == 3 && cfgs[2].kind == CFG_GPF, "GPF forwarded");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// cxl_rp: CXL root port, CXL.mem master side.
//
// At enumeration the device reports the size of its HDM (dev_hdm_cap, read
// from its capability registers) and host software picks where the window
// goes (cfg_we with the base, a byte address, 64-byte aligned). The root port
// keeps base and size to decide which host requests belong to the device and
// writes both values into the device's configuration area (the "sync
// mapping" step), so the device can translate host addresses into device
// addresses. A GPF request from the host is forwarded the same way.
//
// A host request inside the window becomes one M2S request: a free slot of
// the outstanding-request table supplies the 16-bit tag, the host's request
// id is stored in the slot, and the annotation is written into the 10-bit
// reserved field. S2M responses (DRS for reads, NDR for writes) are matched
// by tag, the slot is freed and the host sees its id back. A request outside
// the window is not sent; it is answered with host_rsp_err one cycle later.
//
// Interface: host_req_* is valid/ready; host_rsp_* is a one-cycle pulse that
// the host always accepts. m2s_* is valid/ready toward the device, s2m_* are
// two valid/ready channels from it. dev_cfg_* is a one-cycle pulse per
// configuration write.
// Timing: a request passes to m2s_* in the same cycle (combinational);
// a response reaches host_rsp_* one cycle after its S2M handshake.
// From the paper: the HDM size retrieved from the device, the window mapping
// and sync step, annotations in the
// reserved field. Own choices: table size, tag = slot index, error path,
// response priority DRS > NDR > error.
module cxl_rp
  import cxl_ssd_pkg::*;
#(
  parameter int unsigned MAX_OUTSTANDING = 16,
  parameter int unsigned ID_W            = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  // HDM window programming and GPF from host software
  input  logic             cfg_we,
  input  logic [HPA_W-1:0] cfg_hdm_base,
  input  logic [HPA_W-1:0] dev_hdm_cap,   // HDM size reported by the device
  input  logic             gpf_req,
  // host requests (last-level cache misses and write-backs)
  input  logic             host_req_valid,
  output logic             host_req_ready,
  input  logic             host_req_wr,
  input  logic [HPA_W-1:0] host_req_addr,
  input  line_t            host_req_data,
  input  logic [ID_W-1:0]  host_req_id,
  input  annot_t           host_req_annot,
  // host responses
  output logic             host_rsp_valid,
  output logic             host_rsp_wr,
  output logic             host_rsp_err,
  output logic [ID_W-1:0]  host_rsp_id,
  output line_t            host_rsp_data,
  output annot_t           host_rsp_annot,
  // CXL.mem M2S
  output logic             m2s_valid,
  input  logic             m2s_ready,
  output m2s_req_t         m2s_req,
  output line_t            m2s_data,
  // CXL.mem S2M
  input  logic             s2m_ndr_valid,
  output logic             s2m_ndr_ready,
  input  s2m_ndr_t         s2m_ndr,
  input  logic             s2m_drs_valid,
  output logic             s2m_drs_ready,
  input  s2m_drs_t         s2m_drs,
  // configuration writes to the device
  output logic             dev_cfg_valid,
  output cfg_msg_t         dev_cfg
);

  localparam int unsigned IDX_W = (MAX_OUTSTANDING > 1) ? $clog2(MAX_OUTSTANDING) : 1;

  logic [HPA_W-1:0] hdm_base, hdm_size;
  logic             cfg_pend_size;

  // ---------------------------------------------------------------- config
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hdm_base      <= '0;
      hdm_size      <= '0;
      cfg_pend_size <= 1'b0;
      dev_cfg_valid <= 1'b0;
      dev_cfg       <= '0;
    end else begin
      dev_cfg_valid <= 1'b0;
      if (cfg_we) begin
        hdm_base      <= cfg_hdm_base;
        hdm_size      <= dev_hdm_cap;
        cfg_pend_size <= 1'b1;
        dev_cfg_valid <= 1'b1;
        dev_cfg       <= '{kind: CFG_HDM_BASE, value: cfg_hdm_base};
      end else if (cfg_pend_size) begin
        cfg_pend_size <= 1'b0;
        dev_cfg_valid <= 1'b1;
        dev_cfg       <= '{kind: CFG_HDM_SIZE, value: hdm_size};
      end else if (gpf_req) begin
        dev_cfg_valid <= 1'b1;
        dev_cfg       <= '{kind: CFG_GPF, value: HPA_W'(1)};
      end
    end
  end

  // ------------------------------------------------------ window and table
  logic [MAX_OUTSTANDING-1:0] slot_busy;
  logic [ID_W-1:0]            slot_id [MAX_OUTSTANDING];
  annot_t                     slot_an [MAX_OUTSTANDING];

  logic             in_window;
  logic [HPA_W-1:0] offset;
  assign offset    = host_req_addr - hdm_base;
  assign in_window = (host_req_addr >= hdm_base) && (offset < hdm_size);

  logic             free_found;
  logic [IDX_W-1:0] free_idx;
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int i = MAX_OUTSTANDING - 1; i >= 0; i--) begin
      if (!slot_busy[i]) begin
        free_found = 1'b1;
        free_idx   = IDX_W'(i);
      end
    end
  end

  logic             err_pend;
  logic [ID_W-1:0]  err_id;
  logic             err_wr;

  assign m2s_valid      = host_req_valid && in_window && free_found;
  assign host_req_ready = in_window ? (free_found && m2s_ready) : !err_pend;

  always_comb begin
    m2s_req.op   = host_req_wr ? M2S_MEM_WR : M2S_MEM_RD;
    m2s_req.tag  = TAG_W'(free_idx);
    m2s_req.addr = host_req_addr[HPA_W-1:OFS_W];
    m2s_req.rsvd = annot_to_rsvd(host_req_annot);
  end
  assign m2s_data = host_req_data;

  // ------------------------------------------------------------ responses
  assign s2m_drs_ready = 1'b1;
  assign s2m_ndr_ready = !s2m_drs_valid;

  logic             drs_fire, ndr_fire, issue_fire;
  logic [IDX_W-1:0] drs_idx, ndr_idx;
  assign drs_fire   = s2m_drs_valid && s2m_drs_ready;
  assign ndr_fire   = s2m_ndr_valid && s2m_ndr_ready;
  assign issue_fire = m2s_valid && m2s_ready;
  assign drs_idx    = s2m_drs.tag[IDX_W-1:0];
  assign ndr_idx    = s2m_ndr.tag[IDX_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      slot_busy      <= '0;
      err_pend       <= 1'b0;
      err_id         <= '0;
      err_wr         <= 1'b0;
      host_rsp_valid <= 1'b0;
      host_rsp_wr    <= 1'b0;
      host_rsp_err   <= 1'b0;
      host_rsp_id    <= '0;
      host_rsp_data  <= '0;
      host_rsp_annot <= '0;
      for (int i = 0; i < MAX_OUTSTANDING; i++) begin
        slot_id[i] <= '0;
        slot_an[i] <= '0;
      end
    end else begin
      host_rsp_valid <= 1'b0;
      host_rsp_err   <= 1'b0;
      if (issue_fire) begin
        slot_busy[free_idx] <= 1'b1;
        slot_id[free_idx]   <= host_req_id;
        slot_an[free_idx]   <= host_req_annot;
      end
      if (host_req_valid && !in_window && !err_pend) begin
        err_pend <= 1'b1;
        err_id   <= host_req_id;
        err_wr   <= host_req_wr;
      end
      if (drs_fire) begin
        slot_busy[drs_idx] <= 1'b0;
        host_rsp_valid     <= 1'b1;
        host_rsp_wr        <= 1'b0;
        host_rsp_id        <= slot_id[drs_idx];
        host_rsp_data      <= s2m_drs.data;
        host_rsp_annot     <= slot_an[drs_idx];
      end else if (ndr_fire) begin
        slot_busy[ndr_idx] <= 1'b0;
        host_rsp_valid     <= 1'b1;
        host_rsp_wr        <= 1'b1;
        host_rsp_id        <= slot_id[ndr_idx];
        host_rsp_data      <= '0;
        host_rsp_annot     <= rsvd_to_annot(s2m_ndr.rsvd);
      end else if (err_pend) begin
        err_pend       <= 1'b0;
        host_rsp_valid <= 1'b1;
        host_rsp_wr    <= err_wr;
        host_rsp_err   <= 1'b1;
        host_rsp_id    <= err_id;
        host_rsp_data  <= '0;
        host_rsp_annot <= '0;
      end
    end
  end

  // A response must carry the tag of an outstanding request.
  a_drs_tag_known: assert property (@(posedge clk) disable iff (!rst_n)
    s2m_drs_valid |-> slot_busy[drs_idx]);
  a_ndr_tag_known: assert property (@(posedge clk) disable iff (!rst_n)
    s2m_ndr_valid |-> slot_busy[ndr_idx]);
  // M2S valid must hold until accepted.
  a_m2s_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m2s_valid && !m2s_ready && host_req_valid) |=> host_req_valid);

endmodule

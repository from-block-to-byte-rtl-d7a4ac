// cxl_ep_ctrl: CXL controller of the Type 3 endpoint (device side).
//
// Configuration: hdm_cap reports the device's HDM size (2^DEV_CAP_LOG2 bytes)
// in a read-only capability register, which the host reads at enumeration.
// The root port writes the HDM base and size (host byte
// addresses) and the GPF (global persistent flush) control into this block's
// registers. A GPF write sets gpf_busy and pulses gpf_start toward the SSD
// controller; gpf_done from the SSD controller clears gpf_busy.
// Requests: each M2S request is parsed into an I/O command for the SSD
// controller: the host line address minus the HDM base gives the device line
// address, the reserved field gives the DT/NB annotation, tag and write data
// are passed on. A request outside the programmed HDM range is still passed
// on (address wrapped to the device size) and sets the sticky decode_err.
// Completions: a read completion becomes an S2M DRS carrying the data, a
// write completion an S2M NDR whose reserved field echoes the request's
// annotation, so the host can see that an NB store has been persisted.
//
// Interface: m2s_*, cmd_*, cpl_*, s2m_* are valid/ready channels.
// Timing: one register stage each way: a request reaches cmd_* one cycle
// after its M2S handshake, a completion reaches s2m_* one cycle after its
// cpl handshake. One command and one response can be held at a time.
// From the paper: the HDM size read by the host, address mapping sync
// through the configuration area, flit parsing into command type/address,
// annotations forwarded to the SSD controller, annotations also in the NDR,
// the GPF register. Own choices:
// register layout, the echo in the NDR, the single-entry buffers.
module cxl_ep_ctrl
  import cxl_ssd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // configuration writes from the root port
  input  logic             dev_cfg_valid,
  input  cfg_msg_t         dev_cfg,
  // CXL.mem M2S
  input  logic             m2s_valid,
  output logic             m2s_ready,
  input  m2s_req_t         m2s_req,
  input  line_t            m2s_data,
  // CXL.mem S2M
  output logic             s2m_ndr_valid,
  input  logic             s2m_ndr_ready,
  output s2m_ndr_t         s2m_ndr,
  output logic             s2m_drs_valid,
  input  logic             s2m_drs_ready,
  output s2m_drs_t         s2m_drs,
  // I/O commands to the SSD controller
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output io_cmd_t          cmd,
  output line_t            cmd_data,
  input  logic             cpl_valid,
  output logic             cpl_ready,
  input  io_cpl_t          cpl,
  // global persistent flush
  output logic             gpf_start,
  input  logic             gpf_done,
  output logic             gpf_busy,
  // HDM capability (read by the host at enumeration)
  output logic [HPA_W-1:0] hdm_cap,
  // status
  output logic [HPA_W-1:0] hdm_base,
  output logic [HPA_W-1:0] hdm_size,
  output logic             decode_err
);

  assign hdm_cap = HPA_W'(1) << DEV_CAP_LOG2;

  // ------------------------------------------------------ config registers
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hdm_base  <= '0;
      hdm_size  <= '0;
      gpf_busy  <= 1'b0;
      gpf_start <= 1'b0;
    end else begin
      gpf_start <= 1'b0;
      if (dev_cfg_valid) begin
        unique case (dev_cfg.kind)
          CFG_HDM_BASE: hdm_base <= dev_cfg.value;
          CFG_HDM_SIZE: hdm_size <= dev_cfg.value;
          CFG_GPF: if (dev_cfg.value[0] && !gpf_busy) begin
            gpf_busy  <= 1'b1;
            gpf_start <= 1'b1;
          end
          default: ;
        endcase
      end
      if (gpf_done) gpf_busy <= 1'b0;
    end
  end

  // ---------------------------------------------------------- M2S -> cmd
  hla_t hdm_base_line, dev_line;
  logic in_range;
  assign hdm_base_line = hdm_base[HPA_W-1:OFS_W];
  assign dev_line      = m2s_req.addr - hdm_base_line;
  assign in_range      = (m2s_req.addr >= hdm_base_line) &&
                         (dev_line < hdm_size[HPA_W-1:OFS_W]);

  assign m2s_ready = !cmd_valid || cmd_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd_valid  <= 1'b0;
      cmd        <= '0;
      cmd_data   <= '0;
      decode_err <= 1'b0;
    end else begin
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (m2s_valid && m2s_ready) begin
        cmd_valid <= 1'b1;
        cmd.wr    <= (m2s_req.op == M2S_MEM_WR);
        cmd.addr  <= dev_line[DLA_W-1:0];
        cmd.annot <= rsvd_to_annot(m2s_req.rsvd);
        cmd.tag   <= m2s_req.tag;
        cmd_data  <= m2s_data;
        if (!in_range) decode_err <= 1'b1;
      end
    end
  end

  // ---------------------------------------------------------- cpl -> S2M
  assign cpl_ready = !s2m_ndr_valid && !s2m_drs_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s2m_ndr_valid <= 1'b0;
      s2m_drs_valid <= 1'b0;
      s2m_ndr       <= '0;
      s2m_drs       <= '0;
    end else begin
      if (s2m_ndr_valid && s2m_ndr_ready) s2m_ndr_valid <= 1'b0;
      if (s2m_drs_valid && s2m_drs_ready) s2m_drs_valid <= 1'b0;
      if (cpl_valid && cpl_ready) begin
        if (cpl.wr) begin
          s2m_ndr_valid <= 1'b1;
          s2m_ndr.tag   <= cpl.tag;
          s2m_ndr.rsvd  <= annot_to_rsvd(cpl.annot);
        end else begin
          s2m_drs_valid <= 1'b1;
          s2m_drs.tag   <= cpl.tag;
          s2m_drs.data  <= cpl.data;
        end
      end
    end
  end

  a_ndr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (s2m_ndr_valid && !s2m_ndr_ready) |=> (s2m_ndr_valid && $stable(s2m_ndr)));
  a_drs_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (s2m_drs_valid && !s2m_drs_ready) |=> (s2m_drs_valid && $stable(s2m_drs)));

endmodule

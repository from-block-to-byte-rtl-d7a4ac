// cxl_ssd_system: host-side CXL.mem path and the CXL-SSD endpoint, wired end
// to end.
//
// Host side: annot_gen turns the CPU's instruction-window state into the DT
// hint and the persistent-store flag into NB; cxl_rp checks the request
// against the HDM window, packs it into an M2S request with the annotation in
// the reserved field and returns S2M responses to the host.
// Device side: cxl_ep_ctrl holds the HDM mapping and GPF register, parses M2S
// requests into I/O commands and formats S2M responses; ssd_ctrl serves the
// commands from its internal DRAM cache or the flash back end and runs the
// internal tasks under the DT hint.
// The FlexBus link and PHY between cxl_rp and cxl_ep_ctrl carry the messages
// unchanged and are not modelled: the two blocks are connected directly
// through a cxl_mem_if bundle, whose assertions check the link handshake. The
// flash media (Z-NAND) is outside this module, reached through the nand_*
// ports.
//
// Interface: host_req_* valid/ready, host_rsp_* a pulse per response.
// cfg_we places the HDM window at cfg_hdm_base; its size is the one the
// device reports. gpf_req starts a global persistent flush (gpf_busy high
// until it is done). fw_task_req queues one internal task.
// Timing: a read that hits the SSD's DRAM returns DRAM_LAT + 6 cycles after
// the host handshake; flash accesses add tR or tPROG of the media.
module cxl_ssd_system
  import cxl_ssd_pkg::*;
#(
  parameter int unsigned WINDOW          = 64,
  parameter int unsigned THRESH_PCT      = 50,
  parameter int unsigned MAX_OUTSTANDING = 16,
  parameter int unsigned ID_W            = 8,
  parameter int unsigned CACHE_LINES     = 1024,
  parameter int unsigned DRAM_LAT        = 19,
  parameter int unsigned BLK_W           = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // CPU instruction window
  input  logic [WINDOW-1:0] win_valid,
  input  logic [WINDOW-1:0] win_is_load,
  // host configuration
  input  logic              cfg_we,
  input  logic [HPA_W-1:0]  cfg_hdm_base,
  input  logic              gpf_req,
  output logic              gpf_busy,
  // host memory requests
  input  logic              host_req_valid,
  output logic              host_req_ready,
  input  logic              host_req_wr,
  input  logic [HPA_W-1:0]  host_req_addr,
  input  line_t             host_req_data,
  input  logic [ID_W-1:0]   host_req_id,
  input  logic              host_req_persist,
  input  logic              host_req_sw_dt,
  output logic              host_rsp_valid,
  output logic              host_rsp_wr,
  output logic              host_rsp_err,
  output logic [ID_W-1:0]   host_rsp_id,
  output line_t             host_rsp_data,
  output annot_t            host_rsp_annot,
  // firmware
  input  logic              fw_task_req,
  // flash back end
  output logic              nand_cmd_valid,
  input  logic              nand_cmd_ready,
  output nand_op_e          nand_cmd_op,
  output dla_t              nand_cmd_addr,
  output line_t             nand_cmd_data,
  input  logic              nand_rsp_valid,
  input  line_t             nand_rsp_data,
  output logic              nand_erase_start,
  output logic [BLK_W-1:0]  nand_erase_blk,
  output logic              nand_erase_suspend,
  input  logic              nand_erase_done,
  // status
  output logic              dt_mode,
  output logic              decode_err,
  output logic [31:0]       n_hit,
  output logic [31:0]       n_miss,
  output logic [31:0]       n_bypass,
  output logic [31:0]       n_writeback,
  output logic [15:0]       n_task_suspended,
  output logic [15:0]       n_task_started,
  output logic [15:0]       n_task_done,
  output logic              task_running,
  output logic [7:0]        task_pending,
  output logic [HPA_W-1:0]  dev_hdm_base,
  output logic [HPA_W-1:0]  dev_hdm_size
);

  annot_t req_annot;

  annot_gen #(.WINDOW(WINDOW), .THRESH_PCT(THRESH_PCT)) u_annot (
    .clk, .rst_n,
    .win_valid, .win_is_load,
    .req_persist (host_req_persist),
    .req_sw_dt   (host_req_sw_dt),
    .annot       (req_annot),
    .dt_mode
  );

  // CXL.mem link
  cxl_mem_if link (.clk, .rst_n);

  cxl_rp #(.MAX_OUTSTANDING(MAX_OUTSTANDING), .ID_W(ID_W)) u_rp (
    .clk, .rst_n,
    .cfg_we, .cfg_hdm_base, .gpf_req,
    .dev_hdm_cap   (link.hdm_cap),
    .host_req_valid, .host_req_ready, .host_req_wr, .host_req_addr,
    .host_req_data, .host_req_id,
    .host_req_annot (req_annot),
    .host_rsp_valid, .host_rsp_wr, .host_rsp_err, .host_rsp_id,
    .host_rsp_data, .host_rsp_annot,
    .m2s_valid     (link.m2s_valid),     .m2s_ready     (link.m2s_ready),
    .m2s_req       (link.m2s_req),       .m2s_data      (link.m2s_data),
    .s2m_ndr_valid (link.s2m_ndr_valid), .s2m_ndr_ready (link.s2m_ndr_ready),
    .s2m_ndr       (link.s2m_ndr),
    .s2m_drs_valid (link.s2m_drs_valid), .s2m_drs_ready (link.s2m_drs_ready),
    .s2m_drs       (link.s2m_drs),
    .dev_cfg_valid (link.cfg_valid),     .dev_cfg       (link.cfg)
  );

  logic             cmd_valid, cmd_ready, cpl_valid, cpl_ready;
  io_cmd_t          cmd;
  line_t            cmd_data;
  io_cpl_t          cpl;
  logic             gpf_start, gpf_done;

  cxl_ep_ctrl u_ep (
    .clk, .rst_n,
    .dev_cfg_valid (link.cfg_valid),     .dev_cfg       (link.cfg),
    .m2s_valid     (link.m2s_valid),     .m2s_ready     (link.m2s_ready),
    .m2s_req       (link.m2s_req),       .m2s_data      (link.m2s_data),
    .s2m_ndr_valid (link.s2m_ndr_valid), .s2m_ndr_ready (link.s2m_ndr_ready),
    .s2m_ndr       (link.s2m_ndr),
    .s2m_drs_valid (link.s2m_drs_valid), .s2m_drs_ready (link.s2m_drs_ready),
    .s2m_drs       (link.s2m_drs),
    .cmd_valid, .cmd_ready, .cmd, .cmd_data,
    .cpl_valid, .cpl_ready, .cpl,
    .gpf_start, .gpf_done, .gpf_busy,
    .hdm_cap  (link.hdm_cap),
    .hdm_base (dev_hdm_base),
    .hdm_size (dev_hdm_size),
    .decode_err
  );

  ssd_ctrl #(.CACHE_LINES(CACHE_LINES), .DRAM_LAT(DRAM_LAT), .BLK_W(BLK_W), .STAT_W(32)) u_ssd (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd, .cmd_data,
    .cpl_valid, .cpl_ready, .cpl,
    .gpf_start, .gpf_done,
    .fw_task_req,
    .nand_cmd_valid, .nand_cmd_ready, .nand_cmd_op, .nand_cmd_addr, .nand_cmd_data,
    .nand_rsp_valid, .nand_rsp_data,
    .nand_erase_start, .nand_erase_blk, .nand_erase_suspend, .nand_erase_done,
    .n_hit, .n_miss, .n_bypass, .n_writeback, .n_task_suspended,
    .n_task_started, .n_task_done, .task_pending, .task_running
  );

endmodule

// cxl_mem_if: the CXL.mem link between the host's root port and the device's
// endpoint controller, as one bundle of signals.
//
// Channels:
// - M2S request (master to subordinate): one message per read or write, with
//   the DT/BF hints in the reserved field. A write's 64-byte payload travels
//   beside it.
// - S2M NDR (no-data response): a write completion, echoing the hints.
// - S2M DRS (data response): the read data.
// - Configuration: the device's HDM size (hdm_cap, read by the host at
//   enumeration), and writes from the root port into the device's HDM and
//   GPF registers. This is the only part of CXL.io kept here. A write is a
//   one-cycle pulse with no back-pressure.
// The three message channels use valid/ready. The assertions below check the
// handshake rule: once valid is high, valid and the message stay unchanged
// until ready is seen.
// The message layouts come from cxl_ssd_pkg. Link layer, FlexBus and PHY are
// not modelled, so a message crosses the link in zero cycles.
// The channel names follow the CXL specification. Carrying the hints in the
// reserved field follows the paper. The handshake is this design's own.
interface cxl_mem_if
  import cxl_ssd_pkg::*;
(
  input logic clk,
  input logic rst_n
);

  logic     m2s_valid, m2s_ready;
  m2s_req_t m2s_req;
  line_t    m2s_data;
  logic     s2m_ndr_valid, s2m_ndr_ready;
  s2m_ndr_t s2m_ndr;
  logic     s2m_drs_valid, s2m_drs_ready;
  s2m_drs_t s2m_drs;
  logic     cfg_valid;
  cfg_msg_t cfg;
  logic [HPA_W-1:0] hdm_cap;

  modport master (
    output m2s_valid, m2s_req, m2s_data, cfg_valid, cfg,
    input  m2s_ready, hdm_cap,
    input  s2m_ndr_valid, s2m_ndr, s2m_drs_valid, s2m_drs,
    output s2m_ndr_ready, s2m_drs_ready
  );

  modport subordinate (
    input  m2s_valid, m2s_req, m2s_data, cfg_valid, cfg,
    output m2s_ready, hdm_cap,
    output s2m_ndr_valid, s2m_ndr, s2m_drs_valid, s2m_drs,
    input  s2m_ndr_ready, s2m_drs_ready
  );

  a_m2s_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m2s_valid && !m2s_ready |=> m2s_valid && $stable(m2s_req) && $stable(m2s_data));
  a_ndr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s2m_ndr_valid && !s2m_ndr_ready |=> s2m_ndr_valid && $stable(s2m_ndr));
  a_drs_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s2m_drs_valid && !s2m_drs_ready |=> s2m_drs_valid && $stable(s2m_drs));

endinterface

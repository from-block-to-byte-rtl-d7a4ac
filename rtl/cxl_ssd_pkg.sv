// cxl_ssd_pkg: types and constants shared by the CXL-SSD blocks.
//
// The CXL-SSD is a CXL Type 3 memory expander whose backing media is flash.
// Host load/store misses travel as CXL.mem messages; two host hints,
// Determinism (DT/ND) and Bufferability (BF/NB), ride in the 10-bit reserved
// field of the M2S request and the S2M no-data response. The 10-bit reserved
// field and the 64-byte line follow the paper. The bit positions of the two
// hints inside the reserved field, the opcode encoding and the message layouts
// below are this design's own choices: an all-zero reserved field (what a host
// without annotation support sends) means BF+ND, i.e. ordinary buffered,
// non-deterministic traffic.
package cxl_ssd_pkg;

  // 64-byte request / cache line (paper: "request size to 64B, matching the
  // last-level cache line size").
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned OFS_W      = $clog2(LINE_BYTES);

  // Host physical address width (CXL.mem carries Address[51:6]).
  localparam int unsigned HPA_W   = 52;
  localparam int unsigned HLA_W   = HPA_W - OFS_W;  // host line address

  // Device capacity: 32 GB storage node (paper, Prototypes paragraph).
  localparam int unsigned DEV_CAP_LOG2 = 35;
  localparam int unsigned DLA_W        = DEV_CAP_LOG2 - OFS_W;  // device line address

  localparam int unsigned TAG_W  = 16;   // CXL.mem tag
  localparam int unsigned RSVD_W = 10;   // reserved field used for annotations

  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [HLA_W-1:0]     hla_t;
  typedef logic [DLA_W-1:0]     dla_t;
  typedef logic [TAG_W-1:0]     tag_t;

  // Annotation carried by one request.
  //   nb = 1: non-bufferable (persist to block media before completing)
  //   dt = 1: deterministic (serve without interference from internal tasks)
  typedef struct packed {
    logic dt;
    logic nb;
  } annot_t;

  localparam int unsigned RSVD_NB_BIT = 0;
  localparam int unsigned RSVD_DT_BIT = 1;

  function automatic logic [RSVD_W-1:0] annot_to_rsvd(annot_t a);
    logic [RSVD_W-1:0] r;
    r = '0;
    r[RSVD_NB_BIT] = a.nb;
    r[RSVD_DT_BIT] = a.dt;
    return r;
  endfunction

  function automatic annot_t rsvd_to_annot(logic [RSVD_W-1:0] r);
    annot_t a;
    a.nb = r[RSVD_NB_BIT];
    a.dt = r[RSVD_DT_BIT];
    return a;
  endfunction

  typedef enum logic [1:0] {
    M2S_MEM_RD = 2'd0,
    M2S_MEM_WR = 2'd1
  } m2s_op_e;

  // Master-to-subordinate request. A write's 64-byte payload travels beside
  // it on the same handshake.
  typedef struct packed {
    m2s_op_e           op;
    tag_t              tag;
    hla_t              addr;
    logic [RSVD_W-1:0] rsvd;
  } m2s_req_t;

  // Subordinate-to-master no-data response (write completion).
  typedef struct packed {
    tag_t              tag;
    logic [RSVD_W-1:0] rsvd;
  } s2m_ndr_t;

  // Subordinate-to-master data response (read data).
  typedef struct packed {
    tag_t  tag;
    line_t data;
  } s2m_drs_t;

  // Configuration writes sent by the root port to the device's CXL
  // capability/configuration area.
  typedef enum logic [1:0] {
    CFG_HDM_BASE = 2'd0,
    CFG_HDM_SIZE = 2'd1,
    CFG_GPF      = 2'd2
  } cfg_kind_e;

  typedef struct packed {
    cfg_kind_e          kind;
    logic [HPA_W-1:0]   value;
  } cfg_msg_t;

  // I/O command from the endpoint controller to the SSD controller.
  typedef struct packed {
    logic   wr;
    dla_t   addr;
    annot_t annot;
    tag_t   tag;
  } io_cmd_t;

  // Completion from the SSD controller back to the endpoint controller.
  typedef struct packed {
    logic   wr;
    annot_t annot;
    tag_t   tag;
    line_t  data;
  } io_cpl_t;

  typedef enum logic {
    NAND_READ = 1'b0,
    NAND_PROG = 1'b1
  } nand_op_e;

endpackage

// ssd_ctrl: annotation-aware SSD controller of the CXL-SSD.
//
// It serves the I/O commands parsed by the endpoint controller from the
// internal DRAM (dram_buffer) and the flash back end, one command at a time,
// and lets the internal-task scheduler (task_sched) run garbage collection
// around them.
//
// DRAM cache: direct mapped, write back, CACHE_LINES lines of 64 bytes; the
// tag store (valid, dirty, tag) is kept in registers, the data in
// dram_buffer. The Bufferability annotation chooses the path:
//   read,  hit            -> data from DRAM (any annotation)
//   read,  miss, BF       -> write back a dirty victim, read flash, fill DRAM
//   read,  miss, NB       -> read flash, no allocation (DRAM bypass)
//   write, BF             -> write back a dirty victim if needed, write DRAM,
//                            line dirty ("buffered")
//   write, NB             -> program flash directly, drop a cached copy; the
//                            completion is returned only after the program
//                            finished, so the store is persistent
// GPF: gpf_start makes the controller, once idle, write every dirty line
// back to flash, then pulse gpf_done.
// Determinism: a DT command waiting at the input or in service drives
// task_sched's dt_present, which holds any running erase; with ND the erase
// keeps the flash busy and the command waits for it.
//
// Interface: cmd_*/cpl_* and nand_cmd_* are valid/ready; nand_rsp_valid
// pulses once per flash command (with read data for a read); the nand_erase_*
// signals go to the flash back end through task_sched.
// Timing: a DRAM hit completes DRAM_LAT + 3 cycles after the command is
// accepted; flash paths add the media time (tR, tPROG) and any wait for an
// erase in progress.
// From the paper: BF cached/buffered in DRAM, NB written straight to block
// media, GPF flushes buffered data, DT stops internal tasks, ND keeps them
// going. Own choices: cache organisation and size, one command at a time,
// invalidation of the cached copy on an NB write, allocation on BF read miss
// (the paper's "prefetch into internal DRAM" for BF loads).
module ssd_ctrl
  import cxl_ssd_pkg::*;
#(
  parameter int unsigned CACHE_LINES = 1024,
  parameter int unsigned DRAM_LAT    = 19,
  parameter int unsigned BLK_W       = 16,
  parameter int unsigned STAT_W      = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // commands from the endpoint controller
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  io_cmd_t           cmd,
  input  line_t             cmd_data,
  output logic              cpl_valid,
  input  logic              cpl_ready,
  output io_cpl_t           cpl,
  // global persistent flush
  input  logic              gpf_start,
  output logic              gpf_done,
  // internal tasks queued by firmware
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
  // statistics
  output logic [STAT_W-1:0] n_hit,
  output logic [STAT_W-1:0] n_miss,
  output logic [STAT_W-1:0] n_bypass,
  output logic [STAT_W-1:0] n_writeback,
  output logic [15:0]       n_task_suspended,
  output logic [15:0]       n_task_started,
  output logic [15:0]       n_task_done,
  output logic [7:0]        task_pending,
  output logic              task_running
);

  localparam int unsigned IDX_W = $clog2(CACHE_LINES);
  localparam int unsigned TAG_W_C = DLA_W - IDX_W;

  typedef enum logic [3:0] {
    ST_IDLE, ST_DECIDE,
    ST_DRAM_RD, ST_DRAM_RD_WAIT,
    ST_DRAM_WR, ST_DRAM_WR_WAIT,
    ST_WB_RD, ST_WB_RD_WAIT, ST_WB_PROG, ST_WB_WAIT,
    ST_NAND_RD, ST_NAND_RD_WAIT,
    ST_NAND_WR, ST_NAND_WR_WAIT,
    ST_CPL, ST_FLUSH_SCAN
  } state_e;

  state_e state;

  // tag store
  logic [CACHE_LINES-1:0] tv_valid, tv_dirty;
  logic [TAG_W_C-1:0]     tv_tag [CACHE_LINES];

  // current command
  io_cmd_t            cur;
  line_t              cur_data, rd_data;
  logic               alloc, was_hit, flushing, gpf_pend;
  logic [IDX_W-1:0]   widx;   // line being written back / filled

  logic [IDX_W-1:0]   cur_idx;
  logic [TAG_W_C-1:0] cur_tag;
  logic               hit, victim_dirty;
  assign cur_idx      = cur.addr[IDX_W-1:0];
  assign cur_tag      = cur.addr[DLA_W-1:IDX_W];
  assign hit          = tv_valid[cur_idx] && (tv_tag[cur_idx] == cur_tag);
  assign victim_dirty = tv_valid[cur_idx] && tv_dirty[cur_idx] && !hit;

  // DRAM
  logic             d_req_valid, d_req_ready, d_req_we, d_rsp_valid;
  logic [IDX_W-1:0] d_req_idx;
  line_t            d_req_wdata, d_rsp_rdata;

  dram_buffer #(.LINES(CACHE_LINES), .LAT(DRAM_LAT)) u_dram (
    .clk, .rst_n,
    .req_valid (d_req_valid),
    .req_ready (d_req_ready),
    .req_we    (d_req_we),
    .req_idx   (d_req_idx),
    .req_wdata (d_req_wdata),
    .rsp_valid (d_rsp_valid),
    .rsp_rdata (d_rsp_rdata)
  );

  // internal tasks
  logic dt_present;
  assign dt_present = (cmd_valid && cmd.annot.dt) ||
                      ((state != ST_IDLE) && !flushing && cur.annot.dt);

  task_sched #(.BLK_W(BLK_W), .PENDING_W(8), .STAT_W(16)) u_sched (
    .clk, .rst_n,
    .task_req      (fw_task_req),
    .dt_present    (dt_present),
    .erase_start   (nand_erase_start),
    .erase_blk     (nand_erase_blk),
    .erase_suspend (nand_erase_suspend),
    .erase_done    (nand_erase_done),
    .task_running  (task_running),
    .pending       (task_pending),
    .n_started     (n_task_started),
    .n_done        (n_task_done),
    .n_suspended   (n_task_suspended)
  );

  // ------------------------------------------------------- combinational
  always_comb begin
    cmd_ready      = (state == ST_IDLE) && !gpf_pend;
    d_req_valid    = 1'b0;
    d_req_we       = 1'b0;
    d_req_idx      = cur_idx;
    d_req_wdata    = cur_data;
    nand_cmd_valid = 1'b0;
    nand_cmd_op    = NAND_READ;
    nand_cmd_addr  = cur.addr;
    nand_cmd_data  = cur_data;
    unique case (state)
      ST_DRAM_RD: d_req_valid = 1'b1;
      ST_DRAM_WR: begin d_req_valid = 1'b1; d_req_we = 1'b1; end
      ST_WB_RD:   begin d_req_valid = 1'b1; d_req_idx = widx; end
      ST_WB_PROG: begin
        nand_cmd_valid = 1'b1;
        nand_cmd_op    = NAND_PROG;
        nand_cmd_addr  = {tv_tag[widx], widx};
        nand_cmd_data  = rd_data;
      end
      ST_NAND_RD: nand_cmd_valid = 1'b1;
      ST_NAND_WR: begin nand_cmd_valid = 1'b1; nand_cmd_op = NAND_PROG; end
      default: ;
    endcase
    // a fill after a BF read miss is a DRAM write of the flash data
    if (state == ST_DRAM_WR && !cur.wr) d_req_wdata = rd_data;

    cpl_valid  = (state == ST_CPL);
    cpl.wr     = cur.wr;
    cpl.annot  = cur.annot;
    cpl.tag    = cur.tag;
    cpl.data   = rd_data;
  end

  // ---------------------------------------------------------- sequential
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= ST_IDLE;
      cur         <= '0;
      cur_data    <= '0;
      rd_data     <= '0;
      alloc       <= 1'b0;
      was_hit     <= 1'b0;
      flushing    <= 1'b0;
      gpf_pend    <= 1'b0;
      gpf_done    <= 1'b0;
      widx        <= '0;
      tv_valid    <= '0;
      tv_dirty    <= '0;
      n_hit       <= '0;
      n_miss      <= '0;
      n_bypass    <= '0;
      n_writeback <= '0;
      for (int i = 0; i < CACHE_LINES; i++) tv_tag[i] <= '0;
    end else begin
      gpf_done <= 1'b0;
      if (gpf_start) gpf_pend <= 1'b1;

      unique case (state)
        ST_IDLE: begin
          if (gpf_pend) begin
            flushing <= 1'b1;
            widx     <= '0;
            state    <= ST_FLUSH_SCAN;
          end else if (cmd_valid) begin
            cur      <= cmd;
            cur_data <= cmd_data;
            state    <= ST_DECIDE;
          end
        end

        ST_DECIDE: begin
          was_hit <= hit;
          alloc   <= 1'b0;
          widx    <= cur_idx;
          if (!cur.wr) begin
            if (hit) begin
              n_hit <= n_hit + 1'b1;
              state <= ST_DRAM_RD;
            end else if (cur.annot.nb) begin
              n_bypass <= n_bypass + 1'b1;
              state    <= ST_NAND_RD;
            end else begin
              n_miss <= n_miss + 1'b1;
              alloc  <= 1'b1;
              state  <= victim_dirty ? ST_WB_RD : ST_NAND_RD;
            end
          end else begin
            if (cur.annot.nb) begin
              n_bypass <= n_bypass + 1'b1;
              state    <= ST_NAND_WR;
            end else begin
              if (hit) n_hit  <= n_hit + 1'b1;
              else     n_miss <= n_miss + 1'b1;
              state <= victim_dirty ? ST_WB_RD : ST_DRAM_WR;
            end
          end
        end

        ST_DRAM_RD:      if (d_req_ready) state <= ST_DRAM_RD_WAIT;
        ST_DRAM_RD_WAIT: if (d_rsp_valid) begin
          rd_data <= d_rsp_rdata;
          state   <= ST_CPL;
        end

        ST_DRAM_WR: if (d_req_ready) begin
          tv_valid[cur_idx] <= 1'b1;
          tv_dirty[cur_idx] <= cur.wr;       // a fill is clean
          tv_tag[cur_idx]   <= cur_tag;
          state             <= ST_DRAM_WR_WAIT;
        end
        ST_DRAM_WR_WAIT: if (d_rsp_valid) state <= ST_CPL;

        ST_WB_RD:      if (d_req_ready) state <= ST_WB_RD_WAIT;
        ST_WB_RD_WAIT: if (d_rsp_valid) begin
          rd_data <= d_rsp_rdata;
          state   <= ST_WB_PROG;
        end
        ST_WB_PROG: if (nand_cmd_ready) state <= ST_WB_WAIT;
        ST_WB_WAIT: if (nand_rsp_valid) begin
          tv_dirty[widx] <= 1'b0;
          n_writeback    <= n_writeback + 1'b1;
          if (flushing) begin
            state <= ST_FLUSH_SCAN;
            widx  <= widx + 1'b1;
            if (widx == IDX_W'(CACHE_LINES - 1)) begin
              flushing <= 1'b0;
              gpf_pend <= 1'b0;
              gpf_done <= 1'b1;
              state    <= ST_IDLE;
            end
          end else begin
            state <= cur.wr ? ST_DRAM_WR : ST_NAND_RD;
          end
        end

        ST_NAND_RD: if (nand_cmd_ready) state <= ST_NAND_RD_WAIT;
        ST_NAND_RD_WAIT: if (nand_rsp_valid) begin
          rd_data <= nand_rsp_data;
          state   <= alloc ? ST_DRAM_WR : ST_CPL;
        end

        ST_NAND_WR: if (nand_cmd_ready) state <= ST_NAND_WR_WAIT;
        ST_NAND_WR_WAIT: if (nand_rsp_valid) begin
          if (was_hit) tv_valid[cur_idx] <= 1'b0;
          state <= ST_CPL;
        end

        ST_CPL: if (cpl_ready) state <= ST_IDLE;

        ST_FLUSH_SCAN: begin
          if (tv_valid[widx] && tv_dirty[widx]) begin
            state <= ST_WB_RD;
          end else if (widx == IDX_W'(CACHE_LINES - 1)) begin
            flushing <= 1'b0;
            gpf_pend <= 1'b0;
            gpf_done <= 1'b1;
            state    <= ST_IDLE;
          end else begin
            widx <= widx + 1'b1;
          end
        end

        default: state <= ST_IDLE;
      endcase
    end
  end

  a_cpl_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (cpl_valid && !cpl_ready) |=> (cpl_valid && $stable(cpl)));

endmodule

// znand_model: behavioural model of the SSD's flash back end (Z-NAND media and
// its channel), for simulation only; not synthesizable.
//
// Foreground commands (read, program of one 64-byte line) are served one at a
// time: a read answers after T_R cycles, a program after T_PROG cycles, each
// with one nand_rsp_valid pulse. A block erase started with erase_start takes
// T_BERS cycles and occupies the media: while it runs, foreground commands
// are refused (cmd_ready low) unless erase_suspend is high, which also freezes
// the erase's progress. erase_done pulses when the erase finishes.
// Data: lines never programmed read as init_line(addr) =
// {16{addr[28:0] zero-extended to 32 bits XOR 32'hC0DE_0000}}.
// Defaults are the Z-NAND timings tR = 3 us, tPROG = 100 us, tBERS = 1 ms at
// a 1 GHz controller clock.
module znand_model
  import cxl_ssd_pkg::*;
#(
  parameter int unsigned T_R    = 3000,
  parameter int unsigned T_PROG = 100000,
  parameter int unsigned T_BERS = 1000000,
  parameter int unsigned BLK_W  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  nand_op_e         cmd_op,
  input  dla_t             cmd_addr,
  input  line_t            cmd_data,
  output logic             rsp_valid,
  output line_t            rsp_data,
  input  logic             erase_start,
  input  logic [BLK_W-1:0] erase_blk,
  input  logic             erase_suspend,
  output logic             erase_done
);

  line_t mem [dla_t];

  function automatic line_t init_line(dla_t a);
    return {16{32'(a) ^ 32'hC0DE_0000}};
  endfunction

  logic     fg_busy, er_busy;
  int       fg_cnt, er_cnt;
  nand_op_e fg_op;
  dla_t     fg_addr;
  line_t    fg_data;
  int       n_read, n_prog, n_erase, n_susp_cycles;

  assign cmd_ready = !fg_busy && (!er_busy || erase_suspend);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fg_busy <= 1'b0; er_busy <= 1'b0; fg_cnt <= 0; er_cnt <= 0;
      rsp_valid <= 1'b0; rsp_data <= '0; erase_done <= 1'b0;
      fg_op <= NAND_READ; fg_addr <= '0; fg_data <= '0;
      n_read <= 0; n_prog <= 0; n_erase <= 0; n_susp_cycles <= 0;
    end else begin
      rsp_valid  <= 1'b0;
      erase_done <= 1'b0;
      if (cmd_valid && cmd_ready) begin
        fg_busy <= 1'b1;
        fg_op   <= cmd_op;
        fg_addr <= cmd_addr;
        fg_data <= cmd_data;
        fg_cnt  <= (cmd_op == NAND_READ) ? int'(T_R) : int'(T_PROG);
      end else if (fg_busy) begin
        if (fg_cnt <= 1) begin
          fg_busy   <= 1'b0;
          rsp_valid <= 1'b1;
          if (fg_op == NAND_PROG) begin
            mem[fg_addr] = fg_data;
            n_prog <= n_prog + 1;
          end else begin
            rsp_data <= mem.exists(fg_addr) ? mem[fg_addr] : init_line(fg_addr);
            n_read <= n_read + 1;
          end
        end else begin
          fg_cnt <= fg_cnt - 1;
        end
      end
      if (erase_start) begin
        er_busy <= 1'b1;
        er_cnt  <= int'(T_BERS);
      end else if (er_busy) begin
        if (erase_suspend) n_susp_cycles <= n_susp_cycles + 1;
        else if (er_cnt <= 1) begin
          er_busy    <= 1'b0;
          erase_done <= 1'b1;
          n_erase    <= n_erase + 1;
        end else er_cnt <= er_cnt - 1;
      end
    end
  end

  // erase_blk selects the block; erased blocks are already free in this model
  logic [BLK_W-1:0] last_erased_blk;
  always_ff @(posedge clk) if (erase_start) last_erased_blk <= erase_blk;

endmodule

// dram_buffer: the SSD's internal DRAM, used as the data store of the DRAM
// cache in front of the flash media.
//
// The array holds LINES 64-byte lines. One access is served at a time: a
// request is accepted when req_ready is high, the array is read or written in
// the accept cycle, and rsp_valid pulses LAT cycles later (read data on
// rsp_rdata, held until the next read). The fixed LAT stands for the DRAM
// row-activate plus precharge time of the SSD's DRAM.
// From the paper: that the SSD has an internal DRAM used as a cache, its
// timing (tRP = tRCD = 9.1 ns, tRAS = 19 ns). Own choices: the capacity (the
// paper gives none), one access at a time, LAT = 19 cycles, i.e. tRP + tRCD
// = 18.2 ns rounded up at a 1 GHz controller clock (clock also assumed).
// In a real SSD this is an external DRAM device behind a DRAM controller;
// here it is an on-chip array with a fixed delay.
module dram_buffer
  import cxl_ssd_pkg::*;
#(
  parameter int unsigned LINES = 1024,
  parameter int unsigned LAT   = 19
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic                     req_we,
  input  logic [$clog2(LINES)-1:0] req_idx,
  input  line_t                    req_wdata,
  output logic                     rsp_valid,
  output line_t                    rsp_rdata
);

  localparam int unsigned CNT_W = $clog2(LAT + 1);

  line_t            mem [LINES];
  logic [CNT_W-1:0] remain;

  assign req_ready = (remain == '0);

  always_ff @(posedge clk) begin
    if (req_valid && req_ready) begin
      if (req_we) mem[req_idx] <= req_wdata;
      else        rsp_rdata    <= mem[req_idx];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      remain    <= '0;
      rsp_valid <= 1'b0;
    end else begin
      rsp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (LAT <= 1) rsp_valid <= 1'b1;
        else          remain    <= CNT_W'(LAT - 1);
      end else if (remain != '0) begin
        remain <= remain - 1'b1;
        if (remain == CNT_W'(1)) rsp_valid <= 1'b1;
      end
    end
  end

endmodule

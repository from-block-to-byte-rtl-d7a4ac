// tb_dram_buffer: self-checking testbench for dram_buffer.
// Writes random lines to random indices, keeps a reference copy here, reads
// them back and checks the data and that every response arrives exactly LAT
// cycles after the request was accepted, and that no request is accepted
// while one is in flight.
module tb_dram_buffer;
  import cxl_ssd_pkg::*;

  localparam int unsigned LINES = 64;
  localparam int unsigned LAT   = 19;

  logic                     clk = 1'b0, rst_n = 1'b0;
  logic                     req_valid = 1'b0, req_we = 1'b0;
  logic                     req_ready;
  logic [$clog2(LINES)-1:0] req_idx = '0;
  line_t                    req_wdata = '0;
  logic                     rsp_valid;
  line_t                    rsp_rdata;

  int checks = 0, failures = 0;
  line_t ref_mem [LINES];
  logic  written [LINES];

  dram_buffer #(.LINES(LINES), .LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_BITS / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  task automatic access(logic we, int idx, line_t wd, output line_t rd);
    int lat;
    req_valid = 1'b1; req_we = we; req_idx = idx[$clog2(LINES)-1:0]; req_wdata = wd;
    do @(posedge clk); while (!req_ready);
    #1;
    req_valid = 1'b0;
    checks++;
    if (req_ready) begin
      failures++;
      $display("FAIL ready while busy");
    end
    lat = 1;
    while (!rsp_valid) begin
      @(posedge clk); #1;
      lat++;
    end
    checks++;
    if (lat != int'(LAT)) begin
      failures++;
      $display("FAIL latency %0d exp %0d", lat, LAT);
    end
    rd = rsp_rdata;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    line_t rd, wd;
    for (int i = 0; i < int'(LINES); i++) written[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    for (int n = 0; n < 400; n++) begin
      int idx;
      idx = $urandom_range(LINES - 1);
      if (($urandom_range(1) == 0) || !written[idx]) begin
        wd = rnd_line();
        access(1'b1, idx, wd, rd);
        ref_mem[idx] = wd;
        written[idx] = 1'b1;
      end else begin
        access(1'b0, idx, '0, rd);
        checks++;
        if (rd !== ref_mem[idx]) begin
          failures++;
          $display("FAIL read idx %0d", idx);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

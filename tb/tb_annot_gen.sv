// tb_annot_gen: self-checking testbench for annot_gen.
// Drives random instruction-window states (plus the corner cases: empty
// window, exactly the threshold, all loads) and checks dt_mode one cycle
// later against a reference computed here, and the per-request annotation
// (NB from the persistent-store flag, DT from dt_mode or software).
module tb_annot_gen;
  import cxl_ssd_pkg::*;

  localparam int unsigned WINDOW     = 64;
  localparam int unsigned THRESH_PCT = 50;

  logic              clk = 1'b0;
  logic              rst_n = 1'b0;
  logic [WINDOW-1:0] win_valid = '0, win_is_load = '0;
  logic              req_persist = 1'b0, req_sw_dt = 1'b0;
  annot_t            annot;
  logic              dt_mode;

  int checks = 0, failures = 0;

  annot_gen #(.WINDOW(WINDOW), .THRESH_PCT(THRESH_PCT)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic ref_dt(logic [WINDOW-1:0] v, logic [WINDOW-1:0] l);
    int nv = 0, nl = 0;
    for (int i = 0; i < WINDOW; i++) begin
      nv += int'(v[i]);
      nl += (v[i] && l[i]) ? 1 : 0;
    end
    return (nv > 0) && (nl * 100 > nv * int'(THRESH_PCT));
  endfunction

  task automatic apply(logic [WINDOW-1:0] v, logic [WINDOW-1:0] l);
    logic exp;
    win_valid   = v;
    win_is_load = l;
    exp = ref_dt(v, l);
    @(posedge clk); #1;
    checks++;
    if (dt_mode !== exp) begin
      failures++;
      $display("FAIL dt_mode=%0b exp=%0b valid=%h load=%h", dt_mode, exp, v, l);
    end
    for (int k = 0; k < 4; k++) begin
      req_persist = k[0];
      req_sw_dt   = k[1];
      #1;
      checks++;
      if (annot.nb !== req_persist || annot.dt !== (exp | req_sw_dt)) begin
        failures++;
        $display("FAIL annot=%b persist=%b sw_dt=%b dt_mode=%b", annot, req_persist, req_sw_dt, exp);
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
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // empty window, exact threshold (32 of 64 loads), one above, all loads
    apply('0, '1);
    apply('1, {32'h0, 32'hFFFF_FFFF});
    apply('1, {32'h1, 32'hFFFF_FFFF});
    apply('1, '1);
    // loads only in invalid entries do not count
    apply({32'h0, 32'hFFFF_FFFF}, {32'hFFFF_FFFF, 32'h0});
    // 2 valid entries, 1 load: exactly 50 %
    apply(64'h3, 64'h1);
    for (int n = 0; n < 2000; n++) begin
      logic [WINDOW-1:0] v, l;
      v = {$urandom, $urandom};
      l = {$urandom, $urandom};
      if (n % 3 == 0) l = l | {$urandom, $urandom};
      if (n % 5 == 0) v = v & {$urandom, $urandom} & {$urandom, $urandom};
      apply(v, l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

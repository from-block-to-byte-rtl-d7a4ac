// annot_gen: host-side annotation generator (CPU / root-port side).
//
// Determinism: every cycle the block counts the valid entries of the CPU's
// instruction window (instruction queue / reorder buffer) and how many of
// them are loads. When loads make up more than THRESH_PCT percent of the
// valid entries, the CPU is likely to stall on memory, and the generator
// enters DT mode: every CXL.mem request issued while in DT mode is tagged DT.
// The comparison is done without division: loads*100 > THRESH_PCT*valid.
// Software may also force DT on a request (sw_dt), as the paper does for a
// transaction commit.
// Bufferability: ordinary loads and stores are BF; the special persistent
// store instruction (req_persist) is tagged NB.
//
// Interface: win_valid/win_is_load are per-entry flags of the window;
// req_persist/req_sw_dt describe the request being issued this cycle and
// annot is its annotation (combinational from the inputs and dt_mode).
// Timing: dt_mode is registered, so it follows the window with one cycle of
// delay.
// From the paper: the load-proportion rule, the threshold, NB only for the
// dedicated store instruction. Own choices: window size, threshold default,
// strict ">" comparison, one-cycle registration.
module annot_gen
  import cxl_ssd_pkg::*;
#(
  parameter int unsigned WINDOW     = 64,
  parameter int unsigned THRESH_PCT = 50
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [WINDOW-1:0] win_valid,
  input  logic [WINDOW-1:0] win_is_load,
  input  logic              req_persist,
  input  logic              req_sw_dt,
  output annot_t            annot,
  output logic              dt_mode
);

  localparam int unsigned CNT_W = $clog2(WINDOW + 1);
  localparam int unsigned PRD_W = CNT_W + 8;

  logic [CNT_W-1:0] n_valid, n_load;

  always_comb begin
    n_valid = '0;
    n_load  = '0;
    for (int i = 0; i < WINDOW; i++) begin
      n_valid = n_valid + CNT_W'(win_valid[i]);
      n_load  = n_load  + CNT_W'(win_valid[i] & win_is_load[i]);
    end
  end

  logic [PRD_W-1:0] load_scaled, valid_scaled;
  assign load_scaled  = PRD_W'(n_load)  * PRD_W'(100);
  assign valid_scaled = PRD_W'(n_valid) * PRD_W'(THRESH_PCT);

  always_ff @(posedge clk) begin
    if (!rst_n) dt_mode <= 1'b0;
    else        dt_mode <= (n_valid != '0) && (load_scaled > valid_scaled);
  end

  always_comb begin
    annot.dt = dt_mode | req_sw_dt;
    annot.nb = req_persist;
  end

endmodule

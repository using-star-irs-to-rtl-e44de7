// tb_gnn_workload_sweep: end-to-end test of the accelerator built for the largest
// configurations of the parameter sweeps: 200 STAR-IRS elements (the top of the element
// sweep, 3216 input features per node) and 7 eavesdroppers (the top of the eavesdropper
// sweep, 9 graph nodes), with 8 antennas and 64 hidden features. Both extremes are
// combined in one build so that a single run exercises the widest input layer and the
// largest graph. Two overlapped inferences are checked against the reference model in
// gnn_tb_harness, followed by 10 random-phase symbols; the latency is checked against the
// 899,200-cycle budget as in the other end-to-end tests.
module tb_gnn_workload_sweep;
  import gnn_pkg::*;
  localparam int unsigned NS = 8, LS = 200, KS = 7, HS = 64;
  localparam int unsigned C = KS + 2, F_IN = 2*NS + 2*NS*LS;

  logic clk, rst_n, cfg_we, in_we, start, ready, busy, done, seed_we, sym_tick, irs_valid;
  logic [2:0] cfg_sel, phase_idx;
  logic [15:0] cfg_row, cfg_col, w_gain;
  data_t cfg_data, in_data;
  logic [$clog2(C)-1:0] in_node;
  logic [$clog2(F_IN)-1:0] in_feat;
  logic [1:0] rd_sel;
  logic [$clog2(LS)-1:0] rd_addr, irs_idx;
  cplx_t rd_data, irs_coef;
  logic [31:0] seed;

  gnn_accel_top #(.N(NS), .L(LS), .K(KS), .HID(HS)) dut (.*);

  gnn_tb_harness #(.N(NS), .L(LS), .K(KS), .HID(HS), .RUNS(2), .SYMBOLS(10),
                   .WATCHDOG(64'd2_000_000)) h (
    .*, .heads_overlap(dut.fv_busy && dut.fw_busy),
    .interleaved((dut.mean_busy || dut.g1_busy) &&
                 (dut.g2_busy || dut.fv_busy || dut.fw_busy || dut.sc_busy || dut.ln_busy)));

  // Backstop watchdog; the harness's own, shorter watchdog normally fires first.
  initial begin
    repeat (64'd3_000_000) @(posedge clk);
    $display("outer watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule

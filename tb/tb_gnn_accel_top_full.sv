// tb_gnn_accel_top_full: end-to-end test of the accelerator at its default sizes
// (N = 8 antennas, L = 80 STAR-IRS elements, K = 2 eavesdroppers, 1296 input features
// per node, 64 hidden features): two complete inferences, the second started while the
// first is still in the back stage, with the random phase modulator running throughout,
// followed by 10 checked random-phase symbols. Stimulus and checks are in gnn_tb_harness.
module tb_gnn_accel_top_full;
  import gnn_pkg::*;
  localparam int unsigned C = K_EVE + 2, F_IN = 2*N_ANT + 2*N_ANT*L_ELEM;

  logic clk, rst_n, cfg_we, in_we, start, ready, busy, done, seed_we, sym_tick, irs_valid;
  logic [2:0] cfg_sel, phase_idx;
  logic [15:0] cfg_row, cfg_col, w_gain;
  data_t cfg_data, in_data;
  logic [$clog2(C)-1:0] in_node;
  logic [$clog2(F_IN)-1:0] in_feat;
  logic [1:0] rd_sel;
  logic [$clog2(L_ELEM)-1:0] rd_addr, irs_idx;
  cplx_t rd_data, irs_coef;
  logic [31:0] seed;

  gnn_accel_top dut (.*);

  gnn_tb_harness #(.N(N_ANT), .L(L_ELEM), .K(K_EVE), .HID(HIDDEN), .RUNS(2), .SYMBOLS(10),
                   .WATCHDOG(64'd1_000_000)) h (
    .*, .heads_overlap(dut.fv_busy && dut.fw_busy),
    .interleaved((dut.mean_busy || dut.g1_busy) &&
                 (dut.g2_busy || dut.fv_busy || dut.fw_busy || dut.sc_busy || dut.ln_busy)));
endmodule

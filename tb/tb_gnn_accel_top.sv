// tb_gnn_accel_top: end-to-end test of the accelerator at reduced sizes (N = 2 antennas,
// L = 6 elements, K = 3 eavesdroppers, 8 hidden features, 4 FC lanes): three overlapped
// inferences with the random phase modulator running throughout, then 30 checked
// random-phase symbols. At these sizes the back stage is the longer one, so the front
// stage waits to hand over its page. Stimulus and checks are in gnn_tb_harness.
module tb_gnn_accel_top;
  import gnn_pkg::*;
  localparam int unsigned N = 2, L = 6, K = 3, HID = 8, LANES = 4;
  localparam int unsigned C = K + 2, F_IN = 2*N + 2*N*L;

  logic clk, rst_n, cfg_we, in_we, start, ready, busy, done, seed_we, sym_tick, irs_valid;
  logic [2:0] cfg_sel, phase_idx;
  logic [15:0] cfg_row, cfg_col, w_gain;
  data_t cfg_data, in_data;
  logic [$clog2(C)-1:0] in_node;
  logic [$clog2(F_IN)-1:0] in_feat;
  logic [1:0] rd_sel;
  logic [$clog2(L)-1:0] rd_addr, irs_idx;
  cplx_t rd_data, irs_coef;
  logic [31:0] seed;

  gnn_accel_top #(.N(N), .L(L), .K(K), .HID(HID), .LANES(LANES)) dut (.*);

  gnn_tb_harness #(.N(N), .L(L), .K(K), .HID(HID), .RUNS(3), .SYMBOLS(30),
                   .WATCHDOG(64'd200_000)) h (
    .*, .heads_overlap(dut.fv_busy && dut.fw_busy),
    .interleaved((dut.mean_busy || dut.g1_busy) &&
                 (dut.g2_busy || dut.fv_busy || dut.fw_busy || dut.sc_busy || dut.ln_busy)));
endmodule

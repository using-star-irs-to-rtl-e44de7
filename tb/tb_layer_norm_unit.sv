// tb_layer_norm_unit: self-checking test of the beamforming normaliser (M = 16 as in the
// default design). For several random input vectors and gains every output is compared
// with g * (x_i - mean) / std computed here in real arithmetic (within 2 LSB of Q4.11),
// the output power sum(y^2) is compared with M g^2, and a constant vector must give
// zeros. Also checks output order, output count and the run time.
module tb_layer_norm_unit;
  import gnn_pkg::*;
  localparam int unsigned M = 16;
  localparam int unsigned IAW = $clog2(M);
  localparam int MAX_CYCLES = 1300;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, o_valid;
  acc_t x [M];
  logic [15:0] gain;
  logic [IAW-1:0] o_idx;
  coef_t o_data;
  real ref_y [M];
  int checks = 0, failures = 0, seen = 0;
  real pwr;

  layer_norm_unit #(.M(M)) dut (.*);

  always @(posedge clk) if (rst_n && o_valid) begin
    real e;
    checks++;
    if (int'(o_idx) != seen) begin failures++; $display("output %0d out of order", o_idx); end
    e = real'(o_data) - ref_y[o_idx] * 2048.0;
    pwr += (real'(o_data) / 2048.0) ** 2;
    checks++;
    if (e > 2.0 || e < -2.0) begin
      failures++;
      $display("y[%0d] = %0d expected %f", o_idx, o_data, ref_y[o_idx] * 2048.0);
    end
    seen++;
  end

  task automatic run(input bit constant);
    real mu, var_, g;
    int t0, cyc;
    g = real'(gain) / 2048.0;
    for (int i = 0; i < int'(M); i++)
      x[i] = constant ? acc_t'(1234) : acc_t'($urandom_range(0, 40000)) - acc_t'(20000);
    mu = 0.0;
    for (int i = 0; i < int'(M); i++) mu += real'(x[i]);
    mu /= real'(M);
    var_ = 0.0;
    for (int i = 0; i < int'(M); i++) var_ += (real'(x[i]) - mu) ** 2;
    var_ /= real'(M);
    for (int i = 0; i < int'(M); i++)
      ref_y[i] = constant ? 0.0 : g * (real'(x[i]) - mu) / $sqrt(var_);
    seen = 0;
    pwr = 0.0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    t0 = int'($time);
    start <= 0;
    while (!done) @(posedge clk);
    cyc = (int'($time) - t0) / 10;
    @(posedge clk);
    checks += 2;
    if (seen != int'(M)) begin failures++; $display("%0d outputs", seen); end
    if (cyc > MAX_CYCLES) begin failures++; $display("took %0d cycles", cyc); end
    if (!constant) begin
      checks++;
      if (pwr < 0.99 * real'(M) * g * g || pwr > 1.01 * real'(M) * g * g) begin
        failures++;
        $display("output power %f, expected %f", pwr, real'(M) * g * g);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0; gain = 16'd2048;
    for (int i = 0; i < int'(M); i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    gain = 16'd2048;  run(1'b0);
    gain = 16'd512;   run(1'b0);
    gain = 16'd5000;  run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

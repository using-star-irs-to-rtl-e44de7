// tb_fc_layer: self-checking test of the fully connected engine at reduced size
// (10 inputs, 20 outputs, 8 lanes, so the last group is partial). Random weights, biases
// and inputs; every output neuron is compared with sum_i x_i W[o][i] + b_o * 2^FRAC_BITS
// computed here, lanes beyond OUT must read zero, and the cycle count from start to the
// last result (GROUPS*IN + 2) and the one-result-per-group rate are checked.
module tb_fc_layer;
  import gnn_pkg::*;
  localparam int unsigned IN = 10, OUT = 20, LANES = 8;
  localparam int unsigned GROUPS = (OUT + LANES - 1) / LANES;
  localparam int unsigned IAW = $clog2(IN), OAW = $clog2(OUT), GAW = $clog2(GROUPS);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, w_we, b_we, y_valid;
  logic [OAW-1:0] w_o, b_o;
  logic [IAW-1:0] w_i, x_raddr;
  data_t w_data, b_data, x_rdata;
  logic [GAW-1:0] y_grp;
  acc_t y_data [LANES];

  data_t X [IN];
  data_t W [OUT][IN];
  data_t B [OUT];
  int checks = 0, failures = 0, groups_seen = 0, t_start = 0, t_last = 0;

  fc_layer #(.IN(IN), .OUT(OUT), .LANES(LANES)) dut (.*);

  always_ff @(posedge clk) x_rdata <= X[x_raddr];

  always @(posedge clk) if (rst_n && y_valid) begin
    groups_seen++;
    t_last = int'($time);
    for (int b = 0; b < int'(LANES); b++) begin
      int o;
      longint e;
      o = int'(y_grp) * int'(LANES) + b;
      e = 0;
      if (o < int'(OUT)) begin
        for (int i = 0; i < int'(IN); i++) e += longint'(X[i]) * longint'(W[o][i]);
        e += longint'(B[o]) * 32;
      end
      checks++;
      if (longint'(y_data[b]) != e) begin
        failures++;
        $display("neuron %0d: got %0d expected %0d", o, y_data[b], e);
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int pass);
    for (int i = 0; i < int'(IN); i++) X[i] = data_t'($urandom);
    groups_seen = 0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    t_start = int'($time);
    start <= 0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    checks += 2;
    if (groups_seen != int'(GROUPS)) begin failures++; $display("%0d groups", groups_seen); end
    if ((t_last - t_start) / 10 != int'(GROUPS * IN) + 2) begin
      failures++;
      $display("pass %0d: last result after %0d cycles, expected %0d", pass,
               (t_last - t_start) / 10, GROUPS * IN + 2);
    end
  endtask

  initial begin
    rst_n = 0; start = 0; w_we = 0; b_we = 0; w_o = '0; w_i = '0; b_o = '0;
    w_data = '0; b_data = '0;
    for (int o = 0; o < int'(OUT); o++) begin
      B[o] = data_t'($urandom);
      for (int i = 0; i < int'(IN); i++) W[o][i] = data_t'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int o = 0; o < int'(OUT); o++)
      for (int i = 0; i < int'(IN); i++) begin
        @(posedge clk);
        w_we <= 1; w_o <= OAW'(o); w_i <= IAW'(i); w_data <= W[o][i];
      end
    for (int o = 0; o < int'(OUT); o++) begin
      @(posedge clk);
      w_we <= 0; b_we <= 1; b_o <= OAW'(o); b_data <= B[o];
    end
    @(posedge clk);
    b_we <= 0;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

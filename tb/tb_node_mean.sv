// tb_node_mean: self-checking test of the STAR-IRS node feature builder. Random feature
// rows for Bob and the eavesdroppers are held in behavioural banks; every value written
// to bank 0 is compared with the exactly rounded mean computed here in real arithmetic.
// Also checks the write count and the start-to-done latency of F + 2 cycles.
module tb_node_mean;
  import gnn_pkg::*;
  localparam int unsigned C = 4;
  localparam int unsigned F = 300;
  localparam int unsigned FAW = $clog2(F);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, wr_en;
  logic [FAW-1:0] rd_addr, wr_addr;
  data_t rd_data [C];
  data_t wr_data;
  data_t rows [C][F];
  int checks = 0, failures = 0, writes = 0;

  node_mean #(.C(C), .F(F)) dut (.*);

  // Banks with one-cycle read latency.
  always_ff @(posedge clk) for (int i = 0; i < int'(C); i++) rd_data[i] <= rows[i][rd_addr];

  function automatic int round_mean(input int s, input int d);
    real m;
    m = real'(s) / real'(d);
    return (m >= 0.0) ? int'($floor(m + 0.5)) : -int'($floor(-m + 0.5));
  endfunction

  always @(posedge clk) if (rst_n && wr_en) begin
    int s, exp_v;
    s = 0;
    for (int i = 1; i < int'(C); i++) s += int'(rows[i][wr_addr]);
    exp_v = round_mean(s, C - 1);
    checks++;
    writes++;
    if (int'(wr_data) != exp_v) begin
      failures++;
      if (failures < 10) $display("f=%0d got %0d expected %0d", wr_addr, wr_data, exp_v);
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat;
    for (int i = 0; i < int'(C); i++)
      for (int f = 0; f < int'(F); f++) rows[i][f] = data_t'($urandom);
    // corner values: all extremes and ties
    rows[1][0] = 127; rows[2][0] = 127; rows[3][0] = 127;
    rows[1][1] = -128; rows[2][1] = -128; rows[3][1] = -128;
    rows[1][2] = 1; rows[2][2] = 0; rows[3][2] = 0;
    rows[1][3] = -2; rows[2][3] = 0; rows[3][3] = 0;
    rst_n = 0; start = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    t0 = $time;
    start <= 0;
    while (!done) @(posedge clk);
    lat = int'(($time - t0) / 10);   // rising edges from the one sampling start
    checks++;
    if (lat != int'(F) + 2) begin failures++; $display("latency %0d, expected %0d", lat, F + 2); end
    repeat (3) @(posedge clk);
    checks++;
    if (writes != int'(F)) begin failures++; $display("%0d writes, expected %0d", writes, F); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

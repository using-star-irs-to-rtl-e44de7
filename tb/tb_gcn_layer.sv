// tb_gcn_layer: self-checking test of one GCN layer at reduced size (4 nodes, 20 input
// and 6 output features). Random weights, biases and node features are loaded; the
// outputs of all nodes are compared with a reference computed here: node products
// rounded to Q2.5, aggregation with A_hat = D^-1/2 (A + I) D^-1/2 built from the
// adjacency matrix and square roots in real arithmetic, bias, ReLU. Two instances cover
// both degree definitions. Also checks the latency F_OUT*F_IN + 3 and a second run
// with new inputs (the engine must not carry state from run to run). The first instance
// has a two-page output buffer: the second run writes page 1, and page 0 must then still
// hold the results of the first run.
module tb_gcn_layer;
  import gnn_pkg::*;
  localparam int unsigned C = 4;
  localparam int unsigned F_IN = 20;
  localparam int unsigned F_OUT = 6;
  localparam int unsigned XAW = $clog2(F_IN), YAW = $clog2(F_OUT), WAW = $clog2(F_IN*F_OUT);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, w_we, b_we;
  logic [WAW-1:0] w_addr;
  logic [YAW-1:0] b_addr;
  data_t w_data, b_data;
  logic busy0, done0, busy1, done1;
  logic [XAW-1:0] x_raddr0, x_raddr1;
  data_t x_rdata0 [C], x_rdata1 [C];
  logic [YAW-1:0] y_raddr [C];
  logic wr_page, rd_page;
  int exp0 [C][F_OUT];
  data_t y0 [C], y1 [C];

  data_t X [C][F_IN];
  data_t W [F_IN][F_OUT];
  data_t B [F_OUT];
  int checks = 0, failures = 0;

  gcn_layer #(.C(C), .F_IN(F_IN), .F_OUT(F_OUT), .SELF_LOOP_DEG(1'b0), .PAGES(2)) dut0 (
    .clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data,
    .start, .wr_page, .busy(busy0), .done(done0), .x_raddr(x_raddr0), .x_rdata(x_rdata0),
    .rd_page, .y_raddr, .y_rdata(y0));
  gcn_layer #(.C(C), .F_IN(F_IN), .F_OUT(F_OUT), .SELF_LOOP_DEG(1'b1)) dut1 (
    .clk, .rst_n, .w_we, .w_addr, .w_data, .b_we, .b_addr, .b_data,
    .start, .wr_page(1'b0), .busy(busy1), .done(done1), .x_raddr(x_raddr1), .x_rdata(x_rdata1),
    .rd_page(1'b0), .y_raddr, .y_rdata(y1));

  always_ff @(posedge clk)
    for (int c = 0; c < int'(C); c++) begin
      x_rdata0[c] <= X[c][x_raddr0];
      x_rdata1[c] <= X[c][x_raddr1];
    end

  function automatic int rq(input longint v, input int sh);
    longint r;
    r = (v + (64'sd1 <<< (sh - 1))) >>> sh;
    if (r > 127) return 127;
    if (r < -128) return -128;
    return int'(r);
  endfunction

  function automatic bit a_of(input int i, input int j);
    if (i == 0) return j == 1;
    if (i == 1) return j == 0;
    return j <= 1;
  endfunction

  function automatic longint ahat_q(input int i, input int j, input bit sl);
    int di, dj;
    if (i != j && !a_of(i, j)) return 0;
    di = sl ? 1 : 0; dj = sl ? 1 : 0;
    for (int k = 0; k < int'(C); k++) begin di += a_of(i, k); dj += a_of(j, k); end
    return longint'($floor(16384.0 / $sqrt(real'(di * dj)) + 0.5));
  endfunction

  function automatic int ref_out(input int i, input int h, input bit sl);
    longint t [C];
    longint s;
    int r;
    for (int c = 0; c < int'(C); c++) begin
      s = 0;
      for (int f = 0; f < int'(F_IN); f++) s += longint'(X[c][f]) * longint'(W[f][h]);
      t[c] = rq(s, 5);
    end
    s = longint'(B[h]) <<< 14;
    for (int j = 0; j < int'(C); j++) s += ahat_q(i, j, sl) * t[j];
    r = rq(s, 14);
    return (r < 0) ? 0 : r;
  endfunction

  task automatic run_and_check(input int pass);
    int t0, lat;
    for (int c = 0; c < int'(C); c++)
      for (int f = 0; f < int'(F_IN); f++) X[c][f] = data_t'($urandom_range(0, 80) - 40);
    @(posedge clk);
    start <= 1;
    wr_page <= 1'(pass);
    rd_page <= 1'(pass);
    @(posedge clk);
    t0 = int'($time);
    start <= 0;
    while (!done0) @(posedge clk);
    lat = (int'($time) - t0) / 10;
    checks++;
    if (lat != int'(F_OUT * F_IN) + 3) begin
      failures++;
      $display("latency %0d expected %0d", lat, F_OUT * F_IN + 3);
    end
    @(posedge clk);
    for (int h = 0; h < int'(F_OUT); h++) begin
      for (int c = 0; c < int'(C); c++) y_raddr[c] <= YAW'(h);
      @(posedge clk); #1;
      for (int c = 0; c < int'(C); c++) begin
        int e0, e1;
        e0 = ref_out(c, h, 1'b0);
        e1 = ref_out(c, h, 1'b1);
        if (pass == 0) exp0[c][h] = e0;
        checks += 2;
        if (int'(y0[c]) != e0) begin
          failures++;
          $display("pass %0d node %0d h %0d (A deg): got %0d expected %0d", pass, c, h, y0[c], e0);
        end
        if (int'(y1[c]) != e1) begin
          failures++;
          $display("pass %0d node %0d h %0d (A+I deg): got %0d expected %0d", pass, c, h, y1[c], e1);
        end
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
    rst_n = 0; start = 0; wr_page = 0; rd_page = 0; w_we = 0; b_we = 0; w_addr = '0; b_addr = '0; w_data = '0; b_data = '0;
    for (int c = 0; c < int'(C); c++) y_raddr[c] = '0;
    for (int f = 0; f < int'(F_IN); f++)
      for (int h = 0; h < int'(F_OUT); h++) W[f][h] = data_t'($urandom_range(0, 64) - 32);
    for (int h = 0; h < int'(F_OUT); h++) B[h] = data_t'($urandom_range(0, 40) - 20);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int h = 0; h < int'(F_OUT); h++)
      for (int f = 0; f < int'(F_IN); f++) begin
        @(posedge clk);
        w_we <= 1; w_addr <= WAW'(h * F_IN + f); w_data <= W[f][h];
      end
    for (int h = 0; h < int'(F_OUT); h++) begin
      @(posedge clk);
      w_we <= 0; b_we <= 1; b_addr <= YAW'(h); b_data <= B[h];
    end
    @(posedge clk);
    b_we <= 0;
    run_and_check(0);
    run_and_check(1);
    // page 0 of the two-page instance still holds the first run
    rd_page <= 1'b0;
    for (int h = 0; h < int'(F_OUT); h++) begin
      for (int c = 0; c < int'(C); c++) y_raddr[c] <= YAW'(h);
      @(posedge clk); #1;
      for (int c = 0; c < int'(C); c++) begin
        checks++;
        if (int'(y0[c]) != exp0[c][h]) begin
          failures++;
          $display("page 0 node %0d h %0d: got %0d expected %0d", c, h, y0[c], exp0[c][h]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

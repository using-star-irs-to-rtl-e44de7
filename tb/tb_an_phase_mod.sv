// tb_an_phase_mod: self-checking test of the symbol-level random phase modulator at
// reduced size (L = 5). Over 400 symbols it checks that every streamed coefficient equals
// the stored transmission coefficient rotated by exp(j 2 pi p / 8) (real arithmetic,
// within 2 LSB), that all elements of a symbol share one phase, that the phase sequence
// matches the LFSR x^32 + x^22 + x^2 + x + 1 modelled here from the seed, that all eight
// phases occur and the mean rotation is near zero, and that a tick during streaming is
// ignored. The first coefficient must appear 3 cycles after the tick.
module tb_an_phase_mod;
  import gnn_pkg::*;
  localparam int unsigned L = 5;
  localparam int unsigned LAW = $clog2(L);
  localparam int SYMBOLS = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, seed_we, sym_tick, busy, irs_valid;
  logic [31:0] seed;
  logic [2:0] phase_idx;
  logic [LAW-1:0] c_raddr, irs_idx;
  cplx_t c_rdata, irs_coef;
  cplx_t T [L];
  int checks = 0, failures = 0, count [8], got = 0;
  real mre = 0.0, mim = 0.0;
  logic [31:0] model;
  int cur_p;

  an_phase_mod #(.L(L)) dut (.*);

  always_ff @(posedge clk) c_rdata <= T[c_raddr];

  // Reference LFSR: advances every clock, like the design's.
  always @(posedge clk) begin
    if (seed_we) model <= (seed == 0) ? 32'h1 : seed;
    else         model <= model[0] ? ((model >> 1) ^ 32'h8020_0003) : (model >> 1);
  end

  always @(posedge clk) if (rst_n && irs_valid) begin
    real a, er, ei;
    int l;
    l = int'(irs_idx);
    a = 2.0 * 3.14159265358979 * real'(cur_p) / 8.0;
    er = real'(T[l].re) * $cos(a) - real'(T[l].im) * $sin(a);
    ei = real'(T[l].re) * $sin(a) + real'(T[l].im) * $cos(a);
    checks += 2;
    if (real'(irs_coef.re) - er > 2.0 || real'(irs_coef.re) - er < -2.0 ||
        real'(irs_coef.im) - ei > 2.0 || real'(irs_coef.im) - ei < -2.0) begin
      failures++;
      if (failures < 10) $display("l=%0d p=%0d got (%0d,%0d) expected (%f,%f)", l,
                                  cur_p, irs_coef.re, irs_coef.im, er, ei);
    end
    if (int'(phase_idx) != cur_p) begin failures++; $display("phase changed inside a symbol"); end
    got++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int i = 0; i < 8; i++) count[i] = 0;
    for (int l = 0; l < int'(L); l++) begin
      T[l].re = coef_t'($urandom_range(0, 20000) - 10000);
      T[l].im = coef_t'($urandom_range(0, 20000) - 10000);
    end
    T[0].re = 16384; T[0].im = 0;
    rst_n = 0; seed_we = 0; sym_tick = 0; seed = 32'hACE1_2468; model = 32'h1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    seed_we <= 1;
    @(posedge clk);
    seed_we <= 0;
    for (int s = 0; s < SYMBOLS; s++) begin
      repeat ($urandom_range(0, 5)) @(posedge clk);
      #1;
      cur_p = int'(model[2:0]);       // the value the design samples at the next edge
      sym_tick = 1;
      @(posedge clk);
      t0 = int'($time);
      #1;
      sym_tick = 0;
      count[cur_p]++;
      mre += $cos(2.0 * 3.14159265358979 * real'(cur_p) / 8.0);
      mim += $sin(2.0 * 3.14159265358979 * real'(cur_p) / 8.0);
      // a tick while streaming must be ignored
      if (s == 10) begin sym_tick = 1; @(posedge clk); #1; sym_tick = 0; end
      while (!irs_valid) @(posedge clk);
      checks++;
      if (s != 10 && (int'($time) - t0) / 10 != 3) begin
        failures++;
        $display("first coefficient %0d cycles after tick", (int'($time) - t0) / 10);
      end
      while (busy || irs_valid) @(posedge clk);
    end
    checks += 3;
    if (got != SYMBOLS * int'(L)) begin failures++; $display("%0d coefficients streamed", got); end
    for (int i = 0; i < 8; i++) if (count[i] == 0) begin failures++; $display("phase %0d never drawn", i); end
    if ((mre / SYMBOLS) ** 2 + (mim / SYMBOLS) ** 2 > 0.02) begin
      failures++;
      $display("mean rotation (%f, %f) not near zero", mre / SYMBOLS, mim / SYMBOLS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// gnn_tb_harness: stimulus and checker for end-to-end tests of gnn_accel_top. It is
// connected to an accelerator instance by the wrapper test (tb_gnn_accel_top at reduced
// sizes, tb_gnn_accel_top_full at the default sizes).
//
// It draws random weights, biases and Bob/Eve feature rows, loads them through the
// configuration and feature ports, runs RUNS inferences (new features each time, same
// weights) back to back, so that each one is started while the previous one is still in
// the back stage, and compares every result with a reference model of the whole network
// written here: STAR-IRS node mean, two GCN layers with A_hat built from the adjacency
// matrix in real arithmetic, the two FC heads, the sigmoid segments, the amplitude-phase
// decomposition and the layer normalisation (real arithmetic, small tolerances where the
// hardware uses digit-serial square roots and divisions). Symbol ticks run while the
// inferences complete, and every streamed symbol must be one complete coefficient set
// rotated by one phase; afterwards SYMBOLS more symbols are checked element by element
// against the Omega_t read back. It counts how often each mechanism happened (mean row,
// ReLU clipping, sigmoid segments, concurrent heads, energy split, random phase symbols,
// distinct phases, overlapped inferences, coefficient set switches of the modulator,
// change of transmit power) and fails on any that never did. Each run uses its own
// transmit power (18, 30, -6 dBm in turn) and the total power of w is checked against it.
// With more than one run it also checks that the done-to-done interval is shorter than
// the latency of one inference. The start-to-done latency is checked against the
// 8.992 ms / 10 ns = 899,200 cycles reported for the original accelerator.
module gnn_tb_harness
  import gnn_pkg::*;
#(
  parameter int unsigned N = 8,
  parameter int unsigned L = 80,
  parameter int unsigned K = 2,
  parameter int unsigned HID = 64,
  parameter int unsigned RUNS = 2,
  parameter int unsigned SYMBOLS = 20,
  parameter longint WATCHDOG = 64'd2_000_000,
  localparam int unsigned C = K + 2,
  localparam int unsigned F_IN = 2*N + 2*N*L,
  localparam int unsigned NV = 3 * L,
  localparam int unsigned NW = 2 * N,
  localparam int unsigned FAW = $clog2(F_IN),
  localparam int unsigned CAW = $clog2(C),
  localparam int unsigned LAW = $clog2(L)
) (
  output logic            clk,
  output logic            rst_n,
  output logic            cfg_we,
  output logic [2:0]      cfg_sel,
  output logic [15:0]     cfg_row,
  output logic [15:0]     cfg_col,
  output data_t           cfg_data,
  output logic            in_we,
  output logic [CAW-1:0]  in_node,
  output logic [FAW-1:0]  in_feat,
  output data_t           in_data,
  output logic            start,
  input  logic            ready,
  input  logic            busy,
  input  logic            done,
  output logic [15:0]     w_gain,
  output logic [1:0]      rd_sel,
  output logic [LAW-1:0]  rd_addr,
  input  cplx_t           rd_data,
  output logic            seed_we,
  output logic [31:0]     seed,
  output logic            sym_tick,
  input  logic [2:0]      phase_idx,
  input  logic            irs_valid,
  input  logic [LAW-1:0]  irs_idx,
  input  cplx_t           irs_coef,
  input  logic            heads_overlap,  // both FC heads busy in the same cycle
  input  logic            interleaved     // front and back stage busy in the same cycle
);

  localparam longint PAPER_LATENCY = 64'd899_200;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_mean = 0, n_relu = 0, n_seg [4], n_overlap = 0, n_split = 0, n_sym = 0, n_phase [8];
  int n_inter = 0, n_switch = 0, n_power = 0;
  int gl [RUNS];

  // transmit power of each run, cycling through three points of the paper's -6..30 dBm
  // sweep, and the LayerNorm gain that makes sum |w|^2 equal to it: the normalised
  // 2N real values have unit variance, so gain = sqrt(P / 2N) with P in watts
  function automatic real run_dbm(input int run);
    case (run % 3)
      0: return 18.0;
      1: return 30.0;
      default: return -6.0;
    endcase
  endfunction

  function automatic int gain_lsb(input real dbm);
    real g;
    g = 2048.0 * $sqrt((10.0 ** ((dbm - 30.0) / 10.0)) / real'(NW));
    if (g > 65535.0) g = 65535.0;
    return int'(g);
  endfunction
  int ndone = 0;      // inferences whose results have been checked
  int ndone_hw = 0;   // done pulses seen
  longint t_start [RUNS];
  longint t_done [RUNS];

  // model state
  int X [C][F_IN];
  int W1 [F_IN][HID];
  int B1 [HID];
  int W2 [HID][HID];
  int B2 [HID];
  int WV [NV][HID];
  int BV [NV];
  int WW [NW][HID];
  int BW [NW];
  int H1 [C][HID];
  int H2 [C][HID];
  real vref [NV];
  real omr_re [RUNS][L], omr_im [RUNS][L], omt_re [RUNS][L], omt_im [RUNS][L];
  real wref [RUNS][NW];
  cplx_t omt_hw [L];

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

  // A_hat with the degree taken as the row sum of A (the accelerator's default).
  function automatic longint ahat_q(input int i, input int j);
    int di, dj;
    if (i != j && !a_of(i, j)) return 0;
    di = 0; dj = 0;
    for (int k = 0; k < int'(C); k++) begin di += a_of(i, k); dj += a_of(j, k); end
    return longint'($floor(16384.0 / $sqrt(real'(di * dj)) + 0.5));
  endfunction

  // Four-segment sigmoid on a Q.10 accumulator, result in Q1.14 with the segment
  // products truncated (the documented number format of the coefficient buffer).
  function automatic real plan(input longint acc);
    longint a, r;
    a = (acc < 0) ? -acc : acc;
    if (a >= 5 * 1024)      begin r = 16384;                 n_seg[3]++; end
    else if (a >= 19 * 128) begin r = (a * 16) / 32 + 13824; n_seg[2]++; end
    else if (a >= 1024)     begin r = (a * 16) / 8 + 10240;  n_seg[1]++; end
    else                    begin r = (a * 16) / 4 + 8192;   n_seg[0]++; end
    return real'((acc < 0) ? 16384 - r : r) / 16384.0;
  endfunction

  task automatic reference(input real gain, input int run);
    longint s;
    longint t [C];
    longint acc;
    real mu, var_;
    real yw [NW];
    // STAR-IRS node: rounded mean of the other rows
    for (int f = 0; f < int'(F_IN); f++) begin
      real m;
      s = 0;
      for (int i = 1; i < int'(C); i++) s += X[i][f];
      m = real'(s) / real'(C - 1);
      X[0][f] = (m >= 0.0) ? int'($floor(m + 0.5)) : -int'($floor(-m + 0.5));
    end
    n_mean++;
    // GCN layer 1
    for (int h = 0; h < int'(HID); h++) begin
      for (int c = 0; c < int'(C); c++) begin
        s = 0;
        for (int f = 0; f < int'(F_IN); f++) s += longint'(X[c][f]) * W1[f][h];
        t[c] = rq(s, 5);
      end
      for (int i = 0; i < int'(C); i++) begin
        int r;
        s = longint'(B1[h]) <<< 14;
        for (int j = 0; j < int'(C); j++) s += ahat_q(i, j) * t[j];
        r = rq(s, 14);
        if (r < 0) n_relu++;
        H1[i][h] = (r < 0) ? 0 : r;
      end
    end
    // GCN layer 2
    for (int h = 0; h < int'(HID); h++) begin
      for (int c = 0; c < int'(C); c++) begin
        s = 0;
        for (int f = 0; f < int'(HID); f++) s += longint'(H1[c][f]) * W2[f][h];
        t[c] = rq(s, 5);
      end
      for (int i = 0; i < int'(C); i++) begin
        int r;
        s = longint'(B2[h]) <<< 14;
        for (int j = 0; j < int'(C); j++) s += ahat_q(i, j) * t[j];
        r = rq(s, 14);
        if (r < 0) n_relu++;
        H2[i][h] = (r < 0) ? 0 : r;
      end
    end
    // coefficient head on the STAR-IRS row, sigmoid
    for (int o = 0; o < int'(NV); o++) begin
      acc = longint'(BV[o]) * 32;
      for (int i = 0; i < int'(HID); i++) acc += longint'(H2[0][i]) * WV[o][i];
      vref[o] = plan(acc);
    end
    for (int l = 0; l < int'(L); l++) begin
      real br, cr, ct;
      br = vref[l]; cr = vref[L + l]; ct = vref[2 * L + l];
      omr_re[run][l] = $sqrt(br) * cr;
      omr_im[run][l] = $sqrt(br) * $sqrt(1.0 - cr * cr);
      omt_re[run][l] = $sqrt(1.0 - br) * ct;
      omt_im[run][l] = $sqrt(1.0 - br) * $sqrt(1.0 - ct * ct);
    end
    // beamforming head on Bob's row, layer normalisation, gain
    for (int o = 0; o < int'(NW); o++) begin
      acc = longint'(BW[o]) * 32;
      for (int i = 0; i < int'(HID); i++) acc += longint'(H2[1][i]) * WW[o][i];
      yw[o] = real'(acc);
    end
    mu = 0.0;
    for (int o = 0; o < int'(NW); o++) mu += yw[o];
    mu /= real'(NW);
    var_ = 0.0;
    for (int o = 0; o < int'(NW); o++) var_ += (yw[o] - mu) ** 2;
    var_ /= real'(NW);
    for (int o = 0; o < int'(NW); o++) begin
      wref[run][o] = (var_ == 0.0) ? 0.0 : gain * (yw[o] - mu) / $sqrt(var_);
      // the Q4.11 output saturates
      if (wref[run][o] > 32767.0 / 2048.0) wref[run][o] = 32767.0 / 2048.0;
      if (wref[run][o] < -16.0) wref[run][o] = -16.0;
    end
  endtask

  task automatic cfg(input int sel, input int row, input int col, input int val);
    @(posedge clk);
    cfg_we <= 1; cfg_sel <= 3'(sel); cfg_row <= 16'(row); cfg_col <= 16'(col);
    cfg_data <= data_t'(val);
  endtask

  task automatic read_result(input int sel, input int addr, output cplx_t v);
    @(posedge clk);
    rd_sel <= 2'(sel); rd_addr <= LAW'(addr);
    @(posedge clk);
    #1 v = rd_data;
  endtask

  function automatic bit near(input coef_t got, input real exp_v, input real scale,
                              input real tol);
    real e;
    e = real'(got) - exp_v * scale;
    return e <= tol && e >= -tol;
  endfunction

  always @(posedge clk) if (rst_n && heads_overlap) n_overlap++;
  always @(posedge clk) if (rst_n && interleaved) n_inter++;
  always @(posedge clk) if (rst_n && done) ndone_hw++;

  // Does a streamed symbol (L rotated coefficients) match the rotated Omega_t of run r?
  function automatic bit sym_matches(input cplx_t got [L], input int p, input int r);
    real a, er, ei;
    a = 2.0 * 3.14159265358979 * real'(p) / 8.0;
    for (int l = 0; l < int'(L); l++) begin
      er = 16384.0 * (omt_re[r][l] * $cos(a) - omt_im[r][l] * $sin(a));
      ei = 16384.0 * (omt_re[r][l] * $sin(a) + omt_im[r][l] * $cos(a));
      if (real'(got[l].re) - er > 7.0 || real'(got[l].re) - er < -7.0 ||
          real'(got[l].im) - ei > 7.0 || real'(got[l].im) - ei < -7.0) return 1'b0;
    end
    return 1'b1;
  endfunction

  // Sends one symbol tick and collects the L rotated coefficients.
  task automatic one_symbol(output cplx_t got [L], output int p);
    int cnt;
    @(posedge clk);
    sym_tick <= 1;
    @(posedge clk);
    sym_tick <= 0;
    cnt = 0;
    p = 0;
    while (cnt < int'(L)) begin
      @(posedge clk);
      #1;
      if (irs_valid) begin
        got[int'(irs_idx)] = irs_coef;
        if (cnt == 0) p = int'(phase_idx);
        cnt++;
      end
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint lat;
    for (int i = 0; i < 4; i++) n_seg[i] = 0;
    for (int i = 0; i < 8; i++) n_phase[i] = 0;
    rst_n = 0; cfg_we = 0; cfg_sel = '0; cfg_row = '0; cfg_col = '0; cfg_data = '0;
    in_we = 0; in_node = '0; in_feat = '0; in_data = '0; start = 0; w_gain = 16'd724;
    rd_sel = '0; rd_addr = '0; seed_we = 0; seed = 32'h1357_9BDF; sym_tick = 0;
    // random network; weight scales keep activations inside the 8-bit range
    for (int f = 0; f < int'(F_IN); f++)
      for (int h = 0; h < int'(HID); h++) W1[f][h] = $urandom_range(0, 8) - 4;
    for (int h = 0; h < int'(HID); h++) begin
      B1[h] = $urandom_range(0, 40) - 20;
      B2[h] = $urandom_range(0, 40) - 20;
      for (int f = 0; f < int'(HID); f++) W2[f][h] = $urandom_range(0, 30) - 15;
    end
    for (int o = 0; o < int'(NV); o++) begin
      BV[o] = $urandom_range(0, 254) - 127;
      for (int i = 0; i < int'(HID); i++) WV[o][i] = $urandom_range(0, 100) - 50;
    end
    for (int o = 0; o < int'(NW); o++) begin
      BW[o] = $urandom_range(0, 60) - 30;
      for (int i = 0; i < int'(HID); i++) WW[o][i] = $urandom_range(0, 60) - 30;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int h = 0; h < int'(HID); h++)
      for (int f = 0; f < int'(F_IN); f++) cfg(0, h, f, W1[f][h]);
    for (int h = 0; h < int'(HID); h++) cfg(1, h, 0, B1[h]);
    for (int h = 0; h < int'(HID); h++)
      for (int f = 0; f < int'(HID); f++) cfg(2, h, f, W2[f][h]);
    for (int h = 0; h < int'(HID); h++) cfg(3, h, 0, B2[h]);
    for (int o = 0; o < int'(NV); o++)
      for (int i = 0; i < int'(HID); i++) cfg(4, o, i, WV[o][i]);
    for (int o = 0; o < int'(NV); o++) cfg(5, o, 0, BV[o]);
    for (int o = 0; o < int'(NW); o++)
      for (int i = 0; i < int'(HID); i++) cfg(6, o, i, WW[o][i]);
    for (int o = 0; o < int'(NW); o++) cfg(7, o, 0, BW[o]);
    @(posedge clk);
    cfg_we <= 0;
    @(posedge clk);
    seed_we <= 1;
    @(posedge clk);
    seed_we <= 0;

    // Inferences are issued back to back: the rows of the next input are loaded while
    // the previous one is computed, and it is started as soon as the accelerator is
    // ready, so consecutive inferences overlap. Results are read and checked at each
    // done, while a third process keeps the random phase modulator running throughout.
    fork
      // driver
      for (int run = 0; run < int'(RUNS); run++) begin
        for (int i = 1; i < int'(C); i++)
          for (int f = 0; f < int'(F_IN); f++) begin
            X[i][f] = $urandom_range(0, 96) - 48;
            @(posedge clk);
            in_we <= 1; in_node <= CAW'(i); in_feat <= FAW'(f); in_data <= data_t'(X[i][f]);
          end
        @(posedge clk);
        in_we <= 0;
        gl[run] = gain_lsb(run_dbm(run));
        reference(real'(gl[run]) / 2048.0, run);
        @(posedge clk);
        while (!ready) @(posedge clk);
        start <= 1; w_gain <= 16'(gl[run]);
        @(posedge clk);
        t_start[run] = longint'($time);
        start <= 0; w_gain <= 16'd0;
      end
      // checker
      for (int run = 0; run < int'(RUNS); run++) begin
        @(posedge clk);
        while (!done) @(posedge clk);
        t_done[run] = longint'($time);
        lat = (t_done[run] - t_start[run]) / 10;
        $display("run %0d: start-to-done latency %0d cycles", run, lat);
        checks++;
        if (lat > PAPER_LATENCY) begin failures++; $display("latency above %0d", PAPER_LATENCY); end
        // Omega_r, Omega_t
        for (int l = 0; l < int'(L); l++) begin
          cplx_t vr, vt;
          real en;
          read_result(0, l, vr);
          read_result(1, l, vt);
          omt_hw[l] = vt;
          checks += 4;
          if (!near(vr.re, omr_re[run][l], 16384.0, 4.0) || !near(vr.im, omr_im[run][l], 16384.0, 4.0) ||
              !near(vt.re, omt_re[run][l], 16384.0, 4.0) || !near(vt.im, omt_im[run][l], 16384.0, 4.0)) begin
            failures++;
            $display("run %0d l=%0d Omega_r (%0d,%0d) ref (%f,%f) Omega_t (%0d,%0d) ref (%f,%f)",
                     run, l, vr.re, vr.im, omr_re[run][l] * 16384.0, omr_im[run][l] * 16384.0,
                     vt.re, vt.im, omt_re[run][l] * 16384.0, omt_im[run][l] * 16384.0);
          end
          en = (real'(vr.re) ** 2 + real'(vr.im) ** 2 + real'(vt.re) ** 2 + real'(vt.im) ** 2)
               / (16384.0 * 16384.0);
          checks++;
          if (en < 0.999 || en > 1.001) begin failures++; $display("l=%0d energy %f", l, en); end
          if (vr.re != 0 && vt.re != 0 && (vr.re != 16384 || vr.im != 0)) n_split++;
        end
        // beamformer
        begin
          real pw, pref, tol;
          pw = 0.0;
          for (int n = 0; n < int'(N); n++) begin
            cplx_t vw;
            read_result(2, n, vw);
            checks += 2;
            if (!near(vw.re, wref[run][n], 2048.0, 2.0) || !near(vw.im, wref[run][N + n], 2048.0, 2.0)) begin
              failures++;
              $display("run %0d w[%0d] (%0d,%0d) ref (%f,%f)", run, n, vw.re, vw.im,
                       wref[run][n] * 2048.0, wref[run][N + n] * 2048.0);
            end
            pw += (real'(vw.re) ** 2 + real'(vw.im) ** 2) / (2048.0 * 2048.0);
          end
          // total transmit power must equal the requested one, up to 2 % plus what
          // the per-element rounding allows
          pref = (real'(gl[run]) / 2048.0) ** 2 * real'(NW);
          tol = 0.02 * pref + 4.0 * $sqrt(pref * real'(NW)) / 2048.0 + real'(NW) * 4.0 / (2048.0 * 2048.0);
          checks++;
          if (pw < pref - tol || pw > pref + tol) begin
            failures++;
            $display("run %0d power %f W, requested %f W (%0.1f dBm)", run, pw, pref, run_dbm(run));
          end else if (gl[run] != gl[0]) n_power++;
        end
        ndone++;
      end
      // random phase modulation while inferences complete: every symbol must use one
      // complete coefficient set, never a mix of two inferences
      begin
        int prev, extra;
        prev = -1;
        extra = 0;
        while (ndone == 0) @(posedge clk);
        while (ndone < int'(RUNS) || extra < 3) begin
          cplx_t got [L];
          int p, hit;
          if (ndone == int'(RUNS)) extra++;
          one_symbol(got, p);
          hit = -1;
          for (int r = 0; r < ndone_hw; r++) if (hit < 0 && sym_matches(got, p, r)) hit = r;
          checks++;
          if (hit < 0) begin
            failures++;
            $display("symbol during inference matches no complete coefficient set");
          end else begin
            if (prev >= 0 && hit != prev) n_switch++;
            prev = hit;
          end
          n_phase[p]++;
          n_sym++;
          repeat (2) @(posedge clk);
        end
      end
    join

    if (RUNS > 1) begin
      longint interval;
      interval = (t_done[RUNS - 1] - t_done[RUNS - 2]) / 10;
      $display("done-to-done interval with overlapped inferences: %0d cycles", interval);
      checks++;
      if (interval >= lat) begin
        failures++;
        $display("overlapping inferences gave no throughput gain");
      end
    end

    // symbol-level random phase modulation of the last Omega_t, checked element by
    // element against the values read back
    for (int s = 0; s < int'(SYMBOLS); s++) begin
      cplx_t got [L];
      int p;
      real a, er, ei;
      one_symbol(got, p);
      a = 2.0 * 3.14159265358979 * real'(p) / 8.0;
      for (int l = 0; l < int'(L); l++) begin
        er = real'(omt_hw[l].re) * $cos(a) - real'(omt_hw[l].im) * $sin(a);
        ei = real'(omt_hw[l].re) * $sin(a) + real'(omt_hw[l].im) * $cos(a);
        checks++;
        if (real'(got[l].re) - er > 2.0 || real'(got[l].re) - er < -2.0 ||
            real'(got[l].im) - ei > 2.0 || real'(got[l].im) - ei < -2.0) begin
          failures++;
          $display("symbol %0d element %0d: rotated coefficient wrong", s, l);
        end
      end
      n_phase[p]++;
      n_sym++;
    end

    // every mechanism must have happened at least once
    begin
      int distinct;
      distinct = 0;
      for (int i = 0; i < 8; i++) if (n_phase[i] > 0) distinct++;
      $display("mechanisms: mean rows %0d, ReLU clips %0d, sigmoid segments %0d/%0d/%0d/%0d,",
               n_mean, n_relu, n_seg[0], n_seg[1], n_seg[2], n_seg[3]);
      $display("            concurrent-head cycles %0d, split elements %0d, AN symbols %0d, phases %0d,",
               n_overlap, n_split, n_sym, distinct);
      $display("            overlapped-inference cycles %0d, coefficient set switches %0d,",
               n_inter, n_switch);
      $display("            runs at a second transmit power %0d", n_power);
      checks += 13;
      if (RUNS > 1 && n_power == 0)  begin failures++; $display("transmit power never changed"); end
      if (RUNS > 1 && n_inter == 0)  begin failures++; $display("inferences never overlapped"); end
      if (RUNS > 1 && n_switch == 0) begin failures++; $display("modulator never switched sets"); end
      if (n_mean == 0)    begin failures++; $display("no STAR-IRS mean row built"); end
      if (n_relu == 0)    begin failures++; $display("ReLU never clipped"); end
      for (int i = 0; i < 4; i++)
        if (n_seg[i] == 0) begin failures++; $display("sigmoid segment %0d never used", i); end
      if (n_overlap == 0) begin failures++; $display("heads never ran together"); end
      if (n_split == 0)   begin failures++; $display("no element split its energy"); end
      if (n_sym == 0)     begin failures++; $display("no AN symbol"); end
      if (distinct < 2)   begin failures++; $display("random phase never changed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

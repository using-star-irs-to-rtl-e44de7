// tb_star_coeff_unit: self-checking test of the STAR-IRS coefficient post-processing at
// reduced size (L = 6). The coefficient buffer holds random sigmoid outputs in Q1.14,
// including the end points 0 and 1. Each Omega_r and Omega_t is compared with
// sqrt(beta) (cos + j sqrt(1 - cos^2)) evaluated in real arithmetic (within 3 LSB), the
// energy split |Omega_r|^2 + |Omega_t|^2 = 1 is checked (within 0.001), as are the
// element order, the element count and the cycles per element.
module tb_star_coeff_unit;
  import gnn_pkg::*;
  localparam int unsigned L = 6;
  localparam int unsigned VAW = $clog2(3 * L), LAW = $clog2(L);
  localparam int CYC_PER_ELEM = 22;   // 5 read/start + 16 square root + 1 output

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start, busy, done, o_valid;
  logic [VAW-1:0] v_raddr;
  coef_t v_rdata;
  logic [LAW-1:0] o_idx;
  cplx_t o_re, o_rt;
  coef_t V [3 * L];
  int checks = 0, failures = 0, seen = 0, t_start = 0, t_last = 0;

  star_coeff_unit #(.L(L)) dut (.*);

  always_ff @(posedge clk) v_rdata <= V[v_raddr];

  function automatic bit close(input coef_t got, input real exp_v);
    real e;
    e = real'(got) - exp_v * 16384.0;
    return e <= 3.0 && e >= -3.0;
  endfunction

  always @(posedge clk) if (rst_n && o_valid) begin
    real br, cr, ct, ar, at, e;
    int l;
    l = int'(o_idx);
    t_last = int'($time);
    checks++;
    if (l != seen) begin failures++; $display("element %0d out of order (expected %0d)", l, seen); end
    seen++;
    br = real'(V[l]) / 16384.0;
    cr = real'(V[L + l]) / 16384.0;
    ct = real'(V[2 * L + l]) / 16384.0;
    ar = $sqrt(br);
    at = $sqrt(1.0 - br);
    checks += 4;
    if (!close(o_re.re, ar * cr))                 begin failures++; $display("l=%0d re.re %0d", l, o_re.re); end
    if (!close(o_re.im, ar * $sqrt(1.0 - cr*cr))) begin failures++; $display("l=%0d re.im %0d", l, o_re.im); end
    if (!close(o_rt.re, at * ct))                 begin failures++; $display("l=%0d rt.re %0d", l, o_rt.re); end
    if (!close(o_rt.im, at * $sqrt(1.0 - ct*ct))) begin failures++; $display("l=%0d rt.im %0d", l, o_rt.im); end
    e = (real'(o_re.re)**2 + real'(o_re.im)**2 + real'(o_rt.re)**2 + real'(o_rt.im)**2)
        / (16384.0 * 16384.0) - 1.0;
    checks++;
    if (e > 0.001 || e < -0.001) begin failures++; $display("l=%0d energy off by %f", l, e); end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < int'(3 * L); k++) V[k] = coef_t'($urandom_range(0, 16384));
    V[0] = 0; V[1] = 16384; V[L] = 16384; V[L + 1] = 0; V[2 * L + 2] = 16384; V[2 * L + 3] = 0;
    rst_n = 0; start = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    t_start = int'($time);
    start <= 0;
    while (!done) @(posedge clk);
    repeat (2) @(posedge clk);
    checks += 2;
    if (seen != int'(L)) begin failures++; $display("%0d elements, expected %0d", seen, L); end
    if ((t_last - t_start) / 10 != CYC_PER_ELEM * int'(L) + 1) begin
      failures++;
      $display("last element after %0d cycles, expected %0d", (t_last - t_start) / 10,
               CYC_PER_ELEM * L + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

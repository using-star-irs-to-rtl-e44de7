// an_phase_mod: symbol-level random phase modulation of the STAR-IRS transmission
// coefficients, which turns the signal passing through the surface into artificial noise.
//
// How it works: at every symbol boundary (sym_tick) the unit draws one random phase
// index p from a free-running 32-bit Galois LFSR and rotates every transmission
// coefficient of the surface by the same phase, Omega_t,l * exp(j 2 pi p / 8). Using one
// common phase for all elements follows the paper, which sets all symbol-level phases
// equal for simplicity of control; the reflection coefficients are not touched. The
// eight-point phase alphabet, the LFSR polynomial (x^32 + x^22 + x^2 + x + 1) and the
// serial streaming of the L rotated coefficients are this design's choices; the
// alphabet is symmetric, so the rotation factor has zero mean as artificial noise needs.
//
// Interface: the L optimised transmission coefficients are read from the coefficient
// table through c_raddr/c_rdata (read latency 1, Q1.14). seed_we loads a non-zero LFSR
// seed. After sym_tick the rotated coefficients stream out on irs_valid/irs_idx/irs_coef,
// one per clock, element 0 first, 3 cycles after the tick; phase_idx shows the phase of
// the current symbol. A tick that arrives while a symbol is still streaming is ignored,
// so symbols must be at least L + 2 cycles apart.
module an_phase_mod
  import gnn_pkg::*;
#(
  parameter int unsigned L = L_ELEM,
  localparam int unsigned LAW = (L > 1) ? $clog2(L) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           seed_we,
  input  logic [31:0]    seed,
  input  logic           sym_tick,
  output logic           busy,
  output logic [2:0]     phase_idx,
  output logic [LAW-1:0] c_raddr,
  input  cplx_t          c_rdata,
  output logic           irs_valid,
  output logic [LAW-1:0] irs_idx,
  output cplx_t          irs_coef
);

  logic [31:0] lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       lfsr <= 32'h1;
    else if (seed_we) lfsr <= (seed == '0) ? 32'h1 : seed;
    else              lfsr <= lfsr[0] ? ((lfsr >> 1) ^ 32'h8020_0003) : (lfsr >> 1);
  end

  // exp(j 2 pi p / 8) in Q1.14.
  localparam logic signed [15:0] C45 = 16'sd11585;
  function automatic cplx_t rot(input logic [2:0] p);
    cplx_t r;
    case (p)
      3'd0: begin r.re = 16'sd16384;  r.im = 16'sd0;      end
      3'd1: begin r.re = C45;         r.im = C45;         end
      3'd2: begin r.re = 16'sd0;      r.im = 16'sd16384;  end
      3'd3: begin r.re = -C45;        r.im = C45;         end
      3'd4: begin r.re = -16'sd16384; r.im = 16'sd0;      end
      3'd5: begin r.re = -C45;        r.im = -C45;        end
      3'd6: begin r.re = 16'sd0;      r.im = -16'sd16384; end
      default: begin r.re = C45;      r.im = -C45;        end
    endcase
    return r;
  endfunction

  logic           run, rd_valid;
  logic [LAW-1:0] l_cnt, rd_idx;
  cplx_t          rf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      l_cnt     <= '0;
      rd_valid  <= 1'b0;
      rd_idx    <= '0;
      phase_idx <= '0;
      rf        <= '0;
    end else begin
      rd_valid <= run;
      rd_idx   <= l_cnt;
      if (sym_tick && !busy) begin
        phase_idx <= lfsr[2:0];
        rf        <= rot(lfsr[2:0]);
        run       <= 1'b1;
        l_cnt     <= '0;
      end else if (run) begin
        if (l_cnt == LAW'(L - 1)) run   <= 1'b0;
        else                      l_cnt <= l_cnt + 1'b1;
      end
    end
  end

  assign c_raddr = l_cnt;
  assign busy    = run || rd_valid;

  // Complex product with rounding, saturated to 16 bits.
  function automatic coef_t sat_round(input logic signed [32:0] v);
    logic signed [32:0] t;
    t = (v + 33'sd8192) >>> COEF_FRAC;
    if (t > 33'sd32767)  return 16'sd32767;
    if (t < -33'sd32768) return -16'sd32768;
    return t[15:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irs_valid <= 1'b0;
      irs_idx   <= '0;
      irs_coef  <= '0;
    end else begin
      irs_valid <= rd_valid;
      if (rd_valid) begin
        irs_idx     <= rd_idx;
        irs_coef.re <= sat_round(33'(c_rdata.re) * 33'(rf.re) - 33'(c_rdata.im) * 33'(rf.im));
        irs_coef.im <= sat_round(33'(c_rdata.re) * 33'(rf.im) + 33'(c_rdata.im) * 33'(rf.re));
      end
    end
  end

endmodule

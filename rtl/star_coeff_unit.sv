// star_coeff_unit: turns the sigmoid outputs of the coefficient head into the STAR-IRS
// reflection and transmission coefficients.
//
// The coefficient head produces v = [beta_r(1..L), cos(theta_r)(1..L), cos(theta_t)(1..L)],
// each in [0, 1]. For every element l the unit forms
//   beta_t    = 1 - beta_r                       (energy conservation)
//   sin theta = sqrt(1 - cos^2 theta)            (for both phases)
//   Omega_r,l = sqrt(beta_r) (cos theta_r + j sin theta_r)
//   Omega_t,l = sqrt(beta_t) (cos theta_t + j sin theta_t)
// which is the amplitude-phase decomposition of the paper's inference procedure. The
// four square roots of one element are computed by four digit-serial square-root units
// in parallel, then four products are rounded to Q1.14.
//
// Interface: v is read from the coefficient buffer through v_raddr/v_rdata (read latency
// 1, index k = 0 .. 3L-1, Q1.14). For element l the results appear on o_re/o_rt with
// o_valid for one clock, o_idx = l. Timing: 22 cycles per element (four read and
// capture cycles, one start cycle, 16 square-root cycles, one output cycle); done pulses with the last element.
// Processing the elements one after another with one set of square-root units is this
// design's choice.
module star_coeff_unit
  import gnn_pkg::*;
#(
  parameter int unsigned L = L_ELEM,
  localparam int unsigned VAW = $clog2(3 * L),
  localparam int unsigned LAW = (L > 1) ? $clog2(L) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [VAW-1:0] v_raddr,
  input  coef_t          v_rdata,
  output logic           o_valid,
  output logic [LAW-1:0] o_idx,
  output cplx_t          o_re,     // Omega_r,l
  output cplx_t          o_rt      // Omega_t,l (before the symbol-level random phase)
);

  localparam logic [29:0] ONE_Q28 = 30'd1 << 28;

  typedef enum logic [2:0] {S_IDLE, S_RD0, S_RD1, S_RD2, S_CAP, S_ST, S_SQ, S_OUT} state_e;
  state_e state;

  logic [LAW-1:0] l_cnt;
  coef_t br, cr, ct;
  logic  sq_start;
  logic  [3:0]  sq_done, sq_busy;
  logic  [29:0] sq_rad [4];
  logic  [14:0] sq_q   [4];
  logic  [3:0]  sq_got;

  // Reads: k = l, L + l, 2L + l issued in S_RD0..S_RD2, data one cycle later.
  always_comb begin
    case (state)
      S_RD1:   v_raddr = VAW'(l_cnt) + VAW'(L);
      S_RD2:   v_raddr = VAW'(l_cnt) + VAW'(2 * L);
      default: v_raddr = VAW'(l_cnt);
    endcase
  end

  always_comb begin
    logic [31:0] cr2, ct2;
    cr2 = 32'(cr) * 32'(cr);
    ct2 = 32'(ct) * 32'(ct);
    sq_rad[0] = 30'(br) << COEF_FRAC;                        // beta_r
    sq_rad[1] = 30'(16'sd16384 - br) << COEF_FRAC;           // beta_t = 1 - beta_r
    sq_rad[2] = ONE_Q28 - 30'(cr2);                          // 1 - cos^2 theta_r
    sq_rad[3] = ONE_Q28 - 30'(ct2);                          // 1 - cos^2 theta_t
  end

  for (genvar i = 0; i < 4; i++) begin : g_sq
    isqrt_seq #(.RW(30)) u_sq (
      .clk, .rst_n, .start(sq_start), .rad(sq_rad[i]),
      .busy(sq_busy[i]), .done(sq_done[i]), .q(sq_q[i])
    );
  end

  assign sq_start = (state == S_ST);

  function automatic coef_t mulq(input logic [14:0] a, input coef_t b);
    logic signed [31:0] p;
    p = signed'({17'd0, a}) * 32'(b);
    return coef_t'((p + 32'sd8192) >>> COEF_FRAC);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      l_cnt   <= '0;
      o_valid <= 1'b0;
      done    <= 1'b0;
      sq_got  <= '0;
      o_idx   <= '0;
      br      <= '0;
      cr      <= '0;
      ct      <= '0;
      o_re    <= '0;
      o_rt    <= '0;
    end else begin
      o_valid <= 1'b0;
      done    <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          l_cnt <= '0;
          state <= S_RD0;
        end
        S_RD0: state <= S_RD1;
        S_RD1: begin br <= v_rdata; state <= S_RD2; end
        S_RD2: begin cr <= v_rdata; state <= S_CAP; end
        S_CAP: begin ct <= v_rdata; state <= S_ST; end
        S_ST:  begin sq_got <= '0; state <= S_SQ; end
        S_SQ: begin
          if ((sq_got | sq_done) == 4'hF) state <= S_OUT;
          sq_got <= sq_got | sq_done;
        end
        S_OUT: begin
          o_valid   <= 1'b1;
          o_idx     <= l_cnt;
          o_re.re   <= mulq(sq_q[0], cr);
          o_re.im   <= mulq(sq_q[0], coef_t'({1'b0, sq_q[2]}));
          o_rt.re   <= mulq(sq_q[1], ct);
          o_rt.im   <= mulq(sq_q[1], coef_t'({1'b0, sq_q[3]}));
          if (l_cnt == LAW'(L - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            l_cnt <= l_cnt + 1'b1;
            state <= S_RD0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule

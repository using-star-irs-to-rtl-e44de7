// layer_norm_unit: beamforming normaliser, y = g * (x - mean(x)) / std(x) over the M
// outputs of the beamforming head (M = 2N: real parts of w, then imaginary parts).
//
// How it works: the inputs are clipped to 24 bits and centred without a division by
// forming d_i = M x_i - sum(x). Then sum(d_i^2) is accumulated one term per clock,
// divided by M and square-rooted, giving r = M * std(x). Every output is
// y_i = g * d_i / r, computed with one shared 64-bit digit-serial divider (sign and
// magnitude, truncation toward zero) and saturated to 16 bits. A constant input vector
// (r = 0) gives all-zero outputs. The layer normalisation itself and the scaling by
// sqrt(P) are the paper's; it names no epsilon and no affine parameters, so none are
// used, and the gain g is a run-time input so that any power budget can be programmed.
//
// Interface: x (accumulator precision, 2*FRAC_BITS fractional bits) is sampled on start.
// gain is unsigned with W_FRAC fractional bits; y is signed with W_FRAC fractional bits
// (Q4.11). Outputs appear on o_valid/o_idx/o_data one per division.
// Timing: start -> done after about 3M + 100 + M*65 cycles (about 1200 cycles for M = 16).
module layer_norm_unit
  import gnn_pkg::*;
#(
  parameter int unsigned M = 2 * N_ANT,
  localparam int unsigned IAW = (M > 1) ? $clog2(M) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  acc_t           x [M],
  input  logic [15:0]    gain,
  output logic           busy,
  output logic           done,
  output logic           o_valid,
  output logic [IAW-1:0] o_idx,
  output coef_t          o_data
);

  localparam int unsigned XW = 24;
  localparam int unsigned DWD = XW + $clog2(M) + 2;   // width of d_i

  typedef enum logic [2:0] {S_IDLE, S_CENTRE, S_SQ, S_VAR, S_SQRT, S_DIV, S_WAIT} state_e;
  state_e state;

  logic signed [XW-1:0]  xs [M];
  logic signed [DWD-1:0] d  [M];
  logic [63:0]           s2;
  logic [31:0]           r;
  logic [IAW-1:0]        i_cnt;
  logic [15:0]           g_q;

  function automatic logic signed [XW-1:0] clip(input acc_t v);
    if (v >  acc_t'((1 << (XW - 1)) - 1)) return XW'((1 << (XW - 1)) - 1);
    if (v < -acc_t'(1 << (XW - 1)))       return XW'(-(1 << (XW - 1)));
    return v[XW-1:0];
  endfunction

  // Sum over the clipped inputs.
  logic signed [DWD-1:0] xsum;
  always_comb begin
    xsum = '0;
    for (int i = 0; i < int'(M); i++) xsum += DWD'(xs[i]);
  end

  // Shared divider and square root.
  logic        dv_start, dv_done, dv_busy;
  logic [63:0] dv_num, dv_quo;
  logic [31:0] dv_den;
  logic        sq_start, sq_done, sq_busy;
  logic [31:0] sq_q;

  div_seq #(.NW(64), .DW(32)) u_div (
    .clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
    .busy(dv_busy), .done(dv_done), .quo(dv_quo)
  );

  isqrt_seq #(.RW(64)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .rad(dv_quo), .busy(sq_busy), .done(sq_done), .q(sq_q)
  );

  // Current numerator |g * d_i| and its sign.
  logic signed [DWD+17:0] gd;
  logic                   neg;
  always_comb begin
    gd  = (DWD+18)'(d[i_cnt]) * (DWD+18)'(signed'({1'b0, g_q}));
    neg = gd[DWD+17];
  end
  logic neg_q;

  always_comb begin
    dv_num = (state == S_VAR) ? s2 : (neg ? -64'(gd) : 64'(gd));
    dv_den = (state == S_VAR) ? 32'(M) : r;
  end

  logic dv_go;

  // Signed quotient of the current division.
  logic signed [64:0] qv;
  assign qv = neg_q ? -65'(dv_quo) : 65'(dv_quo);
  assign dv_start = dv_go;
  assign sq_start = (state == S_VAR) && dv_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      s2      <= '0;
      r       <= '0;
      i_cnt   <= '0;
      g_q     <= '0;
      o_valid <= 1'b0;
      o_idx   <= '0;
      o_data  <= '0;
      done    <= 1'b0;
      dv_go   <= 1'b0;
      neg_q   <= 1'b0;
      for (int i = 0; i < int'(M); i++) begin
        xs[i] <= '0;
        d[i]  <= '0;
      end
    end else begin
      o_valid <= 1'b0;
      done    <= 1'b0;
      dv_go   <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < int'(M); i++) xs[i] <= clip(x[i]);
          g_q   <= gain;
          state <= S_CENTRE;
        end
        S_CENTRE: begin
          for (int i = 0; i < int'(M); i++) d[i] <= DWD'(xs[i]) * DWD'(M) - xsum;
          s2    <= '0;
          i_cnt <= '0;
          state <= S_SQ;
        end
        S_SQ: begin
          s2 <= s2 + 64'(d[i_cnt] * d[i_cnt]);
          if (i_cnt == IAW'(M - 1)) begin
            i_cnt <= '0;
            dv_go <= 1'b1;
            state <= S_VAR;
          end else begin
            i_cnt <= i_cnt + 1'b1;
          end
        end
        S_VAR:  if (dv_done) state <= S_SQRT;         // quotient = sum(d^2) / M
        S_SQRT: if (sq_done) begin
          r <= sq_q;
          if (sq_q == '0) begin
            state <= S_WAIT;                          // constant input: outputs are 0
          end else begin
            dv_go <= 1'b1;
            neg_q <= 1'b0;
            state <= S_DIV;
          end
        end
        S_DIV: begin
          if (dv_go) neg_q <= neg;
          if (dv_done) begin
            o_valid <= 1'b1;
            o_idx   <= i_cnt;
            if (qv > 65'sd32767)       o_data <= coef_t'(16'sd32767);
            else if (qv < -65'sd32768) o_data <= coef_t'(-16'sd32768);
            else                       o_data <= coef_t'(qv[15:0]);
            if (i_cnt == IAW'(M - 1)) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              i_cnt <= i_cnt + 1'b1;
              dv_go <= 1'b1;
            end
          end
        end
        S_WAIT: begin
          o_valid <= 1'b1;
          o_idx   <= i_cnt;
          o_data  <= '0;
          if (i_cnt == IAW'(M - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            i_cnt <= i_cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule

// isqrt_seq: sequential integer square root, q = floor(sqrt(rad)).
//
// Classic digit-by-digit (non-restoring bit pair) algorithm: one result bit per clock,
// most significant first, using a subtract-and-compare on a running remainder. RW must be
// even; the result has RW/2 bits.
//
// Timing: start (pulse while idle) latches rad; done pulses RW/2 + 1 cycles later with q
// valid; q holds until the next start.
module isqrt_seq #(
  parameter int unsigned RW = 30,
  localparam int unsigned QW = RW / 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [RW-1:0] rad,
  output logic          busy,
  output logic          done,
  output logic [QW-1:0] q
);

  localparam int unsigned CW = $clog2(QW + 1);

  logic [RW-1:0] x;      // remaining radicand bits, consumed two at a time
  logic [QW+1:0] rem;    // partial remainder
  logic [CW-1:0] n;

  logic [QW+1:0] rem_sh, trial;
  always_comb begin
    rem_sh = {rem[QW-1:0], x[RW-1:RW-2]};
    trial  = {q, 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      n    <= '0;
      q    <= '0;
      rem  <= '0;
      x    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        x    <= rad;
        rem  <= '0;
        q    <= '0;
        n    <= CW'(QW);
      end else if (busy) begin
        x <= x << 2;
        if (rem_sh >= trial) begin
          rem <= rem_sh - trial;
          q   <= {q[QW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          q   <= {q[QW-2:0], 1'b0};
        end
        n <= n - 1'b1;
        if (n == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule

// div_seq: sequential unsigned restoring divider, quo = floor(num / den).
//
// One quotient bit per clock, most significant first. A zero divisor gives an all-ones
// quotient (callers avoid it).
//
// Timing: start (pulse while idle) latches num and den; done pulses NW + 1 cycles later
// with quo valid; quo holds until the next start.
module div_seq #(
  parameter int unsigned NW = 48,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [NW-1:0] quo
);

  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW:0]   rem;
  logic [DW-1:0] d;
  logic [CW-1:0] n;
  logic [DW:0]   rem_sh;

  assign rem_sh = {rem[DW-1:0], quo[NW-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      rem  <= '0;
      d    <= '0;
      n    <= '0;
      quo  <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        quo  <= num;            // dividend shifts out as quotient bits shift in
        rem  <= '0;
        d    <= den;
        n    <= CW'(NW);
      end else if (busy) begin
        if (rem_sh >= {1'b0, d}) begin
          rem <= rem_sh - {1'b0, d};
          quo <= {quo[NW-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          quo <= {quo[NW-2:0], 1'b0};
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

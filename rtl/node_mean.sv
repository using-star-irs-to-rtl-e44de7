// node_mean: builds the feature row of the STAR-IRS node as the element-wise mean of
// the feature rows of Bob and all eavesdroppers (graph nodes 1 .. C-1).
//
// The input feature buffer is banked by node, so all C-1 rows are read in parallel at
// the same feature index. One feature is finished per clock: the C-1 values are summed,
// divided by C-1 with rounding to nearest (ties away from zero) and written to bank 0 at
// the same index. Averaging the other nodes is the paper's definition of the STAR-IRS
// node feature; the rounding rule and the bank layout are this design's choice.
//
// Timing: start (one-cycle pulse while idle) -> F reads issued on F consecutive cycles;
// each result is written two cycles after its read address; done pulses in the cycle
// of the last write, F + 2 cycles after start.
module node_mean
  import gnn_pkg::*;
#(
  parameter int unsigned C = K_EVE + 2,
  parameter int unsigned F = 2*N_ANT + 2*N_ANT*L_ELEM,
  localparam int unsigned FAW = $clog2(F)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [FAW-1:0] rd_addr,
  input  data_t          rd_data [C],   // bank i read data; bank 0 is ignored
  output logic           wr_en,
  output logic [FAW-1:0] wr_addr,
  output data_t          wr_data
);

  localparam logic signed [15:0] DIV  = 16'(C - 1);
  localparam logic signed [15:0] HALF = 16'((C - 1) / 2);

  logic           issuing, rd_valid;
  logic [FAW-1:0] cnt, rd_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing  <= 1'b0;
      cnt      <= '0;
      rd_valid <= 1'b0;
      rd_addr_q <= '0;
      done     <= 1'b0;
    end else begin
      done     <= 1'b0;
      rd_valid <= issuing;
      rd_addr_q <= cnt;
      if (start && !busy) begin
        issuing <= 1'b1;
        cnt     <= '0;
      end else if (issuing) begin
        if (cnt == FAW'(F - 1)) issuing <= 1'b0;
        else                    cnt     <= cnt + 1'b1;
      end
      if (rd_valid && !issuing) done <= 1'b1;
    end
  end

  assign busy    = issuing || rd_valid;
  assign rd_addr = cnt;

  // Sum of the C-1 rows and rounded division by C-1.
  logic signed [15:0] sum, q;
  always_comb begin
    sum = '0;
    for (int i = 1; i < int'(C); i++) sum += 16'(rd_data[i]);
    if (sum >= 0) q = (sum + HALF) / DIV;
    else          q = (sum - HALF) / DIV;
  end

  always_ff @(posedge clk) begin
    wr_data <= data_t'(q);
    wr_addr <= rd_addr_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wr_en <= 1'b0;
    else        wr_en <= rd_valid;
  end

endmodule

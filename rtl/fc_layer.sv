// fc_layer: fully connected layer y = W x + b as a pipelined matrix-vector unit with
// LANES output neurons computed in parallel.
//
// How it works: the OUT neurons are processed in groups of LANES. For a group the unit
// walks the IN inputs, reads one input value per clock and multiplies it with LANES
// weights read in the same clock from LANES weight banks (bank b holds the neurons
// o with o mod LANES = b). After the last input the LANES accumulators plus their
// biases are presented on y_data with y_valid for one clock and the next group starts on
// the next clock, so the initiation interval is one input per cycle. Outputs are left at
// accumulator precision (2*FRAC_BITS fractional bits) for the activation or
// normalisation stage that follows; the neurons of a final partial group beyond OUT
// read as zero.
//
// Interface: weights load through w_we with the neuron index w_o and the input index
// w_i; biases through b_we/b_o. Input values come from an upstream buffer through
// x_raddr/x_rdata (read latency 1). y_grp is the group number, neuron o = y_grp*LANES + b
// is on lane b. Timing: start -> GROUPS*IN + 2 cycles to the last y_valid, done with it.
//
// From the paper: pipelined matrix-vector FC layers whose inner loop is unrolled for an
// initiation interval of one cycle, weights and biases in on-chip RAM. The lane count and
// the banking are this design's choice.
module fc_layer
  import gnn_pkg::*;
#(
  parameter int unsigned IN    = HIDDEN,
  parameter int unsigned OUT   = 3 * L_ELEM,
  parameter int unsigned LANES = FC_LANES,
  localparam int unsigned GROUPS = (OUT + LANES - 1) / LANES,
  localparam int unsigned IAW = (IN > 1) ? $clog2(IN) : 1,
  localparam int unsigned OAW = (OUT > 1) ? $clog2(OUT) : 1,
  localparam int unsigned GAW = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned LAW = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned BAW = $clog2(GROUPS * IN)
) (
  input  logic           clk,
  input  logic           rst_n,
  // weight and bias load
  input  logic           w_we,
  input  logic [OAW-1:0] w_o,
  input  logic [IAW-1:0] w_i,
  input  data_t          w_data,
  input  logic           b_we,
  input  logic [OAW-1:0] b_o,
  input  data_t          b_data,
  // control
  input  logic           start,
  output logic           busy,
  output logic           done,
  // upstream read port
  output logic [IAW-1:0] x_raddr,
  input  data_t          x_rdata,
  // results
  output logic           y_valid,
  output logic [GAW-1:0] y_grp,
  output acc_t           y_data [LANES]
);

  initial assert (LANES == (1 << LAW)) else $error("fc_layer: LANES must be a power of two");

  // ---------------- issue stage ----------------
  logic           run;
  logic [IAW-1:0] i_cnt;
  logic [GAW-1:0] g_cnt;
  logic [BAW-1:0] a_cnt;
  logic           i_first, i_last, g_last;

  assign i_first = (i_cnt == '0);
  assign i_last  = (i_cnt == IAW'(IN - 1));
  assign g_last  = (g_cnt == GAW'(GROUPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      i_cnt <= '0;
      g_cnt <= '0;
      a_cnt <= '0;
    end else if (start && !busy) begin
      run   <= 1'b1;
      i_cnt <= '0;
      g_cnt <= '0;
      a_cnt <= '0;
    end else if (run) begin
      a_cnt <= a_cnt + 1'b1;
      if (i_last) begin
        i_cnt <= '0;
        if (g_last) run   <= 1'b0;
        else        g_cnt <= g_cnt + 1'b1;
      end else begin
        i_cnt <= i_cnt + 1'b1;
      end
    end
  end

  assign x_raddr = i_cnt;

  // ---------------- banked weight and bias memories ----------------
  // Neuron o lives in bank o mod LANES at row o / LANES.
  logic [LAW-1:0] w_bank, b_bank;
  logic [GAW-1:0] w_row, b_row;
  logic [BAW-1:0] w_bank_addr;

  always_comb begin
    logic [OAW+LAW-1:0] wo_ext, bo_ext;
    wo_ext = (OAW+LAW)'(w_o);
    bo_ext = (OAW+LAW)'(b_o);
    w_bank = wo_ext[LAW-1:0];
    b_bank = bo_ext[LAW-1:0];
    w_row  = GAW'(wo_ext >> LAW);
    b_row  = GAW'(bo_ext >> LAW);
    w_bank_addr = BAW'(w_row) * BAW'(IN) + BAW'(w_i);
  end

  data_t w_rdata [LANES];
  data_t b_rdata [LANES];

  for (genvar b = 0; b < int'(LANES); b++) begin : g_bank
    sp_ram #(.WIDTH(DW), .DEPTH(GROUPS * IN)) u_wmem (
      .clk, .we(w_we && (w_bank == LAW'(b))), .waddr(w_bank_addr), .wdata(w_data),
      .raddr(a_cnt), .rdata(w_rdata[b])
    );
    sp_ram #(.WIDTH(DW), .DEPTH(GROUPS)) u_bmem (
      .clk, .we(b_we && (b_bank == LAW'(b))), .waddr(b_row), .wdata(b_data),
      .raddr(g_cnt), .rdata(b_rdata[b])
    );
  end

  // ---------------- MAC stage ----------------
  logic           s1_valid, s1_first, s1_last;
  logic [GAW-1:0] s1_g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_g     <= '0;
    end else begin
      s1_valid <= run;
      s1_first <= run && i_first;
      s1_last  <= run && i_last;
      s1_g     <= g_cnt;
    end
  end

  acc_t  acc    [LANES];
  data_t bias_q [LANES];

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      for (int b = 0; b < int'(LANES); b++) begin
        acc_t sum;
        data_t bias;
        sum  = (s1_first ? acc_t'(0) : acc[b]) + acc_t'(x_rdata) * acc_t'(w_rdata[b]);
        bias = s1_first ? b_rdata[b] : bias_q[b];
        acc[b] <= sum;
        if (s1_first) bias_q[b] <= b_rdata[b];
        if (s1_last) begin
          if (int'(s1_g) * int'(LANES) + b < int'(OUT))
            y_data[b] <= sum + (acc_t'(bias) <<< FRAC_BITS);
          else
            y_data[b] <= '0;
        end
      end
      if (s1_last) y_grp <= s1_g;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      done    <= 1'b0;
    end else begin
      y_valid <= s1_valid && s1_last;
      done    <= s1_valid && s1_last && (s1_g == GAW'(GROUPS - 1));
    end
  end

  assign busy = run || s1_valid;

endmodule

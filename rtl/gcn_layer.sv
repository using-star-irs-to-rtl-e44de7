// gcn_layer: one graph-convolution layer, Y = ReLU(A_hat * X * F + b), for all C graph
// nodes at once.
//
// How it works: the layer is a pipelined matrix-vector engine. For each output feature
// h it walks the F_IN input features f, reads one weight F[f][h] per clock and multiplies
// it with the f-th feature of every node in parallel (C multiply-accumulate units share
// the weight), so the C node-level products T[c][h] = sum_f X[c][f] F[f][h] are finished
// together. T is rescaled to 8 bits, then aggregated over the graph with the constant
// normalised adjacency matrix A_hat (C x C small constant multipliers), the bias b[h] is
// added, ReLU is applied and the C results are written into the output buffer, one bank
// per node, at address h. The next output feature starts on the following clock, so the
// engine accepts one weight per cycle without bubbles.
//
// Interface: weights are loaded through w_we/w_addr/w_data at address h*F_IN + f, biases
// through b_we/b_addr/b_data; both are held in on-chip RAM. The layer reads its input
// features from an upstream buffer through x_raddr/x_rdata (read latency 1, one bank per
// node) and exposes its own output buffer through y_raddr/y_rdata (read latency 1, one
// address per bank so that different consumers can read different nodes at once).
// With PAGES = 2 the output buffer holds two complete output vectors: a run writes the
// page given on wr_page at start while a consumer keeps reading the other page through
// rd_page, which lets two consecutive inputs be in flight in the accelerator.
// Timing: start (pulse while idle) -> done pulse F_OUT*F_IN + 3 cycles later.
//
// From the paper: the GCN formula, A_hat = D^-1/2 (A + I) D^-1/2, ReLU, node-parallel
// computation, weights and biases on chip, 8-bit fixed point. This design's choices: the
// order of the two products (X*F first, then A_hat), the point where the bias is added,
// the rounding points, the two-page output buffer and the degree definition switch
// SELF_LOOP_DEG (0: degree is the row sum of A, as the paper's text defines it; 1: row
// sum of A + I).
module gcn_layer
  import gnn_pkg::*;
#(
  parameter int unsigned C             = K_EVE + 2,
  parameter int unsigned F_IN          = 2*N_ANT + 2*N_ANT*L_ELEM,
  parameter int unsigned F_OUT         = HIDDEN,
  parameter bit          SELF_LOOP_DEG = 1'b0,
  parameter int unsigned PAGES         = 1,
  localparam int unsigned XAW = (F_IN  > 1) ? $clog2(F_IN)  : 1,
  localparam int unsigned YAW = (F_OUT > 1) ? $clog2(F_OUT) : 1,
  localparam int unsigned WAW = $clog2(F_IN * F_OUT),
  localparam int unsigned PAW = $clog2(PAGES * F_OUT)
) (
  input  logic           clk,
  input  logic           rst_n,
  // weight and bias load
  input  logic           w_we,
  input  logic [WAW-1:0] w_addr,
  input  data_t          w_data,
  input  logic           b_we,
  input  logic [YAW-1:0] b_addr,
  input  data_t          b_data,
  // control
  input  logic           start,
  input  logic           wr_page,   // output page written by this run (PAGES = 2)
  output logic           busy,
  output logic           done,
  // upstream feature buffer read port
  output logic [XAW-1:0] x_raddr,
  input  data_t          x_rdata [C],
  // own output buffer read port
  input  logic           rd_page,   // output page read through y_raddr (PAGES = 2)
  input  logic [YAW-1:0] y_raddr [C],
  output data_t          y_rdata [C]
);

  // ---------------- issue stage: walk h (outer) and f (inner) ----------------
  logic           run;
  logic [XAW-1:0] f_cnt;
  logic [YAW-1:0] h_cnt;
  logic [WAW-1:0] w_cnt;
  logic           f_first, f_last, h_last;

  assign f_first = (f_cnt == '0);
  assign f_last  = (f_cnt == XAW'(F_IN - 1));
  assign h_last  = (h_cnt == YAW'(F_OUT - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      f_cnt <= '0;
      h_cnt <= '0;
      w_cnt <= '0;
    end else if (start && !busy) begin
      run   <= 1'b1;
      f_cnt <= '0;
      h_cnt <= '0;
      w_cnt <= '0;
    end else if (run) begin
      w_cnt <= w_cnt + 1'b1;
      if (f_last) begin
        f_cnt <= '0;
        if (h_last) run   <= 1'b0;
        else        h_cnt <= h_cnt + 1'b1;
      end else begin
        f_cnt <= f_cnt + 1'b1;
      end
    end
  end

  assign x_raddr = f_cnt;

  // ---------------- on-chip weight and bias memories ----------------
  data_t w_rdata, b_rdata;

  sp_ram #(.WIDTH(DW), .DEPTH(F_IN * F_OUT)) u_wmem (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_data), .raddr(w_cnt), .rdata(w_rdata)
  );

  sp_ram #(.WIDTH(DW), .DEPTH(F_OUT)) u_bmem (
    .clk, .we(b_we), .waddr(b_addr), .wdata(b_data), .raddr(h_cnt), .rdata(b_rdata)
  );

  // ---------------- MAC stage (memory data valid one cycle after issue) ----------------
  logic           s1_valid, s1_first, s1_last;
  logic [YAW-1:0] s1_h;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_h     <= '0;
    end else begin
      s1_valid <= run;
      s1_first <= run && f_first;
      s1_last  <= run && f_last;
      s1_h     <= h_cnt;
    end
  end

  acc_t  acc [C];
  acc_t  prod [C];
  data_t bias_q;

  always_comb begin
    for (int c = 0; c < int'(C); c++) prod[c] = acc_t'(x_rdata[c]) * acc_t'(w_rdata);
  end

  // T stage: node-level products of one output feature, rescaled to 8 bits.
  logic           t_valid;
  logic [YAW-1:0] t_h;
  data_t          t_val [C];
  data_t          t_bias;

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      for (int c = 0; c < int'(C); c++) acc[c] <= (s1_first ? acc_t'(0) : acc[c]) + prod[c];
      if (s1_first) bias_q <= b_rdata;
    end
    if (s1_valid && s1_last) begin
      for (int c = 0; c < int'(C); c++)
        t_val[c] <= requant(48'(signed'((s1_first ? acc_t'(0) : acc[c]) + prod[c])), FRAC_BITS);
      t_bias <= s1_first ? b_rdata : bias_q;
      t_h    <= s1_h;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) t_valid <= 1'b0;
    else        t_valid <= s1_valid && s1_last;
  end

  // ---------------- aggregation with A_hat, bias, ReLU ----------------
  data_t y_new [C];

  always_comb begin
    for (int i = 0; i < int'(C); i++) begin
      logic signed [47:0] s;
      data_t r;
      s = 48'(signed'(t_bias)) <<< AHAT_FRAC;
      for (int j = 0; j < int'(C); j++) begin
        s += 48'(signed'({1'b0, a_hat(i, j, SELF_LOOP_DEG)})) * 48'(signed'(t_val[j]));
      end
      r = requant(s, AHAT_FRAC);
      y_new[i] = (r < 0) ? '0 : r;
    end
  end

  // ---------------- output buffer, one bank per node ----------------
  // With PAGES = 2 every bank holds two output vectors: page p at addresses
  // p*F_OUT .. p*F_OUT + F_OUT-1. The page written is sampled at start.
  logic           wpage_q;
  logic [PAW-1:0] y_waddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               wpage_q <= 1'b0;
    else if (start && !busy)  wpage_q <= wr_page;
  end

  assign y_waddr = (PAGES > 1 && wpage_q) ? PAW'(F_OUT) + PAW'(t_h) : PAW'(t_h);

  for (genvar i = 0; i < int'(C); i++) begin : g_ybank
    logic [PAW-1:0] ra;
    assign ra = (PAGES > 1 && rd_page) ? PAW'(F_OUT) + PAW'(y_raddr[i]) : PAW'(y_raddr[i]);
    sp_ram #(.WIDTH(DW), .DEPTH(PAGES * F_OUT)) u_ymem (
      .clk, .we(t_valid), .waddr(y_waddr), .wdata(y_new[i]), .raddr(ra), .rdata(y_rdata[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= t_valid && (t_h == YAW'(F_OUT - 1));
  end

  assign busy = run || s1_valid || t_valid;

endmodule

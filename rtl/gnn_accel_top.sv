// gnn_accel_top: GNN inference accelerator for joint transmit beamforming and STAR-IRS
// coefficient design, plus the symbol-level random phase modulator that drives the
// surface's transmission side.
//
// Data flow (one inference):
//   1. The host writes the feature rows of Bob (node 1) and of the K eavesdroppers
//      (nodes 2 .. K+1) into the input feature buffer, one bank per node, and starts.
//   2. node_mean fills node 0 (the STAR-IRS node) with the mean of those rows.
//   3. gcn1 (F_IN -> HIDDEN) (3a) and gcn2 (HIDDEN -> HIDDEN) (3b) apply
//      H' = ReLU(A_hat H F + b) to all C = K + 2 nodes.
//   4. Two heads run at the same time: fc_v on row 0 of the gcn2 output gives 3L values,
//      which pass through sigmoid_pwl into the coefficient buffer; fc_w on row 1 gives
//      the 2N beamformer values.
//   5. star_coeff_unit turns the coefficient buffer into Omega_r and Omega_t, while
//      layer_norm_unit normalises the beamformer and scales it by the gain sqrt(P).
//   6. done pulses; the results can be read through rd_sel/rd_addr. Omega_t is also
//      copied into the table of an_phase_mod, which from then on rotates it by a new
//      common random phase at every sym_tick and streams it to the surface driver.
//
// Overlapped inferences: the controller has two stages. The front stage runs steps 2-3a
// (node_mean and gcn1), the back stage steps 3b-6 (gcn2, the heads and the
// post-processing). The input feature buffer and the gcn1 output buffer have two pages
// each, so while the back stage finishes inference n the front stage already works on
// inference n+1, and the host loads the rows of inference n+2 into the free input page.
// A front stage that finishes first waits until the back stage is idle, then hands over
// its page. The copy of Omega_t used by the modulator also has two pages: a new
// inference writes the page the modulator does not use, and the modulator changes page
// between two symbols after done, so no symbol mixes two coefficient sets.
// Overlapping the inputs across pipeline stages follows the paper's batch interleaving;
// the two-stage split, the page buffers and the hand-over rule are this design's choice.
// Within a stage, units run one after another (the two heads and the two
// post-processing units in parallel).
//
// Interfaces (all synchronous to clk, active-low asynchronous reset rst_n):
//   cfg_*   weight/bias load: cfg_sel chooses the memory, cfg_row/cfg_col the entry
//           (GCN weight F[f][h]: row h, col f; FC weight W[o][i]: row o, col i;
//           bias: row = index). 8-bit signed, FRAC_BITS fractional bits.
//   in_*    feature load: node in_node (1 .. C-1), feature in_feat, 8-bit value. The
//           writes go to the free input page; all C-1 rows must be written for every
//           inference, and the page is taken over by the next accepted start.
//   start / ready   start is accepted only while ready is high (front stage idle).
//   busy / done     busy while any stage works; done pulses once per inference, in
//           start order. Results stay readable until the back stage of the following
//           inference writes them (at least HID*HID cycles after done).
//   w_gain  sqrt(P) as unsigned Q4.11 applied after layer normalisation; sampled with
//           start and carried with its inference, so every inference can use its own
//           power budget.
//   rd_*    result read, latency 1: rd_sel 0 = Omega_r[l], 1 = Omega_t[l],
//           2 = w[n]; data is {im, re} in Q1.14 for Omega, Q4.11 for w.
//   seed_*, sym_tick, irs_*   random phase modulator (see an_phase_mod).
// Latency at the default sizes: 91,075 clock cycles from start to done (0.91 ms at
// 100 MHz), nearly all of it the F_IN x HIDDEN = 82,944-cycle weight walk of gcn1; with
// overlapped inferences a new result is ready every front-stage time, about 84,250
// cycles.
module gnn_accel_top
  import gnn_pkg::*;
#(
  parameter int unsigned N      = N_ANT,
  parameter int unsigned L      = L_ELEM,
  parameter int unsigned K      = K_EVE,
  parameter int unsigned HID    = HIDDEN,
  parameter int unsigned LANES  = FC_LANES,
  parameter bit          SELF_LOOP_DEG = 1'b0,
  localparam int unsigned C     = K + 2,
  localparam int unsigned F_IN  = 2*N + 2*N*L,
  localparam int unsigned NV    = 3 * L,
  localparam int unsigned NW    = 2 * N,
  localparam int unsigned FAW   = $clog2(F_IN),
  localparam int unsigned HAW   = $clog2(HID),
  localparam int unsigned CAW   = $clog2(C),
  localparam int unsigned LAW   = $clog2(L),
  localparam int unsigned VAW   = $clog2(NV),
  localparam int unsigned VGRP  = (NV + LANES - 1) / LANES,
  localparam int unsigned WGRP  = (NW + LANES - 1) / LANES,
  localparam int unsigned VGAW  = (VGRP > 1) ? $clog2(VGRP) : 1,
  localparam int unsigned WGAW  = (WGRP > 1) ? $clog2(WGRP) : 1,
  localparam int unsigned LNAW  = $clog2(LANES),
  localparam int unsigned RAW   = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  // weight and bias load
  input  logic            cfg_we,
  input  logic [2:0]      cfg_sel,   // 0 gcn1 W, 1 gcn1 b, 2 gcn2 W, 3 gcn2 b,
                                     // 4 fc_v W, 5 fc_v b, 6 fc_w W, 7 fc_w b
  input  logic [RAW-1:0]  cfg_row,
  input  logic [RAW-1:0]  cfg_col,
  input  data_t           cfg_data,
  // feature load
  input  logic            in_we,
  input  logic [CAW-1:0]  in_node,
  input  logic [FAW-1:0]  in_feat,
  input  data_t           in_data,
  // run control
  input  logic            start,
  output logic            ready,
  output logic            busy,
  output logic            done,
  input  logic [15:0]     w_gain,
  // result read
  input  logic [1:0]      rd_sel,
  input  logic [LAW-1:0]  rd_addr,
  output cplx_t           rd_data,
  // symbol-level random phase modulation
  input  logic            seed_we,
  input  logic [31:0]     seed,
  input  logic            sym_tick,
  output logic [2:0]      phase_idx,
  output logic            irs_valid,
  output logic [LAW-1:0]  irs_idx,
  output cplx_t           irs_coef
);

  // ---------------- controller ----------------
  // Two stages share the work of one inference. The front stage runs node_mean and gcn1
  // on the input page; the back stage runs gcn2, the two heads and their post-processing.
  // A finished front stage hands its gcn1 output page to the back stage as soon as that
  // is idle, and is then free for the next input: two inputs are in flight at once.
  typedef enum logic [1:0] {F_IDLE, F_MEAN, F_GCN1, F_HOLD} front_e;
  typedef enum logic [1:0] {B_IDLE, B_GCN2, B_HEADS, B_DONE} back_e;
  front_e fstate;
  back_e  bstate;

  logic mean_start, mean_busy, mean_done;
  logic g1_start, g1_busy, g1_done;
  logic g2_start, g2_busy, g2_done;
  logic fv_start, fv_busy, fv_done;
  logic fw_start, fw_busy, fw_done;
  logic sc_start, sc_busy, sc_done;
  logic ln_start, ln_busy, ln_done;
  logic sc_fin, ln_fin;
  logic fill_page;   // input page the host writes
  logic cmp_page;    // input page the front stage reads
  logic g1_page;     // gcn1 output page written by the front stage
  logic b_page;      // gcn1 output page read by the back stage
  logic [15:0] gain_f, gain_b;   // w_gain of the inference in the front / back stage

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate     <= F_IDLE;
      bstate     <= B_IDLE;
      mean_start <= 1'b0;
      g1_start   <= 1'b0;
      g2_start   <= 1'b0;
      fv_start   <= 1'b0;
      fw_start   <= 1'b0;
      sc_start   <= 1'b0;
      ln_start   <= 1'b0;
      sc_fin     <= 1'b0;
      ln_fin     <= 1'b0;
      done       <= 1'b0;
      fill_page  <= 1'b0;
      cmp_page   <= 1'b0;
      g1_page    <= 1'b0;
      b_page     <= 1'b0;
      gain_f     <= '0;
      gain_b     <= '0;
    end else begin
      mean_start <= 1'b0;
      g1_start   <= 1'b0;
      g2_start   <= 1'b0;
      fv_start   <= 1'b0;
      fw_start   <= 1'b0;
      sc_start   <= 1'b0;
      ln_start   <= 1'b0;
      done       <= 1'b0;
      // front stage
      case (fstate)
        F_IDLE: if (start) begin
          mean_start <= 1'b1;
          cmp_page   <= fill_page;
          fill_page  <= !fill_page;
          gain_f     <= w_gain;
          fstate     <= F_MEAN;
        end
        F_MEAN: if (mean_done) begin
          g1_start <= 1'b1;
          fstate   <= F_GCN1;
        end
        F_GCN1: if (g1_done) fstate <= F_HOLD;
        F_HOLD: if (bstate == B_IDLE) begin
          // hand over: the back stage takes this page, gcn1 writes the other one next
          g2_start <= 1'b1;
          b_page   <= g1_page;
          g1_page  <= !g1_page;
          gain_b   <= gain_f;
          fstate   <= F_IDLE;
        end
        default: fstate <= F_IDLE;
      endcase
      // back stage
      case (bstate)
        B_IDLE: if (fstate == F_HOLD) bstate <= B_GCN2;
        B_GCN2: if (g2_done) begin
          fv_start <= 1'b1;
          fw_start <= 1'b1;
          sc_fin   <= 1'b0;
          ln_fin   <= 1'b0;
          bstate   <= B_HEADS;
        end
        B_HEADS: begin
          // Each post-processing unit starts as soon as its head has finished.
          if (fv_done) sc_start <= 1'b1;
          if (fw_done) ln_start <= 1'b1;
          if (sc_done) sc_fin <= 1'b1;
          if (ln_done) ln_fin <= 1'b1;
          if ((sc_fin || sc_done) && (ln_fin || ln_done)) bstate <= B_DONE;
        end
        B_DONE: begin
          done   <= 1'b1;
          bstate <= B_IDLE;
        end
        default: bstate <= B_IDLE;
      endcase
    end
  end

  assign ready = (fstate == F_IDLE);
  assign busy  = (fstate != F_IDLE) || (bstate != B_IDLE);

  // Handshake rules: start only while ready; a stage unit is only started while it is
  // idle, and a stage is only left on that unit's done pulse.
  a_start_ready: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready);
  a_mean_idle: assert property (@(posedge clk) disable iff (!rst_n) mean_start |-> !mean_busy);
  a_g1_idle:   assert property (@(posedge clk) disable iff (!rst_n) g1_start   |-> !g1_busy);
  a_g2_idle:   assert property (@(posedge clk) disable iff (!rst_n) g2_start   |-> !g2_busy);
  a_fv_idle:   assert property (@(posedge clk) disable iff (!rst_n) fv_start   |-> !fv_busy);
  a_fw_idle:   assert property (@(posedge clk) disable iff (!rst_n) fw_start   |-> !fw_busy);
  a_sc_idle:   assert property (@(posedge clk) disable iff (!rst_n) sc_start   |-> !sc_busy);
  a_ln_idle:   assert property (@(posedge clk) disable iff (!rst_n) ln_start   |-> !ln_busy);

  // ---------------- input feature buffer (one bank per node, two pages) ----------------
  // Page p of a bank occupies addresses p*F_IN .. p*F_IN + F_IN-1. The host fills one
  // page while the front stage works on the other.
  localparam int unsigned XPAW = $clog2(2 * F_IN);

  data_t           xin_rdata [C];
  logic [FAW-1:0]  mean_raddr, g1_xraddr, xin_raddr;
  logic [XPAW-1:0] xin_praddr, mean_pwaddr, in_pwaddr;
  logic            mean_we;
  logic [FAW-1:0]  mean_waddr;
  data_t           mean_wdata;

  assign xin_raddr   = (fstate == F_MEAN) ? mean_raddr : g1_xraddr;
  assign xin_praddr  = cmp_page  ? XPAW'(F_IN) + XPAW'(xin_raddr)  : XPAW'(xin_raddr);
  assign mean_pwaddr = cmp_page  ? XPAW'(F_IN) + XPAW'(mean_waddr) : XPAW'(mean_waddr);
  assign in_pwaddr   = fill_page ? XPAW'(F_IN) + XPAW'(in_feat)    : XPAW'(in_feat);

  for (genvar i = 0; i < int'(C); i++) begin : g_xin
    logic            we;
    logic [XPAW-1:0] wa;
    data_t           wd;
    if (i == 0) begin : g_irs
      assign we = mean_we;
      assign wa = mean_pwaddr;
      assign wd = mean_wdata;
    end else begin : g_user
      assign we = in_we && (in_node == CAW'(i));
      assign wa = in_pwaddr;
      assign wd = in_data;
    end
    sp_ram #(.WIDTH(DW), .DEPTH(2 * F_IN)) u_xin (
      .clk, .we, .waddr(wa), .wdata(wd), .raddr(xin_praddr), .rdata(xin_rdata[i])
    );
  end

  node_mean #(.C(C), .F(F_IN)) u_mean (
    .clk, .rst_n, .start(mean_start), .busy(mean_busy), .done(mean_done),
    .rd_addr(mean_raddr), .rd_data(xin_rdata),
    .wr_en(mean_we), .wr_addr(mean_waddr), .wr_data(mean_wdata)
  );

  // ---------------- configuration decode ----------------
  localparam int unsigned G1AW = $clog2(F_IN * HID);
  localparam int unsigned G2AW = $clog2(HID * HID);

  logic [G1AW-1:0] g1_waddr;
  logic [G2AW-1:0] g2_waddr;
  always_comb begin
    g1_waddr = G1AW'(cfg_row) * G1AW'(F_IN) + G1AW'(cfg_col);
    g2_waddr = G2AW'(cfg_row) * G2AW'(HID)  + G2AW'(cfg_col);
  end

  // ---------------- GCN layers ----------------
  data_t          g1_yrdata [C];
  logic [HAW-1:0] g1_yraddr [C];
  logic [HAW-1:0] g2_xraddr;
  data_t          g2_yrdata [C];
  logic [HAW-1:0] g2_yraddr [C];
  logic [HAW-1:0] fv_xraddr, fw_xraddr;

  always_comb begin
    for (int i = 0; i < int'(C); i++) begin
      g1_yraddr[i] = g2_xraddr;
      g2_yraddr[i] = '0;
    end
    g2_yraddr[0] = fv_xraddr;     // STAR-IRS node row feeds the coefficient head
    g2_yraddr[1] = fw_xraddr;     // Bob node row feeds the beamforming head
  end

  gcn_layer #(.C(C), .F_IN(F_IN), .F_OUT(HID), .SELF_LOOP_DEG(SELF_LOOP_DEG), .PAGES(2)) u_gcn1 (
    .clk, .rst_n,
    .w_we(cfg_we && cfg_sel == 3'd0), .w_addr(g1_waddr), .w_data(cfg_data),
    .b_we(cfg_we && cfg_sel == 3'd1), .b_addr(HAW'(cfg_row)), .b_data(cfg_data),
    .start(g1_start), .wr_page(g1_page), .busy(g1_busy), .done(g1_done),
    .x_raddr(g1_xraddr), .x_rdata(xin_rdata),
    .rd_page(b_page), .y_raddr(g1_yraddr), .y_rdata(g1_yrdata)
  );

  gcn_layer #(.C(C), .F_IN(HID), .F_OUT(HID), .SELF_LOOP_DEG(SELF_LOOP_DEG)) u_gcn2 (
    .clk, .rst_n,
    .w_we(cfg_we && cfg_sel == 3'd2), .w_addr(g2_waddr), .w_data(cfg_data),
    .b_we(cfg_we && cfg_sel == 3'd3), .b_addr(HAW'(cfg_row)), .b_data(cfg_data),
    .start(g2_start), .wr_page(1'b0), .busy(g2_busy), .done(g2_done),
    .x_raddr(g2_xraddr), .x_rdata(g1_yrdata),
    .rd_page(1'b0), .y_raddr(g2_yraddr), .y_rdata(g2_yrdata)
  );

  // ---------------- coefficient head: FC + sigmoid ----------------
  logic            fv_yvalid;
  logic [VGAW-1:0] fv_ygrp;
  acc_t            fv_ydata [LANES];
  coef_t           sig      [LANES];

  fc_layer #(.IN(HID), .OUT(NV), .LANES(LANES)) u_fc_v (
    .clk, .rst_n,
    .w_we(cfg_we && cfg_sel == 3'd4), .w_o(VAW'(cfg_row)), .w_i(HAW'(cfg_col)), .w_data(cfg_data),
    .b_we(cfg_we && cfg_sel == 3'd5), .b_o(VAW'(cfg_row)), .b_data(cfg_data),
    .start(fv_start), .busy(fv_busy), .done(fv_done),
    .x_raddr(fv_xraddr), .x_rdata(g2_yrdata[0]),
    .y_valid(fv_yvalid), .y_grp(fv_ygrp), .y_data(fv_ydata)
  );

  for (genvar b = 0; b < int'(LANES); b++) begin : g_sig
    sigmoid_pwl #(.IN_FRAC(2 * FRAC_BITS)) u_sig (.x(fv_ydata[b]), .y(sig[b]));
  end

  // Coefficient buffer: one word of LANES sigmoid outputs per FC group.
  logic [LANES*COEF_W-1:0] vbuf_wdata, vbuf_rdata;
  logic [VAW-1:0]          sc_vraddr;
  logic [LNAW-1:0]         vlane_q;
  coef_t                   sc_vrdata;

  always_comb begin
    for (int b = 0; b < int'(LANES); b++) vbuf_wdata[b*COEF_W +: COEF_W] = sig[b];
  end

  sp_ram #(.WIDTH(LANES * COEF_W), .DEPTH(VGRP)) u_vbuf (
    .clk, .we(fv_yvalid), .waddr(fv_ygrp), .wdata(vbuf_wdata),
    .raddr(VGAW'(sc_vraddr >> LNAW)), .rdata(vbuf_rdata)
  );

  always_ff @(posedge clk) vlane_q <= sc_vraddr[LNAW-1:0];
  assign sc_vrdata = vbuf_rdata[vlane_q*COEF_W +: COEF_W];

  // ---------------- beamforming head: FC + layer normalisation ----------------
  logic            fw_yvalid;
  logic [WGAW-1:0] fw_ygrp;
  acc_t            fw_ydata [LANES];
  acc_t            wacc     [NW];

  fc_layer #(.IN(HID), .OUT(NW), .LANES(LANES)) u_fc_w (
    .clk, .rst_n,
    .w_we(cfg_we && cfg_sel == 3'd6), .w_o($clog2(NW)'(cfg_row)), .w_i(HAW'(cfg_col)),
    .w_data(cfg_data),
    .b_we(cfg_we && cfg_sel == 3'd7), .b_o($clog2(NW)'(cfg_row)), .b_data(cfg_data),
    .start(fw_start), .busy(fw_busy), .done(fw_done),
    .x_raddr(fw_xraddr), .x_rdata(g2_yrdata[1]),
    .y_valid(fw_yvalid), .y_grp(fw_ygrp), .y_data(fw_ydata)
  );

  always_ff @(posedge clk) begin
    if (fw_yvalid) begin
      for (int b = 0; b < int'(LANES); b++) begin
        if (int'(fw_ygrp) * int'(LANES) + b < int'(NW))
          wacc[int'(fw_ygrp) * int'(LANES) + b] <= fw_ydata[b];
      end
    end
  end

  logic                   ln_ovalid;
  logic [$clog2(NW)-1:0]  ln_oidx;
  coef_t                  ln_odata;

  layer_norm_unit #(.M(NW)) u_ln (
    .clk, .rst_n, .start(ln_start), .x(wacc), .gain(gain_b),
    .busy(ln_busy), .done(ln_done),
    .o_valid(ln_ovalid), .o_idx(ln_oidx), .o_data(ln_odata)
  );

  // ---------------- STAR-IRS coefficient post-processing ----------------
  logic           sc_ovalid;
  logic [LAW-1:0] sc_oidx;
  cplx_t          sc_ore, sc_ort;

  star_coeff_unit #(.L(L)) u_sc (
    .clk, .rst_n, .start(sc_start), .busy(sc_busy), .done(sc_done),
    .v_raddr(sc_vraddr), .v_rdata(sc_vrdata),
    .o_valid(sc_ovalid), .o_idx(sc_oidx), .o_re(sc_ore), .o_rt(sc_ort)
  );

  // ---------------- result storage and read-out ----------------
  cplx_t omr_rdata, omt_rdata;
  coef_t w_re [N];
  coef_t w_im [N];

  sp_ram #(.WIDTH(2 * COEF_W), .DEPTH(L)) u_omega_r (
    .clk, .we(sc_ovalid), .waddr(sc_oidx), .wdata(sc_ore), .raddr(rd_addr), .rdata(omr_rdata)
  );
  sp_ram #(.WIDTH(2 * COEF_W), .DEPTH(L)) u_omega_t (
    .clk, .we(sc_ovalid), .waddr(sc_oidx), .wdata(sc_ort), .raddr(rd_addr), .rdata(omt_rdata)
  );

  always_ff @(posedge clk) begin
    if (ln_ovalid) begin
      if (int'(ln_oidx) < int'(N)) w_re[int'(ln_oidx)]           <= ln_odata;
      else                         w_im[int'(ln_oidx) - int'(N)] <= ln_odata;
    end
  end

  logic [1:0]     rd_sel_q;
  logic [LAW-1:0] rd_addr_q;
  always_ff @(posedge clk) begin
    rd_sel_q  <= rd_sel;
    rd_addr_q <= rd_addr;
  end

  always_comb begin
    case (rd_sel_q)
      2'd0:    rd_data = omr_rdata;
      2'd1:    rd_data = omt_rdata;
      default: begin
        if (int'(rd_addr_q) < int'(N)) begin
          rd_data.re = w_re[int'(rd_addr_q)];
          rd_data.im = w_im[int'(rd_addr_q)];
        end else begin
          rd_data = '0;
        end
      end
    endcase
  end

  // ---------------- symbol-level random phase modulation ----------------
  // The modulator reads a private two-page copy of Omega_t. A new inference writes the
  // page the modulator is not using; the modulator switches to it between two symbols,
  // after done, so a symbol never mixes old and new coefficients.
  localparam int unsigned TPAW = $clog2(2 * L);

  logic [LAW-1:0]  pm_craddr;
  cplx_t           pm_crdata;
  logic            pm_busy;
  logic            tx_wpage;   // page being written by the back stage
  logic            tx_rpage;   // page read by the modulator
  logic [TPAW-1:0] tx_waddr, tx_raddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_wpage <= 1'b0;
      tx_rpage <= 1'b0;
    end else begin
      if (done)                         tx_wpage <= !tx_wpage;
      // The modulator's first table read comes one clock after the tick, so the page
      // may change on any clock on which it is idle, the tick clock included.
      if (!pm_busy && tx_rpage == tx_wpage) tx_rpage <= !tx_wpage;
    end
  end

  assign tx_waddr = tx_wpage ? TPAW'(L) + TPAW'(sc_oidx)   : TPAW'(sc_oidx);
  assign tx_raddr = tx_rpage ? TPAW'(L) + TPAW'(pm_craddr) : TPAW'(pm_craddr);

  sp_ram #(.WIDTH(2 * COEF_W), .DEPTH(2 * L)) u_tx_table (
    .clk, .we(sc_ovalid), .waddr(tx_waddr), .wdata(sc_ort), .raddr(tx_raddr), .rdata(pm_crdata)
  );

  an_phase_mod #(.L(L)) u_pm (
    .clk, .rst_n, .seed_we, .seed, .sym_tick, .busy(pm_busy), .phase_idx,
    .c_raddr(pm_craddr), .c_rdata(pm_crdata),
    .irs_valid, .irs_idx, .irs_coef
  );

endmodule

// gnn_pkg: sizes, number formats and the normalised adjacency matrix shared by the
// GNN beamforming accelerator.
//
// System sizes follow the simulation set-up of the design: N = 8 transmit antennas,
// L = 80 STAR-IRS elements, K = 2 eavesdroppers. The graph has C = K + 2 nodes in the
// order STAR-IRS (0), Bob (1), Eve 1 .. Eve K (2 ..). Each node carries 2N + 2NL real
// features (real and imaginary parts of the direct channel and of the cascaded channel).
//
// Number formats (this design's choice; only the 8-bit word length comes from the
// paper's quantisation study):
//   activations and weights : signed 8 bit, FRAC_BITS fractional bits (Q2.5)
//   accumulators            : signed 32 bit, 2*FRAC_BITS fractional bits
//   A_hat coefficients      : unsigned 16 bit, AHAT_FRAC = 14 fractional bits
//   coefficient outputs     : signed 16 bit, COEF_FRAC = 14 fractional bits (Q1.14)
//   beamformer outputs      : signed 16 bit, W_FRAC = 11 fractional bits (Q4.11)
package gnn_pkg;

  parameter int unsigned N_ANT     = 8;    // antennas at the transmitter
  parameter int unsigned L_ELEM    = 80;   // STAR-IRS elements
  parameter int unsigned K_EVE     = 2;    // eavesdroppers
  parameter int unsigned HIDDEN    = 64;   // GCN hidden width (not given by the paper)
  parameter int unsigned FC_LANES  = 16;   // parallel output neurons per FC engine

  parameter int unsigned DW        = 8;
  parameter int unsigned FRAC_BITS = 5;
  parameter int unsigned ACC_W     = 32;
  parameter int unsigned AHAT_W    = 16;
  parameter int unsigned AHAT_FRAC = 14;
  parameter int unsigned COEF_W    = 16;
  parameter int unsigned COEF_FRAC = 14;
  parameter int unsigned W_FRAC    = 11;

  typedef logic signed [DW-1:0]     data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  typedef struct packed {
    coef_t im;
    coef_t re;
  } cplx_t;

  // Node classes of the graph.
  typedef enum logic [1:0] {NODE_IRS = 2'd0, NODE_BOB = 2'd1, NODE_EVE = 2'd2} node_class_e;

  function automatic node_class_e node_class(input int unsigned idx);
    if (idx == 0) return NODE_IRS;
    if (idx == 1) return NODE_BOB;
    return NODE_EVE;
  endfunction

  // Adjacency matrix of the design: row 0 (STAR-IRS) links to Bob, row 1 (Bob) links to
  // the STAR-IRS, every Eve row links to both the STAR-IRS and Bob.
  function automatic bit adj(input int unsigned i, input int unsigned j);
    if (i == 0) return (j == 1);
    if (i == 1) return (j == 0);
    return (j == 0 || j == 1);
  endfunction

  // Degree of node i. With self_loop = 0 the degree is the row sum of A (the text's
  // literal definition); with self_loop = 1 it is the row sum of A + I.
  function automatic int unsigned degree(input int unsigned i, input bit self_loop);
    int unsigned d;
    d = (i < 2) ? 1 : 2;
    return self_loop ? d + 1 : d;
  endfunction

  // round(2^AHAT_FRAC / sqrt(d_i * d_j)) for the degree products that can occur.
  // Products: 1, 2, 4 (no self loop) and 4, 6, 9 (self loop).
  function automatic logic [AHAT_W-1:0] inv_sqrt_q(input int unsigned p);
    case (p)
      1:       return 16'd16384;   // 1
      2:       return 16'd11585;   // 1/sqrt(2)
      4:       return 16'd8192;    // 1/2
      6:       return 16'd6689;    // 1/sqrt(6)
      9:       return 16'd5461;    // 1/3
      default: return 16'd0;
    endcase
  endfunction

  // Entry (i, j) of A_hat = D^-1/2 (A + I) D^-1/2 in AHAT_FRAC fixed point.
  function automatic logic [AHAT_W-1:0] a_hat(input int unsigned i, input int unsigned j,
                                              input bit self_loop);
    if (i != j && !adj(i, j)) return '0;
    return inv_sqrt_q(degree(i, self_loop) * degree(j, self_loop));
  endfunction

  // Arithmetic shift right by sh with round-half-up, then saturate to DW bits.
  function automatic data_t requant(input logic signed [47:0] v, input int unsigned sh);
    logic signed [47:0] r;
    r = (sh == 0) ? v : ((v + (48'sd1 <<< (sh - 1))) >>> sh);
    if (r > 48'sd127)  return data_t'(8'sd127);
    if (r < -48'sd128) return data_t'(-8'sd128);
    return data_t'(r[DW-1:0]);
  endfunction

endpackage

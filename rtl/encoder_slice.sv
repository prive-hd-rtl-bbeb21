// encoder_slice: encodes and quantizes P dimensions of the query hypervector
// in one cycle.
//
// The encoding is H = sum_k L[v_k] * B_k: for every feature k the level
// hypervector selected by the feature's level v_k is multiplied, dimension by
// dimension, with that feature's base (position) hypervector B_k. In binary
// form (0 = -1, 1 = +1) the product is an XNOR. For each of the P dimensions
// of the current chunk this module forms the D_IV product bits and reduces
// them with one of two quantizers:
//   QM_BIPOLAR - bipolar_quantizer (majority LUTs + adder tree), giving +1/-1;
//   QM_TERNARY - ternary_quantizer (LUT adders + truncating 3-bit tree and two
//                thresholds), giving -1/0/+1, the products fed in as +1/-1.
// Finally each dimension whose mask bit is set is forced to 0. The mask
// serves both pruned model dimensions and the dimensions nullified to hide
// the query before it is offloaded.
//
// The encoding, the XNOR, both quantizer structures and the masking follow
// the paper. Building both quantizers into each lane behind a mode input is
// a choice of this design: the paper's FPGA inference uses the bipolar one,
// and the ternary one is the paper's structure for ternary encodings. Lane j
// uses tie-bit seed j, so its majority LUTs are fixed per lane.
//
// Interface: purely combinational. feats: level index of each feature;
// base_slice[k]: chunk of B_k; level_slice[l]: chunk of level hypervector l;
// mask: 1 = dimension nullified. q[j] is the ternary code of lane j.
module encoder_slice
  import prive_pkg::*;
#(
  parameter int unsigned D_IV   = DEF_D_IV,
  parameter int unsigned LEVELS = DEF_LEVELS,
  parameter int unsigned P      = DEF_P
) (
  input  logic [D_IV-1:0][idx_w(LEVELS)-1:0]  feats,
  input  logic [D_IV-1:0][P-1:0]              base_slice,
  input  logic [LEVELS-1:0][P-1:0]            level_slice,
  input  logic [P-1:0]                        mask,
  input  qmode_e                              mode,
  input  logic signed [2:0]                   thr_pos,
  input  logic signed [2:0]                   thr_neg,
  output tern_t [P-1:0]                       q,
  output logic                                tie_any
);
  // Bound products: prod[k][j] = XNOR(L[v_k][j], B_k[j]).
  logic [D_IV-1:0][P-1:0] prod;

  always_comb begin
    for (int unsigned k = 0; k < D_IV; k++)
      prod[k] = ~(level_slice[feats[k]] ^ base_slice[k]);
  end

  logic [P-1:0] lane_tie;

  for (genvar j = 0; j < P; j++) begin : g_lane
    logic [D_IV-1:0] col;
    tern_t [D_IV-1:0] tcol;
    logic  bq;
    tern_t tq;
    logic signed [2:0] tsum;
    logic [$clog2((D_IV+5)/6+1)-1:0] bcnt;

    for (genvar k = 0; k < D_IV; k++) begin : g_col
      assign col[k]  = prod[k][j];
      assign tcol[k] = prod[k][j] ? T_POS : T_NEG;
    end

    bipolar_quantizer #(.N_IN(D_IV), .SEED(j)) u_bq (
      .bits(col), .q(bq), .maj_count(bcnt), .tie_any(lane_tie[j])
    );

    ternary_quantizer #(.N_IN(D_IV)) u_tq (
      .elems(tcol), .thr_pos(thr_pos), .thr_neg(thr_neg), .q(tq), .sum3(tsum)
    );

    always_comb begin
      if (mask[j])                 q[j] = T_ZERO;
      else if (mode == QM_BIPOLAR) q[j] = bq ? T_POS : T_NEG;
      else                         q[j] = tq;
    end
  end

  assign tie_any = (mode == QM_BIPOLAR) && |(lane_tie & ~mask);

endmodule

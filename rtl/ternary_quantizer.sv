// ternary_quantizer: approximate sum of N_IN ternary elements, then a
// ternary threshold, for one hypervector dimension.
//
// Structure (Fig. 7(b) of the Prive-HD paper): each group of three 2-bit
// ternary elements a, b, c feeds three 6-input LUTs that produce their exact
// 3-bit sum (-3..+3). The sums are added by a binary tree of 3-bit adders;
// each adder forms the 4-bit sum and drops its least-significant bit, so every
// level keeps three bits and halves the scale. The 3-bit tree output sum3 is
// compared with two thresholds: sum3 >= thr_pos gives +1, otherwise
// sum3 <= thr_neg gives -1, otherwise 0. Raising thr_pos and lowering thr_neg
// moves probability mass to 0, which is how the paper's biased ternary
// quantization (p(0) = 1/2) is obtained.
//
// Because every level rounds toward minus infinity, the output leans
// negative: for 617 random +1/-1 inputs it is -1 or -2, never 0 or above. The
// thresholds must be set with this offset in mind (e.g. thr_pos = -1 and
// thr_neg = -2 give only +1/-1; thr_pos = 0, thr_neg = -2 maps -1 to 0).
//
// Choices of this design: missing elements of the last group and missing
// leaves of the tree (padding to a power of two) are zeros; dropping the LSB
// is an arithmetic shift (rounds toward minus infinity); the two run-time
// thresholds are this design's way to set the quantization threshold.
//
// Interface: purely combinational; elems[k] uses the prive_pkg ternary code.
module ternary_quantizer
  import prive_pkg::*;
#(
  parameter int unsigned N_IN = DEF_D_IV
) (
  input  tern_t [N_IN-1:0]   elems,
  input  logic signed [2:0]  thr_pos,
  input  logic signed [2:0]  thr_neg,
  output tern_t              q,
  output logic signed [2:0]  sum3
);
  localparam int unsigned NL    = (N_IN + 2) / 3;
  localparam int unsigned DEPTH = (NL > 1) ? $clog2(NL) : 0;
  localparam int unsigned NP    = 1 << DEPTH;

  for (genvar d = 0; d <= DEPTH; d++) begin : g_lvl
    logic signed [2:0] v [NP >> d];
    if (d == 0) begin : g_leaf
      for (genvar i = 0; i < NP; i++) begin : g_i
        if (i < NL) begin : g_lut
          tern_t a, b, c;
          assign a = (3*i   < N_IN) ? elems[3*i]   : T_ZERO;
          assign b = (3*i+1 < N_IN) ? elems[3*i+1] : T_ZERO;
          assign c = (3*i+2 < N_IN) ? elems[3*i+2] : T_ZERO;
          assign v[i] = tern_add3(a, b, c);
        end else begin : g_pad
          assign v[i] = 3'sd0;
        end
      end
    end else begin : g_add
      for (genvar i = 0; i < (NP >> d); i++) begin : g_i
        assign v[i] = sat_add3(g_lvl[d-1].v[2*i], g_lvl[d-1].v[2*i+1]);
      end
    end
  end

  assign sum3 = g_lvl[DEPTH].v[0];

  always_comb begin
    if (sum3 >= thr_pos)      q = T_POS;
    else if (sum3 <= thr_neg) q = T_NEG;
    else                      q = T_ZERO;
  end

endmodule

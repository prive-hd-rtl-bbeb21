// bipolar_quantizer: approximate sign of the sum of N_IN bipolar elements
// (one hypervector dimension), i.e. a majority vote of N_IN bits.
//
// Structure (Fig. 7(a) of the Prive-HD paper): the inputs are cut into groups
// of six; each group feeds a 6-input majority LUT whose tie (three ones, three
// zeros) is resolved by a bit fixed at design time. Only this first stage
// uses majority LUTs; their N_IN/6 outputs are then counted by an ordinary
// adder tree and compared with half the number of groups, which gives the
// 1-bit quantized dimension. The result is approximate: a group that is 4:2
// counts the same as one that is 6:0.
//
// Choices of this design, where the paper is silent: a last group of fewer
// than six inputs votes on the inputs it has (a smaller LUT); when the count
// is exactly half the groups (possible only for an even number of groups)
// the final threshold uses one more design-time bit. Tie bits come from
// prive_pkg::tie_bit(SEED, group index), with group index NG for the final
// threshold.
//
// Interface: purely combinational. bits[k] is element k (1 = +1, 0 = -1);
// q is the quantized dimension (1 = +1). maj_count is the adder-tree output
// and tie_any flags that at least one LUT met a tie (for observation only).
module bipolar_quantizer
  import prive_pkg::*;
#(
  parameter int unsigned N_IN = DEF_D_IV,
  parameter int unsigned SEED = 0
) (
  input  logic [N_IN-1:0]                    bits,
  output logic                               q,
  output logic [$clog2((N_IN+5)/6+1)-1:0]    maj_count,
  output logic                               tie_any
);
  localparam int unsigned NG = (N_IN + 5) / 6;
  localparam int unsigned CW = $clog2(NG + 1);
  localparam logic FINAL_TIE = tie_bit(SEED, NG);

  logic [NG-1:0] maj;
  logic [NG-1:0] tied;

  for (genvar g = 0; g < NG; g++) begin : g_lut
    localparam int unsigned NV  = (N_IN - 6 * g >= 6) ? 6 : N_IN - 6 * g;
    localparam logic        TIE = tie_bit(SEED, g);
    logic [5:0] x;
    for (genvar i = 0; i < 6; i++) begin : g_in
      if (i < NV) begin : g_real
        assign x[i] = bits[6*g+i];
      end else begin : g_pad
        assign x[i] = 1'b0;
      end
    end
    assign maj[g]  = maj6(x, NV, TIE);
    assign tied[g] = maj6_tied(x, NV);
  end

  // Adder tree over the majority outputs.
  always_comb begin
    maj_count = '0;
    for (int unsigned g = 0; g < NG; g++)
      maj_count += CW'(maj[g]);
  end

  // Final sign / threshold.
  always_comb begin
    if (2 * 32'(maj_count) > NG)       q = 1'b1;
    else if (2 * 32'(maj_count) == NG) q = FINAL_TIE;
    else                               q = 1'b0;
  end

  assign tie_any = |tied;

endmodule

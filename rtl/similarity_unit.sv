// similarity_unit: dot products of the quantized query with every class
// hypervector, accumulated chunk by chunk.
//
// HD inference picks the class whose hypervector is most similar (cosine) to
// the query. The query norm is common to all classes and is dropped, so per
// class only the dot product sum_j q_j * C[j] is needed. Query elements are
// ternary, so every product is +C[j], -C[j] or 0 and no multiplier is used.
// Each enabled cycle adds the P-lane partial dot product of the current chunk
// to one ACC_W-bit accumulator per class; after all chunks dot[c] holds the
// full dot product. The class norm is applied later, in argmax_unit.
//
// Widths (class element CLASS_W bits, accumulator ACC_W bits) are choices of
// this design; with 16-bit elements and 10,000 dimensions 32 bits cannot
// overflow.
//
// Timing: clear zeroes all accumulators at the clock edge (it wins over
// acc_en); acc_en adds the current chunk at the edge.
module similarity_unit
  import prive_pkg::*;
#(
  parameter int unsigned N_CLASS = DEF_N_CLASS,
  parameter int unsigned P       = DEF_P,
  parameter int unsigned CLASS_W = DEF_CLASS_W,
  parameter int unsigned ACC_W   = DEF_ACC_W
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      clear,
  input  logic                                      acc_en,
  input  tern_t [P-1:0]                             q,
  input  logic [N_CLASS-1:0][P-1:0][CLASS_W-1:0]    cls,
  output logic signed [ACC_W-1:0]                   dot [N_CLASS]
);
  logic signed [ACC_W-1:0] partial [N_CLASS];

  always_comb begin
    for (int unsigned c = 0; c < N_CLASS; c++) begin
      partial[c] = '0;
      for (int unsigned j = 0; j < P; j++) begin
        case (q[j])
          T_POS:   partial[c] += ACC_W'($signed(cls[c][j]));
          T_NEG:   partial[c] -= ACC_W'($signed(cls[c][j]));
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned c = 0; c < N_CLASS; c++) dot[c] <= '0;
    end else if (clear) begin
      for (int unsigned c = 0; c < N_CLASS; c++) dot[c] <= '0;
    end else if (acc_en) begin
      for (int unsigned c = 0; c < N_CLASS; c++) dot[c] <= dot[c] + partial[c];
    end
  end

endmodule

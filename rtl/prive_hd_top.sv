// prive_hd_top: privacy-preserving hyperdimensional (HD) inference engine.
//
// An input of D_IV features, each given as one of LEVELS levels, is encoded
// into a D_HV-dimensional query hypervector H = sum_k L[v_k] XNOR B_k, and
// each dimension is quantized on the fly: to 1 bit (bipolar, majority-LUT
// quantizer) or to {-1, 0, +1} (ternary, LUT-adder quantizer). Dimensions
// set in the mask are forced to 0. The quantized, masked query is what may
// leave the device for remote inference: it keeps enough for classification
// but reconstructing the input from it is much less accurate. The engine also
// classifies it locally: dot products with every class hypervector, scaled by
// the stored reciprocal class norms, and the best class.
//
// Dimensions are processed P at a time (a chunk), N_CHUNK = D_HV / P chunks
// per input, in a two-stage pipeline (read the chunk of every stored vector;
// encode, quantize, mask and accumulate). See prive_hd_ctrl for the cycle
// count.
//
// Ports:
//   base_*   write chunk base_wr_chunk of base hypervector base_wr_feat
//   level_*  write a chunk of level hypervector level_wr_idx
//   class_*  write a chunk (P signed CLASS_W-bit elements) of a class
//   mask_*   write a chunk of the dimension mask (1 = nullified)
//   norm_*   write the reciprocal norm of a class
//   quant_mode, thr_pos, thr_neg, mask_en: run configuration, sampled when
//            an input is complete
//   feat_*   input stream, FPB level indices per beat
//   q_*      quantized query out, one chunk per cycle (no back-pressure)
//   res_*    one-cycle pulse with the best class and its score
//   lut_tie  in bipolar mode, some majority LUT of the current chunk met a
//            tie and used its design-time tie bit (observation only)
// Model contents must be written while busy is low.
//
// Follows the paper: encoding with level and base hypervectors, XNOR binding,
// the two LUT-based quantizers, dimension masking, dot-product similarity with
// the query norm dropped. This design's choices: chunk width P, the memories
// being on chip and loaded through write ports (the paper's board keeps data
// in DRAM), the input stream, the element widths, the stored reciprocal
// norms, and offering both quantizers behind a mode input.
module prive_hd_top
  import prive_pkg::*;
#(
  parameter int unsigned D_HV    = DEF_D_HV,
  parameter int unsigned D_IV    = DEF_D_IV,
  parameter int unsigned LEVELS  = DEF_LEVELS,
  parameter int unsigned N_CLASS = DEF_N_CLASS,
  parameter int unsigned P       = DEF_P,
  parameter int unsigned CLASS_W = DEF_CLASS_W,
  parameter int unsigned NORM_W  = DEF_NORM_W,
  parameter int unsigned ACC_W   = DEF_ACC_W,
  parameter int unsigned FPB     = DEF_FPB,
  localparam int unsigned N_CHUNK = D_HV / P,
  localparam int unsigned CHW     = idx_w(N_CHUNK),
  localparam int unsigned LW      = idx_w(LEVELS),
  localparam int unsigned CLW     = idx_w(N_CLASS)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // model loading
  input  logic                           base_we,
  input  logic [idx_w(D_IV)-1:0]         base_wr_feat,
  input  logic [CHW-1:0]                 base_wr_chunk,
  input  logic [P-1:0]                   base_wr_data,
  input  logic                           level_we,
  input  logic [LW-1:0]                  level_wr_idx,
  input  logic [CHW-1:0]                 level_wr_chunk,
  input  logic [P-1:0]                   level_wr_data,
  input  logic                           class_we,
  input  logic [CLW-1:0]                 class_wr_idx,
  input  logic [CHW-1:0]                 class_wr_chunk,
  input  logic [P-1:0][CLASS_W-1:0]      class_wr_data,
  input  logic                           mask_we,
  input  logic [CHW-1:0]                 mask_wr_chunk,
  input  logic [P-1:0]                   mask_wr_data,
  input  logic                           norm_we,
  input  logic [CLW-1:0]                 norm_wr_idx,
  input  logic [NORM_W-1:0]              norm_wr_data,
  // run configuration
  input  qmode_e                         quant_mode,
  input  logic signed [2:0]              thr_pos,
  input  logic signed [2:0]              thr_neg,
  input  logic                           mask_en,
  // input features
  input  logic                           feat_valid,
  output logic                           feat_ready,
  input  logic [FPB-1:0][LW-1:0]         feat_data,
  // quantized query (offload stream)
  output logic                           q_valid,
  output logic [CHW-1:0]                 q_chunk,
  output tern_t [P-1:0]                  q_data,
  // classification result
  output logic                           res_valid,
  output logic [CLW-1:0]                 res_class,
  output logic signed [ACC_W+NORM_W:0]   res_score,
  output logic                           busy,
  output logic                           lut_tie
);
  // D_HV must be a whole number of chunks.
  if (D_HV % P != 0) begin : g_bad_p
    $error("prive_hd_top: D_HV must be a multiple of P");
  end

  logic                       feat_full, feat_release;
  logic [D_IV-1:0][LW-1:0]    feats;
  logic                       cfg_latch, sim_clear, rd_en, s1_valid;
  logic [CHW-1:0]             rd_chunk, s1_chunk;
  logic                       arg_start, arg_done;

  logic [D_IV-1:0][P-1:0]     base_slice;
  logic [LEVELS-1:0][P-1:0]   level_slice;
  logic [0:0][P-1:0]          mask_slice;
  logic [N_CLASS-1:0][P*CLASS_W-1:0] class_slice;
  logic [N_CLASS-1:0][P-1:0][CLASS_W-1:0] class_elems;

  tern_t [P-1:0]              q;
  logic                       tie_any;
  logic signed [ACC_W-1:0]    dot [N_CLASS];

  // latched run configuration
  qmode_e                     mode_r;
  logic signed [2:0]          thr_pos_r, thr_neg_r;
  logic                       mask_en_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_r    <= QM_BIPOLAR;
      thr_pos_r <= 3'sd1;
      thr_neg_r <= -3'sd1;
      mask_en_r <= 1'b0;
    end else if (cfg_latch) begin
      mode_r    <= quant_mode;
      thr_pos_r <= thr_pos;
      thr_neg_r <= thr_neg;
      mask_en_r <= mask_en;
    end
  end

  feature_buffer #(.D_IV(D_IV), .LEVELS(LEVELS), .FPB(FPB)) u_feat (
    .clk, .rst_n,
    .in_valid(feat_valid), .in_ready(feat_ready), .in_data(feat_data),
    .full(feat_full), .release_buf(feat_release), .feats(feats)
  );

  prive_hd_ctrl #(.N_CHUNK(N_CHUNK)) u_ctrl (
    .clk, .rst_n,
    .feat_full, .feat_release, .cfg_latch, .sim_clear,
    .rd_en, .rd_chunk, .s1_valid, .s1_chunk,
    .arg_start, .arg_done, .busy
  );

  chunk_memory #(.N_VEC(D_IV), .N_CHUNK(N_CHUNK), .WIDTH(P)) u_base_mem (
    .clk, .we(base_we), .wr_vec(base_wr_feat), .wr_chunk(base_wr_chunk),
    .wr_data(base_wr_data), .rd_en, .rd_chunk, .rd_data(base_slice)
  );

  chunk_memory #(.N_VEC(LEVELS), .N_CHUNK(N_CHUNK), .WIDTH(P)) u_level_mem (
    .clk, .we(level_we), .wr_vec(level_wr_idx), .wr_chunk(level_wr_chunk),
    .wr_data(level_wr_data), .rd_en, .rd_chunk, .rd_data(level_slice)
  );

  chunk_memory #(.N_VEC(1), .N_CHUNK(N_CHUNK), .WIDTH(P)) u_mask_mem (
    .clk, .we(mask_we), .wr_vec(1'b0), .wr_chunk(mask_wr_chunk),
    .wr_data(mask_wr_data), .rd_en, .rd_chunk, .rd_data(mask_slice)
  );

  chunk_memory #(.N_VEC(N_CLASS), .N_CHUNK(N_CHUNK), .WIDTH(P*CLASS_W)) u_class_mem (
    .clk, .we(class_we), .wr_vec(class_wr_idx), .wr_chunk(class_wr_chunk),
    .wr_data(class_wr_data), .rd_en, .rd_chunk, .rd_data(class_slice)
  );

  assign class_elems = class_slice;

  encoder_slice #(.D_IV(D_IV), .LEVELS(LEVELS), .P(P)) u_enc (
    .feats, .base_slice, .level_slice,
    .mask(mask_en_r ? mask_slice[0] : '0),
    .mode(mode_r), .thr_pos(thr_pos_r), .thr_neg(thr_neg_r),
    .q, .tie_any
  );

  similarity_unit #(.N_CLASS(N_CLASS), .P(P), .CLASS_W(CLASS_W), .ACC_W(ACC_W)) u_sim (
    .clk, .rst_n, .clear(sim_clear), .acc_en(s1_valid),
    .q, .cls(class_elems), .dot
  );

  argmax_unit #(.N_CLASS(N_CLASS), .ACC_W(ACC_W), .NORM_W(NORM_W)) u_arg (
    .clk, .rst_n,
    .norm_we, .norm_idx(norm_wr_idx), .norm_data(norm_wr_data),
    .start(arg_start), .dot, .done(arg_done),
    .best_class(res_class), .best_score(res_score)
  );

  assign q_valid   = s1_valid;
  assign q_chunk   = s1_chunk;
  assign q_data    = q;
  assign res_valid = arg_done;
  assign lut_tie   = s1_valid && tie_any;

endmodule

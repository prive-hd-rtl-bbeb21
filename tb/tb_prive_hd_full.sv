// tb_prive_hd_full: end-to-end test of prive_hd_top with every parameter at
// its default: 10,000 dimensions in 100 chunks of 100 lanes, 617 features,
// 100 levels, 26 classes (the speech-recognition configuration). The model is
// loaded (about 75,000 write cycles), then 4 inputs are classified, two with
// bipolar and two with ternary quantization, two of them masked. Stimulus,
// reference model and checks are in prive_hd_env.
module tb_prive_hd_full;
  import prive_pkg::*;
  localparam int unsigned D_HV = DEF_D_HV, D_IV = DEF_D_IV, LEVELS = DEF_LEVELS;
  localparam int unsigned N_CLASS = DEF_N_CLASS, P = DEF_P, CLASS_W = DEF_CLASS_W;
  localparam int unsigned NORM_W = DEF_NORM_W, ACC_W = DEF_ACC_W, FPB = DEF_FPB;
  localparam int unsigned N_CHUNK = D_HV / P;
  localparam int unsigned CHW = idx_w(N_CHUNK);
  localparam int unsigned LW  = idx_w(LEVELS);
  localparam int unsigned CLW = idx_w(N_CLASS);

  logic clk, rst_n;
  logic base_we, level_we, class_we, mask_we, norm_we;
  logic [idx_w(D_IV)-1:0] base_wr_feat;
  logic [CHW-1:0] base_wr_chunk, level_wr_chunk, class_wr_chunk, mask_wr_chunk, q_chunk;
  logic [P-1:0] base_wr_data, level_wr_data, mask_wr_data;
  logic [LW-1:0] level_wr_idx;
  logic [CLW-1:0] class_wr_idx, norm_wr_idx, res_class;
  logic [P-1:0][CLASS_W-1:0] class_wr_data;
  logic [NORM_W-1:0] norm_wr_data;
  qmode_e quant_mode;
  logic signed [2:0] thr_pos, thr_neg;
  logic mask_en, feat_valid, feat_ready, q_valid, res_valid, busy, lut_tie;
  logic [FPB-1:0][LW-1:0] feat_data;
  tern_t [P-1:0] q_data;
  logic signed [ACC_W+NORM_W:0] res_score;


  prive_hd_top dut (.*);

  prive_hd_env #(.NRUN(4), .WATCHDOG_CYCLES(200000)) env (.*);
endmodule

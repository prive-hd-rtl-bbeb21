// tb_prive_hd_top: end-to-end test of prive_hd_top at a reduced size
// (64 dimensions in 8 chunks of 8 lanes, 20 features, 5 levels, 3 classes,
// 3 features per beat) so that every mechanism shows up many times: 16
// inputs alternating bipolar/ternary quantization and masking. Stimulus,
// reference model and checks are in prive_hd_env.
module tb_prive_hd_top;
  import prive_pkg::*;
  localparam int unsigned D_HV = 64, D_IV = 20, LEVELS = 5, N_CLASS = 3, P = 8;
  localparam int unsigned CLASS_W = 16, NORM_W = 16, ACC_W = 32, FPB = 3;
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


  prive_hd_top #(.D_HV(D_HV), .D_IV(D_IV), .LEVELS(LEVELS), .N_CLASS(N_CLASS), .P(P),
                 .CLASS_W(CLASS_W), .NORM_W(NORM_W), .ACC_W(ACC_W), .FPB(FPB)) dut (.*);

  prive_hd_env #(.D_HV(D_HV), .D_IV(D_IV), .LEVELS(LEVELS), .N_CLASS(N_CLASS), .P(P),
                 .CLASS_W(CLASS_W), .NORM_W(NORM_W), .ACC_W(ACC_W), .FPB(FPB),
                 .NRUN(16), .WATCHDOG_CYCLES(20000)) env (.*);
endmodule

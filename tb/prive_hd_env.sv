// prive_hd_env: stimulus, reference model and checker for prive_hd_top.
//
// It builds a random model the way HD computing does (random base
// hypervectors; a random first level hypervector, each further level flipping
// D_HV/(2*LEVELS) random bits of the previous one; random class elements;
// reciprocal class norms 2^24/||C||), loads it through the write ports, then
// streams NRUN random inputs with random gaps. Runs alternate bipolar and
// ternary quantization and masking on/off. For every input the reference
// computes, dimension by dimension, the XNOR products, the quantized value
// (prive_ref_pkg), the mask, the class dot products, scores and the best
// class, and checks every offloaded query chunk and the result. It also
// counts how often each mechanism happened: bipolar and ternary runs, masked
// dimensions, LUT ties, ternary zeros, feature back-pressure, saturated
// levels; one that never happened is a failure. The latency from the last
// feature beat to the result is checked: N_CHUNK + N_CLASS + 3 cycles.
module prive_hd_env
  import prive_pkg::*;
  import prive_ref_pkg::*;
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
  parameter int unsigned NRUN    = 4,
  parameter int unsigned WATCHDOG_CYCLES = 1000000,
  localparam int unsigned N_CHUNK = D_HV / P,
  localparam int unsigned CHW     = idx_w(N_CHUNK),
  localparam int unsigned LW      = idx_w(LEVELS),
  localparam int unsigned CLW     = idx_w(N_CLASS)
) (
  output logic                           clk,
  output logic                           rst_n,
  output logic                           base_we,
  output logic [idx_w(D_IV)-1:0]         base_wr_feat,
  output logic [CHW-1:0]                 base_wr_chunk,
  output logic [P-1:0]                   base_wr_data,
  output logic                           level_we,
  output logic [LW-1:0]                  level_wr_idx,
  output logic [CHW-1:0]                 level_wr_chunk,
  output logic [P-1:0]                   level_wr_data,
  output logic                           class_we,
  output logic [CLW-1:0]                 class_wr_idx,
  output logic [CHW-1:0]                 class_wr_chunk,
  output logic [P-1:0][CLASS_W-1:0]      class_wr_data,
  output logic                           mask_we,
  output logic [CHW-1:0]                 mask_wr_chunk,
  output logic [P-1:0]                   mask_wr_data,
  output logic                           norm_we,
  output logic [CLW-1:0]                 norm_wr_idx,
  output logic [NORM_W-1:0]              norm_wr_data,
  output qmode_e                         quant_mode,
  output logic signed [2:0]              thr_pos,
  output logic signed [2:0]              thr_neg,
  output logic                           mask_en,
  output logic                           feat_valid,
  input  logic                           feat_ready,
  output logic [FPB-1:0][LW-1:0]         feat_data,
  input  logic                           q_valid,
  input  logic [CHW-1:0]                 q_chunk,
  input  tern_t [P-1:0]                  q_data,
  input  logic                           res_valid,
  input  logic [CLW-1:0]                 res_class,
  input  logic signed [ACC_W+NORM_W:0]   res_score,
  input  logic                           busy,
  input  logic                           lut_tie
);
  localparam int unsigned NB = (D_IV + FPB - 1) / FPB;

  // model
  bit      base_hv  [D_IV][D_HV];
  bit      level_hv [LEVELS][D_HV];
  int      class_hv [N_CLASS][D_HV];
  bit      mask_hv  [D_HV];
  longint  inv_norm [N_CLASS];

  // expected results of the inputs in flight, in order
  int      exp_q    [$];          // D_HV values per input
  int      exp_cls  [$];
  longint  exp_score[$];
  int      exp_tie  [$];          // 1 if some lane tied in a chunk, per chunk

  int checks = 0, failures = 0;
  int n_bipolar = 0, n_ternary = 0, n_masked = 0, n_tie = 0, n_tzero = 0;
  int n_stall = 0, n_sat = 0, n_results = 0;
  longint last_beat_cycle, cycle = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(negedge clk) cycle++;

  always @(posedge clk) if (rst_n && feat_valid && !feat_ready) n_stall++;

  // ---------------------------------------------------------------- model
  task automatic build_model();
    int flips;
    for (int k = 0; k < D_IV; k++)
      for (int d = 0; d < D_HV; d++) base_hv[k][d] = bit'($urandom_range(0, 1));
    for (int d = 0; d < D_HV; d++) level_hv[0][d] = bit'($urandom_range(0, 1));
    flips = D_HV / (2 * LEVELS);
    if (flips == 0) flips = 1;
    for (int l = 1; l < LEVELS; l++) begin
      for (int d = 0; d < D_HV; d++) level_hv[l][d] = level_hv[l-1][d];
      for (int f = 0; f < flips; f++) begin
        int d = $urandom_range(0, D_HV - 1);
        level_hv[l][d] = !level_hv[l][d];
      end
    end
    for (int c = 0; c < N_CLASS; c++) begin
      real ss = 0.0;
      for (int d = 0; d < D_HV; d++) begin
        class_hv[c][d] = $urandom_range(0, 4000) - 2000;
        ss += real'(class_hv[c][d]) * real'(class_hv[c][d]);
      end
      inv_norm[c] = longint'(16777216.0 / $sqrt(ss));
      if (inv_norm[c] > 65535) inv_norm[c] = 65535;
    end
    for (int d = 0; d < D_HV; d++) mask_hv[d] = ($urandom_range(0, 3) == 0);
  endtask

  task automatic load_model();
    for (int k = 0; k < D_IV; k++)
      for (int c = 0; c < N_CHUNK; c++) begin
        @(negedge clk);
        base_we = 1; base_wr_feat = ($bits(base_wr_feat))'(k); base_wr_chunk = CHW'(c);
        for (int j = 0; j < P; j++) base_wr_data[j] = base_hv[k][c*P+j];
      end
    @(negedge clk); base_we = 0;
    for (int l = 0; l < LEVELS; l++)
      for (int c = 0; c < N_CHUNK; c++) begin
        @(negedge clk);
        level_we = 1; level_wr_idx = LW'(l); level_wr_chunk = CHW'(c);
        for (int j = 0; j < P; j++) level_wr_data[j] = level_hv[l][c*P+j];
      end
    @(negedge clk); level_we = 0;
    for (int n = 0; n < N_CLASS; n++)
      for (int c = 0; c < N_CHUNK; c++) begin
        @(negedge clk);
        class_we = 1; class_wr_idx = CLW'(n); class_wr_chunk = CHW'(c);
        for (int j = 0; j < P; j++) class_wr_data[j] = CLASS_W'(class_hv[n][c*P+j]);
      end
    @(negedge clk); class_we = 0;
    for (int c = 0; c < N_CHUNK; c++) begin
      @(negedge clk);
      mask_we = 1; mask_wr_chunk = CHW'(c);
      for (int j = 0; j < P; j++) mask_wr_data[j] = mask_hv[c*P+j];
    end
    @(negedge clk); mask_we = 0;
    for (int n = 0; n < N_CLASS; n++) begin
      @(negedge clk);
      norm_we = 1; norm_wr_idx = CLW'(n); norm_wr_data = NORM_W'(inv_norm[n]);
    end
    @(negedge clk); norm_we = 0;
  endtask

  // Reference inference of one input.
  task automatic reference(int lv[], qmode_e mode, int tp, int tn, bit men);
    longint dot [N_CLASS];
    longint best;
    int bc;
    bit b[];
    int v[];
    b = new[D_IV];
    v = new[D_IV];
    for (int c = 0; c < N_CLASS; c++) dot[c] = 0;
    for (int ch = 0; ch < N_CHUNK; ch++) begin
      int tie = 0;
      for (int j = 0; j < P; j++) begin
        int d = ch * P + j;
        int e;
        for (int k = 0; k < D_IV; k++) begin
          b[k] = !(level_hv[lv[k]][d] ^ base_hv[k][d]);
          v[k] = b[k] ? 1 : -1;
        end
        if (men && mask_hv[d]) e = 0;
        else if (mode == QM_BIPOLAR) begin
          e = ref_bipolar(b, j) ? 1 : -1;
          if (ref_any_tie(b)) tie = 1;
        end else e = ref_tern_q(ref_tern_sum(v), tp, tn);
        exp_q.push_back(e);
        for (int c = 0; c < N_CLASS; c++) dot[c] += longint'(e) * longint'(class_hv[c][d]);
      end
      exp_tie.push_back(tie);
    end
    bc = 0;
    best = dot[0] * inv_norm[0];
    for (int c = 1; c < N_CLASS; c++)
      if (dot[c] * inv_norm[c] > best) begin best = dot[c] * inv_norm[c]; bc = c; end
    exp_cls.push_back(bc);
    exp_score.push_back(best);
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    rst_n = 0;
    base_we = 0; level_we = 0; class_we = 0; mask_we = 0; norm_we = 0;
    base_wr_feat = '0; base_wr_chunk = '0; base_wr_data = '0;
    level_wr_idx = '0; level_wr_chunk = '0; level_wr_data = '0;
    class_wr_idx = '0; class_wr_chunk = '0; class_wr_data = '0;
    mask_wr_chunk = '0; mask_wr_data = '0;
    norm_wr_idx = '0; norm_wr_data = '0;
    quant_mode = QM_BIPOLAR; thr_pos = 3'sd1; thr_neg = -3'sd1; mask_en = 0;
    feat_valid = 0; feat_data = '0;
    build_model();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_model();
    for (int r = 0; r < NRUN; r++) begin
      int lv[];
      int raw[];
      qmode_e mode;
      int tp, tn;
      bit men;
      lv = new[D_IV];
      raw = new[NB * FPB];
      mode = (r % 2 == 0) ? QM_BIPOLAR : QM_TERNARY;
      men = (r % 4 >= 2);
      // ternary thresholds: a sign-like split, then one with a band of zeros
      // (the truncating tree output leans negative, see ternary_quantizer)
      tp = (r % 4 == 1) ? -1 : 0;
      tn = -2;
      for (int i = 0; i < NB * FPB; i++) begin
        raw[i] = $urandom_range(0, (1 << LW) - 1);
        if (i < D_IV) begin
          lv[i] = (raw[i] >= LEVELS) ? LEVELS - 1 : raw[i];
          if (raw[i] >= LEVELS) n_sat++;
        end
      end
      reference(lv, mode, tp, tn, men);
      if (mode == QM_BIPOLAR) n_bipolar++; else n_ternary++;
      // configuration for this input; held until the next input starts
      quant_mode = mode; thr_pos = 3'(tp); thr_neg = 3'(tn); mask_en = men;
      for (int bt = 0; bt < NB; bt++) begin
        if ($urandom_range(0, 3) == 0) begin
          feat_valid = 0;
          repeat ($urandom_range(1, 2)) @(negedge clk);
        end
        feat_valid = 1;
        for (int i = 0; i < FPB; i++) feat_data[i] = LW'(raw[bt*FPB+i]);
        do @(posedge clk); while (!feat_ready);
        if (bt == NB - 1) last_beat_cycle = cycle;
        @(negedge clk);
        feat_valid = 0;
      end
      // hold this input's configuration until the engine has latched it
      while (!busy) @(negedge clk);
    end
  end

  // ---------------------------------------------------------------- checker
  initial begin
    int run = 0, nxt_chunk = 0;
    while (run < NRUN) begin
      @(posedge clk);
      #1;
      if (q_valid) begin
        int tie;
        checks++;
        if (int'(q_chunk) != nxt_chunk) begin
          failures++;
          $display("FAIL run %0d: chunk %0d, expected %0d", run, q_chunk, nxt_chunk);
        end
        for (int j = 0; j < P; j++) begin
          int e;
          e = exp_q.pop_front();
          checks++;
          if (dec_tern(q_data[j]) != e || (e == 0 && q_data[j] != 2'b00)) begin
            failures++;
            if (failures < 20)
              $display("FAIL run %0d chunk %0d lane %0d: %b expected %0d", run, q_chunk, j, q_data[j], e);
          end
          if (e == 0 && mask_en && mask_hv[int'(q_chunk)*P+j]) n_masked++;
          else if (e == 0) n_tzero++;
        end
        tie = exp_tie.pop_front();
        checks++;
        if (lut_tie != tie[0]) begin failures++; $display("FAIL run %0d chunk %0d: tie flag", run, q_chunk); end
        if (lut_tie) n_tie++;
        nxt_chunk = (nxt_chunk + 1) % N_CHUNK;
      end
      if (res_valid) begin
        int ec;
        longint es;
        longint lat;
        ec = exp_cls.pop_front();
        es = exp_score.pop_front();
        lat = cycle - last_beat_cycle;
        checks += 3;
        if (int'(res_class) != ec) begin failures++; $display("FAIL run %0d: class %0d expected %0d", run, res_class, ec); end
        if (longint'(res_score) != es) begin failures++; $display("FAIL run %0d: score %0d expected %0d", run, res_score, es); end
        // clock edges from the last beat: IDLE 1, ENC N_CHUNK, DRAIN 1, ARG 1, search N_CLASS
        if (lat != longint'(N_CHUNK + N_CLASS + 3)) begin
          failures++;
          $display("FAIL run %0d: latency %0d expected %0d", run, lat, N_CHUNK + N_CLASS + 3);
        end
        $display("run %0d: mode %s mask %0b class %0d score %0d latency %0d",
                 run, (run % 2 == 0) ? "bipolar" : "ternary", (run % 4 >= 2), res_class, res_score, lat);
        run++;
        n_results++;
      end
    end
    checks++;
    if (n_bipolar == 0 || n_ternary == 0 || n_masked == 0 || n_tie == 0 || n_tzero == 0 ||
        n_stall == 0 || n_sat == 0 || n_results != NRUN) begin
      failures++;
      $display("FAIL: a mechanism never happened");
    end
    $display("mechanisms: bipolar runs %0d, ternary runs %0d, masked dims %0d, tie chunks %0d, ternary zeros %0d, input stalls %0d, saturated levels %0d",
             n_bipolar, n_ternary, n_masked, n_tie, n_tzero, n_stall, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

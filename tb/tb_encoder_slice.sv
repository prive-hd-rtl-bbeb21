// tb_encoder_slice: random features, base, level and mask slices into a
// 13-feature, 4-level, 5-lane encoder in both modes; each lane's output is
// compared with the reference: XNOR products, then the reference bipolar or
// ternary quantizer, then masking.
module tb_encoder_slice;
  import prive_pkg::*;
  import prive_ref_pkg::*;
  localparam int D = 13, L = 4, P = 5;

  logic [D-1:0][1:0]   feats;
  logic [D-1:0][P-1:0] base_slice;
  logic [L-1:0][P-1:0] level_slice;
  logic [P-1:0]        mask;
  qmode_e              mode;
  logic signed [2:0]   thr_pos, thr_neg;
  tern_t [P-1:0]       q;
  logic                tie_any;
  int checks = 0, failures = 0, n_bip = 0, n_ter = 0, n_mask = 0;

  encoder_slice #(.D_IV(D), .LEVELS(L), .P(P)) dut (.*);

  initial begin
    for (int t = 0; t < 4000; t++) begin
      bit any_tie;
      any_tie = 0;
      for (int k = 0; k < D; k++) begin
        feats[k] = 2'($urandom_range(0, L - 1));
        base_slice[k] = P'($urandom);
      end
      for (int l = 0; l < L; l++) level_slice[l] = P'($urandom);
      mask = ($urandom_range(0, 3) == 0) ? P'($urandom) : '0;
      mode = qmode_e'($urandom_range(0, 1));
      thr_pos = 3'sd0; thr_neg = -3'sd1;
      #1;
      for (int j = 0; j < P; j++) begin
        bit b[];
        int v[];
        int e;
        b = new[D];
        v = new[D];
        for (int k = 0; k < D; k++) begin
          b[k] = !(level_slice[feats[k]][j] ^ base_slice[k][j]);
          v[k] = b[k] ? 1 : -1;
        end
        if (mask[j]) begin
          e = 0; n_mask++;
        end else if (mode == QM_BIPOLAR) begin
          e = ref_bipolar(b, j) ? 1 : -1; n_bip++;
          if (ref_any_tie(b)) any_tie = 1;
        end else begin
          e = ref_tern_q(ref_tern_sum(v), 0, -1); n_ter++;
        end
        checks++;
        if (dec_tern(q[j]) != e || (e == 0 && q[j] != 2'b00)) begin
          failures++;
          $display("FAIL t=%0d lane %0d mode %0d: %b exp %0d", t, j, mode, q[j], e);
        end
      end
      checks++;
      if (tie_any !== any_tie) begin failures++; $display("FAIL tie flag %0b exp %0b mode %0d mask %b", tie_any, any_tie, mode, mask); end
    end
    checks++;
    if (n_bip == 0 || n_ter == 0 || n_mask == 0) failures++;
    $display("lanes: bipolar %0d ternary %0d masked %0d", n_bip, n_ter, n_mask);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

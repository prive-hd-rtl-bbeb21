// tb_ternary_quantizer: random ternary vectors into two quantizer sizes
// (20 and 617 elements), compared with the reference truncating-tree model,
// with random thresholds, including the unused code 10 read as 0.
module tb_ternary_quantizer;
  import prive_pkg::*;
  import prive_ref_pkg::*;

  localparam int N1 = 20;
  localparam int N2 = 617;

  tern_t [N1-1:0] e1;
  tern_t [N2-1:0] e2;
  logic signed [2:0] tp, tn, s1, s2;
  tern_t q1, q2;

  ternary_quantizer #(.N_IN(N1)) dut1 (.elems(e1), .thr_pos(tp), .thr_neg(tn), .q(q1), .sum3(s1));
  ternary_quantizer #(.N_IN(N2)) dut2 (.elems(e2), .thr_pos(tp), .thr_neg(tn), .q(q2), .sum3(s2));

  int checks = 0, failures = 0;
  int seen[int];

  function automatic bit [1:0] rnd_code();
    case ($urandom_range(0, 7))
      0, 1, 2: return 2'b01;
      3, 4, 5: return 2'b11;
      6:       return 2'b00;
      default: return 2'b10;
    endcase
  endfunction

  task automatic check();
    int v1[], v2[];
    int r1, r2;
    v1 = new[N1];
    v2 = new[N2];
    for (int i = 0; i < N1; i++) v1[i] = dec_tern(e1[i]);
    for (int i = 0; i < N2; i++) v2[i] = dec_tern(e2[i]);
    r1 = ref_tern_sum(v1);
    r2 = ref_tern_sum(v2);
    checks += 4;
    if (int'(s1) != r1) begin failures++; $display("FAIL sum N1 %0d exp %0d", s1, r1); end
    if (int'(s2) != r2) begin failures++; $display("FAIL sum N2 %0d exp %0d", s2, r2); end
    if (dec_tern(q1) != ref_tern_q(r1, int'(tp), int'(tn))) failures++;
    if (dec_tern(q2) != ref_tern_q(r2, int'(tp), int'(tn))) failures++;
    seen[dec_tern(q1)] = 1;
  endtask

  initial begin
    // directed: 20 elements all +1 -> leaves 3,3,3,3,3,3,2,0
    // level1: 3,3,3,1 ; level2: 3,2 ; level3: 2
    e1 = '{default: 2'b01}; e2 = '{default: 2'b01}; tp = 3'sd1; tn = -3'sd1; #1;
    checks++; if (s1 !== 3'sd2) begin failures++; $display("FAIL directed +1: %0d", s1); end
    check();
    e1 = '{default: 2'b11}; e2 = '{default: 2'b11}; #1;
    checks++; if (s1 !== -3'sd3) begin failures++; $display("FAIL directed -1: %0d", s1); end
    check();
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N1; i++) e1[i] = rnd_code();
      for (int i = 0; i < N2; i++) e2[i] = rnd_code();
      tp = 3'($urandom_range(0, 2));
      tn = -3'($urandom_range(0, 2));
      #1;
      check();
    end
    // distribution of the 617-input tree output for random +-1 inputs
    begin
      int hist[int];
      for (int t = 0; t < 2000; t++) begin
        for (int i = 0; i < N2; i++) e2[i] = $urandom_range(0, 1) ? 2'b01 : 2'b11;
        #1;
        check();
        hist[int'(s2)]++;
      end
      foreach (hist[k]) $display("617 random +-1 inputs: sum3 = %0d in %0d of 2000", k, hist[k]);
    end
    checks++;
    if (seen.num() != 3) begin failures++; $display("FAIL: not all outputs seen"); end
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

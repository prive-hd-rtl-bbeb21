// tb_bipolar_quantizer: random and directed vectors into two quantizer
// sizes (20 inputs: an even number of groups, so the final threshold can
// tie; 617 inputs: the default) compared with the reference vote model.
module tb_bipolar_quantizer;
  import prive_ref_pkg::*;

  localparam int N1 = 20;
  localparam int N2 = 617;
  localparam int SEED1 = 3;
  localparam int SEED2 = 41;

  logic [N1-1:0] b1;
  logic [N2-1:0] b2;
  logic q1, q2, t1, t2;
  logic [$clog2((N1+5)/6+1)-1:0] c1;
  logic [$clog2((N2+5)/6+1)-1:0] c2;

  bipolar_quantizer #(.N_IN(N1), .SEED(SEED1)) dut1 (.bits(b1), .q(q1), .maj_count(c1), .tie_any(t1));
  bipolar_quantizer #(.N_IN(N2), .SEED(SEED2)) dut2 (.bits(b2), .q(q2), .maj_count(c2), .tie_any(t2));

  int checks = 0, failures = 0, final_ties = 0, lut_ties = 0;

  task automatic check1();
    bit v[];
    bit exp;
    int votes;
    v = new[N1];
    for (int i = 0; i < N1; i++) v[i] = b1[i];
    exp = ref_bipolar(v, SEED1);
    checks++;
    if (q1 !== exp) begin
      failures++;
      $display("FAIL N=%0d bits=%h q=%0b exp=%0b", N1, b1, q1, exp);
    end
    checks++;
    if (t1 !== ref_any_tie(v)) failures++;
    votes = int'(c1);
    if (2 * votes == (N1 + 5) / 6) final_ties++;
    if (t1) lut_ties++;
  endtask

  task automatic check2();
    bit v[];
    bit exp;
    v = new[N2];
    for (int i = 0; i < N2; i++) v[i] = b2[i];
    exp = ref_bipolar(v, SEED2);
    checks++;
    if (q2 !== exp) begin
      failures++;
      $display("FAIL N=%0d q=%0b exp=%0b", N2, q2, exp);
    end
  endtask

  initial begin
    // directed: all +1, all -1
    b1 = '1; b2 = '1; #1;
    checks += 2; if (q1 !== 1'b1) failures++; if (q2 !== 1'b1) failures++;
    b1 = '0; b2 = '0; #1;
    checks += 2; if (q1 !== 1'b0) failures++; if (q2 !== 1'b0) failures++;
    // directed approximation: in N1 = 20 the groups are 6,6,6,2. Groups 0 and
    // 1 at 4 of 6 ones, group 2 all zeros, last group 1:1 (tie) -> exact
    // count is 9 of 20 (-1) but the group vote may say otherwise.
    b1 = 20'b01_000000_001111_001111; #1;
    check1();
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N1; i++) b1[i] = $urandom_range(0, 1);
      for (int i = 0; i < N2; i += 32) begin
        bit [31:0] r = $urandom;
        for (int j = 0; j < 32 && i + j < N2; j++) b2[i+j] = r[j];
      end
      #1;
      check1();
      check2();
    end
    checks++;
    if (final_ties == 0 || lut_ties == 0) begin
      failures++;
      $display("FAIL: ties not exercised (final %0d, lut %0d)", final_ties, lut_ties);
    end
    $display("final threshold ties: %0d, LUT ties: %0d", final_ties, lut_ties);
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

// tb_similarity_unit: random ternary query chunks and random 16-bit class
// chunks into a 3-class, 4-lane unit; the accumulated dot products are
// compared with integer sums after each run of chunks, with random idle
// cycles and clears in between.
module tb_similarity_unit;
  import prive_pkg::*;
  import prive_ref_pkg::*;
  localparam int C = 3, P = 4, W = 16, A = 32;
  logic clk = 0, rst_n = 0, clear = 0, acc_en = 0;
  tern_t [P-1:0] q;
  logic [C-1:0][P-1:0][W-1:0] cls;
  logic signed [A-1:0] dot [C];
  longint exp [C];
  int checks = 0, failures = 0;

  similarity_unit #(.N_CLASS(C), .P(P), .CLASS_W(W), .ACC_W(A)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    q = '0; cls = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 50; run++) begin
      @(negedge clk); clear = 1; acc_en = (run % 2 == 0);  // clear wins
      for (int c = 0; c < C; c++) exp[c] = 0;
      @(negedge clk); clear = 0;
      for (int n = 0; n < 20; n++) begin
        acc_en = $urandom_range(0, 3) != 0;
        for (int j = 0; j < P; j++) q[j] = enc_tern($urandom_range(0, 2) - 1);
        for (int c = 0; c < C; c++)
          for (int j = 0; j < P; j++) cls[c][j] = W'($urandom);
        if (acc_en)
          for (int c = 0; c < C; c++)
            for (int j = 0; j < P; j++)
              exp[c] += dec_tern(q[j]) * longint'($signed(cls[c][j]));
        @(negedge clk);
      end
      acc_en = 0;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (longint'(dot[c]) != exp[c]) begin
          failures++;
          $display("FAIL run %0d class %0d: %0d exp %0d", run, c, dot[c], exp[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

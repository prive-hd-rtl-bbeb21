// tb_argmax_unit: random dot products and reciprocal norms for 5 classes;
// checks the chosen class and score against a direct search (lowest index
// on equal scores), and the latency of N_CLASS + 1 cycles from start to done.
module tb_argmax_unit;
  localparam int C = 5, A = 32, N = 16;
  logic clk = 0, rst_n = 0, norm_we = 0, start = 0, done;
  logic [2:0] norm_idx = 0;
  logic [N-1:0] norm_data = 0;
  logic signed [A-1:0] dot [C];
  logic [2:0] best_class;
  logic signed [A+N:0] best_score;
  int checks = 0, failures = 0, equal_cases = 0;
  longint norms [C];

  argmax_unit #(.N_CLASS(C), .ACC_W(A), .NORM_W(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int c = 0; c < C; c++) dot[c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint best;
      int bc, lat;
      if (t % 10 == 0)
        for (int c = 0; c < C; c++) begin
          @(negedge clk);
          norm_we = 1; norm_idx = 3'(c);
          norm_data = N'($urandom_range(1, 65535));
          norms[c] = longint'(norm_data);
          @(negedge clk); norm_we = 0;
        end
      for (int c = 0; c < C; c++) dot[c] = A'($urandom_range(0, 200000)) - 100000;
      if (t % 7 == 3) begin      // force equal scores
        dot[1] = dot[3]; norms[1] = norms[3];
        @(negedge clk); norm_we = 1; norm_idx = 1; norm_data = N'(norms[3]);
        @(negedge clk); norm_we = 0;
        equal_cases++;
      end
      bc = 0; best = longint'(dot[0]) * norms[0];
      for (int c = 1; c < C; c++)
        if (longint'(dot[c]) * norms[c] > best) begin best = longint'(dot[c]) * norms[c]; bc = c; end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks += 3;
      if (int'(best_class) != bc) begin failures++; $display("FAIL class %0d exp %0d", best_class, bc); end
      if (longint'(best_score) != best) begin failures++; $display("FAIL score"); end
      if (lat != C + 1) begin failures++; $display("FAIL latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_feature_buffer: streams 20 random inputs of 10 features (3 per beat,
// so 4 beats with a partly used last beat) with random gaps and levels out of
// range. A consumer waits a random time once the buffer is full, compares the
// stored features (saturated to 4) with the expected input and releases the
// buffer. Checks back-pressure while full, that the stream waits, and that
// every input arrives intact.
module tb_feature_buffer;
  localparam int D = 10, L = 5, F = 3, LW = 3, N_IN = 20;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, full, release_buf = 0;
  logic [F-1:0][LW-1:0] in_data = '0;
  logic [D-1:0][LW-1:0] feats;
  int checks = 0, failures = 0, stalls = 0, received = 0;
  int exp_q[$];   // expected features, input after input

  feature_buffer #(.D_IV(D), .LEVELS(L), .FPB(F)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (in_valid && !in_ready) stalls++;

  // producer
  initial begin
    int exp[D];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N_IN; n++) begin
      for (int b = 0; b < 4; b++) begin
        while ($urandom_range(0, 2) == 0) begin
          in_valid = 0; @(negedge clk);
        end
        in_valid = 1;
        for (int i = 0; i < F; i++) begin
          in_data[i] = LW'($urandom_range(0, 7));
          if (b * F + i < D) exp[b * F + i] = (int'(in_data[i]) >= L) ? L - 1 : int'(in_data[i]);
        end
        if (b == 3) for (int k = 0; k < D; k++) exp_q.push_back(exp[k]);
        do @(posedge clk); while (!in_ready);
        @(negedge clk);
        in_valid = 0;
      end
    end
  end

  // consumer
  initial begin
    int exp[D];
    while (received < N_IN) begin
      @(negedge clk);
      if (full) begin
        checks++;
        if (in_ready) begin failures++; $display("FAIL ready while full"); end
        repeat ($urandom_range(0, 4)) @(negedge clk);
        for (int k = 0; k < D; k++) exp[k] = exp_q.pop_front();
        for (int k = 0; k < D; k++) begin
          checks++;
          if (int'(feats[k]) != exp[k]) begin
            failures++;
            $display("FAIL input %0d feat %0d = %0d exp %0d", received, k, feats[k], exp[k]);
          end
        end
        release_buf = 1;
        @(negedge clk);
        release_buf = 0;
        received++;
        checks++;
        if (full) failures++;
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("stalled beats: %0d", stalls);
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

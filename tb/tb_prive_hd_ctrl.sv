// tb_prive_hd_ctrl: runs the sequencer with 6 chunks against a model of the
// feature buffer and of a class search with a random delay; checks the chunk
// read order, that stage 1 follows the reads by one cycle, the single
// clear/latch and release/start pulses, and the cycle count of each phase.
module tb_prive_hd_ctrl;
  localparam int NC = 6;
  logic clk = 0, rst_n = 0, feat_full = 0, arg_done = 0;
  logic feat_release, cfg_latch, sim_clear, rd_en, s1_valid, arg_start, busy;
  logic [2:0] rd_chunk, s1_chunk;
  int checks = 0, failures = 0;

  prive_hd_ctrl #(.N_CHUNK(NC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 10; run++) begin
      int reads, s1s, wait_cyc, cyc;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      checks++;
      if (busy) failures++;
      feat_full = 1;
      #1;
      checks++;
      if (!cfg_latch || !sim_clear) begin failures++; $display("FAIL no latch"); end
      @(negedge clk);
      reads = 0; s1s = 0; cyc = 0;
      while (!arg_start) begin
        if (rd_en) begin
          checks++;
          if (int'(rd_chunk) != reads) begin failures++; $display("FAIL chunk order"); end
          reads++;
        end
        if (sim_clear || feat_release) begin failures++; $display("FAIL extra pulse"); end
        @(posedge clk); #1;
        if (s1_valid) begin
          checks++;
          if (int'(s1_chunk) != s1s) failures++;
          s1s++;
        end
        @(negedge clk);
        cyc++;
      end
      checks += 4;
      if (reads != NC) begin failures++; $display("FAIL reads %0d", reads); end
      if (s1s != NC) begin failures++; $display("FAIL stage1 %0d", s1s); end
      if (cyc != NC + 1) begin failures++; $display("FAIL enc cycles %0d", cyc); end
      if (!feat_release) failures++;
      feat_full = 0;                       // buffer released
      wait_cyc = $urandom_range(1, 8);
      @(negedge clk);
      checks++;
      if (arg_start) failures++;
      repeat (wait_cyc - 1) begin
        checks++;
        if (!busy) failures++;
        @(negedge clk);
      end
      arg_done = 1;
      @(negedge clk);
      arg_done = 0;
      checks++;
      if (busy) begin failures++; $display("FAIL still busy"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

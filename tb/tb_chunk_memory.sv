// tb_chunk_memory: fills a 5 x 7 x 12-bit memory in random order, then reads
// every chunk and compares all five vectors with a shadow copy; checks the
// one-cycle read latency and that rd_data holds while rd_en is low.
module tb_chunk_memory;
  localparam int NV = 5, NC = 7, W = 12;
  logic clk = 0, we = 0, rd_en = 0;
  logic [2:0] wr_vec;
  logic [2:0] wr_chunk, rd_chunk;
  logic [W-1:0] wr_data;
  logic [NV-1:0][W-1:0] rd_data;
  logic [W-1:0] shadow [NV][NC];
  int checks = 0, failures = 0;

  chunk_memory #(.N_VEC(NV), .N_CHUNK(NC), .WIDTH(W)) dut (.*);

  always #5 clk = ~clk;

  task automatic compare(int c);
    for (int v = 0; v < NV; v++) begin
      checks++;
      if (rd_data[v] !== shadow[v][c]) begin
        failures++;
        $display("FAIL vec %0d chunk %0d: %h exp %h", v, c, rd_data[v], shadow[v][c]);
      end
    end
  endtask

  initial begin
    wr_vec = 0; wr_chunk = 0; rd_chunk = 0; wr_data = 0;
    // write all words twice, random data, second pass in reverse order
    for (int pass = 0; pass < 2; pass++)
      for (int i = 0; i < NV * NC; i++) begin
        int idx;
        idx = (pass != 0) ? NV * NC - 1 - i : i;
        @(negedge clk);
        we = 1; wr_vec = 3'(idx / NC); wr_chunk = 3'(idx % NC); wr_data = W'($urandom);
        shadow[idx / NC][idx % NC] = wr_data;
      end
    @(negedge clk); we = 0;
    for (int rep = 0; rep < 3; rep++)
      for (int c = 0; c < NC; c++) begin
        int cc;
        cc = (c * 3 + rep) % NC;
        @(negedge clk); rd_en = 1; rd_chunk = 3'(cc);
        @(negedge clk); rd_en = 0; rd_chunk = 3'((cc + 1) % NC);
        compare(cc);           // one cycle after the read
        @(negedge clk);
        compare(cc);           // held while rd_en low
      end
    // read and write of the same word in one cycle: read returns old data
    @(negedge clk); we = 1; wr_vec = 2; wr_chunk = 4; wr_data = ~shadow[2][4]; rd_en = 1; rd_chunk = 4;
    @(negedge clk); we = 0; rd_en = 0;
    compare(4);
    shadow[2][4] = wr_data;
    @(negedge clk); rd_en = 1;
    @(negedge clk); rd_en = 0;
    compare(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// chunk_memory: on-chip store for N_VEC vectors that are read one chunk at a
// time, all vectors in parallel.
//
// Each vector is N_CHUNK chunks of WIDTH bits. The encoder and the similarity
// search sweep the hypervector dimensions in chunks of P lanes, and at each
// step they need the same chunk of every stored vector: chunk c of all 617
// base hypervectors, of all level hypervectors, of every class hypervector
// and of the dimension mask. One read therefore returns chunk rd_chunk of
// every vector. The same module serves all four stores; for the class store
// WIDTH is P times the class element width.
//
// Timing: synchronous write of one (vector, chunk) word when we is high;
// synchronous read with one cycle of latency when rd_en is high, rd_data
// holding its value otherwise. Contents are not reset: the host loads them
// before use (in the paper's system they come from off-chip DRAM, which is
// outside this design).
module chunk_memory
  import prive_pkg::*;
#(
  parameter int unsigned N_VEC   = DEF_D_IV,
  parameter int unsigned N_CHUNK = DEF_D_HV / DEF_P,
  parameter int unsigned WIDTH   = DEF_P
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [idx_w(N_VEC)-1:0]          wr_vec,
  input  logic [idx_w(N_CHUNK)-1:0]        wr_chunk,
  input  logic [WIDTH-1:0]                 wr_data,
  input  logic                             rd_en,
  input  logic [idx_w(N_CHUNK)-1:0]        rd_chunk,
  output logic [N_VEC-1:0][WIDTH-1:0]      rd_data
);
  logic [WIDTH-1:0] mem [N_VEC][N_CHUNK];

  always_ff @(posedge clk) begin
    if (we) mem[wr_vec][wr_chunk] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      for (int unsigned v = 0; v < N_VEC; v++)
        rd_data[v] <= mem[v][rd_chunk];
  end

  // Writes must address a stored word.
  always_ff @(posedge clk) begin
    if (we) begin
      assert (32'(wr_vec) < N_VEC && 32'(wr_chunk) < N_CHUNK)
        else $error("chunk_memory: write outside the array");
    end
  end

endmodule

// prive_hd_ctrl: sequencer of one inference.
//
// States:
//   S_IDLE   wait until the feature buffer holds a whole input; then latch the
//            run configuration, clear the class accumulators and go to S_ENC.
//   S_ENC    issue one chunk read per cycle, chunks 0 .. N_CHUNK-1. The
//            memories answer one cycle later, when the encoder, the mask and
//            the similarity accumulators work on that chunk (stage 1, marked
//            by s1_valid, which is also the valid of the offloaded query).
//   S_DRAIN  one cycle in which stage 1 finishes the last chunk.
//   S_ARG    release the feature buffer (the next input may now load) and
//            start the class search.
//   S_WAIT   wait for the class search to finish, then back to S_IDLE.
// Clock edges from the one that takes the last feature beat to the one that
// raises the result: 1 (IDLE) + N_CHUNK (ENC) + 1 (DRAIN) + 1 (ARG) +
// N_CLASS (class search), i.e. N_CHUNK + N_CLASS + 3.
//
// The paper describes its FPGA datapath as pipelined but does not give its
// control; this two-stage chunk pipeline and its states are this design's.
module prive_hd_ctrl
  import prive_pkg::*;
#(
  parameter int unsigned N_CHUNK = DEF_D_HV / DEF_P
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        feat_full,
  output logic                        feat_release,
  output logic                        cfg_latch,
  output logic                        sim_clear,
  output logic                        rd_en,
  output logic [idx_w(N_CHUNK)-1:0]   rd_chunk,
  output logic                        s1_valid,
  output logic [idx_w(N_CHUNK)-1:0]   s1_chunk,
  output logic                        arg_start,
  input  logic                        arg_done,
  output logic                        busy
);
  typedef enum logic [2:0] {S_IDLE, S_ENC, S_DRAIN, S_ARG, S_WAIT} state_e;
  state_e state;

  logic [idx_w(N_CHUNK)-1:0] chunk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      chunk    <= '0;
      s1_valid <= 1'b0;
      s1_chunk <= '0;
    end else begin
      s1_valid <= rd_en;
      s1_chunk <= rd_chunk;
      case (state)
        S_IDLE:  if (feat_full) begin
                   state <= S_ENC;
                   chunk <= '0;
                 end
        S_ENC:   if (32'(chunk) == N_CHUNK - 1) state <= S_DRAIN;
                 else chunk <= chunk + 1'b1;
        S_DRAIN: state <= S_ARG;
        S_ARG:   state <= S_WAIT;
        S_WAIT:  if (arg_done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign cfg_latch    = (state == S_IDLE) && feat_full;
  assign sim_clear    = cfg_latch;
  assign rd_en        = (state == S_ENC);
  assign rd_chunk     = chunk;
  assign feat_release = (state == S_ARG);
  assign arg_start    = (state == S_ARG);
  assign busy         = (state != S_IDLE);

endmodule

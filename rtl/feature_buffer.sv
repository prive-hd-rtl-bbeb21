// feature_buffer: collects the feature levels of one input vector.
//
// An input has D_IV features, each already mapped to one of LEVELS levels
// (the index of its level hypervector). They arrive on a valid/ready stream,
// FPB features per beat, feature 0 first; the last beat may be partly unused.
// After ceil(D_IV/FPB) accepted beats the buffer is full: in_ready drops and
// feats holds the whole input for the encoder until release is pulsed, which
// empties the buffer and lets the next input in. A level index of LEVELS or
// more is stored as LEVELS-1.
//
// The paper gives no input interface; the stream, the beat width and the
// saturation of out-of-range levels are choices of this design. One buffer
// (no double buffering) is used, so the next input is loaded while the class
// search of the current one runs, but not during its encoding.
//
// Timing: one beat per cycle while in_ready; full rises the cycle after the
// last beat; release has priority over an incoming beat.
module feature_buffer
  import prive_pkg::*;
#(
  parameter int unsigned D_IV   = DEF_D_IV,
  parameter int unsigned LEVELS = DEF_LEVELS,
  parameter int unsigned FPB    = DEF_FPB
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  in_valid,
  output logic                                  in_ready,
  input  logic [FPB-1:0][idx_w(LEVELS)-1:0]     in_data,
  output logic                                  full,
  input  logic                                  release_buf,
  output logic [D_IV-1:0][idx_w(LEVELS)-1:0]    feats
);
  localparam int unsigned LW = idx_w(LEVELS);
  localparam int unsigned NB = (D_IV + FPB - 1) / FPB;
  localparam int unsigned BW = idx_w(NB);

  logic [BW-1:0] beat;
  logic          accept;

  assign in_ready = !full;
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0;
      full <= 1'b0;
    end else if (release_buf) begin
      beat <= '0;
      full <= 1'b0;
    end else if (accept) begin
      if (32'(beat) == NB - 1) begin
        beat <= '0;
        full <= 1'b1;
      end else begin
        beat <= beat + 1'b1;
      end
    end
  end

  for (genvar k = 0; k < D_IV; k++) begin : g_feat
    localparam int unsigned B = k / FPB;
    localparam int unsigned S = k % FPB;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)
        feats[k] <= '0;
      else if (accept && !release_buf && 32'(beat) == B)
        feats[k] <= (32'(in_data[S]) >= LEVELS) ? LW'(LEVELS - 1) : in_data[S];
    end
  end

  // Stream rule: a beat offered and not taken stays offered, unchanged.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> (in_valid && $stable(in_data));
  endproperty
  a_hold: assert property (p_hold) else $error("feature_buffer: beat withdrawn");

endmodule

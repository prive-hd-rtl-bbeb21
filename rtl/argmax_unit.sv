// argmax_unit: turns the class dot products into cosine-proportional scores
// and finds the best class.
//
// Cosine similarity divides the dot product by the query norm and the class
// norm. The query norm is the same for every class and is dropped; the class
// norm is fixed for a trained model, so it is computed once, off line, and
// stored here as a reciprocal: inv_norm[c] ~ 2^S / ||C_c|| for any scale S
// shared by all classes. score[c] = dot[c] * inv_norm[c] then orders the
// classes as the cosine does, without a divider.
//
// Operation: a start pulse launches a sweep over the classes, one per cycle,
// keeping the highest score (on equal scores the lower class index wins).
// The cycle after the last class, done pulses for one cycle with best_class
// and best_score valid; they hold until the next sweep ends. dot must stay
// stable during the sweep. Latency: N_CLASS + 1 cycles from start to done.
//
// Storing reciprocals written by the host, the sequential sweep and the tie
// rule are choices of this design; the paper only states that the class norm
// needs computing once.
module argmax_unit
  import prive_pkg::*;
#(
  parameter int unsigned N_CLASS = DEF_N_CLASS,
  parameter int unsigned ACC_W   = DEF_ACC_W,
  parameter int unsigned NORM_W  = DEF_NORM_W
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                norm_we,
  input  logic [idx_w(N_CLASS)-1:0]           norm_idx,
  input  logic [NORM_W-1:0]                   norm_data,
  input  logic                                start,
  input  logic signed [ACC_W-1:0]             dot [N_CLASS],
  output logic                                done,
  output logic [idx_w(N_CLASS)-1:0]           best_class,
  output logic signed [ACC_W+NORM_W:0]        best_score
);
  localparam int unsigned CW = idx_w(N_CLASS);
  localparam int unsigned SW = ACC_W + NORM_W + 1;

  logic [NORM_W-1:0]     inv_norm [N_CLASS];
  logic                  running;
  logic [CW-1:0]         idx;
  logic signed [SW-1:0]  score;

  always_ff @(posedge clk) begin
    if (norm_we) inv_norm[norm_idx] <= norm_data;
  end

  assign score = SW'(dot[idx]) * $signed({1'b0, inv_norm[idx]});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running    <= 1'b0;
      idx        <= '0;
      done       <= 1'b0;
      best_class <= '0;
      best_score <= '0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        running <= 1'b1;
        idx     <= '0;
      end else if (running) begin
        if (idx == '0 || score > best_score) begin
          best_score <= score;
          best_class <= idx;
        end
        if (32'(idx) == N_CLASS - 1) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

endmodule

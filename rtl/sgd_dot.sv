// sgd_dot: the Dot module of the SGD engine, computing <x, a_i> for one
// sample at a time as its feature lines stream past at one line per cycle.
//
// Stage 1 multiplies the sixteen features of the line with the sixteen
// matching model words (fixed point, each product shifted back by SGD_FRAC
// bits); stage 2 adds the sixteen products in an adder tree; stage 3 adds
// the line's sum to the sample's running sum (the feedback adder of the
// figure). A sample is one label line (in_label = 1, word 0 = b_i) followed
// by its feature lines, the last marked in_last; the label rides along the
// pipeline so the result leaves with its label. out_valid pulses three
// cycles after the last feature line with the dot product saturated to 32
// bits. Sums are kept in 64 bits.
// The paper gives the dot-product module with 16 lanes; fixed point instead
// of float and the three stages are this design's.
module sgd_dot
  import hbm_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_label,
  input  logic                     in_last,
  input  line_t                    in_a,
  input  line_t                    in_x,
  output logic                     out_valid,
  output logic signed [31:0]       out_dot,
  output logic signed [31:0]       out_label
);
  logic signed [63:0] prod [PARALLELISM];
  logic               v1, lab1, last1, v2, lab2, last2;
  logic [31:0]        label1, label2, label_q;
  logic signed [63:0] sum2, acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, lab1, last1, v2, lab2, last2} <= '0;
      label1 <= '0; label2 <= '0; label_q <= '0;
      sum2 <= '0; acc <= '0;
      out_valid <= 1'b0; out_dot <= '0; out_label <= '0;
      for (int l = 0; l < PARALLELISM; l++) prod[l] <= '0;
    end else begin
      // stage 1: multipliers
      v1 <= in_valid; lab1 <= in_label; last1 <= in_last; label1 <= in_a[0];
      for (int l = 0; l < PARALLELISM; l++)
        prod[l] <= (64'($signed(in_a[l])) * 64'($signed(in_x[l]))) >>> SGD_FRAC;
      // stage 2: adder tree
      v2 <= v1; lab2 <= lab1; last2 <= last1; label2 <= label1;
      begin
        logic signed [63:0] s;
        s = '0;
        for (int l = 0; l < PARALLELISM; l++) s += prod[l];
        sum2 <= s;
      end
      // stage 3: accumulate over the sample's lines
      out_valid <= 1'b0;
      if (v2) begin
        if (lab2) begin
          acc     <= '0;
          label_q <= label2;
        end else if (last2) begin
          acc       <= '0;
          out_valid <= 1'b1;
          out_label <= label_q;
          if (acc + sum2 > 64'sd2147483647)       out_dot <= 32'sh7FFF_FFFF;
          else if (acc + sum2 < -64'sd2147483648) out_dot <= 32'sh8000_0000;
          else                                    out_dot <= 32'(acc + sum2);
        end else begin
          acc <= acc + sum2;
        end
      end
    end
  end
endmodule

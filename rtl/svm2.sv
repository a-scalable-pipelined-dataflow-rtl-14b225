// svm2: SVM-II stage, calibrates the scores of one scale so that candidates
// of different resized images can be ranked together.
//
// For a candidate of scale i with SVM-I score s the calibrated score is
// s2 = ((v_i * s) >>> 8) + t_i, with v_i a signed Q8.8 gain and t_i a signed
// offset from the scale table. The paper names this stage and what it is for;
// the linear per-scale form follows the BING method it accelerates, and the
// fixed-point format is this design's choice. The candidate is tagged with
// its scale index. One register stage with a valid/ready handshake (a
// skid-free slice: in_ready is high when the output register is free or
// being emptied).
module svm2
  import bing_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [SCALE_W-1:0] scale,
  input  logic signed [15:0] v,
  input  logic signed [15:0] t,
  input  logic              in_valid,
  output logic              in_ready,
  input  cand_t             in_cand,
  output logic              out_valid,
  input  logic              out_ready,
  output prop_t             out_prop
);

  logic signed [SCORE_W+16-1:0] prod;
  logic signed [S2_W-1:0]       s2;

  assign prod     = (SCORE_W+16)'(in_cand.score) * (SCORE_W+16)'(v);
  assign s2       = S2_W'(prod >>> 8) + S2_W'(t);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_prop  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_prop.score <= s2;
        out_prop.scale <= scale;
        out_prop.row   <= in_cand.row;
        out_prop.col   <= in_cand.col;
      end
    end
  end

endmodule

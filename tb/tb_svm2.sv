// tb_svm2: random candidates and per-scale coefficients; checks the
// calibrated score ((v*s)>>>8)+t, the scale tag and the coordinates, with
// random output back-pressure (each input must come out exactly once).
module tb_svm2;
  import bing_pkg::*;
  import bing_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [SCALE_W-1:0] scale;
  logic signed [15:0] v, t;
  logic in_valid, in_ready, out_valid, out_ready;
  cand_t in_cand;
  prop_t out_prop;

  svm2 dut (.*);

  int checks = 0, failures = 0, nin = 0, nout = 0;
  prop_t exp_q[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      prop_t e;
      e.score = S2_W'(svm2_score(int'(in_cand.score), int'(v), int'(t)));
      e.scale = scale; e.row = in_cand.row; e.col = in_cand.col;
      exp_q.push_back(e);
      nin++;
    end
    if (out_valid && out_ready) begin
      checks++;
      nout++;
      if (exp_q.size() == 0 || out_prop != exp_q[0]) begin
        failures++;
        $display("got score %0d expected %0d", out_prop.score, exp_q.size() ? exp_q[0].score : 0);
      end
      if (exp_q.size()) void'(exp_q.pop_front());
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_cand = '0; scale = 0; v = 0; t = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = $urandom % 2;
        in_cand.score = SCORE_W'(int'($urandom % 4000000) - 2000000);
        in_cand.row = COORD_W'($urandom); in_cand.col = COORD_W'($urandom);
        scale = SCALE_W'($urandom); v = 16'($urandom); t = 16'($urandom);
      end
      out_ready = $urandom % 3 != 0;
    end
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    checks++;
    if (nin != nout || nin < 100) begin failures++; $display("%0d in, %0d out", nin, nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

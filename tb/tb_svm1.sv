// tb_svm1: streams random gradient maps into SVM-I and checks every window
// score (lane, row and column) against the reference 8x8 dot product, plus
// the two-cycle latency and the lanes that must carry no window.
module tb_svm1;
  import bing_pkg::*;
  import bing_ref_pkg::*;

  logic clk = 0, rst_n = 0, en;
  always #5 clk = ~clk;

  logic signed [63:0][WGT_W-1:0] weights;
  logic         in_valid, out_valid;
  grad_batch_t  in_batch;
  score_batch_t out_batch;

  svm1 #(.MAX_W(64)) dut (.*);

  bit lat_test = 0;
  int checks = 0, failures = 0, windows = 0, lat = 0, t_in = 0, cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (rst_n && en && out_valid && !lat_test) begin
      for (int k = 0; k < 4; k++) begin
        int top;
        top = 4 * int'(out_batch.bank) - 7 + k;
        checks++;
        if (out_batch.lane_ok[k] != (top >= 0)) begin
          failures++;
          $display("lane_ok wrong at bank %0d lane %0d", out_batch.bank, k);
        end
        if (top >= 0) begin
          windows++;
          checks++;
          if (signed'(out_batch.s[k]) != smap[top][out_batch.col]) begin
            failures++;
            if (failures < 10) $display("s(%0d,%0d) got %0d expected %0d", top, out_batch.col,
                                        signed'(out_batch.s[k]), smap[top][out_batch.col]);
          end
        end
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int h, int w, bit stalls);
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) gmap[r][c] = int'($urandom % 256);
    for (int i = 0; i < 64; i++) begin
      wgt[i] = int'($urandom % 256) - 128;
      weights[i] = WGT_W'(wgt[i]);
    end
    ref_score(h, w);
    windows = 0;
    for (int b = 0; b < h / 4; b++)
      for (int c = 0; c < w; c++) begin
        while (stalls && ($urandom % 3 == 0)) begin
          in_valid <= 1'b0; en <= ($urandom % 2 == 0); @(posedge clk);
        end
        in_valid <= 1'b1;
        en <= 1'b1;
        for (int j = 0; j < 4; j++) in_batch.g[j] <= 8'(gmap[4*b+j][c]);
        in_batch.bank <= BANK_W'(b);
        in_batch.col  <= COORD_W'(c);
        in_batch.last <= 1'b0;
        @(posedge clk);
      end
    in_valid <= 1'b0;
    en <= 1'b1;
    repeat (5) @(posedge clk);
    checks++;
    if (windows != (h - 7) * (w - 7)) begin
      failures++;
      $display("frame %0dx%0d: %0d windows scored, expected %0d", h, w, windows, (h - 7) * (w - 7));
    end
  endtask

  initial begin
    en = 1; in_valid = 0; in_batch = '0; weights = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(16, 12, 0);
    run_frame(20, 17, 1);
    // latency: a batch at column 7 gives its score two cycles later
    for (int i = 0; i < 64; i++) weights[i] = 8'sd1;
    @(posedge clk);
    in_valid <= 1'b1; in_batch.bank <= 8'd2; in_batch.col <= 10'd7; in_batch.g <= '0;
    lat_test = 1;
    @(posedge clk);              // batch sampled here
    in_valid <= 1'b0;
    #1 checks++;
    if (out_valid) begin failures++; $display("score after one cycle"); end
    @(posedge clk);
    #1 checks++;
    if (!out_valid || out_batch.col != 0 || out_batch.bank != 2) begin
      failures++;
      $display("score not present two cycles after its batch");
    end
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_nms: streams random score maps (with many ties) into NMS as score
// batches and checks the emitted candidates, in order, against the
// reference best window of every complete 5x5 block; also checks `done`.
module tb_nms;
  import bing_pkg::*;
  import bing_ref_pkg::*;

  logic clk = 0, rst_n = 0, en;
  always #5 clk = ~clk;

  logic [COORD_W-1:0] width, height;
  logic         in_valid, out_valid, done;
  score_batch_t in_batch;
  cand_t        out_cand;

  nms #(.MAX_W(64)) dut (.*);

  int checks = 0, failures = 0, dones = 0;
  cand_t got[$];

  always @(posedge clk) begin
    if (rst_n && en && out_valid) got.push_back(out_cand);
    if (rst_n && done) dones++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int h, int w, bit stalls);
    int nb;
    nb = h / 4;
    for (int r = 0; r < h - 7; r++)
      for (int c = 0; c < w - 7; c++) smap[r][c] = int'($urandom % 64) - 20;
    ref_nms(h, w);
    width = COORD_W'(w); height = COORD_W'(h);
    got.delete(); dones = 0;
    for (int b = 1; b < nb; b++)
      for (int c = 0; c < w - 7; c++) begin
        while (stalls && ($urandom % 3 == 0)) begin
          in_valid <= 1'b0; en <= ($urandom % 2 == 0); @(posedge clk);
        end
        in_valid <= 1'b1;
        en <= 1'b1;
        for (int k = 0; k < 4; k++) begin
          in_batch.lane_ok[k] <= (4 * b - 7 + k >= 0);
          in_batch.s[k] <= (4 * b - 7 + k >= 0) ? SCORE_W'(smap[4*b-7+k][c]) : SCORE_W'(999999);
        end
        in_batch.bank <= BANK_W'(b);
        in_batch.col  <= COORD_W'(c);
        in_batch.last <= (b == nb - 1) && (c == w - 8);
        @(posedge clk);
      end
    in_valid <= 1'b0;
    en <= 1'b1;
    repeat (4) @(posedge clk);
    checks++;
    if (got.size() != cands.size() || dones != 1) begin
      failures++;
      $display("frame %0dx%0d: %0d candidates (expected %0d), %0d done pulses", h, w,
               got.size(), cands.size(), dones);
    end
    for (int i = 0; i < cands.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != cands[i]) begin
        failures++;
        if (failures < 10) $display("cand %0d: got s=%0d r=%0d c=%0d expected s=%0d r=%0d c=%0d", i,
          got[i].score, got[i].row, got[i].col, cands[i].score, cands[i].row, cands[i].col);
      end
    end
  endtask

  initial begin
    en = 1; in_valid = 0; in_batch = '0; width = 0; height = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(32, 30, 0);
    run_frame(28, 41, 1);
    run_frame(12, 12, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

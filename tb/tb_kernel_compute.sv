// tb_kernel_compute: end-to-end check of CalcGrad -> SVM-I -> NMS.
//
// Random resized images and random SVM-I weights are streamed in as batches
// (bank by bank, column by column). The candidates are compared, in order,
// with the reference of bing_ref_pkg. Frame 1 runs without stalls and checks
// the cycle count (one batch per cycle, one end-of-line cycle per bank after
// the first, one flush bank plus its end-of-line cycle, fixed pipeline
// latency). Frames 2 and 3 insert random input gaps and random global stalls.
module tb_kernel_compute;
  import bing_pkg::*;
  import bing_ref_pkg::*;

  logic clk = 0, rst_n = 0, en;
  always #5 clk = ~clk;

  logic [COORD_W-1:0] width, height;
  logic signed [63:0][WGT_W-1:0] weights;
  logic       in_valid, in_ready, out_valid, done;
  pix_batch_t in_batch;
  cand_t      out_cand;

  kernel_compute #(.MAX_W(64)) dut (.*);

  int checks = 0, failures = 0;
  int eol_cycles = 0, stall_cycles = 0;
  cand_t got[$];

  always @(posedge clk) if (rst_n && en && out_valid) got.push_back(out_cand);
  always @(posedge clk) if (rst_n && !en) stall_cycles++;
  always @(posedge clk) if (rst_n && en && !in_ready) eol_cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(int h, int w, bit stalls);
    int nb, cyc, t0;
    bit started, fin;
    nb = h / 4;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        rimg[r][c].r = 8'($urandom); rimg[r][c].g = 8'($urandom); rimg[r][c].b = 8'($urandom);
        if ($urandom % 3 == 0) rimg[r][c] = (r > 0) ? rimg[r-1][c] : rimg[r][c];
      end
    for (int i = 0; i < 64; i++) begin
      wgt[i] = int'($urandom % 256) - 128;
      weights[i] = WGT_W'(wgt[i]);
    end
    ref_kernel(h, w);
    width = COORD_W'(w); height = COORD_W'(h);
    got.delete();
    started = 0; fin = 0; cyc = 0; t0 = 0;
    fork
      begin
        for (int b = 0; b < nb; b++)
          for (int c = 0; c < w; c++) begin
            while (stalls && ($urandom % 4 == 0)) begin
              in_valid <= 1'b0; @(posedge clk);
            end
            in_valid <= 1'b1;
            for (int j = 0; j < 4; j++) in_batch.pix[j] <= rimg[4*b+j][c];
            in_batch.bank <= BANK_W'(b);
            in_batch.col  <= COORD_W'(c);
            in_batch.last <= (b == nb - 1) && (c == w - 1);
            @(posedge clk);
            while (!(in_ready)) @(posedge clk);
            started = 1;
          end
        in_valid <= 1'b0;
      end
      begin
        while (!fin) begin
          en <= stalls ? ($urandom % 5 != 0) : 1'b1;
          @(posedge clk);
          if (in_valid && in_ready && t0 == 0) t0 = cyc;
          cyc++;
          if (done) fin = 1;
        end
        en <= 1'b1;
      end
    join
    repeat (3) @(posedge clk);
    checks++;
    if (got.size() != cands.size()) begin
      failures++;
      $display("frame %0dx%0d: %0d candidates, expected %0d", h, w, got.size(), cands.size());
    end
    for (int i = 0; i < cands.size() && i < got.size(); i++) begin
      checks++;
      if (got[i] != cands[i]) begin
        failures++;
        if (failures < 10)
          $display("cand %0d: got s=%0d r=%0d c=%0d, expected s=%0d r=%0d c=%0d", i,
                   got[i].score, got[i].row, got[i].col, cands[i].score, cands[i].row, cands[i].col);
      end
    end
    if (!stalls) begin
      // accepted at t0 .. done seen: nb*w batches, nb-1 EOL, w flush, 1 flush EOL, 3 latency
      checks++;
      if (cyc - t0 != nb * w + (nb - 1) + w + 1 + 3) begin
        failures++;
        $display("cycle count %0d, expected %0d", cyc - t0, nb * w + (nb - 1) + w + 1 + 3);
      end
    end
    $display("frame %0dx%0d stalls=%0d: %0d candidates, %0d cycles", h, w, stalls, got.size(), cyc - t0);
  endtask

  initial begin
    en = 1; in_valid = 0; in_batch = '0; width = 0; height = 0; weights = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(24, 28, 0);
    run_frame(20, 33 - 1, 1);
    run_frame(8, 12, 1);
    checks++;
    if (stall_cycles == 0 || eol_cycles == 0) begin
      failures++;
      $display("mechanism not exercised: stalls=%0d eol/flush=%0d", stall_cycles, eol_cycles);
    end
    $display("global stalls %0d, end-of-line/flush cycles %0d", stall_cycles, eol_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_calc_grad: checks every normed gradient of random images against the
// reference (replicated borders), with and without random input gaps and
// global stalls, and checks the number of end-of-line and flush cycles.
module tb_calc_grad;
  import bing_pkg::*;
  import bing_ref_pkg::*;

  logic clk = 0, rst_n = 0, en;
  always #5 clk = ~clk;

  logic [COORD_W-1:0] width;
  logic        in_valid, in_ready, out_valid;
  pix_batch_t  in_batch;
  grad_batch_t out_batch;

  calc_grad #(.MAX_W(64)) dut (.*);

  int checks = 0, failures = 0, seen = 0, busy_cycles = 0, lasts = 0;

  always @(posedge clk) begin
    if (rst_n && en && !in_ready) busy_cycles++;
    if (rst_n && en && out_valid) begin
      seen++;
      if (out_batch.last) lasts++;
      for (int j = 0; j < 4; j++) begin
        checks++;
        if (int'(out_batch.g[j]) != gmap[4*out_batch.bank+j][out_batch.col]) begin
          failures++;
          if (failures < 10) $display("G(%0d,%0d) got %0d expected %0d", 4*out_batch.bank+j,
                                      out_batch.col, out_batch.g[j], gmap[4*out_batch.bank+j][out_batch.col]);
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
    int nb;
    nb = h / 4;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        rimg[r][c].r = 8'($urandom); rimg[r][c].g = 8'($urandom); rimg[r][c].b = 8'($urandom);
        if ($urandom % 2 == 0) rimg[r][c].r = 8'($urandom % 16);
      end
    ref_grad(h, w);
    width = COORD_W'(w);
    seen = 0; busy_cycles = 0; lasts = 0;
    for (int b = 0; b < nb; b++)
      for (int c = 0; c < w; c++) begin
        while (stalls && ($urandom % 4 == 0)) begin
          in_valid <= 1'b0; en <= ($urandom % 3 != 0); @(posedge clk);
        end
        in_valid <= 1'b1;
        en <= stalls ? ($urandom % 4 != 0) : 1'b1;
        for (int j = 0; j < 4; j++) in_batch.pix[j] <= rimg[4*b+j][c];
        in_batch.bank <= BANK_W'(b);
        in_batch.col  <= COORD_W'(c);
        in_batch.last <= (b == nb - 1) && (c == w - 1);
        @(posedge clk);
        while (!(in_ready)) begin
          en <= stalls ? ($urandom % 4 != 0) : 1'b1;
          @(posedge clk);
        end
      end
    in_valid <= 1'b0;
    en <= 1'b1;
    repeat (w + 10) @(posedge clk);
    checks++;
    if (seen != nb * w || lasts != 1) begin
      failures++;
      $display("frame %0dx%0d: %0d gradient batches (expected %0d), %0d last flags", h, w, seen, nb * w, lasts);
    end
    checks++;
    if (busy_cycles != (nb - 1) + w + 1) begin
      failures++;
      $display("frame %0dx%0d: %0d cycles not ready, expected %0d", h, w, busy_cycles, (nb - 1) + w + 1);
    end
  endtask

  initial begin
    en = 1; in_valid = 0; in_batch = '0; width = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(12, 10, 0);
    run_frame(16, 9, 1);
    run_frame(4, 8, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

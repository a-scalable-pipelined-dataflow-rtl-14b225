// tb_resize_module: resize of a random stored image through the four-block
// image store. Checks every batch (pixels, bank, column, last flag) against
// a reference nearest-neighbour resize, that the Ping-Pong cache delivers one
// batch per cycle with no gap when no two workers share a block (step 2, as
// in the paper's example), and that an odd step causes block conflicts yet
// still yields the right image. Output back-pressure is applied in run 3.
module tb_resize_module;
  import bing_pkg::*;
  import bing_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [COORD_W-1:0] wr_x, wr_y;
  rgb_t wr_pix;
  logic [NBLK-1:0] rd_en;
  logic [NBLK-1:0][IMG_AW-1:0] rd_addr;
  rgb_t [NBLK-1:0] rd_data;
  logic start, busy, done, conflict, out_valid, out_ready;
  scale_cfg_t cfg;
  pix_batch_t out_batch;

  image_bank u_img (.*);
  resize_module dut (.*);

  int checks = 0, failures = 0, conflicts = 0;
  always @(posedge clk) if (rst_n && conflict) conflicts++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int h, int w, int sx, int sy, bit bp, bit expect_gapless);
    int nbat, gaps, first, lastc, cyc, lasts;
    ref_resize(h, w, sx, sy);
    cfg = '0; cfg.out_w = COORD_W'(w); cfg.out_h = COORD_W'(h);
    cfg.step_x = 24'(sx); cfg.step_y = 24'(sy);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    nbat = 0; gaps = 0; first = -1; lastc = 0; cyc = 0; lasts = 0;
    while (nbat < (h / 4) * w) begin
      out_ready = bp ? ($urandom % 3 != 0) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        int b, c;
        b = nbat / w; c = nbat % w;
        if (first < 0) first = cyc;
        lastc = cyc;
        checks++;
        if (out_batch.bank != BANK_W'(b) || out_batch.col != COORD_W'(c) ||
            out_batch.last != (nbat == (h / 4) * w - 1)) begin
          failures++;
          $display("batch %0d: bank %0d col %0d last %0d", nbat, out_batch.bank, out_batch.col, out_batch.last);
        end
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (out_batch.pix[j] != rimg[4*b+j][c]) begin
            failures++;
            if (failures < 10) $display("pixel (%0d,%0d) got %h expected %h", 4*b+j, c,
                                        out_batch.pix[j], rimg[4*b+j][c]);
          end
        end
        nbat++;
      end
      @(negedge clk);
      cyc++;
    end
    if (expect_gapless) begin
      checks++;
      if (lastc - first + 1 != (h / 4) * w) begin
        failures++;
        $display("stream not continuous: %0d batches over %0d cycles", (h / 4) * w, lastc - first + 1);
      end
    end
    $display("run %0dx%0d: %0d batches in %0d cycles, first after %0d", h, w, nbat, lastc - first + 1, first);
  endtask

  initial begin
    wr_en = 0; wr_x = 0; wr_y = 0; wr_pix = '0; start = 0; out_ready = 1; cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < 48; y++)
      for (int x = 0; x < 64; x++) begin
        orig[y][x] = rgb_t'($urandom);
        @(negedge clk);
        wr_en = 1; wr_x = COORD_W'(x); wr_y = COORD_W'(y); wr_pix = orig[y][x];
      end
    @(negedge clk); wr_en = 0;
    run(16, 24, 2 << 16, 2 << 16, 0, 1);     // the paper's 1/2 ratio: no conflicts
    checks++;
    if (conflicts != 0) begin failures++; $display("unexpected conflicts %0d", conflicts); end
    run(20, 32, 'h1_8000, 'h2_4000, 0, 0);   // 1/1.5 ratio: conflicts
    checks++;
    if (conflicts == 0) begin failures++; $display("no block conflict exercised"); end
    run(12, 16, 'h3_4000, 'h2_0000, 1, 0);   // back-pressure
    $display("block conflicts %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_image_bank: writes a random image through the host port and reads it
// back through the four block ports (four different blocks per cycle),
// checking data and the one-cycle read latency.
module tb_image_bank;
  import bing_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wr_en;
  logic [COORD_W-1:0] wr_x, wr_y;
  rgb_t wr_pix;
  logic [NBLK-1:0] rd_en;
  logic [NBLK-1:0][IMG_AW-1:0] rd_addr;
  rgb_t [NBLK-1:0] rd_data;

  image_bank dut (.*);

  int checks = 0, failures = 0;
  rgb_t img [24][40];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [COORD_W-1:0] xs [NBLK];
    logic [COORD_W-1:0] ys;
    wr_en = 0; wr_x = 0; wr_y = 0; wr_pix = '0; rd_en = 0; rd_addr = '0;
    for (int y = 0; y < 24; y++)
      for (int x = 0; x < 40; x++) begin
        img[y][x] = rgb_t'($urandom);
        @(negedge clk);
        wr_en = 1; wr_x = COORD_W'(x); wr_y = COORD_W'(y); wr_pix = img[y][x];
      end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 300; i++) begin
      // pick one column per block: block k holds columns with (x/2)%4 == k
      ys = COORD_W'($urandom % 24);
      for (int k = 0; k < NBLK; k++) begin
        xs[k] = COORD_W'(8 * ($urandom % 5) + 2 * k + ($urandom % 2));
        rd_en[k] = 1;
        rd_addr[k] = img_addr(xs[k], ys);
      end
      @(negedge clk);
      rd_en = 0;
      for (int k = 0; k < NBLK; k++) begin
        checks++;
        if (rd_data[k] != img[ys][xs[k]]) begin
          failures++;
          $display("block %0d (%0d,%0d): got %h expected %h", k, xs[k], ys, rd_data[k], img[ys][xs[k]]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// image_bank: the original image held in four single-port block memories.
//
// Each block serves one resize worker, so four pixels can be fetched per
// cycle, one per block (paper: "Only one port of the configured BRAMs is
// assigned for each block"). Pixel column x is stored in block (x/2) mod 4 at
// word y*IMG_PITCH + {x/8, x mod 2}; this pair-wise interleave is the layout of
// the paper's Fig. 3 example, generalised to wider images (this design's
// choice). Each block has one port: a host write to that block, when present,
// takes the port; otherwise the block performs the worker's read. Reads have
// one cycle of latency (registered output, as a BRAM).
module image_bank
  import bing_pkg::*;
(
  input  logic                     clk,
  // host write port (one pixel per cycle)
  input  logic                     wr_en,
  input  logic [COORD_W-1:0]       wr_x,
  input  logic [COORD_W-1:0]       wr_y,
  input  rgb_t                     wr_pix,
  // one read port per block
  input  logic [NBLK-1:0]          rd_en,
  input  logic [NBLK-1:0][IMG_AW-1:0] rd_addr,
  output rgb_t [NBLK-1:0]          rd_data
);

  logic [1:0]        wblk;
  logic [IMG_AW-1:0] waddr;
  assign wblk  = img_block(wr_x);
  assign waddr = img_addr(wr_x, wr_y);

  for (genvar k = 0; k < NBLK; k++) begin : g_blk
    rgb_t mem [IMG_DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en && wblk == 2'(k)) begin
        mem[waddr] <= wr_pix;
      end else if (rd_en[k]) begin
        rd_data[k] <= mem[rd_addr[k]];
      end
    end
  end

endmodule

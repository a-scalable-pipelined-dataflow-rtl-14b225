// resize_module: nearest-neighbour resizing with rotation loading into a
// two-lane Ping-Pong cache, producing a continuous stream of batches.
//
// The resized image is walked in 4x4 tiles: four rows of one bank by four
// consecutive columns. Four workers fill one cache lane per tile. Worker w
// owns resized column 4t+w; in load slot s it fetches resized row
// (w+s) mod 4 of that column and writes it into cache part (w+s) mod 4, so
// in every slot the four workers write four different parts (Fig. 3/4 of the
// paper: worker I loads 1,17,33,49, worker II 19,35,51,3, ...). A lane is
// exported as four batches (one column each, one pixel from every part)
// while the other lane is being filled, so with no bank conflict a batch
// leaves every cycle.
//
// Each worker reads the image block that holds its source pixel. The
// rotation and the two lanes follow the paper. The source mapping
// x = floor(c*step_x), y = floor(r*step_y) (Q8.16 steps from the host) and
// the conflict rule are this design's choices: when two workers need the
// same block in one slot, the lowest-numbered worker goes first and the slot
// takes an extra cycle (reported on `conflict`). With the Fig. 3 example
// (step 2) no conflict occurs.
//
// Interface: `start` latches `cfg` (out_w, out_h multiples of 4) and runs one
// resized image; `out_*` is a valid/ready batch stream; `done` pulses with the
// handshake of the last batch. Image reads have one cycle of latency.
module resize_module
  import bing_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  scale_cfg_t                   cfg,
  output logic                         busy,
  output logic                         done,
  output logic                         conflict,
  // image block read ports
  output logic [NBLK-1:0]              rd_en,
  output logic [NBLK-1:0][IMG_AW-1:0]  rd_addr,
  input  rgb_t [NBLK-1:0]              rd_data,
  // batch stream
  output logic                         out_valid,
  input  logic                         out_ready,
  output pix_batch_t                   out_batch
);

  localparam int unsigned NW = NPIPE;   // workers = pipelines = 4

  scale_cfg_t cfg_q;
  logic [COORD_W-1:0] ntile_m1, nbank_m1;   // last tile / bank index
  assign ntile_m1 = (cfg_q.out_w >> 2) - 1'b1;
  assign nbank_m1 = (cfg_q.out_h >> 2) - 1'b1;

  // ---------------- loader ----------------
  logic               ld_active;
  logic [COORD_W-1:0] ld_tile, ld_bank;
  logic [1:0]         ld_slot;
  logic [NW-1:0]      ld_pend;
  logic               ld_lane;
  logic [1:0]         lane_full;

  logic [NW-1:0][COORD_W-1:0] src_x, src_y;
  logic [NW-1:0][1:0]         src_blk;
  logic [NW-1:0][IMG_AW-1:0]  src_addr;
  logic [NW-1:0]              grant;
  logic                       ld_go;

  // A lane may be refilled from the cycle its last batch is exported: the
  // first write lands one cycle later, after the export has read it.
  logic ex_free;
  logic               ex_active;
  logic               ex_lane;
  logic [1:0]         ex_ent;
  logic [COORD_W-1:0] ex_tile, ex_bank;
  logic               ex_fire, ex_last;
  assign ld_go = ld_active && (!lane_full[ld_lane] || (ex_free && ex_lane == ld_lane));

  always_comb begin
    logic [COORD_W-1:0] c, r;
    logic [COORD_W+23:0] px, py;
    for (int w = 0; w < NW; w++) begin
      c = COORD_W'(ld_tile * 4 + w);
      r = COORD_W'(ld_bank * 4 + ((w + ld_slot) % 4));
      px = c * cfg_q.step_x;
      py = r * cfg_q.step_y;
      src_x[w]    = px[16 +: COORD_W];
      src_y[w]    = py[16 +: COORD_W];
      src_blk[w]  = img_block(src_x[w]);
      src_addr[w] = img_addr(src_x[w], src_y[w]);
    end
    // one grant per block per cycle, lowest pending worker first
    grant   = '0;
    rd_en   = '0;
    rd_addr = '0;
    for (int k = 0; k < NBLK; k++) begin
      for (int w = 0; w < NW; w++) begin
        if (ld_go && ld_pend[w] && src_blk[w] == 2'(k) && !rd_en[k]) begin
          rd_en[k]   = 1'b1;
          rd_addr[k] = src_addr[w];
          grant[w]   = 1'b1;
        end
      end
    end
  end

  logic [NW-1:0] pend_next;
  assign pend_next = ld_pend & ~grant;
  assign conflict  = ld_go && (pend_next != '0);

  // registered write-back of the fetched pixels (BRAM latency 1)
  logic [NW-1:0]      wb_v;
  logic [NW-1:0][1:0] wb_part, wb_blk;
  logic               wb_lane, wb_last;

  rgb_t cache [2][NPIPE][NW];   // [lane][part = row in bank][entry = worker/column]

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_active <= 1'b0;
      ld_tile   <= '0;
      ld_bank   <= '0;
      ld_slot   <= '0;
      ld_pend   <= '1;
      ld_lane   <= 1'b0;
      wb_v      <= '0;
      wb_part   <= '0;
      wb_blk    <= '0;
      wb_lane   <= 1'b0;
      wb_last   <= 1'b0;
    end else begin
      wb_v    <= grant;
      wb_lane <= ld_lane;
      wb_last <= 1'b0;
      for (int w = 0; w < NW; w++) begin
        wb_part[w] <= 2'((w + ld_slot) % 4);
        wb_blk[w]  <= src_blk[w];
      end
      if (start) begin
        ld_active <= 1'b1;
        ld_tile   <= '0;
        ld_bank   <= '0;
        ld_slot   <= '0;
        ld_pend   <= '1;
        ld_lane   <= 1'b0;
      end else if (ld_go) begin
        if (pend_next != '0) begin
          ld_pend <= pend_next;
        end else begin
          ld_pend <= '1;
          ld_slot <= ld_slot + 1'b1;
          if (ld_slot == 2'd3) begin
            wb_last <= 1'b1;
            ld_lane <= ~ld_lane;
            if (ld_tile == ntile_m1) begin
              ld_tile <= '0;
              if (ld_bank == nbank_m1) ld_active <= 1'b0;
              else                     ld_bank   <= ld_bank + 1'b1;
            end else begin
              ld_tile <= ld_tile + 1'b1;
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int w = 0; w < NW; w++) begin
      if (wb_v[w]) cache[wb_lane][wb_part[w]][w] <= rd_data[wb_blk[w]];
    end
  end

  // ---------------- exporter ----------------

  assign out_valid = ex_active && lane_full[ex_lane];
  assign ex_fire   = out_valid && out_ready;
  assign ex_free   = ex_fire && (ex_ent == 2'd3);
  assign ex_last   = (ex_tile == ntile_m1) && (ex_bank == nbank_m1) && (ex_ent == 2'd3);

  always_comb begin
    for (int j = 0; j < NPIPE; j++) out_batch.pix[j] = cache[ex_lane][j][ex_ent];
    out_batch.bank = BANK_W'(ex_bank);
    out_batch.col  = COORD_W'(ex_tile * 4 + ex_ent);
    out_batch.last = ex_last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_active <= 1'b0;
      ex_lane   <= 1'b0;
      ex_ent    <= '0;
      ex_tile   <= '0;
      ex_bank   <= '0;
      lane_full <= '0;
      done      <= 1'b0;
      cfg_q     <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        cfg_q     <= cfg;
        ex_active <= 1'b1;
        ex_lane   <= 1'b0;
        ex_ent    <= '0;
        ex_tile   <= '0;
        ex_bank   <= '0;
        lane_full <= '0;
      end else begin
        if (wb_last) lane_full[wb_lane] <= 1'b1;
        if (ex_fire) begin
          ex_ent <= ex_ent + 1'b1;
          if (ex_ent == 2'd3) begin
            lane_full[ex_lane] <= 1'b0;
            ex_lane <= ~ex_lane;
            if (ex_tile == ntile_m1) begin
              ex_tile <= '0;
              ex_bank <= ex_bank + 1'b1;
            end else begin
              ex_tile <= ex_tile + 1'b1;
            end
          end
          if (ex_last) begin
            ex_active <= 1'b0;
            done      <= 1'b1;
          end
        end
      end
    end
  end

  assign busy = ex_active;

  // The host must give sizes the tile walk can cover.
  always_ff @(posedge clk) begin
    if (rst_n && start) begin
      assert (cfg.out_w[1:0] == 2'b00 && cfg.out_h[1:0] == 2'b00 && cfg.out_w >= 8 && cfg.out_h >= 8)
        else $error("resize_module: out_w/out_h must be multiples of 4 and at least 8");
    end
  end

endmodule

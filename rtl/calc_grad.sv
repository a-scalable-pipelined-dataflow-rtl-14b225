// calc_grad: CalcGrad workspace of the kernel, normed gradients of a batch
// stream.
//
// For every pixel G(i,j) = min(Ix + Iy, 255), where Ix is the RGB distance
// D (largest channel difference) between the pixels above and below and Iy
// the distance between the pixels left and right (formulas of the paper).
// A batch carries the four rows of one bank, so the gradients of bank b-1
// can be finished only when bank b arrives (its first row is the bottom
// neighbour). The line buffer keeps, per column, the four rows of the
// previous bank and the row above it (the paper's "tiered cache of pixel");
// a two-column memory window supplies the left and right neighbours.
//
// Timing: the gradient batch of (bank b-1, column c-1) leaves one cycle after
// pixel batch (bank b, column c) is accepted. After the last column of a
// bank one extra cycle (EOL) emits the last column; after the last bank the
// module replays the line buffer for one more bank (FLUSH) to emit the final
// bank. During EOL and FLUSH `in_ready` is low. All state advances only when
// `en` is high (global stall of the kernel). Image borders are replicated:
// the neighbour outside the image is the border pixel itself (the paper does
// not say how borders are handled; this is this design's choice).
module calc_grad
  import bing_pkg::*;
#(
  parameter int unsigned MAX_W = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [COORD_W-1:0] width,     // resized image width
  input  logic        in_valid,
  output logic        in_ready,
  input  pix_batch_t  in_batch,
  output logic        out_valid,
  output grad_batch_t out_batch
);

  localparam int unsigned LBW = $clog2(MAX_W);
  typedef rgb_t [NPIPE:0] lb_t;          // row above the bank + the bank's rows
  typedef rgb_t [NPIPE+1:0] vec_t;       // column of 6 pixels: rows 4b-5 .. 4b

  typedef enum logic [1:0] {S_RUN, S_EOL, S_FLUSH, S_FEOL} state_t;
  state_t state;

  lb_t lbuf [MAX_W];

  logic [COORD_W-1:0] fcol;               // flush column
  logic [BANK_W-1:0]  last_bank;
  logic               last_pend;          // last bank received, flush still to do
  logic               take;
  logic [COORD_W-1:0] col;
  lb_t                lb_rd;
  vec_t               vec, prev1, prev2;
  logic [BANK_W-1:0]  ob_q;               // bank of prev1

  assign in_ready = en && (state == S_RUN);
  assign take     = in_valid && in_ready;
  assign col      = (state == S_FLUSH) ? fcol : in_batch.col;
  assign lb_rd    = lbuf[col[LBW-1:0]];

  always_comb begin
    for (int j = 0; j <= NPIPE; j++) vec[j] = lb_rd[j];
    vec[NPIPE+1] = (state == S_FLUSH) ? lb_rd[NPIPE] : in_batch.pix[0];
  end

  function automatic logic [NPIPE-1:0][7:0] grads(vec_t lf, vec_t ce, vec_t rt, logic top);
    logic [NPIPE-1:0][7:0] g;
    rgb_t up;
    for (int j = 0; j < NPIPE; j++) begin
      up   = (top && j == 0) ? ce[1] : ce[j];
      g[j] = norm_grad(up, ce[j+2], lf[j+1], rt[j+1]);
    end
    return g;
  endfunction

  always_ff @(posedge clk) begin
    if (take) lbuf[in_batch.col[LBW-1:0]] <= {in_batch.pix, lb_rd[NPIPE]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_RUN;
      fcol      <= '0;
      last_bank <= '0;
      last_pend <= 1'b0;
      prev1     <= '0;
      prev2     <= '0;
      ob_q      <= '0;
      out_valid <= 1'b0;
      out_batch <= '0;
    end else if (en) begin
      out_valid <= 1'b0;
      case (state)
        S_RUN: if (take) begin
          prev1 <= vec;
          prev2 <= prev1;
          ob_q  <= in_batch.bank - 1'b1;
          if (in_batch.bank != '0 && in_batch.col != '0) begin
            out_valid      <= 1'b1;
            out_batch.g    <= grads((in_batch.col == 1) ? prev1 : prev2, prev1, vec,
                                    in_batch.bank == 1);
            out_batch.bank <= in_batch.bank - 1'b1;
            out_batch.col  <= in_batch.col - 1'b1;
            out_batch.last <= 1'b0;
          end
          if (in_batch.col == width - 1'b1) begin
            if (in_batch.bank != '0)  state <= S_EOL;
            else if (in_batch.last)   state <= S_FLUSH;
          end
          if (in_batch.last) begin
            last_bank <= in_batch.bank;
            last_pend <= 1'b1;
          end
        end
        S_EOL, S_FEOL: begin
          out_valid      <= 1'b1;
          out_batch.g    <= grads(prev2, prev1, prev1, ob_q == '0);
          out_batch.bank <= ob_q;
          out_batch.col  <= width - 1'b1;
          out_batch.last <= (state == S_FEOL);
          if (state == S_FEOL)               state <= S_RUN;
          else if (last_pend)                state <= S_FLUSH;
          else                               state <= S_RUN;
          fcol <= '0;
        end
        S_FLUSH: begin
          last_pend <= 1'b0;
          prev1 <= vec;
          prev2 <= prev1;
          ob_q  <= last_bank;
          if (fcol != '0) begin
            out_valid      <= 1'b1;
            out_batch.g    <= grads((fcol == 1) ? prev1 : prev2, prev1, vec, last_bank == '0);
            out_batch.bank <= last_bank;
            out_batch.col  <= fcol - 1'b1;
            out_batch.last <= 1'b0;
          end
          fcol <= fcol + 1'b1;
          if (fcol == width - 1'b1) state <= S_FEOL;
        end
        default: state <= S_RUN;
      endcase
    end
  end

endmodule

// stream_fifo: synchronous FIFO used as the streaming buffer behind NMS.
//
// NMS emits candidates irregularly; the FIFO absorbs them so that the kernel
// pipelines keep running while the heap sorter is busy (the paper uses a FIFO
// for exactly this). When it is full the kernel is stalled through its global
// enable. Write and read are valid/ready handshakes; a write into a full FIFO
// is refused (in_ready low). Data is read from the head combinationally
// (first-word fall-through). The depth is not given by the paper.
module stream_fifo #(
  parameter int unsigned WIDTH = 44,
  parameter int unsigned DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign do_wr     = in_valid && in_ready;
  assign do_rd     = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  // handshake rules
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert (count <= (AW+1)'(DEPTH)) else $error("stream_fifo: count overflow");
    end
  end

endmodule

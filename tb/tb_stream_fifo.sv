// tb_stream_fifo: random pushes and pops against a queue model; checks data
// order, full/empty flags, the count, and that a full FIFO refuses writes.
module tb_stream_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] count;

  stream_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, fulls = 0;
  logic [W-1:0] model[$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (count != model.size() || in_ready != (model.size() < D) || out_valid != (model.size() > 0)) begin
      failures++;
      $display("flags wrong: count %0d model %0d", count, model.size());
    end
    if (!in_ready) fulls++;
    if (out_valid && out_ready) begin
      checks++;
      if (out_data != model[0]) begin failures++; $display("data %h expected %h", out_data, model[0]); end
      void'(model.pop_front());
    end
    if (in_valid && in_ready) model.push_back(in_data);
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      in_valid  = ($urandom % 100) < ((i < 1000) ? 70 : 30);
      out_ready = ($urandom % 100) < ((i < 1000) ? 30 : 70);
      in_data   = W'($urandom);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FIFO never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

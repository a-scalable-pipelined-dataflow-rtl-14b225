// tb_heap_sort: feeds random keyed items to the top-K heap, drains it and
// checks that exactly the K largest come out in ascending key order (ties
// compared by key only). Also covers a stream shorter than K, back-pressure
// on the output, that a dropped item costs one cycle, and that the level
// pipeline takes a pushed item every two cycles.
module tb_heap_sort;
  localparam int K = 13, DW = 20, KW = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          in_valid, in_ready, drain, out_valid, out_ready, drain_done, busy, pushed;
  logic [DW-1:0] in_data, out_data;

  heap_sort #(.K(K), .DW(DW), .KW(KW)) dut (.*);

  int checks = 0, failures = 0, pushes = 0;
  always @(posedge clk) if (pushed) pushes++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int n);
    int keys[$], outk[$], exp_k[$];
    logic [DW-1:0] d;
    for (int i = 0; i < n; i++) begin
      d = DW'($urandom);
      keys.push_back(int'(signed'(d[DW-1 -: KW])));
      in_valid <= 1'b1;
      in_data  <= d;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    @(posedge clk);
    while (busy) @(posedge clk);
    drain <= 1'b1;
    @(posedge clk);
    drain <= 1'b0;
    while (!drain_done) begin
      out_ready <= ($urandom % 3 != 0);
      @(posedge clk);
      if (out_valid && out_ready) outk.push_back(int'(signed'(out_data[DW-1 -: KW])));
    end
    // plain insertion sort, ascending
    for (int i = 1; i < n; i++)
      for (int j = i; j > 0 && keys[j-1] > keys[j]; j--) begin
        int tmp;
        tmp = keys[j]; keys[j] = keys[j-1]; keys[j-1] = tmp;
      end
    for (int i = (n > K ? n - K : 0); i < n; i++) exp_k.push_back(keys[i]);
    checks++;
    if (outk.size() != exp_k.size()) begin
      failures++;
      $display("n=%0d: %0d items out, expected %0d", n, outk.size(), exp_k.size());
    end
    for (int i = 0; i < outk.size() && i < exp_k.size(); i++) begin
      checks++;
      if (outk[i] != exp_k[i]) begin
        failures++;
        $display("n=%0d item %0d: key %0d expected %0d", n, i, outk[i], exp_k[i]);
      end
    end
  endtask

  initial begin
    int t;
    in_valid = 0; in_data = '0; drain = 0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run(200);
    run(7);
    run(40);
    // fill with large keys, then a small key must be dropped in one cycle
    for (int i = 0; i < K; i++) begin
      in_valid <= 1'b1; in_data <= {12'sd2000, 8'(i)};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
    while (busy) @(posedge clk);
    repeat (2) @(posedge clk);
    t = pushes;
    in_valid <= 1'b1; in_data <= {-12'sd5, 8'd0};
    @(posedge clk);
    in_valid <= 1'b0;
    #1 checks++;
    if (busy || !in_ready) begin failures++; $display("dropped item took more than one cycle"); end
    @(posedge clk);
    checks++;
    if (pushes != t) begin failures++; $display("small item was pushed"); end
    checks++;
    if (pushes == 0) failures++;
    // rising keys: every item is pushed; 3K of them must take at most 2 cycles each
    t = 0;
    for (int i = 0; i < 3 * K; i++) begin
      in_valid <= 1'b1; in_data <= {12'(100 + i), 8'(i)};
      @(posedge clk);
      t++;
      while (!in_ready) begin @(posedge clk); t++; end
    end
    in_valid <= 1'b0;
    checks++;
    if (t > 2 * 3 * K) begin failures++; $display("%0d pushes took %0d cycles", 3 * K, t); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

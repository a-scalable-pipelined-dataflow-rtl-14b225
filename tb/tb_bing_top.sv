// tb_bing_top: end-to-end run of the whole accelerator at reduced sizes.
//
// A random image is written into the image store, random SVM-I weights and a
// table of three scales are loaded, and one `start` runs the full flow. The
// proposals are checked against the reference chain (resize, gradient, SVM-I,
// 5x5 NMS, top-N per scale, SVM-II, top-K overall): the list of calibrated
// scores must match in ascending order, and every proposal must be a real
// NMS candidate of its scale carrying the right calibrated score. The run
// must exercise each mechanism at least once: resize block conflicts, a
// gap-free Ping-Pong stream, CalcGrad end-of-line/flush cycles, kernel stalls
// from a full FIFO (provoked by briefly holding heap sort-I's ready low), heap sort-I drops and pushes, and heap sort-II drops.
module tb_bing_top;
  import bing_pkg::*;
  import bing_ref_pkg::*;

  localparam int TOP_N = 63, TOP_K = 40, NSC = 4;
  localparam int OW = 64, OH = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic img_we, w_we, cfg_we, start, busy, done, prop_valid, prop_ready;
  logic [COORD_W-1:0] img_x, img_y;
  rgb_t img_pix;
  logic [5:0] w_addr;
  logic signed [WGT_W-1:0] w_data;
  logic [SCALE_W-1:0] cfg_addr, num_scales;
  scale_cfg_t cfg_data;
  prop_t prop_data;

  bing_top #(.MAX_W(64), .NUM_SCALES(4), .TOP_N(TOP_N), .TOP_K(TOP_K), .FIFO_DEPTH(2)) dut (.*);

  // Back-pressure: heap sort-I takes an item every two cycles and NMS emits at
  // most one every five, so the FIFO never fills by itself. Holding the
  // heap's ready low for 40 of every 300 cycles fills the FIFO and exercises
  // the kernel-wide stall.
  initial begin
    forever begin
      repeat (260) @(posedge clk);
      force dut.u_heap1.in_ready = 1'b0;
      repeat (40) @(posedge clk);
      release dut.u_heap1.in_ready;
    end
  end

  int checks = 0, failures = 0;
  int n_conflict = 0, n_stall = 0, n_eol = 0, n_push1 = 0, n_in1 = 0, n_in2 = 0, n_push2 = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.rs_conflict) n_conflict++;
    if (!dut.k_en) n_stall++;
    if (dut.k_en && !dut.p_ready && dut.u_kernel.u_grad.state != 0) n_eol++;
    if (dut.h1_pushed) n_push1++;
    if (dut.fifo_out_valid && dut.h1_in_ready) n_in1++;
    if (dut.h2_pushed) n_push2++;
    if (dut.s2_valid && dut.h2_in_ready) n_in2++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  scale_cfg_t sc [NSC];
  int  all_s[NSC][$];            // every NMS candidate score, per scale
  cand_t all_c[NSC][$];
  longint exp_s2[$];

  function automatic void sort_ll(ref longint q[$]);
    for (int i = 1; i < q.size(); i++)
      for (int j = i; j > 0 && q[j-1] > q[j]; j--) begin
        longint t; t = q[j]; q[j] = q[j-1]; q[j-1] = t;
      end
  endfunction

  initial begin
    prop_t got[$];
    longint tmp[$], got_s[$];
    int t_run;
    img_we = 0; w_we = 0; cfg_we = 0; start = 0; prop_ready = 1;
    img_x = 0; img_y = 0; img_pix = '0; w_addr = 0; w_data = 0; cfg_addr = 0; cfg_data = '0;
    num_scales = SCALE_W'(NSC);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // image with smooth regions so gradients vary
    for (int y = 0; y < OH; y++)
      for (int x = 0; x < OW; x++) begin
        orig[y][x].r = 8'(((x / 9) * 40 + (y / 7) * 25) ^ ($urandom % 24));
        orig[y][x].g = 8'((x * 37 + y * 91 + x * y * 13) % 256);
        orig[y][x].b = 8'($urandom % 64);
        @(negedge clk);
        img_we = 1; img_x = COORD_W'(x); img_y = COORD_W'(y); img_pix = orig[y][x];
      end
    @(negedge clk); img_we = 0;
    for (int i = 0; i < 64; i++) begin
      wgt[i] = int'($urandom % 64) - 24;
      @(negedge clk); w_we = 1; w_addr = 6'(i); w_data = WGT_W'(wgt[i]);
    end
    @(negedge clk); w_we = 0;
    // scales: 1/2 (no conflicts), 1/1.5 (conflicts), 1/4, 1/1
    sc[0] = '{out_w: 32, out_h: 24, step_x: 24'h2_0000, step_y: 24'h2_0000, v: 16'sd256, t: 16'sd0};
    sc[1] = '{out_w: 40, out_h: 32, step_x: 24'h1_8000, step_y: 24'h1_8000, v: 16'sd300, t: -16'sd500};
    sc[2] = '{out_w: 16, out_h: 12, step_x: 24'h4_0000, step_y: 24'h4_0000, v: 16'sd200, t: 16'sd1000};
    sc[3] = '{out_w: 64, out_h: 48, step_x: 24'h1_0000, step_y: 24'h1_0000, v: 16'sd128, t: 16'sd0};
    for (int i = 0; i < NSC; i++) begin
      @(negedge clk); cfg_we = 1; cfg_addr = SCALE_W'(i); cfg_data = sc[i];
    end
    @(negedge clk); cfg_we = 0;

    // reference
    exp_s2.delete();
    for (int i = 0; i < NSC; i++) begin
      ref_resize(int'(sc[i].out_h), int'(sc[i].out_w), longint'(sc[i].step_x), longint'(sc[i].step_y));
      ref_kernel(int'(sc[i].out_h), int'(sc[i].out_w));
      tmp.delete();
      foreach (cands[j]) begin
        tmp.push_back(longint'(signed'(cands[j].score)));
        all_c[i].push_back(cands[j]);
      end
      sort_ll(tmp);
      for (int j = (tmp.size() > TOP_N ? tmp.size() - TOP_N : 0); j < tmp.size(); j++)
        exp_s2.push_back(svm2_score(int'(tmp[j]), int'(sc[i].v), int'(sc[i].t)));
      $display("scale %0d: %0d NMS candidates", i, cands.size());
    end
    sort_ll(exp_s2);
    while (exp_s2.size() > TOP_K) void'(exp_s2.pop_front());

    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    t_run = 0;
    while (!done) begin
      @(negedge clk);
      t_run++;
      prop_ready = ($urandom % 4 != 0);
      if (prop_valid && prop_ready) got.push_back(prop_data);
    end
    $display("run took %0d cycles, %0d proposals", t_run, got.size());

    foreach (got[i]) got_s.push_back(longint'(got[i].score));
    checks++;
    if (got_s.size() != exp_s2.size()) begin
      failures++;
      $display("%0d proposals, expected %0d", got_s.size(), exp_s2.size());
    end
    for (int i = 0; i < got_s.size() && i < exp_s2.size(); i++) begin
      checks++;
      if (got_s[i] != exp_s2[i]) begin
        failures++;
        $display("proposal %0d: score %0d expected %0d", i, got_s[i], exp_s2[i]);
      end
    end
    foreach (got[i]) begin
      bit found;
      found = 0;
      checks++;
      if (got[i].scale < NSC)
        foreach (all_c[got[i].scale][j])
          if (all_c[got[i].scale][j].row == got[i].row && all_c[got[i].scale][j].col == got[i].col &&
              svm2_score(int'(signed'(all_c[got[i].scale][j].score)), int'(sc[got[i].scale].v),
                         int'(sc[got[i].scale].t)) == longint'(got[i].score))
            found = 1;
      if (!found) begin
        failures++;
        $display("proposal %0d (scale %0d row %0d col %0d) is not a candidate", i, got[i].scale, got[i].row, got[i].col);
      end
    end
    $display("mechanisms: conflicts=%0d stalls=%0d eol/flush=%0d h1 in=%0d pushed=%0d h2 in=%0d pushed=%0d",
             n_conflict, n_stall, n_eol, n_in1, n_push1, n_in2, n_push2);
    checks++; if (n_conflict == 0) begin failures++; $display("no resize conflict"); end
    checks++; if (n_stall == 0)    begin failures++; $display("no kernel stall"); end
    checks++; if (n_eol == 0)      begin failures++; $display("no end-of-line/flush"); end
    checks++; if (n_push1 == 0 || n_push1 == n_in1) begin failures++; $display("heap-I never pushed or never dropped"); end
    checks++; if (n_push2 == 0 || n_push2 == n_in2) begin failures++; $display("heap-II never pushed or never dropped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

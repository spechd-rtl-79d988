// tb_clustering_kernel: buckets of noisy copies of a few random centre
// hypervectors (about 4% of bits flipped, so members lie near 8% apart and
// groups near 50%) with theta = 25%. Each run must emit n-1 merges, n-G of
// them below the threshold, label every spectrum once with clusters equal to
// the groups, and mark as consensus a member of smallest summed Hamming
// distance in each group. Runs with complete and single linkage; a Ward run
// is checked for merge count and complete labelling.
module tb_clustering_kernel;
  import spechd_pkg::*;
  localparam int unsigned DHV = 512, MAX_N = 32;
  logic clk = 0, rst_n = 0;
  logic hv_we = 0, start = 0, full, busy, done;
  logic [DHV-1:0] hv_wdata;
  logic [31:0] hv_spec_id, chain_pushes, thr_merges, n_clusters;
  logic [5:0] count;
  logic [15:0] theta;
  linkage_e linkage;
  logic merge_valid, merge_ready, lab_valid, lab_ready;
  merge_rec_t merge_rec;
  label_rec_t lab_rec;
  int checks = 0, failures = 0;
  int n_merge, n_below, n_lab;
  int lab_cl [int];
  int lab_cf [int];

  always #5 clk = ~clk;
  clustering_kernel #(.DHV(DHV), .MAX_N(MAX_N)) dut (.clk, .rst_n, .hv_we, .hv_wdata, .hv_spec_id,
    .full, .count, .start, .theta, .linkage, .busy, .done, .merge_valid, .merge_ready, .merge_rec,
    .lab_valid, .lab_ready, .lab_rec, .chain_pushes, .thr_merges, .n_clusters);

  always @(negedge clk) begin
    merge_ready = ($urandom % 4) != 0;
    lab_ready   = ($urandom % 4) != 0;
  end
  always @(posedge clk) begin
    if (merge_valid && merge_ready) begin
      n_merge++;
      if (merge_rec.below_thr) n_below++;
      if ($test$plusargs("dbg")) $display("merge %0d %0d d=%0d sz=%0d", merge_rec.keep_idx, merge_rec.rm_idx, merge_rec.distance, merge_rec.size);
    end
    if (lab_valid && lab_ready) begin
      n_lab++;
      if (lab_cl.exists(int'(lab_rec.spec_id))) failures++;
      lab_cl[int'(lab_rec.spec_id)] = int'(lab_rec.cluster);
      lab_cf[int'(lab_rec.spec_id)] = int'(lab_rec.is_consensus);
    end
  end

  function automatic int hd(input logic [DHV-1:0] a, input logic [DHV-1:0] b);
    int s = 0;
    for (int i = 0; i < DHV; i++) s += int'(a[i] ^ b[i]);
    return s;
  endfunction

  task automatic run(input int nn, input int ng, input linkage_e lk);
    logic [DHV-1:0] ctr [8];
    logic [DHV-1:0] hv [MAX_N];
    int grp [MAX_N];
    int ids [MAX_N];
    int ngrp_used, cyc;
    n_merge = 0; n_below = 0; n_lab = 0;
    lab_cl.delete(); lab_cf.delete();
    for (int g = 0; g < ng; g++) for (int w = 0; w < DHV / 32; w++) ctr[g][w*32 +: 32] = $urandom;
    ngrp_used = 0;
    for (int i = 0; i < nn; i++) begin
      grp[i] = (i < ng) ? i : $urandom % ng;
      hv[i] = ctr[grp[i]];
      for (int f = 0; f < DHV / 25; f++) begin
        int bit_pos = $urandom % DHV;
        hv[i][bit_pos] = ~hv[i][bit_pos];
      end
      ids[i] = 1000 + i * 3;
    end
    for (int i = 0; i < nn; i++) begin
      @(negedge clk); hv_we = 1; hv_wdata = hv[i]; hv_spec_id = 32'(ids[i]);
    end
    @(negedge clk); hv_we = 0;
    checks++;
    if (count != 6'(nn)) failures++;
    theta = 16'd8192; linkage = lk; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 400000) begin @(posedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (n_merge != nn - 1 || n_lab != nn) begin
      failures++;
      $display("FAIL n=%0d: merges %0d labels %0d", nn, n_merge, n_lab);
    end
    if (lk == LINK_WARD) return;
    checks++;
    if (n_below != nn - ng || n_clusters != 32'(ng)) begin
      failures++;
      $display("FAIL n=%0d: below-threshold merges %0d (exp %0d), clusters %0d", nn, n_below, nn - ng, n_clusters);
    end
    for (int i = 0; i < nn; i++) for (int j = 0; j < i; j++) begin
      checks++;
      if ((grp[i] == grp[j]) != (lab_cl[ids[i]] == lab_cl[ids[j]])) failures++;
    end
    for (int g = 0; g < ng; g++) begin
      int best = 1 << 30, ncons = 0, cons_sum = -1;
      for (int m = 0; m < nn; m++) if (grp[m] == g) begin
        int s = 0;
        for (int o = 0; o < nn; o++) if (grp[o] == g && o != m) s += hd(hv[m], hv[o]);
        if (s < best) best = s;
        if (lab_cf[ids[m]] != 0) begin ncons++; cons_sum = s; end
      end
      checks++;
      if (ncons != 1 || cons_sum != best) begin
        failures++;
        $display("FAIL group %0d: %0d consensus, sum %0d vs best %0d", g, ncons, cons_sum, best);
      end
    end
  endtask

  initial begin
    hv_wdata = 0; hv_spec_id = 0; theta = 0; linkage = LINK_COMPLETE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2, 1, LINK_COMPLETE);
    run(2, 2, LINK_COMPLETE);
    run(32, 4, LINK_COMPLETE);
    run(20, 3, LINK_SINGLE);
    run(25, 5, LINK_WARD);
    run(17, 6, LINK_COMPLETE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

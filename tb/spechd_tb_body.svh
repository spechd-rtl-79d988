// Shared body of the end-to-end testbenches of spechd_top.
//
// The including module defines TB_DHV, TB_MAX_N (the top's sizes), and the
// macro SPECHD_DUT_PARAMS (a parameter override or nothing). Synthetic
// spectra are made from "peptide" groups: every member of a group shares the
// group's peak list with small m/z and intensity jitter, plus a peak at the
// precursor m/z (removed by the filter) and weak peaks below 1% of the base
// peak (removed by the threshold). Groups are placed in precursor buckets;
// buckets arrive in order. One bucket is larger than a kernel buffer and is
// split, one spectrum has only filtered peaks and is dropped, one spectrum
// has more peaks than the top-k buffer, the linkage input switches from
// complete to single half-way, and the label stream is held back for a while
// so that all kernels fill up and the dispatcher stalls.
//
// Checks: every non-empty spectrum is labelled once; two spectra share a
// cluster exactly when they come from the same group and the same bucket
// run; each cluster has one consensus; each run emits n-1 merges; and every
// mechanism above happened at least once.

  import spechd_pkg::*;

  localparam int unsigned NUM_ID = 1400, QL = 16;
  localparam int unsigned KW = 3;
  logic clk = 0, rst_n = 0;
  logic pk_valid = 0, pk_ready, flush = 0;
  peak_beat_t pk_beat;
  logic [31:0] inv_res = 32'd65536;         // resolution 1
  logic [15:0] theta = 16'd9830;            // 0.3
  linkage_e    linkage = LINK_COMPLETE;
  logic id_we = 0, lv_we = 0;
  logic [10:0] id_waddr = 0;
  logic [3:0]  lv_waddr = 0;
  logic [TB_DHV-1:0] id_wdata = 0, lv_wdata = 0, hv_data;
  logic hv_valid;
  spec_meta_t hv_meta;
  logic merge_valid, merge_ready = 1, lab_valid, lab_ready = 0;
  merge_rec_t merge_rec;
  label_rec_t lab_rec;
  logic [KW-1:0] merge_kernel, lab_kernel;
  logic [4:0] kernel_busy;
  logic bucket_open;
  logic [31:0] stall_cycles, bucket_splits, kernel_runs, empty_drops, thr_merges_total;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  spechd_top `SPECHD_DUT_PARAMS dut (
    .clk, .rst_n, .pk_valid, .pk_ready, .pk_beat, .flush, .inv_res, .theta, .linkage,
    .id_we, .id_waddr, .id_wdata, .lv_we, .lv_waddr, .lv_wdata,
    .hv_valid, .hv_data, .hv_meta,
    .merge_valid, .merge_ready, .merge_rec, .merge_kernel,
    .lab_valid, .lab_ready, .lab_rec, .lab_kernel,
    .kernel_busy, .bucket_open, .stall_cycles, .bucket_splits, .kernel_runs, .empty_drops,
    .thr_merges_total);

  // ---------------- bookkeeping ----------------
  int sp_group [int];      // spec id -> group
  int sp_run   [int];      // spec id -> bucket run
  bit sp_empty [int];
  int run_size [int];
  int lab_key  [int];      // spec id -> run*65536 + cluster
  int lab_cons [int];
  int lab_count = 0, merge_count = 0, below_count = 0, above_count = 0;
  int prec_drops = 0, weak_drops = 0, single_runs = 0;

  always @(posedge clk) begin
    if (merge_valid && merge_ready) begin
      merge_count++;
      if (merge_rec.below_thr) below_count++; else above_count++;
    end
    if (lab_valid && lab_ready) begin
      automatic int sid = int'(lab_rec.spec_id);
      lab_count++;
      checks++;
      if (lab_key.exists(sid) || !sp_run.exists(sid)) failures++;
      else begin
        lab_key[sid]  = sp_run[sid] * 65536 + int'(lab_rec.cluster);
        lab_cons[sid] = int'(lab_rec.is_consensus);
      end
    end
    if (pk_valid && pk_ready && pk_beat.keep && !dut.f_beat.keep) prec_drops++;
    if (dut.t_valid && dut.t_ready && dut.t_beat.keep && !dut.q_beat.keep) weak_drops++;
    if (|dut.k_start && linkage == LINK_SINGLE) single_runs++;
  end

  // ---------------- stimulus helpers ----------------
  function automatic logic [TB_DHV-1:0] rand_hv();
    logic [TB_DHV-1:0] v;
    for (int w = 0; w < TB_DHV / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic send_peak(input logic [31:0] sid, input logic [31:0] pmz, input logic [31:0] mz,
                           input logic [31:0] inten, input bit last);
    @(negedge clk);
    pk_valid = 1;
    pk_beat = '0;
    pk_beat.meta.spec_id = sid;
    pk_beat.meta.prec_mz = pmz;
    pk_beat.meta.charge  = 8'd2;
    pk_beat.mz    = mz;
    pk_beat.inten = inten;
    pk_beat.keep  = 1;
    pk_beat.last  = last;
    @(posedge clk);
    while (!pk_ready) @(posedge clk);
    @(negedge clk);
    pk_valid = 0;
  endtask

  // group peak lists
  logic [31:0] g_mz  [64][32];
  logic [31:0] g_int [64][32];
  int next_sid = 1;

  task automatic make_group(input int g);
    for (int p = 0; p < 32; p++) begin
      g_mz[g][p]  = 32'((150 + $urandom % 1300) << 16) + 32'(32768);
      g_int[g][p] = 32'(2000 + $urandom % 100000);
    end
  endtask

  // one spectrum of group g in bucket b; kind 0 normal, 1 empty, 2 long
  task automatic send_spectrum(input int g, input int b, input int run, input int kind);
    logic [31:0] pmz, sid;
    real pr;
    int npk;
    sid = 32'(next_sid++);
    pr  = (real'(b) + 0.5) / 2.0 + 1.00794 + (real'($urandom % 100) - 50.0) / 1000.0;
    pmz = 32'($rtoi(pr * 65536.0));
    sp_group[sid] = g;
    sp_run[sid]   = run;
    sp_empty[sid] = (kind == 1);
    if (kind == 1) begin
      send_peak(sid, pmz, pmz, 32'd5000, 0);
      send_peak(sid, pmz, pmz + 32'd100, 32'd900, 0);
      send_peak(sid, pmz, 32'(50 << 16), 32'd7000, 1);    // below the m/z range
      return;
    end
    if (!run_size.exists(run)) run_size[run] = 0;
    run_size[run]++;
    send_peak(sid, pmz, pmz, 32'd200000, 0);               // precursor peak
    npk = (kind == 2) ? 150 : 32;
    for (int p = 0; p < npk; p++) begin
      logic [31:0] mz, it;
      if (kind == 2) begin
        mz = 32'((150 + $urandom % 1300) << 16);
        it = 32'(3000 + $urandom % 50000);
      end else begin
        mz = g_mz[g][p] + 32'($urandom % 8000) - 32'd4000;
        it = g_int[g][p] + 32'($urandom % (g_int[g][p] / 10 + 1)) - g_int[g][p] / 20;
      end
      send_peak(sid, pmz, mz, it, 0);
    end
    for (int p = 0; p < 3; p++)                            // weak peaks, < 1%
      send_peak(sid, pmz, 32'((160 + $urandom % 1200) << 16), 32'(10 + $urandom % 20), p == 2);
  endtask

  // ---------------- test ----------------
  initial begin
    logic [TB_DHV-1:0] lv;
    int run, gid, bkt, cyc;
    int order[$];
    int nruns;
    pk_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // item memories: random IDs, levels by progressive bit flips
    for (int i = 0; i < NUM_ID; i++) begin
      @(negedge clk); id_we = 1; id_waddr = 11'(i); id_wdata = rand_hv();
    end
    lv = rand_hv();
    for (int q = 0; q < QL; q++) begin
      @(negedge clk); id_we = 0; lv_we = 1; lv_waddr = 4'(q); lv_wdata = lv;
      for (int f = 0; f < TB_DHV / 32; f++) begin
        automatic int bp = $urandom % TB_DHV;
        lv[bp] = ~lv[bp];
      end
    end
    @(negedge clk); lv_we = 0;

    run = 0; gid = 0; bkt = 800;
    // bucket A: 2 groups x 4, plus the long spectrum as its own group
    make_group(0); make_group(1);
    order = '{0,1,0,1,1,0,0,1};
    foreach (order[i]) send_spectrum(order[i], bkt, run, 0);
    send_spectrum(2, bkt, run, 2);
    run++; bkt += 20;
    // bucket B: 3 groups x 3, plus an empty spectrum
    make_group(3); make_group(4); make_group(5);
    order = '{3,4,5,5,4,3,3,5,4};
    foreach (order[i]) begin
      send_spectrum(order[i], bkt, run, 0);
      if (i == 4) send_spectrum(6, bkt, run, 1);
    end
    run++; bkt += 20;
    // bucket C: one group, larger than a kernel buffer -> split
    make_group(7);
    for (int i = 0; i < TB_MAX_N + 4; i++) send_spectrum(7, bkt, run + (i >= TB_MAX_N), 0);
    run += 2; bkt += 20;
    // switch linkage; small buckets while results are held back until the
    // dispatcher has stalled for a while
    linkage = LINK_SINGLE;
    fork
      begin
        int w = 0;
        while (stall_cycles < 200 && w < 200000) begin @(posedge clk); w++; end
        @(negedge clk); lab_ready = 1;
      end
    join_none
    for (int b = 0; b < 7; b++) begin
      make_group(8 + 2 * b); make_group(9 + 2 * b);
      send_spectrum(8 + 2 * b, bkt, run, 0);
      send_spectrum(9 + 2 * b, bkt, run, 0);
      send_spectrum(8 + 2 * b, bkt, run, 0);
      run++; bkt += 20;
    end
    nruns = run;
    // let results flow, drain the pipeline, close the last bucket
    lab_ready = 1;
    repeat (500) @(posedge clk);
    @(negedge clk); flush = 1;
    cyc = 0;
    while ((lab_count < run_size.sum() || |kernel_busy || bucket_open) && cyc < 2000000) begin
      @(posedge clk); cyc++;
    end
    repeat (20) @(posedge clk);

    // ---------------- checks ----------------
    foreach (sp_run[s]) begin
      checks++;
      if (sp_empty[s] == lab_key.exists(s)) begin
        failures++;
        if (failures < 10) $display("FAIL spectrum %0d labelled=%0d empty=%0d", s, lab_key.exists(s), sp_empty[s]);
      end
    end
    foreach (lab_key[s]) foreach (lab_key[t]) if (s < t) begin
      automatic bit same_exp = (sp_group[s] == sp_group[t]) && (sp_run[s] == sp_run[t]);
      checks++;
      if (same_exp != (lab_key[s] == lab_key[t])) begin
        failures++;
        if (failures < 10) $display("FAIL pair %0d/%0d: expected same=%0d", s, t, same_exp);
      end
    end
    begin
      int ncons [int];
      foreach (lab_key[s]) begin
        if (!ncons.exists(lab_key[s])) ncons[lab_key[s]] = 0;
        ncons[lab_key[s]] += lab_cons[s];
      end
      foreach (ncons[k]) begin
        checks++;
        if (ncons[k] != 1) failures++;
      end
    end
    begin
      int exp_merges = 0;
      foreach (run_size[r]) exp_merges += run_size[r] - 1;
      checks++;
      if (merge_count != exp_merges || kernel_runs != 32'(nruns)) begin
        failures++;
        $display("FAIL merges %0d (exp %0d), kernel runs %0d (exp %0d)", merge_count, exp_merges, kernel_runs, nruns);
      end
    end
    $display("mechanisms: precursor drops %0d, weak-peak drops %0d, long spectra %0d, empty drops %0d,",
             prec_drops, weak_drops, dut.u_topk.long_spectra, empty_drops);
    $display("  bucket splits %0d, dispatcher stall cycles %0d, kernel runs %0d, single-linkage runs %0d,",
             bucket_splits, stall_cycles, kernel_runs, single_runs);
    $display("  merges below/above threshold %0d/%0d, labels %0d", below_count, above_count, lab_count);
    checks++; if (prec_drops == 0) failures++;
    checks++; if (weak_drops == 0) failures++;
    checks++; if (dut.u_topk.long_spectra == 0) failures++;
    checks++; if (empty_drops == 0) failures++;
    checks++; if (bucket_splits == 0) failures++;
    checks++; if (stall_cycles == 0) failures++;
    checks++; if (single_runs == 0) failures++;
    checks++; if (below_count == 0 || above_count == 0 || thr_merges_total != 32'(below_count)) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

// tb_nnchain_hac: random matrices of distinct distances (so the dendrogram is
// unique) are loaded into a working matrix; the NN-chain run must give the
// same multiset of merge distances and the same threshold partition as a
// naive agglomerative clustering computed here, for complete and single
// linkage. Ward runs are checked for structure: n-1 merges, sizes adding up,
// all spectra in one cluster at the end. The dendrogram stream is stalled at
// random.
module tb_nnchain_hac;
  import spechd_pkg::*;
  localparam int unsigned MAX_N = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0]  n;
  logic [15:0] theta;
  linkage_e    linkage;
  logic        m_rd_en, m_wr_en, d_wr_en, t_wr_en = 0;
  logic [4:0]  m_rd_i, m_rd_j, m_wr_i, m_wr_j, t_wr_i, t_wr_j, tc_idx;
  logic [15:0] m_rd_data, m_wr_data, t_wr_data;
  logic        merge_valid, merge_ready;
  merge_rec_t  merge_rec;
  logic [5:0]  tc_next, tc_cnt;
  logic        busy, done;
  logic [31:0] chain_pushes, thr_merges;
  int checks = 0, failures = 0;
  int D [MAX_N][MAX_N];
  int got_d[$];
  int got_sz[$];

  always #5 clk = ~clk;

  tri_matrix_ram #(.MAX_N(MAX_N), .DW(16)) u_mat (
    .clk, .rd_en(m_rd_en), .rd_i(m_rd_i), .rd_j(m_rd_j), .rd_data(m_rd_data),
    .wr_en(t_wr_en | m_wr_en), .wr_i(t_wr_en ? t_wr_i : m_wr_i), .wr_j(t_wr_en ? t_wr_j : m_wr_j),
    .wr_data(t_wr_en ? t_wr_data : m_wr_data));

  nnchain_hac #(.MAX_N(MAX_N)) dut (
    .clk, .rst_n, .start, .n, .theta, .linkage,
    .m_rd_en, .m_rd_i, .m_rd_j, .m_rd_data, .m_wr_en, .m_wr_i, .m_wr_j, .m_wr_data,
    .merge_valid, .merge_ready, .merge_rec, .tc_idx, .tc_next, .tc_cnt,
    .busy, .done, .chain_pushes, .thr_merges);

  always @(posedge clk) if (merge_valid && merge_ready) begin
    got_d.push_back(int'(merge_rec.distance));
    got_sz.push_back(int'(merge_rec.size));
  end
  always @(negedge clk) merge_ready = ($urandom % 3) != 0;

  function automatic int find(ref int par[MAX_N], input int x);
    while (par[x] != x) x = par[x];
    return x;
  endfunction

  task automatic run(input int nn, input linkage_e lk);
    int M [MAX_N][MAX_N];
    bit act [MAX_N];
    int exp_d[$];
    int par [MAX_N];
    int dut_cl [MAX_N];
    int vals[$];
    int np, cyc, th, total;
    // distinct distances
    np = nn * (nn - 1) / 2;
    for (int v = 1; v <= np; v++) vals.push_back(v * 50);
    vals.shuffle();
    for (int i = 0; i < nn; i++) for (int j = 0; j < i; j++) begin
      D[i][j] = vals.pop_back(); D[j][i] = D[i][j];
    end
    th = 50 * (np / 3);
    for (int i = 0; i < nn; i++) for (int j = 0; j < i; j++) begin
      @(negedge clk);
      t_wr_en = 1; t_wr_i = 5'(i); t_wr_j = 5'(j); t_wr_data = 16'(D[i][j]);
    end
    @(negedge clk); t_wr_en = 0;
    got_d.delete(); got_sz.delete();
    n = 6'(nn); theta = 16'(th); linkage = lk; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 200000) begin @(posedge clk); cyc++; end
    @(negedge clk);
    // naive reference: repeatedly merge the globally closest pair
    for (int i = 0; i < nn; i++) begin
      act[i] = 1; par[i] = i;
      for (int j = 0; j < nn; j++) M[i][j] = D[i][j];
    end
    for (int s = 0; s < nn - 1; s++) begin
      int bi = -1, bj = -1, bd = 1 << 30;
      for (int i = 0; i < nn; i++) if (act[i]) for (int j = i + 1; j < nn; j++)
        if (act[j] && M[i][j] < bd) begin bd = M[i][j]; bi = i; bj = j; end
      exp_d.push_back(bd);
      if (bd < th) par[find(par, bj)] = find(par, bi);
      for (int k = 0; k < nn; k++) if (act[k] && k != bi && k != bj) begin
        M[bi][k] = (lk == LINK_SINGLE) ? ((M[bi][k] < M[bj][k]) ? M[bi][k] : M[bj][k])
                                       : ((M[bi][k] > M[bj][k]) ? M[bi][k] : M[bj][k]);
        M[k][bi] = M[bi][k];
      end
      act[bj] = 0;
    end
    checks++;
    if (got_d.size() != nn - 1 && nn > 0) begin
      failures++;
      $display("FAIL n=%0d: %0d merges", nn, got_d.size());
    end
    if (lk != LINK_WARD) begin
      exp_d.sort(); got_d.sort();
      checks++;
      if (exp_d != got_d) begin
        failures++;
        $display("FAIL n=%0d linkage %0d: merge distances differ", nn, lk);
      end
      // threshold partition from the lists
      for (int i = 0; i < MAX_N; i++) dut_cl[i] = -1;
      total = 0;
      for (int c = 0; c < nn; c++) begin
        tc_idx = 5'(c); #1;
        if (tc_cnt != 0) begin
          int x = c, len = 0;
          int cnt_c = int'(tc_cnt);
          while (x != MAX_N && len <= MAX_N) begin
            dut_cl[x] = c; len++; tc_idx = 5'(x); #1; x = int'(tc_next);
          end
          checks++;
          if (len != cnt_c) failures++;
          total += len;
        end
      end
      checks++;
      if (total != nn) failures++;
      for (int i = 0; i < nn; i++) for (int j = 0; j < i; j++) begin
        checks++;
        if ((find(par, i) == find(par, j)) != (dut_cl[i] == dut_cl[j])) failures++;
      end
    end else begin
      checks++;
      if (nn > 1 && got_sz[got_sz.size() - 1] != nn) failures++;
    end
  endtask

  initial begin
    n = 0; theta = 0; linkage = LINK_COMPLETE; tc_idx = 0; t_wr_i = 0; t_wr_j = 0; t_wr_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(2, LINK_COMPLETE);
    run(3, LINK_SINGLE);
    run(32, LINK_COMPLETE);
    run(32, LINK_SINGLE);
    run(20, LINK_WARD);
    for (int t = 0; t < 12; t++) run(2 + $urandom % 31, linkage_e'(t % 3));
    checks++;
    if (chain_pushes == 0 || thr_merges == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

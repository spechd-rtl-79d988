// tb_consensus_unit: random partitions of up to 32 spectra into member lists
// and random distance matrices; every spectrum must be labelled once with
// its list head, and the consensus flag must sit on the member with the
// smallest summed distance to its cluster (first in list order on ties).
module tb_consensus_unit;
  localparam int unsigned MAX_N = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] n, tc_next, tc_cnt;
  logic [4:0] tc_idx, o_rd_i, o_rd_j, lab_local, lab_cluster;
  logic o_rd_en, lab_valid, lab_ready, lab_cons, busy, done;
  logic [15:0] o_rd_data;
  logic [31:0] n_clusters;
  int D [MAX_N][MAX_N];
  int nxt [MAX_N];
  int cntm [MAX_N];
  int checks = 0, failures = 0;
  int lab_seen [MAX_N];
  int lab_cl [MAX_N];
  int lab_cf [MAX_N];

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (o_rd_en) o_rd_data <= 16'(D[o_rd_i][o_rd_j]);
  assign tc_next = 6'(nxt[tc_idx]);
  assign tc_cnt  = 6'(cntm[tc_idx]);
  always @(negedge clk) lab_ready = ($urandom % 4) != 0;
  always @(posedge clk) if (lab_valid && lab_ready) begin
    lab_seen[lab_local]++;
    lab_cl[lab_local] = int'(lab_cluster);
    lab_cf[lab_local] = int'(lab_cons);
  end

  consensus_unit #(.MAX_N(MAX_N)) dut (.clk, .rst_n, .start, .n, .tc_idx, .tc_next, .tc_cnt,
    .o_rd_en, .o_rd_i, .o_rd_j, .o_rd_data, .lab_valid, .lab_ready, .lab_local, .lab_cluster,
    .lab_cons, .busy, .done, .n_clusters);

  task automatic run(input int nn, input int ngroups);
    int grp [MAX_N];
    int members[$];
    int head, cyc, ncl;
    for (int i = 0; i < MAX_N; i++) begin
      nxt[i] = MAX_N; cntm[i] = 0; lab_seen[i] = 0; lab_cl[i] = -1; lab_cf[i] = 0;
      for (int j = 0; j < MAX_N; j++) D[i][j] = 0;
    end
    for (int i = 0; i < nn; i++) begin
      grp[i] = $urandom % ngroups;
      for (int j = 0; j < i; j++) begin
        D[i][j] = (($urandom % 8) == 0) ? 100 : $urandom % 3000;  // some ties
        D[j][i] = D[i][j];
      end
    end
    ncl = 0;
    for (int g = 0; g < ngroups; g++) begin
      members.delete();
      for (int i = 0; i < nn; i++) if (grp[i] == g) members.push_back(i);
      if (members.size() == 0) continue;
      ncl++;
      head = members.pop_front();
      members.shuffle();
      members.push_front(head);
      cntm[head] = members.size();
      for (int p = 0; p + 1 < members.size(); p++) nxt[members[p]] = members[p + 1];
    end
    @(negedge clk); n = 6'(nn); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 100000) begin @(posedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (n_clusters != 32'(ncl)) failures++;
    // reference
    for (int c = 0; c < nn; c++) if (cntm[c] != 0) begin
      int best = 1 << 30, bestm = c, m = c;
      while (m != MAX_N) begin
        int s = 0, o = c;
        while (o != MAX_N) begin if (o != m) s += D[m][o]; o = nxt[o]; end
        if (s < best) begin best = s; bestm = m; end
        m = nxt[m];
      end
      m = c;
      while (m != MAX_N) begin
        checks++;
        if (lab_seen[m] != 1 || lab_cl[m] != c || lab_cf[m] != int'(m == bestm)) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d member %0d: seen %0d cl %0d (exp %0d) cons %0d (exp %0d)",
                                      nn, m, lab_seen[m], lab_cl[m], c, lab_cf[m], m == bestm);
        end
        m = nxt[m];
      end
    end
  endtask

  initial begin
    n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 1);
    run(5, 1);
    run(32, 4);
    run(32, 32);
    for (int t = 0; t < 10; t++) run(1 + $urandom % 32, 1 + $urandom % 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

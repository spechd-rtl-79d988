// clustering_kernel: one SpecHD clustering kernel, clustering one bucket.
//
// Encoded spectra of a bucket are written into the local hypervector buffer
// (up to MAX_N of them) while the kernel is idle. start then runs three
// phases in sequence: distance_unit fills the working and the original
// lower-triangular distance matrices; nnchain_hac clusters on the working
// matrix, streaming the dendrogram and building threshold clusters;
// consensus_unit picks each threshold cluster's consensus on the original
// matrix and streams one label per spectrum, carrying the global spectrum id
// stored next to its hypervector. The buffer is then empty again.
// The phase structure follows the source design's kernel; loading the bucket
// into a private buffer (the source design reads it from HBM) and running the
// phases strictly one after the other are this design's choices.
//
// Interface: hv_we/hv_wdata/hv_spec_id load one spectrum per clock when
// busy is low and full is low. start (one clock, busy low) with theta (Q1.15)
// and linkage sampled. merge_* and lab_* are valid/ready streams; done
// pulses at the end of the run.
module clustering_kernel
  import spechd_pkg::*;
#(
  parameter int unsigned DHV   = DHV_DEFAULT,
  parameter int unsigned MAX_N = 256
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   hv_we,
  input  logic [DHV-1:0]         hv_wdata,
  input  logic [31:0]            hv_spec_id,
  output logic                   full,
  output logic [$clog2(MAX_N):0] count,
  input  logic                   start,
  input  logic [15:0]            theta,
  input  linkage_e               linkage,
  output logic                   busy,
  output logic                   done,
  output logic                   merge_valid,
  input  logic                   merge_ready,
  output merge_rec_t             merge_rec,
  output logic                   lab_valid,
  input  logic                   lab_ready,
  output label_rec_t             lab_rec,
  output logic [31:0]            chain_pushes,
  output logic [31:0]            thr_merges,
  output logic [31:0]            n_clusters
);
  localparam int unsigned IW = $clog2(MAX_N);

  typedef enum logic [1:0] {K_IDLE, K_DIST, K_HAC, K_CONS} phase_e;
  phase_e phase;

  logic [DHV-1:0] hv_mem [MAX_N];
  logic [31:0]    id_mem [MAX_N];
  logic [IW:0]    n_r;
  logic [15:0]    theta_r;
  linkage_e       link_r;
  logic           dist_start, hac_start, cons_start;

  // hypervector buffer
  logic [IW-1:0]  hv_raddr;
  logic [DHV-1:0] hv_rdata;
  always_ff @(posedge clk) begin
    if (hv_we && !full && phase == K_IDLE) begin
      hv_mem[n_r[IW-1:0]] <= hv_wdata;
      id_mem[n_r[IW-1:0]] <= hv_spec_id;
    end
    hv_rdata <= hv_mem[hv_raddr];
  end

  // distance matrix fill
  logic          du_wr_en, du_busy, du_done;
  logic [IW-1:0] du_wr_i, du_wr_j;
  logic [15:0]   du_wr_data;
  distance_unit #(.DHV(DHV), .MAX_N(MAX_N)) u_dist (
    .clk, .rst_n, .start(dist_start), .n(n_r),
    .hv_raddr, .hv_rdata,
    .wr_en(du_wr_en), .wr_i(du_wr_i), .wr_j(du_wr_j), .wr_data(du_wr_data),
    .busy(du_busy), .done(du_done));

  // working matrix: written by the distance unit, then owned by NN-chain
  logic          h_rd_en, h_wr_en;
  logic [IW-1:0] h_rd_i, h_rd_j, h_wr_i, h_wr_j;
  logic [15:0]   h_rd_data, h_wr_data;
  logic          h_busy, h_done;
  logic [IW-1:0] tc_idx;
  logic [IW:0]   tc_next, tc_cnt;
  tri_matrix_ram #(.MAX_N(MAX_N), .DW(16)) u_work (
    .clk, .rd_en(h_rd_en), .rd_i(h_rd_i), .rd_j(h_rd_j), .rd_data(h_rd_data),
    .wr_en  (phase == K_DIST ? du_wr_en   : h_wr_en),
    .wr_i   (phase == K_DIST ? du_wr_i    : h_wr_i),
    .wr_j   (phase == K_DIST ? du_wr_j    : h_wr_j),
    .wr_data(phase == K_DIST ? du_wr_data : h_wr_data));

  nnchain_hac #(.MAX_N(MAX_N)) u_hac (
    .clk, .rst_n, .start(hac_start), .n(n_r), .theta(theta_r), .linkage(link_r),
    .m_rd_en(h_rd_en), .m_rd_i(h_rd_i), .m_rd_j(h_rd_j), .m_rd_data(h_rd_data),
    .m_wr_en(h_wr_en), .m_wr_i(h_wr_i), .m_wr_j(h_wr_j), .m_wr_data(h_wr_data),
    .merge_valid, .merge_ready, .merge_rec,
    .tc_idx, .tc_next, .tc_cnt,
    .busy(h_busy), .done(h_done), .chain_pushes, .thr_merges);

  // original matrix: written once, read by the consensus unit
  logic          o_rd_en;
  logic [IW-1:0] o_rd_i, o_rd_j;
  logic [15:0]   o_rd_data;
  tri_matrix_ram #(.MAX_N(MAX_N), .DW(16)) u_orig (
    .clk, .rd_en(o_rd_en), .rd_i(o_rd_i), .rd_j(o_rd_j), .rd_data(o_rd_data),
    .wr_en(du_wr_en), .wr_i(du_wr_i), .wr_j(du_wr_j), .wr_data(du_wr_data));

  logic          c_busy, c_done, c_lab_cons;
  logic [IW-1:0] c_lab_local, c_lab_cluster;
  consensus_unit #(.MAX_N(MAX_N)) u_cons (
    .clk, .rst_n, .start(cons_start), .n(n_r),
    .tc_idx, .tc_next, .tc_cnt,
    .o_rd_en, .o_rd_i, .o_rd_j, .o_rd_data,
    .lab_valid, .lab_ready, .lab_local(c_lab_local), .lab_cluster(c_lab_cluster),
    .lab_cons(c_lab_cons), .busy(c_busy), .done(c_done), .n_clusters);

  always_comb begin
    lab_rec.spec_id      = id_mem[c_lab_local];
    lab_rec.local_idx    = 16'(c_lab_local);
    lab_rec.cluster      = 16'(c_lab_cluster);
    lab_rec.is_consensus = c_lab_cons;
    full  = (n_r == (IW+1)'(MAX_N));
    count = n_r;
    busy  = (phase != K_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase      <= K_IDLE;
      n_r        <= '0;
      theta_r    <= '0;
      link_r     <= LINK_COMPLETE;
      dist_start <= 1'b0;
      hac_start  <= 1'b0;
      cons_start <= 1'b0;
      done       <= 1'b0;
    end else begin
      dist_start <= 1'b0;
      hac_start  <= 1'b0;
      cons_start <= 1'b0;
      done       <= 1'b0;
      case (phase)
        K_IDLE: begin
          if (hv_we && !full) n_r <= n_r + 1'b1;
          if (start) begin
            theta_r    <= theta;
            link_r     <= linkage;
            dist_start <= 1'b1;
            phase      <= K_DIST;
          end
        end
        K_DIST: if (du_done) begin
          hac_start <= 1'b1;
          phase     <= K_HAC;
        end
        K_HAC: if (h_done) begin
          cons_start <= 1'b1;
          phase      <= K_CONS;
        end
        K_CONS: if (c_done) begin
          phase <= K_IDLE;
          n_r   <= '0;
          done  <= 1'b1;
        end
        default: phase <= K_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> phase == K_IDLE);
endmodule

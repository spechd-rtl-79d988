// spechd_top: SpecHD spectrum clustering datapath, from peak stream to
// dendrograms, cluster labels and consensus spectra.
//
// Dataflow. Raw peaks, each carrying its spectrum's metadata, pass the
// preprocessing chain spectra_filter (precursor peaks) -> topk_selector
// (bitonic top-k) -> thresholding_normalizer (1% of base peak, scaling,
// quantization). bucket_calc attaches the precursor bucket. One
// idlevel_encoder turns each spectrum into a DHV-bit hypervector. The bucket
// dispatcher gathers consecutive hypervectors of the same bucket into one of
// N_KERNELS clustering_kernel instances; a change of bucket, a full kernel
// buffer (bucket split) or flush closes the open kernel and starts it, and the
// next kernel in round-robin order is opened. The input stalls while that
// kernel is still busy. Dendrogram records and labels of all kernels are
// merged by round-robin arbiters and tagged with the kernel number.
//
// The chain of blocks, the single encoder and the five kernels are the
// source design's arrangement; there, preprocessing sits in a computational
// SSD, and encoded spectra travel through HBM, while here every link is a
// direct valid/ready stream and the encoded stream is only tapped out
// (hv_valid/hv_data). The dispatch policy and all stream interfaces are this
// design's. Spectra must arrive sorted by bucket (the source design sorts by
// precursor m/z), else a bucket is clustered in several runs.
//
// Configuration (inv_res, theta, linkage) is sampled per spectrum and per
// kernel run. The item memories must be loaded through id_* and lv_* before
// spectra are sent.
module spechd_top
  import spechd_pkg::*;
#(
  parameter int unsigned DHV       = DHV_DEFAULT,
  parameter int unsigned N_KERNELS = 5,
  parameter int unsigned MAX_N     = 256,
  parameter int unsigned NUM_ID    = 1400,
  parameter int unsigned Q_LEVELS  = 16,
  parameter int unsigned SORT_N    = 128,
  parameter int unsigned TOPK      = 50,
  parameter int unsigned MZ_MIN    = 101,
  parameter logic [31:0] PREC_TOL  = 32'd3277
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // raw peaks
  input  logic                         pk_valid,
  output logic                         pk_ready,
  input  peak_beat_t                   pk_beat,
  input  logic                         flush,       // end of input: start the open kernel
  // configuration
  input  logic [31:0]                  inv_res,     // 1/resolution, Q16.16
  input  logic [15:0]                  theta,       // threshold, Q1.15
  input  linkage_e                     linkage,
  input  logic                         id_we,
  input  logic [$clog2(NUM_ID)-1:0]    id_waddr,
  input  logic [DHV-1:0]               id_wdata,
  input  logic                         lv_we,
  input  logic [$clog2(Q_LEVELS)-1:0]  lv_waddr,
  input  logic [DHV-1:0]               lv_wdata,
  // encoded spectrum tap (towards external memory)
  output logic                         hv_valid,
  output logic [DHV-1:0]               hv_data,
  output spec_meta_t                   hv_meta,
  // results
  output logic                         merge_valid,
  input  logic                         merge_ready,
  output merge_rec_t                   merge_rec,
  output logic [$clog2(N_KERNELS)-1:0] merge_kernel,
  output logic                         lab_valid,
  input  logic                         lab_ready,
  output label_rec_t                   lab_rec,
  output logic [$clog2(N_KERNELS)-1:0] lab_kernel,
  // status
  output logic [N_KERNELS-1:0]         kernel_busy,
  output logic                         bucket_open,
  output logic [31:0]                  stall_cycles,
  output logic [31:0]                  bucket_splits,
  output logic [31:0]                  kernel_runs,
  output logic [31:0]                  empty_drops,
  output logic [31:0]                  thr_merges_total
);
  localparam int unsigned IW = $clog2(MAX_N);
  localparam int unsigned KW = $clog2(N_KERNELS);

  // ---------------- preprocessing ----------------
  logic        f_valid, f_ready, t_valid, t_ready, q_valid, q_ready;
  peak_beat_t  f_beat, t_beat;
  qpeak_beat_t q_beat, e_beat;

  spectra_filter #(.PREC_TOL(PREC_TOL), .MZ_MIN(MZ_MIN), .NUM_ID(NUM_ID)) u_filter (
    .in_valid(pk_valid), .in_ready(pk_ready), .in_beat(pk_beat),
    .out_valid(f_valid), .out_ready(f_ready), .out_beat(f_beat));

  topk_selector #(.SORT_N(SORT_N), .TOPK(TOPK)) u_topk (
    .clk, .rst_n,
    .in_valid(f_valid), .in_ready(f_ready), .in_beat(f_beat),
    .out_valid(t_valid), .out_ready(t_ready), .out_beat(t_beat));

  thresholding_normalizer #(.Q_LEVELS(Q_LEVELS), .MZ_MIN(MZ_MIN)) u_norm (
    .clk, .rst_n,
    .in_valid(t_valid), .in_ready(t_ready), .in_beat(t_beat),
    .out_valid(q_valid), .out_ready(q_ready), .out_beat(q_beat));

  logic [31:0] bucket;
  bucket_calc u_bucket (.prec_mz(q_beat.meta.prec_mz), .charge(q_beat.meta.charge),
                        .inv_res, .bucket);
  always_comb begin
    e_beat             = q_beat;
    e_beat.meta.bucket = bucket;
  end

  // ---------------- encoder ----------------
  logic           enc_valid, enc_ready;
  logic [DHV-1:0] enc_hv;
  spec_meta_t     enc_meta;

  idlevel_encoder #(.DHV(DHV), .NUM_ID(NUM_ID), .Q_LEVELS(Q_LEVELS), .MAXP(TOPK)) u_enc (
    .clk, .rst_n,
    .id_we, .id_waddr, .id_wdata, .lv_we, .lv_waddr, .lv_wdata,
    .in_valid(q_valid), .in_ready(q_ready), .in_beat(e_beat),
    .out_valid(enc_valid), .out_ready(enc_ready), .out_hv(enc_hv), .out_meta(enc_meta),
    .empty_drops);

  assign hv_valid = enc_valid && enc_ready;
  assign hv_data  = enc_hv;
  assign hv_meta  = enc_meta;

  // ---------------- bucket dispatcher ----------------
  logic [KW-1:0]      cur_k;
  logic [31:0]        cur_bucket;
  logic [IW:0]        cur_cnt;
  logic [N_KERNELS-1:0] k_we, k_start, k_full;
  logic               close_now;

  always_comb begin
    enc_ready = 1'b0;
    close_now = 1'b0;
    k_we      = '0;
    k_start   = '0;
    if (enc_valid) begin
      if (!bucket_open) begin
        if (!kernel_busy[cur_k]) begin
          enc_ready   = 1'b1;
          k_we[cur_k] = 1'b1;
        end
      end else if (enc_meta.bucket == cur_bucket && cur_cnt < (IW+1)'(MAX_N)) begin
        enc_ready   = 1'b1;
        k_we[cur_k] = 1'b1;
      end else begin
        close_now = 1'b1;
      end
    end else if (flush && bucket_open) begin
      close_now = 1'b1;
    end
    if (close_now) k_start[cur_k] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bucket_open   <= 1'b0;
      cur_k         <= '0;
      cur_bucket    <= '0;
      cur_cnt       <= '0;
      stall_cycles  <= '0;
      bucket_splits <= '0;
      kernel_runs   <= '0;
    end else begin
      if (enc_valid && !bucket_open && kernel_busy[cur_k]) stall_cycles <= stall_cycles + 1;
      if (enc_valid && enc_ready) begin
        if (!bucket_open) begin
          bucket_open <= 1'b1;
          cur_bucket  <= enc_meta.bucket;
          cur_cnt     <= 1;
        end else begin
          cur_cnt <= cur_cnt + 1'b1;
        end
      end
      if (close_now) begin
        bucket_open <= 1'b0;
        kernel_runs <= kernel_runs + 1;
        cur_k       <= (cur_k == KW'(N_KERNELS - 1)) ? '0 : cur_k + 1'b1;
        if (enc_valid && enc_meta.bucket == cur_bucket) bucket_splits <= bucket_splits + 1;
      end
    end
  end

  // ---------------- clustering kernels ----------------
  logic [N_KERNELS-1:0]                    km_valid, km_ready, kl_valid, kl_ready, k_done;
  logic [N_KERNELS-1:0][$bits(merge_rec_t)-1:0] km_data;
  logic [N_KERNELS-1:0][$bits(label_rec_t)-1:0] kl_data;
  logic [31:0] k_thr [N_KERNELS];

  for (genvar g = 0; g < N_KERNELS; g++) begin : g_kernel
    merge_rec_t  mrec;
    label_rec_t  lrec;
    logic [31:0] pushes, ncl;
    logic [IW:0] cnt;
    clustering_kernel #(.DHV(DHV), .MAX_N(MAX_N)) u_kernel (
      .clk, .rst_n,
      .hv_we(k_we[g]), .hv_wdata(enc_hv), .hv_spec_id(enc_meta.spec_id),
      .full(k_full[g]), .count(cnt),
      .start(k_start[g]), .theta, .linkage,
      .busy(kernel_busy[g]), .done(k_done[g]),
      .merge_valid(km_valid[g]), .merge_ready(km_ready[g]), .merge_rec(mrec),
      .lab_valid(kl_valid[g]), .lab_ready(kl_ready[g]), .lab_rec(lrec),
      .chain_pushes(pushes), .thr_merges(k_thr[g]), .n_clusters(ncl));
    assign km_data[g] = mrec;
    assign kl_data[g] = lrec;
  end

  always_comb begin
    thr_merges_total = '0;
    for (int g = 0; g < N_KERNELS; g++) thr_merges_total = thr_merges_total + k_thr[g];
  end

  logic [$bits(merge_rec_t)-1:0] m_out;
  logic [$bits(label_rec_t)-1:0] l_out;
  rr_arbiter #(.N(N_KERNELS), .W($bits(merge_rec_t))) u_marb (
    .clk, .rst_n, .in_valid(km_valid), .in_ready(km_ready), .in_data(km_data),
    .out_valid(merge_valid), .out_ready(merge_ready), .out_data(m_out), .out_src(merge_kernel));
  rr_arbiter #(.N(N_KERNELS), .W($bits(label_rec_t))) u_larb (
    .clk, .rst_n, .in_valid(kl_valid), .in_ready(kl_ready), .in_data(kl_data),
    .out_valid(lab_valid), .out_ready(lab_ready), .out_data(l_out), .out_src(lab_kernel));
  assign merge_rec = merge_rec_t'(m_out);
  assign lab_rec   = label_rec_t'(l_out);

  // the open kernel is never started while busy and never written when full
  assert property (@(posedge clk) disable iff (!rst_n)
                   (k_we & k_full) == '0 && (k_start & kernel_busy) == '0);
endmodule

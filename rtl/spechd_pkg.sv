// spechd_pkg: types and constants shared by the SpecHD clustering datapath.
//
// Number formats (this design's choice; the source description gives none):
//   m/z values are unsigned Q16.16 fixed point, intensities are 32-bit
//   unsigned integers, distances are the normalized Hamming distance in
//   unsigned Q1.15 (16 bits, the width the source design uses for its
//   distance matrix). Hypervectors are DHV bits wide; 2048 is the
//   dimensionality the source design evaluates.
package spechd_pkg;

  localparam int unsigned DHV_DEFAULT = 2048;

  // Fixed-point m/z of the charge carrier used by the bucket equation,
  // 1.00794 * 65536 rounded to the nearest integer.
  localparam logic [31:0] PROTON_Q16 = 32'd66056;

  // Per-spectrum metadata travelling with every peak beat.
  typedef struct packed {
    logic [31:0] spec_id;   // global spectrum number given by the host
    logic [31:0] prec_mz;   // precursor m/z, Q16.16
    logic [7:0]  charge;    // precursor charge state
    logic [31:0] bucket;    // precursor bucket, filled in by bucket_calc
  } spec_meta_t;

  // Raw peak beat. keep=0 marks a placeholder that only carries 'last'.
  typedef struct packed {
    spec_meta_t  meta;
    logic [31:0] mz;        // Q16.16
    logic [31:0] inten;
    logic        keep;
    logic        last;
  } peak_beat_t;

  // Quantized peak beat: ID memory row and Level memory row.
  typedef struct packed {
    spec_meta_t  meta;
    logic [15:0] id_idx;
    logic [7:0]  lv_idx;
    logic        keep;
    logic        last;
  } qpeak_beat_t;

  typedef enum logic [1:0] {
    LINK_COMPLETE = 2'd0,
    LINK_SINGLE   = 2'd1,
    LINK_WARD     = 2'd2
  } linkage_e;

  // One dendrogram step: cluster rm_idx folded into keep_idx at distance dist.
  typedef struct packed {
    logic [15:0] keep_idx;
    logic [15:0] rm_idx;
    logic [15:0] distance;  // Q1.15 linkage distance of the merge
    logic [15:0] size;      // members of the merged cluster
    logic        below_thr; // merge also joined two threshold clusters
  } merge_rec_t;

  // One spectrum's flat-cluster assignment after consensus selection.
  typedef struct packed {
    logic [31:0] spec_id;
    logic [15:0] local_idx; // position inside the bucket run
    logic [15:0] cluster;   // local index of the cluster's list head
    logic        is_consensus;
  } label_rec_t;

endpackage

// spectra_filter: streaming removal of precursor-ion peaks.
//
// A peak is dropped when its m/z lies within PREC_TOL of the spectrum's
// precursor m/z, or when it falls outside the encodable range
// [MZ_MIN, MZ_MIN+NUM_ID) m/z. Dropping precursor peaks follows the source
// design's Spectra Filter; the tolerance and the range check are this
// design's choices. The 1%-of-base-peak rule of the same filter is applied
// after top-k selection (thresholding_normalizer), which keeps the same peaks
// because the rule is monotone in intensity.
//
// Interface: valid/ready stream of peak_beat_t in and out. Combinational,
// zero latency. A dropped beat that carries 'last' is forwarded with keep=0
// so that downstream blocks still see the end of the spectrum; other dropped
// beats are consumed without an output.
module spectra_filter
  import spechd_pkg::*;
#(
  parameter logic [31:0] PREC_TOL = 32'd3277,  // 0.05 m/z in Q16.16
  parameter int unsigned MZ_MIN   = 101,       // lowest encodable m/z
  parameter int unsigned NUM_ID   = 1400       // number of 1 m/z bins
) (
  input  logic       in_valid,
  output logic       in_ready,
  input  peak_beat_t in_beat,
  output logic       out_valid,
  input  logic       out_ready,
  output peak_beat_t out_beat
);
  logic [31:0] diff;
  logic [31:0] mz_int;
  logic        near_prec, in_range, pass;

  always_comb begin
    diff      = (in_beat.mz >= in_beat.meta.prec_mz) ? in_beat.mz - in_beat.meta.prec_mz
                                                     : in_beat.meta.prec_mz - in_beat.mz;
    near_prec = diff <= PREC_TOL;
    mz_int    = {16'd0, in_beat.mz[31:16]};
    in_range  = (mz_int >= MZ_MIN) && (mz_int < MZ_MIN + NUM_ID);
    pass      = in_beat.keep && !near_prec && in_range;

    out_beat      = in_beat;
    out_beat.keep = pass;
    out_valid     = in_valid && (pass || in_beat.last);
    in_ready      = out_ready || !(pass || in_beat.last);
  end
endmodule

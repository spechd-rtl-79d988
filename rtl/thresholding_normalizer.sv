// thresholding_normalizer: 1%-of-base-peak threshold, intensity scaling and
// quantization of a top-k peak stream.
//
// The input arrives most intense first, so the first beat of a spectrum is
// its base peak. A peak is dropped when 100*I < I_base (the source design's
// 1% rule). Kept peaks are quantized: the intensity is scaled linearly to the
// base peak, level = min(Q_LEVELS-1, floor(I*Q_LEVELS/I_base)), and the m/z
// is binned to 1 m/z wide bins, id = floor(m/z) - MZ_MIN. The scaling law,
// the bin width and Q_LEVELS are this design's choices; the source design only
// names a "Scale and Normalization" step and the ID/Level quantization.
//
// Interface: valid/ready streams, combinational, zero latency; the base
// peak is registered on the first beat of every spectrum.
module thresholding_normalizer
  import spechd_pkg::*;
#(
  parameter int unsigned Q_LEVELS = 16,
  parameter int unsigned MZ_MIN   = 101
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  peak_beat_t  in_beat,
  output logic        out_valid,
  input  logic        out_ready,
  output qpeak_beat_t out_beat
);
  logic        first;        // next beat starts a spectrum
  logic [31:0] base_r;
  logic [31:0] base;
  logic        pass;
  logic [63:0] scaled;
  logic [31:0] lvl;
  logic [15:0] mz_int;

  always_comb begin
    base   = first ? in_beat.inten : base_r;
    pass   = in_beat.keep && base != 0 &&
             (64'(in_beat.inten) * 64'd100 >= 64'(base));
    scaled = (base != 0) ? (64'(in_beat.inten) * 64'(Q_LEVELS)) / 64'(base) : 64'd0;
    lvl    = (scaled >= 64'(Q_LEVELS)) ? 32'(Q_LEVELS - 1) : scaled[31:0];
    mz_int = in_beat.mz[31:16];

    out_beat        = '0;
    out_beat.meta   = in_beat.meta;
    out_beat.id_idx = (mz_int >= 16'(MZ_MIN)) ? mz_int - 16'(MZ_MIN) : 16'd0;
    out_beat.lv_idx = lvl[7:0];
    out_beat.keep   = pass;
    out_beat.last   = in_beat.last;
    out_valid       = in_valid && (pass || in_beat.last);
    in_ready        = out_ready || !(pass || in_beat.last);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first  <= 1'b1;
      base_r <= '0;
    end else if (in_valid && in_ready) begin
      if (first) base_r <= in_beat.inten;
      first <= in_beat.last;
    end
  end
endmodule

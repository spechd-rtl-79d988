// bucket_calc: precursor bucket of a spectrum,
//   bucket = floor((m/z - 1.00794) * charge / resolution).
//
// The equation is the source design's. Division by the resolution
// (0.05 .. 1) is replaced by a multiplication with its reciprocal inv_res,
// supplied by the host in Q16.16; this and the fixed-point formats are this
// design's choices. m/z below 1.00794 gives bucket 0. Purely combinational.
module bucket_calc
  import spechd_pkg::*;
(
  input  logic [31:0] prec_mz,   // Q16.16
  input  logic [7:0]  charge,
  input  logic [31:0] inv_res,   // 1/resolution, Q16.16
  output logic [31:0] bucket
);
  logic [31:0] delta;            // Q16.16
  logic [39:0] mass;             // Q24.16
  logic [71:0] scaled;           // Q40.32

  always_comb begin
    delta  = (prec_mz > PROTON_Q16) ? prec_mz - PROTON_Q16 : 32'd0;
    mass   = delta * charge;
    scaled = mass * inv_res;
    bucket = scaled[63:32];
  end
endmodule

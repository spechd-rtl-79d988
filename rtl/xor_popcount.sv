// xor_popcount: normalized Hamming distance of two hypervectors.
//
// The DHV-bit XOR is reduced by a population count, written as a balanced
// adder tree of 64-bit slices, and scaled to unsigned Q1.15
// (dist = popcount * 32768 / DHV), the 16-bit fixed-point format used for the
// distance matrix. XOR plus popcount over DHV bits is the source design's
// distance unit; the Q1.15 scaling is this design's reading of its 16-bit
// fixed-point distances. Purely combinational. DHV must be a power of two,
// at least 64 and at most 32768.
module xor_popcount #(
  parameter int unsigned DHV = 2048
) (
  input  logic [DHV-1:0] a,
  input  logic [DHV-1:0] b,
  output logic [15:0]    d_out
);
  localparam int unsigned NS = DHV / 64;
  localparam int unsigned PW = $clog2(DHV) + 1;

  logic [DHV-1:0] x;
  logic [6:0]     slice_cnt [NS];
  logic [PW-1:0]  total;
  logic [31:0]    scaled;

  always_comb begin
    x = a ^ b;
    for (int s = 0; s < NS; s++) slice_cnt[s] = 7'($countones(x[s*64 +: 64]));
    total = '0;
    for (int s = 0; s < NS; s++) total = total + PW'(slice_cnt[s]);
    scaled = (32'(total) * 32'd32768) / 32'(DHV);
    d_out  = scaled[15:0];
  end
endmodule

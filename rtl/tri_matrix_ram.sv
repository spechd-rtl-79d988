// tri_matrix_ram: lower-triangular distance matrix of MAX_N points.
//
// Only pairs r > c are stored, at word r*(r-1)/2 + c, so the symmetric
// matrix needs MAX_N*(MAX_N-1)/2 words of DW bits (keeping only the lower
// triangle is the source design's; the layout is this design's). Either
// order of a pair addresses the same word; pairs with i == j are not stored
// and must not be accessed. One synchronous read (data one clock after
// rd_en) and one write per clock; a read of the word being written returns
// the old value.
module tri_matrix_ram #(
  parameter int unsigned MAX_N = 256,
  parameter int unsigned DW    = 16
) (
  input  logic                     clk,
  input  logic                     rd_en,
  input  logic [$clog2(MAX_N)-1:0] rd_i,
  input  logic [$clog2(MAX_N)-1:0] rd_j,
  output logic [DW-1:0]            rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(MAX_N)-1:0] wr_i,
  input  logic [$clog2(MAX_N)-1:0] wr_j,
  input  logic [DW-1:0]            wr_data
);
  localparam int unsigned IW    = $clog2(MAX_N);
  localparam int unsigned WORDS = MAX_N * (MAX_N - 1) / 2;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [DW-1:0] mem [WORDS];

  function automatic logic [AW-1:0] tri_addr(input logic [IW-1:0] i, input logic [IW-1:0] j);
    logic [IW-1:0] r, c;
    logic [2*IW-1:0] base;
    r    = (i > j) ? i : j;
    c    = (i > j) ? j : i;
    base = ((2*IW)'(r) * (2*IW)'(r - 1'b1)) >> 1;
    return AW'(base + (2*IW)'(c));
  endfunction

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[tri_addr(rd_i, rd_j)];
    if (wr_en) mem[tri_addr(wr_i, wr_j)] <= wr_data;
  end
endmodule

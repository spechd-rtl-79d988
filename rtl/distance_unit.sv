// distance_unit: fills the lower-triangular distance matrix of one bucket.
//
// For every row i = 1 .. n-1 the hypervector of spectrum i is read once and
// held in a register; the hypervectors j = 0 .. i-1 are then streamed from
// the bucket buffer, one per clock, through xor_popcount, and each distance
// is written to matrix word (i, j). Reading the next hypervector overlaps
// computing and writing the previous one, in the spirit of the source design's
// dataflow between reading encoded spectra and computing distances. The
// source design's unit is an unrolled XOR and popcount; the row-wise schedule
// is this design's.
//
// Interface: pulse start with n (spectra in the bucket) stable; the unit
// drives the buffer's synchronous read port (data one clock after hv_raddr)
// and the matrix write port, and pulses done when the last pair is written.
// Timing: n*(n-1)/2 + 2*(n-1) + 1 clocks from start to done for n >= 2.
module distance_unit #(
  parameter int unsigned DHV   = 2048,
  parameter int unsigned MAX_N = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(MAX_N):0]   n,
  output logic [$clog2(MAX_N)-1:0] hv_raddr,
  input  logic [DHV-1:0]           hv_rdata,
  output logic                     wr_en,
  output logic [$clog2(MAX_N)-1:0] wr_i,
  output logic [$clog2(MAX_N)-1:0] wr_j,
  output logic [15:0]              wr_data,
  output logic                     busy,
  output logic                     done
);
  localparam int unsigned IW = $clog2(MAX_N);

  typedef enum logic [1:0] {D_IDLE, D_ROW, D_CAP, D_STREAM} state_e;
  state_e state;

  logic [IW:0]    i, j;
  logic [DHV-1:0] row_hv;
  logic           s_valid;     // a column read is in flight
  logic [IW-1:0]  s_i, s_j;
  logic [15:0]    d;

  xor_popcount #(.DHV(DHV)) u_pop (.a(row_hv), .b(hv_rdata), .d_out(d));

  always_comb begin
    hv_raddr = (state == D_STREAM) ? j[IW-1:0] : i[IW-1:0];
    wr_en    = s_valid;
    wr_i     = s_i;
    wr_j     = s_j;
    wr_data  = d;
    busy     = (state != D_IDLE) || s_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= D_IDLE;
      i       <= '0;
      j       <= '0;
      s_valid <= 1'b0;
      s_i     <= '0;
      s_j     <= '0;
      done    <= 1'b0;
      row_hv  <= '0;
    end else begin
      done    <= 1'b0;
      s_valid <= 1'b0;
      case (state)
        D_IDLE: if (start) begin
          if (n < 2) done <= 1'b1;
          else begin
            i     <= 1;
            state <= D_ROW;
          end
        end
        D_ROW: state <= D_CAP;          // read of row i issued
        D_CAP: begin
          row_hv <= hv_rdata;
          j      <= '0;
          state  <= D_STREAM;
        end
        D_STREAM: begin
          s_valid <= 1'b1;
          s_i     <= i[IW-1:0];
          s_j     <= j[IW-1:0];
          if (j + 1'b1 == i) begin
            if (i + 1'b1 == n) begin
              state <= D_IDLE;
              done  <= 1'b1;            // last write happens with this pulse
            end else begin
              i     <= i + 1'b1;
              state <= D_ROW;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        default: state <= D_IDLE;
      endcase
    end
  end
endmodule

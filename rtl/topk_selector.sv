// topk_selector: keeps the TOPK most intense peaks of each spectrum.
//
// Peaks (keep=1) are written into an SORT_N-slot buffer whose empty slots
// hold intensity 0. At the end of a spectrum the buffer is sorted by an
// iterative bitonic network into descending intensity, one compare-exchange
// layer per clock (log2(N)*(log2(N)+1)/2 clocks), and the first
// min(TOPK, peaks) entries are sent out, most intense first. If a spectrum
// has more than SORT_N peaks, the full buffer is sorted, its lower half is
// cleared, and filling continues; as TOPK <= SORT_N/2 the result is exact.
// Bitonic sorting follows the source design; the buffer size, the chunked
// handling of long spectra and TOPK are this design's choices.
//
// Interface: valid/ready streams of peak_beat_t. Input is refused while
// sorting and while a result is being sent. A spectrum with no kept peak
// gives a single beat with keep=0, last=1.
module topk_selector
  import spechd_pkg::*;
#(
  parameter int unsigned SORT_N = 128,
  parameter int unsigned TOPK   = 50
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  peak_beat_t in_beat,
  output logic       out_valid,
  input  logic       out_ready,
  output peak_beat_t out_beat
);
  localparam int unsigned LW = $clog2(SORT_N);

  typedef enum logic [1:0] {S_FILL, S_SORT, S_OUT} state_e;
  state_e state;

  logic [31:0] key [SORT_N];
  logic [31:0] mzv [SORT_N];
  logic [LW:0] cnt;           // occupied slots
  logic [LW:0] oidx;          // next output slot
  logic [LW:0] nout;          // beats to send
  logic [LW:0] kk, jj;        // bitonic stage sizes
  logic        final_sort;
  spec_meta_t  meta;
  logic [31:0] long_spectra;  // spectra that overflowed the buffer

  initial begin
    assert (TOPK <= SORT_N / 2) else $error("TOPK must be <= SORT_N/2");
  end

  assign in_ready = (state == S_FILL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_FILL;
      cnt          <= '0;
      oidx         <= '0;
      nout         <= '0;
      kk           <= '0;
      jj           <= '0;
      final_sort   <= 1'b0;
      meta         <= '0;
      long_spectra <= '0;
      for (int i = 0; i < SORT_N; i++) begin
        key[i] <= '0;
        mzv[i] <= '0;
      end
    end else begin
      case (state)
        S_FILL: if (in_valid) begin
          meta <= in_beat.meta;
          if (in_beat.keep) begin
            key[cnt[LW-1:0]] <= in_beat.inten;
            mzv[cnt[LW-1:0]] <= in_beat.mz;
          end
          if (in_beat.last || (in_beat.keep && cnt == (LW+1)'(SORT_N - 1))) begin
            state      <= S_SORT;
            final_sort <= in_beat.last;
            kk         <= (LW+1)'(2);
            jj         <= (LW+1)'(1);
            if (!in_beat.last) long_spectra <= long_spectra + 1;
          end
          if (in_beat.keep) cnt <= cnt + 1'b1;
        end
        S_SORT: begin
          // one layer of the bitonic network, sorting towards descending keys
          for (int i = 0; i < SORT_N; i++) begin
            automatic int l = i ^ int'(jj);
            if (l > i) begin
              automatic logic up = ((i & int'(kk)) == 0);
              if (up ? (key[i] < key[l]) : (key[i] > key[l])) begin
                key[i] <= key[l]; key[l] <= key[i];
                mzv[i] <= mzv[l]; mzv[l] <= mzv[i];
              end
            end
          end
          if (jj == 1) begin
            if (kk == (LW+1)'(SORT_N)) begin
              if (final_sort) begin
                state <= S_OUT;
                oidx  <= '0;
                nout  <= (cnt > (LW+1)'(TOPK)) ? (LW+1)'(TOPK) : cnt;
              end else begin
                // keep the upper half, free the lower half, go on filling
                state <= S_FILL;
                cnt   <= (LW+1)'(SORT_N / 2);
              end
            end else begin
              kk <= kk << 1;
              jj <= kk;
            end
          end else begin
            jj <= jj >> 1;
          end
        end
        S_OUT: if (out_ready) begin
          if (nout == 0 || oidx + 1'b1 >= nout) begin
            state <= S_FILL;
            cnt   <= '0;
            for (int i = 0; i < SORT_N; i++) key[i] <= '0;
          end else begin
            oidx <= oidx + 1'b1;
          end
        end
        default: state <= S_FILL;
      endcase
      // the lower half is cleared after a non-final sort
      if (state == S_SORT && jj == 1 && kk == (LW+1)'(SORT_N) && !final_sort)
        for (int i = SORT_N / 2; i < SORT_N; i++) key[i] <= '0;
    end
  end

  always_comb begin
    out_valid     = (state == S_OUT);
    out_beat      = '0;
    out_beat.meta = meta;
    out_beat.mz   = mzv[oidx[LW-1:0]];
    out_beat.inten= key[oidx[LW-1:0]];
    out_beat.keep = (nout != 0);
    out_beat.last = (nout == 0) || (oidx + 1'b1 >= nout);
  end

  // a beat offered downstream stays offered until taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);
endmodule

// tb_thresholding_normalizer: descending-intensity spectra with peaks around
// the 1% threshold; kept peaks, level and ID indices are recomputed with real
// arithmetic.
module tb_thresholding_normalizer;
  import spechd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  peak_beat_t  in_beat;
  qpeak_beat_t out_beat;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  thresholding_normalizer #(.Q_LEVELS(16), .MZ_MIN(101)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_beat,
                                                            .out_valid, .out_ready, .out_beat);

  initial begin
    in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      automatic int npk = 1 + $urandom % 20;
      automatic logic [31:0] base = 32'(1000 + $urandom % 100000);
      automatic logic [31:0] cur = base;
      for (int p = 0; p < npk; p++) begin
        bit exp_keep;
        int exp_lvl, exp_id;
        @(negedge clk);
        if (p > 0) cur = cur - ($urandom % (cur / 8 + 1));
        if (p > 0 && ($urandom % 4) == 0) cur = base / 100 + ($urandom % 3) - 1;
        in_valid = 1;
        in_beat = '0;
        in_beat.inten = cur;
        in_beat.mz    = 32'((101 + $urandom % 1400) << 16) + 32'($urandom % 65536);
        in_beat.keep  = 1;
        in_beat.last  = (p == npk - 1);
        out_ready     = ($urandom % 4) != 0;
        #1;
        exp_keep = real'(cur) >= real'(base) / 100.0;
        exp_lvl  = $rtoi($floor(real'(cur) * 16.0 / real'(base)));
        if (exp_lvl > 15) exp_lvl = 15;
        exp_id   = int'(in_beat.mz >> 16) - 101;
        checks++;
        if (out_valid !== (exp_keep || in_beat.last) ||
            (exp_keep && (!out_beat.keep || out_beat.lv_idx != 8'(exp_lvl) || out_beat.id_idx != 16'(exp_id))) ||
            (!exp_keep && out_valid && out_beat.keep)) begin
          failures++;
          if (failures < 10) $display("FAIL s%0d p%0d I=%0d base=%0d lvl exp %0d got %0d keep %0d", s, p, cur, base,
                                      exp_lvl, out_beat.lv_idx, out_beat.keep);
        end
        @(posedge clk);
        while (!in_ready) begin
          @(negedge clk); out_ready = 1; @(posedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_spectra_filter: random peaks near and far from the precursor and
// around the m/z range limits; the expected keep/forward/ready behaviour is
// recomputed from real-valued m/z.
module tb_spectra_filter;
  import spechd_pkg::*;
  logic       in_valid, in_ready, out_valid, out_ready;
  peak_beat_t in_beat, out_beat;
  int checks = 0, failures = 0;

  spectra_filter dut (.in_valid, .in_ready, .in_beat, .out_valid, .out_ready, .out_beat);

  initial begin
    for (int t = 0; t < 3000; t++) begin
      real mz, pmz;
      bit  exp_pass, exp_fwd;
      in_beat              = '0;
      in_beat.meta.prec_mz = 32'((200 + $urandom % 1000) << 16) + 32'($urandom % 65536);
      case (t % 4)
        0: in_beat.mz = in_beat.meta.prec_mz + 32'($urandom % 6000) - 32'd3000;  // near precursor
        1: in_beat.mz = 32'((90 + $urandom % 30) << 16) + 32'($urandom % 65536); // around 101
        2: in_beat.mz = 32'((1490 + $urandom % 20) << 16) + 32'($urandom % 65536); // around 1501
        default: in_beat.mz = 32'((50 + $urandom % 1600) << 16) + 32'($urandom % 65536);
      endcase
      in_beat.inten = $urandom;
      in_beat.keep  = ($urandom % 8) != 0;
      in_beat.last  = ($urandom % 5) == 0;
      in_valid      = 1'b1;
      out_ready     = ($urandom % 4) != 0;
      #1;
      mz  = real'(in_beat.mz) / 65536.0;
      pmz = real'(in_beat.meta.prec_mz) / 65536.0;
      exp_pass = in_beat.keep && !((mz - pmz <= 0.05 + 1e-9) && (pmz - mz <= 0.05 + 1e-9))
                 && mz >= 101.0 && mz < 1501.0;
      // exactly on the tolerance edge the fixed-point compare decides; skip those
      if ((mz - pmz > 0.0499 && mz - pmz < 0.0501) || (pmz - mz > 0.0499 && pmz - mz < 0.0501)) continue;
      exp_fwd = exp_pass || in_beat.last;
      checks++;
      if (out_valid !== exp_fwd || (exp_fwd && out_beat.keep !== exp_pass) ||
          in_ready !== (out_ready || !exp_fwd) || (exp_fwd && out_beat.mz !== in_beat.mz)) begin
        failures++;
        if (failures < 10) $display("FAIL mz=%f pmz=%f keep=%0d last=%0d: valid=%0d keep=%0d", mz, pmz,
                                    in_beat.keep, in_beat.last, out_valid, out_beat.keep);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

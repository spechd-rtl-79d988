// tb_bucket_calc: bucket indices against a real-valued evaluation of
// floor((m/z - 1.00794) * charge / resolution). Cases within 1e-3 of an
// integer boundary are skipped since fixed-point rounding may fall either way.
module tb_bucket_calc;
  import spechd_pkg::*;
  logic [31:0] prec_mz, inv_res, bucket;
  logic [7:0]  charge;
  int checks = 0, failures = 0;
  real res_tab [5] = '{1.0, 0.5, 0.25, 0.125, 0.0625};

  bucket_calc dut (.prec_mz, .charge, .inv_res, .bucket);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      real mz, res, v;
      int  exp_b;
      res     = res_tab[t % 5];
      prec_mz = 32'(($urandom % (1900 << 16)) + (100 << 16));
      charge  = 8'(1 + $urandom % 5);
      inv_res = 32'($rtoi(65536.0 / res));
      #1;
      mz = real'(prec_mz) / 65536.0;
      v  = (mz - 1.00794) * real'(charge) / res;
      exp_b = $rtoi($floor(v));
      if (v - $floor(v) > 1e-3 && $ceil(v) - v > 1e-3) begin
        checks++;
        if (bucket != 32'(exp_b)) begin
          failures++;
          if (failures < 10) $display("FAIL mz=%f z=%0d res=%f exp %0d got %0d", mz, charge, res, exp_b, bucket);
        end
      end
    end
    // below the proton mass the bucket is 0
    prec_mz = 32'd1000; charge = 8'd2; inv_res = 32'd65536;
    #1; checks++;
    if (bucket != 0) failures++;
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

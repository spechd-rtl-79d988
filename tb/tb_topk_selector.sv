// tb_topk_selector: random spectra of 0 to 300 peaks (so some overflow the
// 128-slot buffer) with distinct intensities; the output must be the TOPK
// most intense peaks in descending order, computed here by sorting a copy.
// Also checks the cycles from the last input beat to the first output beat
// of a short spectrum: one bitonic layer per clock, 28 layers for 128 slots.
module tb_topk_selector;
  import spechd_pkg::*;
  localparam int unsigned TOPK = 50;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  peak_beat_t in_beat, out_beat;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  topk_selector #(.SORT_N(128), .TOPK(TOPK)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_beat,
                                                 .out_valid, .out_ready, .out_beat);

  task automatic run_spectrum(input int npk, input int sid);
    logic [31:0] ints[$], mzs[$], sorted[$];
    int nexp, got, t_last, t_first, cyc;
    for (int p = 0; p < npk; p++) begin
      ints.push_back(32'(sid * 100000 + p * 7 + 1) ^ 32'((p * 2654435761) & 32'hFFF00000));
      mzs.push_back(32'(p));
    end
    // shuffle
    for (int p = npk - 1; p > 0; p--) begin
      int q = $urandom % (p + 1);
      logic [31:0] tmp = ints[p]; ints[p] = ints[q]; ints[q] = tmp;
      tmp = mzs[p]; mzs[p] = mzs[q]; mzs[q] = tmp;
    end
    sorted = ints;
    sorted.rsort();
    nexp = (npk < TOPK) ? npk : TOPK;
    // send (with a few dropped placeholders)
    for (int p = 0; p <= npk; p++) begin
      @(negedge clk);
      in_valid = 1;
      in_beat = '0;
      in_beat.meta.spec_id = 32'(sid);
      if (p < npk) begin
        in_beat.keep = 1; in_beat.inten = ints[p]; in_beat.mz = mzs[p];
        in_beat.last = 0;
      end else begin
        in_beat.keep = 0; in_beat.last = 1;
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    t_last = $time;
    @(negedge clk); in_valid = 0;
    got = 0; cyc = 0; t_first = -1;
    while (1) begin
      @(negedge clk);
      out_ready = ($urandom % 3) != 0;
      #1;
      if (out_valid && t_first < 0) t_first = $time;
      if (out_valid && out_ready) begin
        checks++;
        if (nexp == 0) begin
          if (out_beat.keep || !out_beat.last) failures++;
          break;
        end
        if (out_beat.inten !== sorted[got] || out_beat.meta.spec_id !== 32'(sid) ||
            out_beat.last !== (got == nexp - 1)) begin
          failures++;
          if (failures < 10) $display("FAIL spec %0d pos %0d exp %0d got %0d", sid, got, sorted[got], out_beat.inten);
        end
        got++;
        if (got == nexp) break;
      end
      if (++cyc > 10000) break;
    end
    @(negedge clk); out_ready = 0;
    if (npk > 0 && npk <= 128) begin
      checks++;
      // accepted at posedge t_last; 28 sort layers; output valid from the next clock
      if ((t_first - t_last) / 10 != 28) begin
        failures++;
        $display("FAIL latency %0d clocks", (t_first - t_last) / 10);
      end
    end
  endtask

  initial begin
    in_beat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_spectrum(10, 1);
    run_spectrum(0, 2);
    run_spectrum(50, 3);
    run_spectrum(128, 4);
    run_spectrum(300, 5);
    for (int s = 6; s < 30; s++) run_spectrum($urandom % 260, s);
    checks++;
    if (dut.long_spectra == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_idlevel_encoder: loads random ID and Level memories, encodes random
// spectra and compares each hypervector with a majority computed here from
// the same memory contents. Also checks that the result appears two clocks
// after the last peak is taken and that empty spectra are dropped.
module tb_idlevel_encoder;
  import spechd_pkg::*;
  localparam int unsigned DHV = 2048, NUM_ID = 1400, QL = 16;
  logic clk = 0, rst_n = 0;
  logic id_we = 0, lv_we = 0;
  logic [10:0] id_waddr;
  logic [3:0]  lv_waddr;
  logic [DHV-1:0] id_wdata, lv_wdata, out_hv;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  qpeak_beat_t in_beat;
  spec_meta_t  out_meta;
  logic [31:0] empty_drops;
  logic [DHV-1:0] idm [NUM_ID];
  logic [DHV-1:0] lvm [QL];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  idlevel_encoder #(.DHV(DHV), .NUM_ID(NUM_ID), .Q_LEVELS(QL), .MAXP(50)) dut (
    .clk, .rst_n, .id_we, .id_waddr, .id_wdata, .lv_we, .lv_waddr, .lv_wdata,
    .in_valid, .in_ready, .in_beat, .out_valid, .out_ready, .out_hv, .out_meta, .empty_drops);

  function automatic logic [DHV-1:0] rand_hv();
    logic [DHV-1:0] v;
    for (int w = 0; w < DHV / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic encode(input int npk, input int sid);
    int ids[$], lvs[$];
    int cnt [DHV];
    logic [DHV-1:0] expv;
    int t_last, t_out, cyc;
    for (int b = 0; b < DHV; b++) cnt[b] = 0;
    for (int p = 0; p < npk; p++) begin
      ids.push_back($urandom % NUM_ID);
      lvs.push_back($urandom % QL);
      for (int b = 0; b < DHV; b++) cnt[b] += int'(idm[ids[p]][b] ^ lvm[lvs[p]][b]);
    end
    for (int b = 0; b < DHV; b++) expv[b] = (2 * cnt[b] > npk);
    for (int p = 0; p <= npk; p++) begin
      @(negedge clk);
      in_valid = 1;
      in_beat = '0;
      in_beat.meta.spec_id = 32'(sid);
      in_beat.keep = (p < npk);
      in_beat.last = (p == npk);
      if (p < npk) begin
        in_beat.id_idx = 16'(ids[p]);
        in_beat.lv_idx = 8'(lvs[p]);
      end
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    t_last = $time;
    @(negedge clk); in_valid = 0;
    if (npk == 0) return;
    cyc = 0;
    while (!out_valid && cyc < 100) begin @(posedge clk); cyc++; end
    t_out = $time;
    checks++;
    if ((t_out - t_last) / 10 != 2) begin
      failures++;
      $display("FAIL latency %0d", (t_out - t_last) / 10);
    end
    repeat ($urandom % 3) @(posedge clk);
    @(negedge clk);
    checks++;
    if (!out_valid || out_hv !== expv || out_meta.spec_id !== 32'(sid)) begin
      failures++;
      if (failures < 10) $display("FAIL spectrum %0d (%0d peaks)", sid, npk);
    end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
  endtask

  initial begin
    in_beat = '0; id_waddr = 0; lv_waddr = 0; id_wdata = 0; lv_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NUM_ID; i++) begin
      idm[i] = rand_hv();
      @(negedge clk); id_we = 1; id_waddr = 11'(i); id_wdata = idm[i];
    end
    for (int i = 0; i < QL; i++) begin
      lvm[i] = rand_hv();
      @(negedge clk); id_we = 0; lv_we = 1; lv_waddr = 4'(i); lv_wdata = lvm[i];
    end
    @(negedge clk); lv_we = 0; id_we = 0;
    encode(1, 1);
    encode(2, 2);
    encode(0, 3);
    encode(50, 4);
    for (int s = 5; s < 40; s++) encode(1 + $urandom % 50, s);
    checks++;
    if (empty_drops != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_distance_unit: buckets of 0 to 24 random hypervectors; every matrix
// write must carry the Hamming distance (Q1.15) of its pair, every pair must
// be written exactly once, and start-to-done must take
// n(n-1)/2 + 2(n-1) + 1 clocks.
module tb_distance_unit;
  localparam int unsigned DHV = 256, MAX_N = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] n;
  logic [4:0] hv_raddr, wr_i, wr_j;
  logic [DHV-1:0] hv_rdata;
  logic wr_en, busy, done;
  logic [15:0] wr_data;
  logic [DHV-1:0] hvs [MAX_N];
  int seen [MAX_N][MAX_N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always_ff @(posedge clk) hv_rdata <= hvs[hv_raddr];

  distance_unit #(.DHV(DHV), .MAX_N(MAX_N)) dut (.clk, .rst_n, .start, .n, .hv_raddr, .hv_rdata,
    .wr_en, .wr_i, .wr_j, .wr_data, .busy, .done);

  always @(posedge clk) if (rst_n && wr_en) begin
    automatic int hd = 0;
    for (int b = 0; b < DHV; b++) if (hvs[wr_i][b] != hvs[wr_j][b]) hd++;
    checks++;
    if (wr_i <= wr_j || wr_data !== 16'(hd * 128)) begin
      failures++;
      if (failures < 10) $display("FAIL (%0d,%0d) exp %0d got %0d", wr_i, wr_j, hd * 128, wr_data);
    end
    seen[wr_i][wr_j]++;
  end

  task automatic run(input int nn);
    int cyc = 0, exp_cyc;
    for (int i = 0; i < MAX_N; i++) begin
      for (int w = 0; w < DHV / 32; w++) hvs[i][w*32 +: 32] = $urandom;
      for (int j = 0; j < MAX_N; j++) seen[i][j] = 0;
    end
    @(negedge clk); n = 6'(nn); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
    @(negedge clk);
    exp_cyc = (nn < 2) ? 1 : nn * (nn - 1) / 2 + 2 * (nn - 1) + 1;
    checks++;
    if (cyc != exp_cyc) begin
      failures++;
      $display("FAIL n=%0d took %0d clocks, expected %0d", nn, cyc, exp_cyc);
    end
    for (int i = 0; i < nn; i++)
      for (int j = 0; j < i; j++) begin
        checks++;
        if (seen[i][j] != 1) failures++;
      end
  endtask

  initial begin
    n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0); run(1); run(2); run(3); run(24); run(32);
    for (int t = 0; t < 5; t++) run(2 + $urandom % 30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

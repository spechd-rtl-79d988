// tb_tri_matrix_ram: writes every pair of a 32-point matrix through one
// orientation and reads it back through both, one clock of read latency.
module tb_tri_matrix_ram;
  localparam int unsigned N = 32;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [4:0] rd_i, rd_j, wr_i, wr_j;
  logic [15:0] rd_data, wr_data;
  logic [15:0] ref_m [N][N];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tri_matrix_ram #(.MAX_N(N), .DW(16)) dut (.clk, .rd_en, .rd_i, .rd_j, .rd_data,
                                            .wr_en, .wr_i, .wr_j, .wr_data);

  initial begin
    rd_i = 0; rd_j = 0; wr_i = 0; wr_j = 0; wr_data = 0;
    for (int r = 1; r < N; r++)
      for (int c = 0; c < r; c++) begin
        ref_m[r][c] = 16'($urandom);
        ref_m[c][r] = ref_m[r][c];
        @(negedge clk);
        wr_en = 1; wr_i = (c % 2) ? 5'(r) : 5'(c); wr_j = (c % 2) ? 5'(c) : 5'(r);
        wr_data = ref_m[r][c];
      end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) if (r != c) begin
        @(negedge clk); rd_en = 1; rd_i = 5'(r); rd_j = 5'(c);
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data !== ref_m[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL (%0d,%0d) exp %h got %h", r, c, ref_m[r][c], rd_data);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

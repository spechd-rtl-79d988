// tb_xor_popcount: random and corner-case hypervector pairs against a
// bit-by-bit Hamming count scaled to Q1.15.
module tb_xor_popcount;
  localparam int unsigned DHV = 2048;
  logic [DHV-1:0] a, b;
  logic [15:0]    d;
  int checks = 0, failures = 0;

  xor_popcount #(.DHV(DHV)) dut (.a, .b, .d_out(d));

  task automatic check(input logic [DHV-1:0] x, input logic [DHV-1:0] y);
    int hd = 0;
    a = x; b = y;
    #1;
    for (int i = 0; i < DHV; i++) if (x[i] != y[i]) hd++;
    checks++;
    if (d !== 16'(hd * 16)) begin
      failures++;
      $display("FAIL hd=%0d got %0d", hd, d);
    end
  endtask

  initial begin
    logic [DHV-1:0] x, y;
    check('0, '0);
    check('0, '1);
    for (int t = 0; t < 300; t++) begin
      for (int w = 0; w < DHV / 32; w++) begin
        x[w*32 +: 32] = $urandom;
        y[w*32 +: 32] = (t % 3 == 0) ? x[w*32 +: 32] ^ (32'(1) << (t % 32)) : $urandom;
      end
      check(x, y);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

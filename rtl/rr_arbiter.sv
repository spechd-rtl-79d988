// rr_arbiter: round-robin merge of N valid/ready streams of W-bit payloads.
//
// The grant rotates: after a beat from input g is taken, the search for the
// next beat starts at g+1, so no input waits more than N-1 beats. The chosen
// input index comes out with the payload. Combinational select, one beat per
// clock; the pointer updates on a transfer.
module rr_arbiter #(
  parameter int unsigned N = 5,
  parameter int unsigned W = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         in_valid,
  output logic [N-1:0]         in_ready,
  input  logic [N-1:0][W-1:0]  in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [W-1:0]         out_data,
  output logic [$clog2(N)-1:0] out_src
);
  localparam int unsigned SW = $clog2(N);
  logic [SW-1:0] ptr;
  logic [SW-1:0] g;
  logic          found;

  always_comb begin
    g     = ptr;
    found = 1'b0;
    for (int s = 0; s < N; s++) begin
      automatic int idx = (int'(ptr) + s) % N;
      if (!found && in_valid[idx]) begin
        g     = SW'(idx);
        found = 1'b1;
      end
    end
    out_valid = found;
    out_data  = in_data[g];
    out_src   = g;
    in_ready  = '0;
    in_ready[g] = found && out_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (out_valid && out_ready) ptr <= (g == SW'(N - 1)) ? '0 : g + 1'b1;
  end
endmodule

// idlevel_encoder: ID-Level hypervector encoder.
//
// Each quantized peak selects one row of the ID memory (by m/z bin) and one
// row of the Level memory (by intensity level); their bitwise XOR is added
// into DHV per-bit counters. At the end of the spectrum every bit becomes the
// majority of its column, 1 when count*2 > peaks, giving one binary
// DHV-bit spectrum hypervector. The ID/Level/XOR/accumulate/majority scheme is
// the source design's. This design handles one peak per clock with all DHV
// bits in parallel (the source design also unrolls across peaks, with no lane
// count given), breaks majority ties towards 0, and drops spectra left
// without peaks. Both memories are plain arrays filled by the host over a
// write port; their contents are the host's choice.
//
// Timing: a peak is accepted every clock; the memory read takes one clock,
// so the hypervector is offered two clocks after the spectrum's last beat
// and held until out_ready. Input is refused while a result waits.
module idlevel_encoder
  import spechd_pkg::*;
#(
  parameter int unsigned DHV      = DHV_DEFAULT,
  parameter int unsigned NUM_ID   = 1400,
  parameter int unsigned Q_LEVELS = 16,
  parameter int unsigned MAXP     = 50     // most peaks in one spectrum
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host load of the item memories
  input  logic                        id_we,
  input  logic [$clog2(NUM_ID)-1:0]   id_waddr,
  input  logic [DHV-1:0]              id_wdata,
  input  logic                        lv_we,
  input  logic [$clog2(Q_LEVELS)-1:0] lv_waddr,
  input  logic [DHV-1:0]              lv_wdata,
  // quantized peaks
  input  logic                        in_valid,
  output logic                        in_ready,
  input  qpeak_beat_t                 in_beat,
  // encoded spectrum
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [DHV-1:0]              out_hv,
  output spec_meta_t                  out_meta,
  output logic [31:0]                 empty_drops
);
  localparam int unsigned CW = $clog2(MAXP + 1);
  localparam int unsigned IW = $clog2(NUM_ID);
  localparam int unsigned LVW = $clog2(Q_LEVELS);

  logic [DHV-1:0] id_mem [NUM_ID];
  logic [DHV-1:0] lv_mem [Q_LEVELS];

  always_ff @(posedge clk) begin
    if (id_we) id_mem[id_waddr] <= id_wdata;
    if (lv_we) lv_mem[lv_waddr] <= lv_wdata;
  end

  typedef enum logic {E_ACC, E_OUT} state_e;
  state_e state;

  // stage 1: item memory read
  logic           s1_valid, s1_keep, s1_last;
  logic [DHV-1:0] s1_id, s1_lv;
  logic [CW-1:0]  acc [DHV];
  logic [CW-1:0]  npk;
  spec_meta_t     meta;

  assign in_ready = (state == E_ACC) && !(s1_valid && s1_last);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      s1_id <= id_mem[in_beat.id_idx[IW-1:0]];
      s1_lv <= lv_mem[in_beat.lv_idx[LVW-1:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= E_ACC;
      s1_valid    <= 1'b0;
      s1_keep     <= 1'b0;
      s1_last     <= 1'b0;
      npk         <= '0;
      meta        <= '0;
      empty_drops <= '0;
      for (int b = 0; b < DHV; b++) acc[b] <= '0;
    end else begin
      s1_valid <= in_valid && in_ready;
      if (in_valid && in_ready) begin
        s1_keep <= in_beat.keep;
        s1_last <= in_beat.last;
        meta    <= in_beat.meta;
      end
      if (s1_valid) begin
        if (s1_keep) begin
          for (int b = 0; b < DHV; b++) acc[b] <= acc[b] + CW'(s1_id[b] ^ s1_lv[b]);
          npk <= npk + 1'b1;
        end
        if (s1_last) state <= E_OUT;
      end
      if (state == E_OUT && (out_ready || npk == 0)) begin
        if (npk == 0) empty_drops <= empty_drops + 1;
        state <= E_ACC;
        npk   <= '0;
        for (int b = 0; b < DHV; b++) acc[b] <= '0;
      end
    end
  end

  always_comb begin
    for (int b = 0; b < DHV; b++) out_hv[b] = ({1'b0, acc[b]} << 1) > {1'b0, npk};
    out_valid = (state == E_OUT) && (npk != 0);
    out_meta  = meta;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid);
endmodule

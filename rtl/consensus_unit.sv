// consensus_unit: picks the consensus spectrum of every threshold cluster
// and streams each spectrum's cluster label.
//
// For each cluster head c (member count > 0) and each member m of its list,
// the distances from m to all other members are read from the original
// (pre-linkage) distance matrix, one per clock, and summed; the member with
// the smallest sum, i.e. the lowest average distance to the rest of its
// cluster, is the consensus (first in list order on a tie, singletons are
// their own consensus). Then the cluster's members are streamed out with
// their head index and the consensus flag. Selecting the member of lowest
// average distance on the original matrix follows the source design; the
// list walk and the tie rule are this design's.
//
// Interface: pulse start with n stable. The unit drives the cluster-list
// read port (tc_idx -> tc_next, tc_cnt, combinational) and the original
// matrix's synchronous read port. lab_valid/lab_ready is a stream. done
// pulses after the last label. Cost: about sum over clusters of size^2
// clocks, plus one clock per label and per index.
module consensus_unit #(
  parameter int unsigned MAX_N = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(MAX_N):0]   n,
  output logic [$clog2(MAX_N)-1:0] tc_idx,
  input  logic [$clog2(MAX_N):0]   tc_next,
  input  logic [$clog2(MAX_N):0]   tc_cnt,
  output logic                     o_rd_en,
  output logic [$clog2(MAX_N)-1:0] o_rd_i,
  output logic [$clog2(MAX_N)-1:0] o_rd_j,
  input  logic [15:0]              o_rd_data,
  output logic                     lab_valid,
  input  logic                     lab_ready,
  output logic [$clog2(MAX_N)-1:0] lab_local,
  output logic [$clog2(MAX_N)-1:0] lab_cluster,
  output logic                     lab_cons,
  output logic                     busy,
  output logic                     done,
  output logic [31:0]              n_clusters
);
  localparam int unsigned IW = $clog2(MAX_N);
  localparam logic [IW:0] NIL = (IW+1)'(MAX_N);

  typedef enum logic [2:0] {C_IDLE, C_HEAD, C_ISTART, C_INNER, C_IDRAIN, C_CMP, C_OUTER, C_EMIT} state_e;
  state_e state;

  logic [IW:0]   nn, c;
  logic [IW-1:0] m, o, bestm;
  logic [31:0]   sum, best;
  logic          p_valid;

  always_comb begin
    case (state)
      C_INNER, C_EMIT: tc_idx = o;
      C_OUTER:         tc_idx = m;
      default:         tc_idx = c[IW-1:0];
    endcase
    o_rd_en     = (state == C_INNER) && (o != m);
    o_rd_i      = m;
    o_rd_j      = o;
    lab_valid   = (state == C_EMIT);
    lab_local   = o;
    lab_cluster = c[IW-1:0];
    lab_cons    = (o == bestm);
    busy        = (state != C_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      nn         <= '0;
      c          <= '0;
      m          <= '0;
      o          <= '0;
      bestm      <= '0;
      sum        <= '0;
      best       <= '1;
      p_valid    <= 1'b0;
      done       <= 1'b0;
      n_clusters <= '0;
    end else begin
      done    <= 1'b0;
      p_valid <= o_rd_en;
      if (p_valid) sum <= sum + 32'(o_rd_data);
      case (state)
        C_IDLE: if (start) begin
          nn         <= n;
          c          <= '0;
          n_clusters <= '0;
          state      <= C_HEAD;
        end
        C_HEAD: begin
          if (c >= nn) begin
            state <= C_IDLE;
            done  <= 1'b1;
          end else if (tc_cnt == 0) begin
            c <= c + 1'b1;
          end else begin
            n_clusters <= n_clusters + 1;
            bestm      <= c[IW-1:0];
            best       <= '1;
            m          <= c[IW-1:0];
            o          <= c[IW-1:0];
            state      <= (tc_cnt == 1) ? C_EMIT : C_ISTART;
          end
        end
        C_ISTART: begin
          o     <= c[IW-1:0];
          sum   <= '0;
          state <= C_INNER;
        end
        C_INNER: begin
          if (tc_next == NIL) state <= C_IDRAIN;
          else o <= tc_next[IW-1:0];
        end
        C_IDRAIN: state <= C_CMP;
        C_CMP: begin
          if (sum < best) begin
            best  <= sum;
            bestm <= m;
          end
          state <= C_OUTER;
        end
        C_OUTER: begin
          if (tc_next == NIL) begin
            o     <= c[IW-1:0];
            state <= C_EMIT;
          end else begin
            m     <= tc_next[IW-1:0];
            state <= C_ISTART;
          end
        end
        C_EMIT: if (lab_ready) begin
          if (tc_next == NIL) begin
            c     <= c + 1'b1;
            state <= C_HEAD;
          end else begin
            o <= tc_next[IW-1:0];
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   lab_valid && !lab_ready |=> lab_valid && $stable(lab_local));
endmodule

// nnchain_hac: nearest-neighbour-chain hierarchical agglomerative clustering
// of one bucket, on a lower-triangular distance matrix.
//
// How it works. The chain is a stack of cluster indices. While more than one
// cluster is valid: if the stack is empty, the lowest-numbered active cluster
// is pushed; the row of the top cluster a is then scanned (one matrix read per
// clock) for its nearest active neighbour b, preferring the element below a
// on the stack on a tie. If b is that element, a and b are reciprocal nearest
// neighbours: both are popped and merged, the higher index folding into the
// lower. Otherwise b is pushed and the scan repeats from b. A merge emits one
// dendrogram record and rewrites row/column i of the matrix with the
// Lance-Williams update of the selected linkage (complete, single or Ward),
// two reads and one write per remaining active cluster; the removed cluster's
// active bit is cleared.
//
// Besides the dendrogram, threshold clusters are kept as linked member lists
// (head = cluster index, tail, next, count). When a merge distance is below
// theta the two lists are joined; otherwise they stay apart. For monotone
// linkages a cluster that once merged at or above theta never merges below it
// again, so every threshold cluster stays at the index of the dendrogram
// cluster that holds it. The consensus unit reads the lists through tc_idx.
//
// From the source design: the stack, minimum search over one row, RNN test on
// the last stack index, the second cluster folding into the first, the loop
// "while num_valid_clusters > 1", the threshold cluster set merged only below
// the threshold, and the three linkages with complete linkage as the main
// one. This design's choices: the start point and tie rules, active bits
// instead of compacting the cluster array, linked lists instead of fixed
// element rows, no separate correction factor, the Lance-Williams formulas
// (Ward applied to the stored, unsquared distances and saturated
// at 16 bits) and linkage as a run-time
// input.
//
// Interface: pulse start with n, theta (Q1.15) and linkage stable for the
// run; busy stays high until done pulses. merge_valid/merge_ready is a
// stream that stalls the controller while not taken. The matrix read port is
// synchronous (data one clock after m_rd_en).
module nnchain_hac
  import spechd_pkg::*;
#(
  parameter int unsigned MAX_N = 256
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [$clog2(MAX_N):0]   n,
  input  logic [15:0]              theta,
  input  linkage_e                 linkage,
  // working distance matrix
  output logic                     m_rd_en,
  output logic [$clog2(MAX_N)-1:0] m_rd_i,
  output logic [$clog2(MAX_N)-1:0] m_rd_j,
  input  logic [15:0]              m_rd_data,
  output logic                     m_wr_en,
  output logic [$clog2(MAX_N)-1:0] m_wr_i,
  output logic [$clog2(MAX_N)-1:0] m_wr_j,
  output logic [15:0]              m_wr_data,
  // dendrogram
  output logic                     merge_valid,
  input  logic                     merge_ready,
  output merge_rec_t               merge_rec,
  // threshold cluster lists (combinational read)
  input  logic [$clog2(MAX_N)-1:0] tc_idx,
  output logic [$clog2(MAX_N):0]   tc_next,   // MAX_N marks the end of a list
  output logic [$clog2(MAX_N):0]   tc_cnt,    // members; 0 when not a head
  // status
  output logic                     busy,
  output logic                     done,
  output logic [31:0]              chain_pushes,
  output logic [31:0]              thr_merges
);
  localparam int unsigned IW = $clog2(MAX_N);
  localparam logic [IW:0] NIL = (IW+1)'(MAX_N);

  typedef enum logic [3:0] {
    H_IDLE, H_INIT, H_LOOP, H_SSTART, H_SCAN, H_SDRAIN, H_DECIDE,
    H_EMIT, H_UNEXT, H_URD2, H_UWR, H_UEND, H_DONE
  } state_e;
  state_e state;

  logic [MAX_N-1:0] active;
  logic [15:0]      csize  [MAX_N];
  logic [IW-1:0]    chain  [MAX_N];
  logic [IW:0]      sp, num_valid, nn;
  logic [IW:0]      lnext  [MAX_N];
  logic [IW-1:0]    ltail  [MAX_N];
  logic [IW:0]      lcnt   [MAX_N];
  logic [15:0]      theta_r;
  linkage_e         link_r;

  // scan state
  logic [IW:0]   k;
  logic [IW-1:0] a_r;
  logic [IW:0]   prev_r;        // NIL when the chain holds only a
  logic          p_valid;
  logic [IW-1:0] p_k;
  logic [15:0]   best, dprev;
  logic [IW-1:0] bidx;
  logic          has_prev;
  logic          has_best;      // at least one neighbour seen in this scan
  // merge state
  logic [IW-1:0] mi, mj;
  logic [15:0]   dij, dik;

  // lowest active cluster
  logic [IW-1:0] first_active;
  always_comb begin
    first_active = '0;
    for (int q = MAX_N - 1; q >= 0; q--) if (active[q]) first_active = IW'(q);
  end

  // decision of the scan
  logic [IW-1:0] b_sel;
  logic          is_rnn;
  always_comb begin
    is_rnn = (prev_r != NIL) && has_prev && (dprev == best);
    b_sel  = is_rnn ? prev_r[IW-1:0] : bidx;
  end

  // Lance-Williams update
  logic [15:0]        ni, nj, nk;
  logic [15:0]        dnew;
  logic signed [50:0] wnum;
  logic [17:0]        wden;
  logic signed [50:0] wq;
  always_comb begin
    ni   = csize[mi];
    nj   = csize[mj];
    nk   = csize[k[IW-1:0]];
    wnum = 51'(signed'({1'b0, 17'(ni) + 17'(nk)})) * 51'(signed'({1'b0, dik}))
         + 51'(signed'({1'b0, 17'(nj) + 17'(nk)})) * 51'(signed'({1'b0, m_rd_data}))
         - 51'(signed'({1'b0, nk})) * 51'(signed'({1'b0, dij}));
    wden = 18'(ni) + 18'(nj) + 18'(nk);
    wq   = wnum / 51'(signed'({1'b0, wden}));
    case (link_r)
      LINK_SINGLE: dnew = (dik < m_rd_data) ? dik : m_rd_data;
      LINK_WARD:   dnew = (wq < 0) ? 16'd0 : (wq > 51'sd65535) ? 16'hFFFF : 16'(wq);
      default:     dnew = (dik > m_rd_data) ? dik : m_rd_data;
    endcase
  end

  always_comb begin
    m_rd_en   = 1'b0;
    m_rd_i    = a_r;
    m_rd_j    = k[IW-1:0];
    m_wr_en   = 1'b0;
    m_wr_i    = mi;
    m_wr_j    = k[IW-1:0];
    m_wr_data = dnew;
    case (state)
      H_SCAN:  begin
        m_rd_en = (k < nn) && active[k[IW-1:0]] && (k[IW-1:0] != a_r);
      end
      H_UNEXT: begin
        m_rd_en = (k < nn) && active[k[IW-1:0]] && (k[IW-1:0] != mi) && (k[IW-1:0] != mj);
        m_rd_i  = mi;
      end
      H_URD2:  begin
        m_rd_en = 1'b1;
        m_rd_i  = mj;
      end
      H_UWR:   m_wr_en = 1'b1;
      default: ;
    endcase
    merge_valid         = (state == H_EMIT);
    merge_rec.keep_idx  = 16'(mi);
    merge_rec.rm_idx    = 16'(mj);
    merge_rec.distance  = dij;
    merge_rec.size      = csize[mi] + csize[mj];
    merge_rec.below_thr = dij < theta_r;
    tc_next = lnext[tc_idx];
    tc_cnt  = lcnt[tc_idx];
    busy    = (state != H_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= H_IDLE;
      active       <= '0;
      sp           <= '0;
      num_valid    <= '0;
      nn           <= '0;
      theta_r      <= '0;
      link_r       <= LINK_COMPLETE;
      k            <= '0;
      a_r          <= '0;
      prev_r       <= NIL;
      p_valid      <= 1'b0;
      p_k          <= '0;
      best         <= '1;
      dprev        <= '1;
      bidx         <= '0;
      has_prev     <= 1'b0;
      has_best     <= 1'b0;
      mi           <= '0;
      mj           <= '0;
      dij          <= '0;
      dik          <= '0;
      done         <= 1'b0;
      chain_pushes <= '0;
      thr_merges   <= '0;
      for (int q = 0; q < MAX_N; q++) begin
        csize[q] <= '0;
        chain[q] <= '0;
        lnext[q] <= NIL;
        ltail[q] <= IW'(q);
        lcnt[q]  <= '0;
      end
    end else begin
      done    <= 1'b0;
      p_valid <= 1'b0;
      // result of a row-scan read
      if (p_valid) begin
        if (!has_best || m_rd_data < best) begin
          best     <= m_rd_data;
          bidx     <= p_k;
          has_best <= 1'b1;
        end
        if ({1'b0, p_k} == prev_r) begin
          dprev    <= m_rd_data;
          has_prev <= 1'b1;
        end
      end
      case (state)
        H_IDLE: if (start) begin
          nn      <= n;
          theta_r <= theta;
          link_r  <= linkage;
          state   <= H_INIT;
        end
        H_INIT: begin
          for (int q = 0; q < MAX_N; q++) begin
            active[q] <= (q < int'(nn));
            csize[q]  <= (q < int'(nn)) ? 16'd1 : 16'd0;
            lnext[q]  <= NIL;
            ltail[q]  <= IW'(q);
            lcnt[q]   <= (q < int'(nn)) ? (IW+1)'(1) : '0;
          end
          num_valid <= nn;
          sp        <= '0;
          state     <= H_LOOP;
        end
        H_LOOP: begin
          if (num_valid <= 1) state <= H_DONE;
          else begin
            if (sp == 0) begin
              chain[0]     <= first_active;
              sp           <= 1;
              chain_pushes <= chain_pushes + 1;
            end
            state <= H_SSTART;
          end
        end
        H_SSTART: begin
          a_r      <= chain[sp[IW-1:0] - 1'b1];
          prev_r   <= (sp >= 2) ? {1'b0, chain[sp[IW-1:0] - IW'(2)]} : NIL;
          k        <= '0;
          best     <= '1;
          has_best <= 1'b0;
          has_prev <= 1'b0;
          state    <= H_SCAN;
        end
        H_SCAN: begin
          p_valid <= m_rd_en;
          p_k     <= k[IW-1:0];
          if (k + 1'b1 >= nn) state <= H_SDRAIN;
          k <= k + 1'b1;
        end
        H_SDRAIN: state <= H_DECIDE;
        H_DECIDE: begin
          if (is_rnn) begin
            mi    <= (a_r < b_sel) ? a_r : b_sel;
            mj    <= (a_r < b_sel) ? b_sel : a_r;
            dij   <= best;
            sp    <= sp - (IW+1)'(2);
            state <= H_EMIT;
          end else begin
            chain[sp[IW-1:0]] <= b_sel;
            sp                <= sp + 1'b1;
            chain_pushes      <= chain_pushes + 1;
            state             <= H_SSTART;
          end
        end
        H_EMIT: if (merge_ready) begin
          if (dij < theta_r) begin
            lnext[ltail[mi]] <= {1'b0, mj};
            ltail[mi]        <= ltail[mj];
            lcnt[mi]         <= lcnt[mi] + lcnt[mj];
            lcnt[mj]         <= '0;
            thr_merges       <= thr_merges + 1;
          end
          k     <= '0;
          state <= H_UNEXT;
        end
        H_UNEXT: begin
          if (k >= nn) state <= H_UEND;
          else if (m_rd_en) state <= H_URD2;
          else k <= k + 1'b1;
        end
        H_URD2: begin
          dik   <= m_rd_data;
          state <= H_UWR;
        end
        H_UWR: begin
          k     <= k + 1'b1;
          state <= H_UNEXT;
        end
        H_UEND: begin
          active[mj] <= 1'b0;
          csize[mi]  <= csize[mi] + csize[mj];
          num_valid  <= num_valid - 1'b1;
          state      <= H_LOOP;
        end
        H_DONE: begin
          done  <= 1'b1;
          state <= H_IDLE;
        end
        default: state <= H_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   merge_valid && !merge_ready |=> merge_valid && $stable(merge_rec));
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == H_DECIDE |-> sp != 0);
endmodule

// gstg_gsm: group-wise sorting module (GSM).
//
// Sorts the Gaussians of one tile group front to back by depth and hands
// out Sorted_G_Idx, the group-local indices in sorted order.  The paper
// names a quick sorting unit with 16 comparators; this is an iterative
// quicksort whose partition step compares LANES (16) keys with the pivot in
// every cycle:
//   * keys {depth, local index} are loaded one per cycle while the group
//     streams in (the index makes every key unique, so ties are broken by
//     arrival order);
//   * a range [lo, hi] is partitioned out of place from array A into array
//     B, smaller keys packed upward from lo, larger ones downward from hi,
//     16 keys per cycle; the pivot (middle element) lands in the gap, then B
//     is copied back into A 16 keys per cycle;
//   * the two sub-ranges go onto an explicit stack, the larger one first so
//     that the stack never holds more than log2(N) + 1 ranges;
//   * when the stack is empty A is streamed out, 16 indices per cycle.
// The out-of-place partition, the copy-back and the stack are this design's
// choices; the paper gives only "quick sorting" and the comparator count.
//
// Interface: clear empties the key store; load_valid/load_depth append one
// key (its index is the current count); start begins sorting the loaded
// keys; out_valid/out_addr/out_en/out_idx write LANES sorted indices
// starting at position out_addr; done pulses after the last write.  About
// 2 n log2(n) / 16 cycles plus 3 cycles per range for n keys.
module gstg_gsm
  import gstg_pkg::*;
#(
  parameter int N       = 1344,          // keys per group (group memory depth)
  parameter int LANES   = 16,            // comparators
  parameter int LIDX_W  = $clog2(N)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  input  logic                           load_valid,
  input  logic [DEPTH_W-1:0]             load_depth,
  input  logic                           start,
  output logic                           busy,
  output logic                           done,
  output logic [LIDX_W:0]                count,
  output logic                           out_valid,
  output logic [LIDX_W:0]                out_addr,
  output logic [LANES-1:0]               out_en,
  output logic [LANES-1:0][LIDX_W-1:0]   out_idx
);

  localparam int SD = 2 * $clog2(N) + 4;   // stack depth
  localparam int PW = LIDX_W + 2;          // signed position width

  typedef struct packed {
    logic [DEPTH_W-1:0] d;
    logic [LIDX_W-1:0]  i;
  } key_t;

  typedef enum logic [2:0] {S_LOAD, S_POP, S_PART, S_COPY, S_OUT} state_t;

  state_t                state;
  key_t                  A [N];
  key_t                  B [N];
  logic signed [PW-1:0]  stk_lo [SD];
  logic signed [PW-1:0]  stk_hi [SD];
  logic [$clog2(SD+1)-1:0] sp;
  logic signed [PW-1:0]  lo, hi, pidx, i, lp, rp, c, p;
  key_t                  piv;

  // Partition lane decisions (16 comparators).
  logic [LANES-1:0]      act, lt;
  logic signed [PW-1:0]  rank_l [LANES];
  logic signed [PW-1:0]  rank_r [LANES];
  logic signed [PW-1:0]  cnt_l, cnt_r;

  always_comb begin
    cnt_l = '0; cnt_r = '0;
    for (int j = 0; j < LANES; j++) begin
      logic signed [PW-1:0] pos;
      pos       = i + PW'(j);
      act[j]    = (pos <= hi) && (pos != pidx);
      lt[j]     = act[j] && (A[(pos <= hi) ? LIDX_W'(pos) : '0] < piv);
      rank_l[j] = cnt_l;
      rank_r[j] = cnt_r;
      if (act[j] &&  lt[j]) cnt_l = cnt_l + 1'b1;
      if (act[j] && !lt[j]) cnt_r = cnt_r + 1'b1;
    end
  end

  assign busy = (state != S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD; count <= '0; sp <= '0; done <= 1'b0; out_valid <= 1'b0;
      lo <= '0; hi <= '0; pidx <= '0; i <= '0; lp <= '0; rp <= '0; c <= '0; p <= '0;
      piv <= '0; out_addr <= '0; out_en <= '0; out_idx <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      case (state)
        S_LOAD: begin
          if (clear) count <= '0;
          else if (load_valid && count < (LIDX_W+1)'(N)) begin
            A[count[LIDX_W-1:0]] <= '{d: load_depth, i: count[LIDX_W-1:0]};
            count <= count + 1'b1;
          end
          if (start) begin
            if (count >= 2) begin
              stk_lo[0] <= '0;
              stk_hi[0] <= PW'(count) - 1'b1;
              sp        <= 1;
            end
            state <= S_POP;
          end
        end
        S_POP: begin
          if (sp == 0) begin
            state <= S_OUT;
            c     <= '0;
          end else begin
            logic signed [PW-1:0] l, h, m;
            l = stk_lo[sp - 1'b1];
            h = stk_hi[sp - 1'b1];
            m = l + ((h - l) >>> 1);
            sp   <= sp - 1'b1;
            lo   <= l; hi <= h; pidx <= m;
            piv  <= A[LIDX_W'(m)];
            i    <= l; lp <= l; rp <= h;
            state <= S_PART;
          end
        end
        S_PART: begin
          for (int j = 0; j < LANES; j++) begin
            if (act[j]) begin
              if (lt[j]) B[LIDX_W'(lp + rank_l[j])] <= A[LIDX_W'(i + PW'(j))];
              else       B[LIDX_W'(rp - rank_r[j])] <= A[LIDX_W'(i + PW'(j))];
            end
          end
          lp <= lp + cnt_l;
          rp <= rp - cnt_r;
          i  <= i + PW'(LANES);
          if (i + PW'(LANES) > hi) begin
            p     <= lp + cnt_l;
            c     <= lo;
            state <= S_COPY;
          end
        end
        S_COPY: begin
          for (int j = 0; j < LANES; j++) begin
            logic signed [PW-1:0] pos;
            pos = c + PW'(j);
            if (pos <= hi) A[LIDX_W'(pos)] <= (pos == p) ? piv : B[LIDX_W'(pos)];
          end
          c <= c + PW'(LANES);
          if (c + PW'(LANES) > hi) begin
            // push the larger sub-range first, the smaller one is sorted next
            logic signed [PW-1:0] nl, nr;
            logic [$clog2(SD+1)-1:0] s;
            nl = p - lo;      // size of [lo, p-1]
            nr = hi - p;      // size of [p+1, hi]
            s  = sp;
            if (nl >= nr) begin
              if (nl >= 2) begin stk_lo[s] <= lo;    stk_hi[s] <= p - 1'b1; s = s + 1'b1; end
              if (nr >= 2) begin stk_lo[s] <= p + 1'b1; stk_hi[s] <= hi;    s = s + 1'b1; end
            end else begin
              if (nr >= 2) begin stk_lo[s] <= p + 1'b1; stk_hi[s] <= hi;    s = s + 1'b1; end
              if (nl >= 2) begin stk_lo[s] <= lo;    stk_hi[s] <= p - 1'b1; s = s + 1'b1; end
            end
            sp    <= s;
            state <= S_POP;
          end
        end
        S_OUT: begin
          out_valid <= 1'b1;
          out_addr  <= (LIDX_W+1)'(c);
          for (int j = 0; j < LANES; j++) begin
            logic signed [PW-1:0] pos;
            pos        = c + PW'(j);
            out_en[j]  <= (pos < PW'(count));
            out_idx[j] <= A[(pos < PW'(count)) ? LIDX_W'(pos) : '0].i;
          end
          c <= c + PW'(LANES);
          if (c + PW'(LANES) >= PW'(count)) begin
            done  <= 1'b1;
            state <= S_LOAD;
          end
        end
        default: state <= S_LOAD;
      endcase
      assert (sp <= SD) else $error("GSM stack overflow");
    end
  end

endmodule

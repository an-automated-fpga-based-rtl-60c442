// ecn: elementary check node, the step of the check-node forward-backward
// recursion.
//
// Given two LLRVs A and B (n_m entries each, sorted by ascending cost, cost 0
// = most likely), the output C holds the n_m most likely distinct symbols of
// a XOR b (GF(2^m) addition) with cost A+B (EMS, saturated to 2^Q-1) or
// max(A,B) (min-max, `mm` = 1). The sorter of length L = LSCN holds one
// "bubble" per row i of the A x B cost matrix: it is loaded with (i, 0) for
// i < L, one per cycle; afterwards every cycle the cheapest bubble (i, j) is
// taken, emitted unless its symbol was emitted before, and replaced by
// (i, j+1). This is an exact k-way merge of the first L rows, so the result
// equals full EMS/min-max truncation whenever L >= n_m; a smaller L trades
// accuracy for area, as with the paper's reduced sorter length.
//
// Interface: `start` latches a_list, b_list and mm; `done` pulses when c_list
// is complete and c_list then stays stable until the next start. Output slots
// that cannot be filled carry cost 2^Q-1. Timing: done comes
// 2 + L + n_m + d cycles after start, d = number of duplicate symbols
// skipped (the paper's 2 + L_S-CN + n_m when d = 0).
//
// The bubble merge, the duplicate handling and the saturation are this
// design's own realisation of the ECN the paper names.
module ecn #(
  parameter int unsigned GFB  = 5,
  parameter int unsigned Q    = 6,
  parameter int unsigned NM   = 8,
  parameter int unsigned LSCN = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     mm,
  input  logic [NM-1:0][Q+GFB-1:0] a_list,
  input  logic [NM-1:0][Q+GFB-1:0] b_list,
  output logic [NM-1:0][Q+GFB-1:0] c_list,
  output logic                     busy,
  output logic                     done
);

  localparam int unsigned L    = LSCN;
  localparam int unsigned IW   = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1;
  localparam int unsigned CMAX = (1 << Q) - 1;
  localparam int unsigned QQ   = 1 << GFB;

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_LOAD, S_EXTRACT} state_t;
  state_t state;

  logic [NM-1:0][Q+GFB-1:0] a_q, b_q;
  logic                     mm_q;
  // bubble registers: valid, row i, column j, cost
  logic [L-1:0]             bv;
  logic [L-1:0][IW-1:0]     bi, bj;
  logic [L-1:0][Q-1:0]      bc;
  logic [LW-1:0]            ld_cnt;
  logic [IW:0]              out_cnt;
  logic [QQ-1:0]            seen;

  function automatic logic [Q-1:0] comb_cost(input logic [Q-1:0] x, input logic [Q-1:0] y,
                                             input logic use_max);
    logic [Q:0] s;
    if (use_max) return (x > y) ? x : y;
    s = {1'b0, x} + {1'b0, y};
    return (s > (Q+1)'(CMAX)) ? Q'(CMAX) : s[Q-1:0];
  endfunction

  // Cheapest valid bubble (lowest index wins ties).
  logic [LW-1:0] min_idx;
  logic          any_valid;
  always_comb begin
    min_idx   = '0;
    any_valid = 1'b0;
    for (int unsigned l = 0; l < L; l++) begin
      if (bv[l] && (!any_valid || bc[l] < bc[min_idx])) begin
        min_idx   = LW'(l);
        any_valid = 1'b1;
      end
    end
  end

  logic [GFB-1:0] head_sym;
  logic [IW-1:0]  head_i, head_j;
  logic [Q-1:0]   head_c, next_c;
  always_comb begin
    head_i   = bi[min_idx];
    head_j   = bj[min_idx];
    head_c   = bc[min_idx];
    head_sym = a_q[head_i][GFB-1:0] ^ b_q[head_j][GFB-1:0];
    next_c   = comb_cost(a_q[head_i][Q+GFB-1:GFB],
                         b_q[(head_j == IW'(NM - 1)) ? head_j : head_j + 1'b1][Q+GFB-1:GFB], mm_q);
  end

  wire finish = (state == S_EXTRACT) &&
                (!any_valid || (out_cnt == (IW+1)'(NM - 1) && !seen[head_sym]));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      bv      <= '0;
      bi      <= '0;
      bj      <= '0;
      bc      <= '0;
      ld_cnt  <= '0;
      out_cnt <= '0;
      seen    <= '0;
      a_q     <= '0;
      b_q     <= '0;
      mm_q    <= 1'b0;
      c_list  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          a_q   <= a_list;
          b_q   <= b_list;
          mm_q  <= mm;
          state <= S_INIT;
        end
        S_INIT: begin
          bv      <= '0;
          seen    <= '0;
          out_cnt <= '0;
          ld_cnt  <= '0;
          for (int unsigned i = 0; i < NM; i++) c_list[i] <= {Q'(CMAX), GFB'(0)};
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (int'(ld_cnt) < int'(NM)) begin
            bv[ld_cnt] <= 1'b1;
            bi[ld_cnt] <= IW'(ld_cnt);
            bj[ld_cnt] <= '0;
            bc[ld_cnt] <= comb_cost(a_q[IW'(ld_cnt)][Q+GFB-1:GFB], b_q[0][Q+GFB-1:GFB], mm_q);
          end
          ld_cnt <= ld_cnt + 1'b1;
          if (ld_cnt == LW'(L - 1)) state <= S_EXTRACT;
        end
        S_EXTRACT: begin
          if (any_valid) begin
            if (!seen[head_sym]) begin
              c_list[out_cnt[IW-1:0]] <= {head_c, head_sym};
              seen[head_sym]          <= 1'b1;
              out_cnt                 <= out_cnt + 1'b1;
            end
            if (head_j == IW'(NM - 1)) begin
              bv[min_idx] <= 1'b0;
            end else begin
              bj[min_idx] <= head_j + 1'b1;
              bc[min_idx] <= next_c;
            end
          end
          if (finish) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule

// vn_unit: variable-node update of the EMS / min-max decoder.
//
// Combines two LLRVs P and C (n_m entries each, ascending cost) into the
// LLRV of the sum of their log-likelihoods: for every symbol s present in P
// or C the cost is P(s) + C(s), where a symbol missing from a list is charged
// that list's last (largest) cost. Both lists are first written into VN RAMs
// addressed by GF symbol (q entries: valid and first position for both, cost for C; a symbol of C
// that is also in P is never looked up, so P needs no cost column), so
// that the cost of any symbol in the other list is one look-up away. The two
// lists are then streamed one position k per cycle: candidate P[k] always, and
// candidate C[k] only if its symbol is absent from P (no symbol is counted
// twice); both enter an insertion sorter of length L_S-VN. The sorted result
// is normalised (first cost 0) and saturated to 2^Q-1; slots beyond L_S-VN
// carry cost 2^Q-1.
//
// Interface: `start` latches p_list and c_list; `done` pulses when o_list is
// valid, and o_list then holds until the next start. Timing: done 3 + n_m
// cycles after start (1 cycle VN RAM write, n_m stream cycles, 1 output
// cycle). The paper quotes 2 + L_S-VN + n_m; the sorter here settles as the
// candidates arrive, so the L_S-VN drain cycles are not needed.
//
// The VN RAM look-up structure follows the paper; the missing-symbol rule,
// the duplicate filter and the normalisation are this design's choices.
module vn_unit #(
  parameter int unsigned GFB  = 5,
  parameter int unsigned Q    = 6,
  parameter int unsigned NM   = 8,
  parameter int unsigned LSVN = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [NM-1:0][Q+GFB-1:0] p_list,
  input  logic [NM-1:0][Q+GFB-1:0] c_list,
  output logic [NM-1:0][Q+GFB-1:0] o_list,
  output logic                     busy,
  output logic                     done
);

  localparam int unsigned QQ   = 1 << GFB;
  localparam int unsigned IW   = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned KW   = Q + 1;
  localparam int unsigned CMAX = (1 << Q) - 1;

  typedef enum logic [1:0] {S_IDLE, S_RAM, S_STREAM, S_OUT} state_t;
  state_t state;

  logic [NM-1:0][Q+GFB-1:0] p_q, c_q;
  // VN RAMs, addressed by symbol
  logic [QQ-1:0]            p_v, c_v;
  logic [QQ-1:0][Q-1:0]     c_c;
  logic [QQ-1:0][IW-1:0]    p_i, c_i;
  logic [IW-1:0]            k;

  logic [1:0]                ins_valid;
  logic [1:0][KW-1:0]        ins_key;
  logic [1:0][GFB-1:0]       ins_data;
  logic [LSVN-1:0][KW-1:0]   s_key;
  logic [LSVN-1:0][GFB-1:0]  s_data;

  logic [GFB-1:0] ps, cs;
  logic [Q-1:0]   p_last, c_last;
  always_comb begin
    ps     = p_q[k][GFB-1:0];
    cs     = c_q[k][GFB-1:0];
    p_last = p_q[NM-1][Q+GFB-1:GFB];
    c_last = c_q[NM-1][Q+GFB-1:GFB];
    ins_valid[0] = (state == S_STREAM) && (p_i[ps] == k);
    ins_key[0]   = KW'(p_q[k][Q+GFB-1:GFB]) + KW'(c_v[ps] ? c_c[ps] : c_last);
    ins_data[0]  = ps;
    ins_valid[1] = (state == S_STREAM) && !p_v[cs] && (c_i[cs] == k);
    ins_key[1]   = KW'(c_q[k][Q+GFB-1:GFB]) + KW'(p_last);
    ins_data[1]  = cs;
  end

  sorter #(.LEN(LSVN), .KW(KW), .DW(GFB)) u_sorter (
    .clk, .rst_n, .clear(state == S_RAM), .in_valid(ins_valid), .in_key(ins_key),
    .in_data(ins_data), .out_key(s_key), .out_data(s_data)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      done   <= 1'b0;
      k      <= '0;
      p_q    <= '0;
      c_q    <= '0;
      p_v    <= '0;
      c_v    <= '0;
      c_c    <= '0;
      p_i    <= '0;
      c_i    <= '0;
      o_list <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          p_q   <= p_list;
          c_q   <= c_list;
          state <= S_RAM;
        end
        S_RAM: begin
          // VN RAM write; walking backwards lets the first occurrence win.
          p_v <= '0;
          c_v <= '0;
          for (int i = int'(NM) - 1; i >= 0; i--) begin
            p_v[p_q[i][GFB-1:0]] <= 1'b1;
            p_i[p_q[i][GFB-1:0]] <= IW'(i);
            c_v[c_q[i][GFB-1:0]] <= 1'b1;
            c_c[c_q[i][GFB-1:0]] <= c_q[i][Q+GFB-1:GFB];
            c_i[c_q[i][GFB-1:0]] <= IW'(i);
          end
          k     <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          k <= k + 1'b1;
          if (k == IW'(NM - 1)) state <= S_OUT;
        end
        S_OUT: begin
          for (int unsigned i = 0; i < NM; i++) begin
            if (i < LSVN && s_key[i] != '1) begin
              o_list[i] <= {((s_key[i] - s_key[0]) > KW'(CMAX)) ? Q'(CMAX)
                                                                 : Q'(s_key[i] - s_key[0]),
                            s_data[i]};
            end else begin
              o_list[i] <= {Q'(CMAX), GFB'(0)};
            end
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule

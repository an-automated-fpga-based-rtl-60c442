// llrv_channel: one prior-generation channel of the emulator.
//
// For each variable node (GF(q) symbol) it draws GFB = log2(q) bit LLRs from
// GFB parallel AWGN generators and then, during q cycles, walks through all
// field elements a = 0..q-1 (the GF LUT gives the GFB-bit pattern of a; in
// the polynomial basis that pattern is a itself). A multiplexer array passes
// the LLR of every bit that is 1 in a and 0 otherwise, a GFB-input adder sums
// them into the symbol cost, and the sum enters a length-q insertion sorter.
// Over the next n_m cycles the n_m smallest costs are written out, one entry
// per cycle, after subtracting the smallest cost (so entry 0 has cost 0) and
// saturating to Q bits. A bit LLR is log P(0)/P(1), so a small cost is a
// likely symbol.
//
// Interface: `start` with `n_vn` runs n_vn nodes back to back; every output
// entry comes with wr_en, the local node number wr_vn and the entry index
// wr_idx. `done` pulses one cycle after the last write. Timing: 2 cycles to
// accept start and draw the first samples (T_overhead), then exactly
// q + n_m cycles per node (the samples
// of the next node are drawn in the last write cycle), as in the paper.
//
// Follows the paper: GFB generators, mux array, adder, sorter of length q,
// q + n_m cycles per node. Own choices: the cost sign convention, the
// normalisation and the GF LUT being the identity pattern table.
module llrv_channel #(
  parameter int unsigned QQ   = 32,
  parameter int unsigned GFB  = 5,
  parameter int unsigned Q    = 6,
  parameter int unsigned NM   = 8,
  parameter int unsigned VW   = 8,
  parameter logic [63:0] SEED = 64'h0123_4567_89AB_CDEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [VW-1:0]        n_vn,
  input  logic [3:0]           snr_idx,
  output logic                 wr_en,
  output logic [VW-1:0]        wr_vn,
  output logic [$clog2(NM)-1:0] wr_idx,
  output logic [Q+GFB-1:0]     wr_entry,
  output logic                 busy,
  output logic                 done
);

  localparam int unsigned SW   = Q + $clog2(GFB) + 1;   // signed symbol-sum width
  localparam int unsigned CMAX = (1 << Q) - 1;

  typedef enum logic [1:0] {S_IDLE, S_DRAW, S_FEED, S_WRITE} state_t;
  state_t state;

  logic [$clog2(QQ)-1:0] sym_cnt;
  logic [$clog2(NM)-1:0] ent_cnt;
  logic [VW-1:0]         vn_cnt, vn_total;
  logic                  advance, sort_clear;

  logic signed [Q-1:0]   bit_llr [GFB];
  logic [GFB-1:0]        gf_pattern;
  logic signed [SW-1:0]  sym_sum;
  logic [1:0]            ins_valid;
  logic [1:0][SW-1:0]    ins_key;
  logic [1:0][GFB-1:0]   ins_data;
  logic [QQ-1:0][SW-1:0] s_key;
  logic [QQ-1:0][GFB-1:0] s_data;

  for (genvar b = 0; b < GFB; b++) begin : g_awgn
    awgn_generator #(.Q(Q), .SEED(SEED ^ (64'(b + 1) * 64'h2545_F491_4F6C_DD1D))) u_awgn (
      .clk, .rst_n, .advance, .snr_idx, .llr(bit_llr[b])
    );
  end

  // GF LUT, multiplexer array and GFB-input adder.
  always_comb begin
    gf_pattern = GFB'(sym_cnt);
    sym_sum    = '0;
    for (int unsigned b = 0; b < GFB; b++)
      sym_sum = sym_sum + (gf_pattern[b] ? SW'(bit_llr[b]) : SW'(0));
  end

  // Signed sum biased to an unsigned sort key.
  always_comb begin
    ins_valid  = {1'b0, state == S_FEED};
    ins_key[0] = sym_sum ^ (SW'(1) << (SW - 1));
    ins_key[1] = '0;
    ins_data[0] = GFB'(sym_cnt);
    ins_data[1] = '0;
  end

  sorter #(.LEN(QQ), .KW(SW), .DW(GFB)) u_sorter (
    .clk, .rst_n, .clear(sort_clear), .in_valid(ins_valid), .in_key(ins_key),
    .in_data(ins_data), .out_key(s_key), .out_data(s_data)
  );

  // Normalised entry ent_cnt of the sorted list.
  logic [SW-1:0] diff;
  always_comb begin
    diff     = s_key[ent_cnt] - s_key[0];
    wr_entry = {(diff > SW'(CMAX)) ? Q'(CMAX) : Q'(diff), s_data[ent_cnt]};
    wr_en    = (state == S_WRITE);
    wr_idx   = ent_cnt;
    wr_vn    = vn_cnt;
    busy     = (state != S_IDLE);
  end

  wire last_write = (state == S_WRITE) && (ent_cnt == $clog2(NM)'(NM - 1));
  wire more_vn    = (vn_cnt + 1'b1) < vn_total;
  assign advance    = (state == S_DRAW) || (last_write && more_vn);
  assign sort_clear = advance;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      sym_cnt  <= '0;
      ent_cnt  <= '0;
      vn_cnt   <= '0;
      vn_total <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          vn_total <= n_vn;
          vn_cnt   <= '0;
          state    <= (n_vn == '0) ? S_IDLE : S_DRAW;
          done     <= (n_vn == '0);
        end
        S_DRAW: begin
          sym_cnt <= '0;
          state   <= S_FEED;
        end
        S_FEED: begin
          sym_cnt <= sym_cnt + 1'b1;
          if (sym_cnt == $clog2(QQ)'(QQ - 1)) begin
            ent_cnt <= '0;
            state   <= S_WRITE;
          end
        end
        S_WRITE: begin
          ent_cnt <= ent_cnt + 1'b1;
          if (last_write) begin
            if (more_vn) begin
              vn_cnt  <= vn_cnt + 1'b1;
              sym_cnt <= '0;
              state   <= S_FEED;
            end else begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule

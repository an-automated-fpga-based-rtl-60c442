// awgn_generator: source of bit LLRs for an all-zero BPSK codeword on an AWGN
// channel.
//
// A 64-bit xorshift generator yields four 10-bit uniform numbers per draw;
// their sum minus its mean is an approximately Gaussian value g (central
// limit theorem, standard deviation about 591). The LLR of the bit is
//   llr = sat_Q( mean(snr) + round((g * kstd(snr)) / 2^16) )
// with mean and noise scale taken from the SNR table in nbldpc_pkg (LSB of the
// LLR = 0.5). A positive LLR favours the transmitted 0.
//
// Interface: when `advance` is high a new sample is drawn; `llr` is
// registered and valid from the next cycle until the following draw.
//
// The paper names these generators and says each yields a Q-bit LLR; the
// Gaussian approximation, the generator and the table are this design's own.
module awgn_generator
  import nbldpc_pkg::*;
#(
  parameter int unsigned Q    = 6,
  parameter logic [63:0] SEED = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                advance,
  input  logic [3:0]          snr_idx,
  output logic signed [Q-1:0] llr
);

  localparam logic signed [25:0] LMAX = 26'((1 << (Q - 1)) - 1);

  logic [63:0] state, nxt;
  logic signed [12:0] g;
  logic signed [25:0] noise;
  logic signed [25:0] val;

  always_comb begin
    nxt = state;
    nxt = nxt ^ (nxt << 13);
    nxt = nxt ^ (nxt >> 7);
    nxt = nxt ^ (nxt << 17);
  end

  always_comb begin
    g     = 13'(signed'({3'b0, nxt[9:0]}) + signed'({3'b0, nxt[25:16]})
              + signed'({3'b0, nxt[41:32]}) + signed'({3'b0, nxt[57:48]}) - 13'sd2046);
    noise = (26'(g) * signed'({15'b0, llr_kstd(snr_idx)}) + 26'sd32768) >>> 16;
    val   = noise + signed'({18'b0, llr_mean(snr_idx)});
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= (SEED == 64'd0) ? 64'd1 : SEED;
      llr   <= '0;
    end else if (advance) begin
      state <= nxt;
      if (val > LMAX)       llr <= Q'(LMAX);
      else if (val < -LMAX) llr <= Q'(-LMAX);
      else                  llr <= Q'(val);
    end
  end

endmodule

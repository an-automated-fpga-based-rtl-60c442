// nbldpc_pkg: constants and helper functions shared by the NB-LDPC emulator.
//
// Holds the Galois-field arithmetic used to build the permutation tables
// (polynomial basis, one primitive polynomial per field size up to GF(256)),
// the channel table that turns the run-time SNR step into LLR mean and noise
// scale, and the code-construction formulas that fill the position and entry
// look-up tables. Everything here is evaluated at elaboration or as plain
// combinational logic; there is no state.
//
// The field sizes, LLR width and code shape defaults follow the paper's main
// configuration (GF(32), 6-bit messages, n_m = 8, rate-1/2 (2,4)-regular code
// of 960 bits). The primitive polynomials, the SNR table and the H-matrix
// formula are this design's own choices: the paper does not print them.
package nbldpc_pkg;

  // Largest field handled by the helper functions (GF(256)).
  localparam int unsigned GF_MAXB = 8;

  // Primitive polynomial (including the x^m term) for GF(2^m).
  function automatic logic [GF_MAXB:0] prim_poly(input int unsigned m);
    case (m)
      2:       return 9'h007;
      3:       return 9'h00B;
      4:       return 9'h013;
      5:       return 9'h025;   // x^5 + x^2 + 1
      6:       return 9'h043;
      7:       return 9'h089;
      default: return 9'h11D;
    endcase
  endfunction

  // Product a*b in GF(2^m), shift-and-add with reduction.
  function automatic logic [GF_MAXB-1:0] gf_mul(input logic [GF_MAXB-1:0] a,
                                                input logic [GF_MAXB-1:0] b,
                                                input int unsigned m);
    logic [GF_MAXB:0] acc, sh, poly;
    poly = prim_poly(m);
    acc  = '0;
    sh   = {1'b0, a};
    for (int i = 0; i < GF_MAXB; i++) begin
      if (i < int'(m)) begin
        if (b[i]) acc = acc ^ sh;
        sh = sh << 1;
        if (sh[m]) sh = sh ^ poly;
      end
    end
    return acc[GF_MAXB-1:0];
  endfunction

  // alpha^e in GF(2^m), alpha = x.
  function automatic logic [GF_MAXB-1:0] gf_pow_alpha(input int unsigned e,
                                                      input int unsigned m);
    logic [GF_MAXB-1:0] r;
    r = 8'd1;
    for (int unsigned i = 0; i < e; i++) r = gf_mul(r, 8'd2, m);
    return r;
  endfunction

  // Multiplicative inverse (0 maps to 0): brute-force search.
  function automatic logic [GF_MAXB-1:0] gf_inv(input logic [GF_MAXB-1:0] a,
                                                input int unsigned m);
    logic [GF_MAXB-1:0] r;
    r = '0;
    for (int unsigned x = 1; x < (1 << m); x++)
      if (gf_mul(a, GF_MAXB'(x), m) == 8'd1) r = GF_MAXB'(x);
    return r;
  endfunction

  // ---------------------------------------------------------------------------
  // Channel model table. BPSK over AWGN at code rate 1/2, bit 0 sent as +1.
  // For Eb/N0 = snr_idx * 0.5 dB: sigma^2 = 1 / (2 R 10^(Eb/N0/10)), bit LLR
  // = 2y/sigma^2 with mean 2/sigma^2 and standard deviation 2/sigma. LLRs use
  // an LSB of 0.5, so llr_mean = round(4/sigma^2). The Gaussian source has a
  // standard deviation of 591 codes, so the noise scale is
  // llr_kstd = round(4/sigma * 65536 / 591) and noise = (g * llr_kstd) >>> 16.
  // ---------------------------------------------------------------------------
  function automatic logic [7:0] llr_mean(input logic [3:0] snr_idx);
    case (snr_idx)
      4'd0: return 8'd4;   4'd1: return 8'd4;   4'd2: return 8'd5;   4'd3: return 8'd6;
      4'd4: return 8'd6;   4'd5: return 8'd7;   4'd6: return 8'd8;   4'd7: return 8'd9;
      4'd8: return 8'd10;  4'd9: return 8'd11;  4'd10: return 8'd13; 4'd11: return 8'd14;
      4'd12: return 8'd16; 4'd13: return 8'd18; 4'd14: return 8'd20; default: return 8'd22;
    endcase
  endfunction

  function automatic logic [10:0] llr_kstd(input logic [3:0] snr_idx);
    case (snr_idx)
      4'd0: return 11'd444;  4'd1: return 11'd470;  4'd2: return 11'd498;  4'd3: return 11'd527;
      4'd4: return 11'd558;  4'd5: return 11'd591;  4'd6: return 11'd627;  4'd7: return 11'd664;
      4'd8: return 11'd703;  4'd9: return 11'd745;  4'd10: return 11'd789; 4'd11: return 11'd836;
      4'd12: return 11'd885; 4'd13: return 11'd937; 4'd14: return 11'd993; default: return 11'd1052;
    endcase
  endfunction

  // ---------------------------------------------------------------------------
  // Regular (2, dc) parity-check matrix used by the position / entry LUTs.
  // Edge e = r*dc + k (row r, k-th non-zero of the row).
  //   rows 0 .. m/2-1  : column = e                       (block diagonal)
  //   rows m/2 .. m-1  : column = (13 * (e - m*dc/2) + 5) mod n
  // Every column then has exactly one edge in each half (needs n = m*dc/2 and
  // gcd(13, n) = 1). Entry of edge e: alpha^((7*e + 1) mod (q-1)).
  // ---------------------------------------------------------------------------
  function automatic int unsigned h_col(input int unsigned e, input int unsigned m,
                                        input int unsigned dc, input int unsigned n);
    int unsigned half;
    half = (m * dc) / 2;
    if (e < half) return e % n;
    return (13 * (e - half) + 5) % n;
  endfunction

  function automatic logic [GF_MAXB-1:0] h_entry(input int unsigned e, input int unsigned gfb);
    return gf_pow_alpha((7 * e + 1) % ((1 << gfb) - 1), gfb);
  endfunction

endpackage

// decision: hard-decision read-out of one decoded frame.
//
// After decoding, it walks through the N columns, reads each decided GF(q)
// symbol from the decoder's posterior memory and compares it with the
// transmitted symbol. The emulator always sends the all-zero codeword, so a
// symbol is wrong when its decision is non-zero and its bit errors are the
// number of ones in the decision.
//
// Interface: `start` begins the scan; post_addr drives the posterior memory
// (1-cycle read latency); every cycle with sym_valid reports one column
// (sym_err, bit_errs); `done` pulses with the last report. Timing: N + 1
// cycles from start to done.
//
// The block and the all-zero codeword follow the paper; the scan order and
// the per-symbol report format are this design's choices.
module decision #(
  parameter int unsigned N   = 192,
  parameter int unsigned GFB = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic [$clog2(N)-1:0]     post_addr,
  input  logic [GFB-1:0]           post_sym,
  output logic                     sym_valid,
  output logic                     sym_err,
  output logic [$clog2(GFB+1)-1:0] bit_errs,
  output logic                     done
);

  localparam int unsigned CW = $clog2(N);

  logic          scanning, rd_pending, last_pending;
  logic [CW-1:0] addr;

  assign post_addr = addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      scanning     <= 1'b0;
      rd_pending   <= 1'b0;
      last_pending <= 1'b0;
      addr         <= '0;
    end else begin
      rd_pending   <= scanning;
      last_pending <= scanning && (32'(addr) == N - 1);
      if (start && !scanning) begin
        scanning <= 1'b1;
        addr     <= '0;
      end else if (scanning) begin
        if (32'(addr) == N - 1) begin
          scanning <= 1'b0;
          addr     <= '0;
        end else begin
          addr <= addr + 1'b1;
        end
      end
    end
  end

  always_comb begin
    sym_valid = rd_pending;
    sym_err   = rd_pending && (post_sym != '0);
    bit_errs  = '0;
    if (rd_pending)
      for (int unsigned b = 0; b < GFB; b++) bit_errs = bit_errs + post_sym[b];
    done = last_pending;
  end

endmodule

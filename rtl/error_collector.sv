// error_collector: frame, symbol and bit error counters of an emulation run.
//
// It adds up the per-symbol reports of the decision block into the counts of
// the current frame. When the frame ends (`frame_end`), a frame with at least
// one wrong symbol increments FE and is logged to the error memory as a record
// {frame number, symbol errors, bit errors} (16 bits each, saturating); the
// frame's counts are added to the run totals SE and BE.
//
// Interface: `clear` zeroes everything at the start of a run; sym_valid /
// sym_err / bit_errs come from the decision block; frame_end pulses with or
// after the frame's last report; log_we/log_data feed the error memory one
// cycle after frame_end. Counters are CW bits and saturate.
//
// The outputs FE, SE, BE follow the paper; widths and the record format are
// this design's choices.
module error_collector #(
  parameter int unsigned CW   = 32,
  parameter int unsigned BEW  = 3
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           sym_valid,
  input  logic           sym_err,
  input  logic [BEW-1:0] bit_errs,
  input  logic           frame_end,
  output logic [CW-1:0]  fe,
  output logic [CW-1:0]  se,
  output logic [CW-1:0]  be,
  output logic [CW-1:0]  frames,
  output logic           log_we,
  output logic [47:0]    log_data
);

  logic [15:0] f_se, f_be, f_se_n, f_be_n;

  function automatic logic [15:0] sat16(input logic [16:0] x);
    return x[16] ? 16'hFFFF : x[15:0];
  endfunction

  function automatic logic [CW-1:0] sat_add(input logic [CW-1:0] a, input logic [15:0] b);
    logic [CW:0] s;
    s = {1'b0, a} + (CW+1)'(b);
    return s[CW] ? '1 : s[CW-1:0];
  endfunction

  always_comb begin
    f_se_n = f_se;
    f_be_n = f_be;
    if (sym_valid) begin
      f_se_n = sat16({1'b0, f_se} + 17'(sym_err));
      f_be_n = sat16({1'b0, f_be} + 17'(bit_errs));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      fe       <= '0;
      se       <= '0;
      be       <= '0;
      frames   <= '0;
      f_se     <= '0;
      f_be     <= '0;
      log_we   <= 1'b0;
      log_data <= '0;
    end else begin
      log_we <= 1'b0;
      if (frame_end) begin
        f_se   <= '0;
        f_be   <= '0;
        frames <= sat_add(frames, 16'd1);
        se     <= sat_add(se, f_se_n);
        be     <= sat_add(be, f_be_n);
        if (f_se_n != '0) begin
          fe       <= sat_add(fe, 16'd1);
          log_we   <= 1'b1;
          log_data <= {frames[15:0], f_se_n, f_be_n};
        end
      end else begin
        f_se <= f_se_n;
        f_be <= f_be_n;
      end
    end
  end

endmodule

// prior_generator: fills the prior memory with the sorted prior LLRVs of one
// frame (the PG state of the emulator).
//
// Two llrv_channel instances run in parallel, one per write port of the
// dual-port prior memory: channel 0 produces the even variable nodes and
// channel 1 the odd ones. Each channel reports a local node number that is
// turned into the global one here (2*local + channel).
//
// Interface: `start` pulses; `done` pulses once both channels have finished.
// Timing: T_overhead + (N/2)*(q + n_m) cycles from start to the last write,
// with T_overhead = 2 cycles (accept, draw), and `done` one cycle after the later
// channel's `done` (the paper's T_overhead + (n/2)(q+n_m)).
//
// The two-channel structure and the cycle count follow the paper; the
// even/odd split is this design's own choice. N must be even.
module prior_generator #(
  parameter int unsigned QQ  = 32,
  parameter int unsigned GFB = 5,
  parameter int unsigned Q   = 6,
  parameter int unsigned NM  = 8,
  parameter int unsigned N   = 192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [3:0]               snr_idx,
  output logic [1:0]               wr_en,
  output logic [1:0][$clog2(N)-1:0] wr_vn,
  output logic [1:0][$clog2(NM)-1:0] wr_idx,
  output logic [1:0][Q+GFB-1:0]    wr_entry,
  output logic                     busy,
  output logic                     done
);

  localparam int unsigned VW = $clog2(N);

  logic [1:0]         ch_done, ch_busy, fin;
  logic [1:0][VW-1:0] ch_vn;

  for (genvar c = 0; c < 2; c++) begin : g_ch
    llrv_channel #(
      .QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM), .VW(VW),
      .SEED(64'h0123_4567_89AB_CDEF ^ (64'(c) * 64'hD6E8_FEB8_6659_FD93))
    ) u_ch (
      .clk, .rst_n, .start, .n_vn(VW'(N / 2)), .snr_idx,
      .wr_en(wr_en[c]), .wr_vn(ch_vn[c]), .wr_idx(wr_idx[c]), .wr_entry(wr_entry[c]),
      .busy(ch_busy[c]), .done(ch_done[c])
    );
    assign wr_vn[c] = VW'({ch_vn[c], 1'b0}) | VW'(c);
  end

  // Both channels run the same schedule, but the finish of each is recorded
  // so that `done` does not depend on that.
  always_ff @(posedge clk) begin
    if (!rst_n || start) begin
      fin  <= '0;
      done <= 1'b0;
    end else begin
      fin  <= (fin | ch_done) & ~{2{&(fin | ch_done)}};
      done <= &(fin | ch_done);
    end
  end

  assign busy = |ch_busy;

endmodule

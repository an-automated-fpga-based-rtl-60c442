// top_controller: run-level finite-state machine of the emulator.
//
// It waits in IDLE until Start goes from 0 to 1, then enters RUN. RUN holds
// two sub-state machines that work on consecutive frames at once:
//   PG  (prior generation) - start the prior generator into a free bank of
//       the double-buffered prior memory and wait for it; the bank is then
//       marked full;
//   DD  (decode and decision) - once the oldest full bank is ready, start the
//       decoder on it (its completion triggers the decision scan) and wait for
//       the scan; the bank is then free again and COUNT increments.
// So PG of frame k+1 runs while DD decodes frame k. PG stops after
// frame_limit frames have been generated; when COUNT reaches the frame limit
// the controller returns to IDLE.
//
// Interface: `start` is edge-detected; frame_limit is sampled on the rising
// edge (0 is treated as 1); pg_start / dd_start are one-cycle pulses with
// pg_bank / dd_bank naming the prior-memory bank to write / read (stable
// while the block runs); pg_done / dd_done are one-cycle pulses from the
// blocks; run_clear pulses on the Start edge to clear the error counters;
// `running` is high in RUN.
//
// The IDLE/RUN states, the PG and DD sub-states, COUNT and the frame-limit
// test follow the paper, as does the overlap of the next frame's PG with the
// current DD drawn in its schedule. The bank bookkeeping (a full flag per
// bank, frames decoded in the order generated) is this design's own.
module top_controller #(
  parameter int unsigned FW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [FW-1:0] frame_limit,
  output logic          pg_start,
  output logic          pg_bank,
  input  logic          pg_done,
  output logic          dd_start,
  output logic          dd_bank,
  input  logic          dd_done,
  output logic          run_clear,
  output logic          running,
  output logic [FW-1:0] count
);

  typedef enum logic [1:0] {T_IDLE, T_GO, T_RUN} track_t;
  track_t pg_st, dd_st;

  logic          run_q, start_q;
  logic [FW-1:0] limit_q, gen_cnt;
  logic [1:0]    full;

  wire start_rise = start && !start_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q   <= 1'b0;
      start_q <= 1'b0;
      limit_q <= '0;
      count   <= '0;
      gen_cnt <= '0;
      full    <= '0;
      pg_bank <= 1'b0;
      dd_bank <= 1'b0;
      pg_st   <= T_IDLE;
      dd_st   <= T_IDLE;
    end else begin
      start_q <= start;
      if (!run_q) begin
        if (start_rise) begin
          limit_q <= (frame_limit == '0) ? FW'(1) : frame_limit;
          count   <= '0;
          gen_cnt <= '0;
          full    <= '0;
          pg_bank <= 1'b0;
          dd_bank <= 1'b0;
          run_q   <= 1'b1;
        end
      end else begin
        // PG track: fill the free bank while frames remain to be generated
        case (pg_st)
          T_IDLE: if (gen_cnt != limit_q && !full[pg_bank]) pg_st <= T_GO;
          T_GO: begin
            gen_cnt <= gen_cnt + 1'b1;
            pg_st   <= T_RUN;
          end
          T_RUN: if (pg_done) begin
            full[pg_bank] <= 1'b1;
            pg_bank       <= ~pg_bank;
            pg_st         <= T_IDLE;
          end
          default: pg_st <= T_IDLE;
        endcase
        // DD track: decode the oldest full bank
        case (dd_st)
          T_IDLE: if (full[dd_bank]) dd_st <= T_GO;
          T_GO:   dd_st <= T_RUN;
          T_RUN: if (dd_done) begin
            full[dd_bank] <= 1'b0;
            dd_bank       <= ~dd_bank;
            count         <= count + 1'b1;
            dd_st         <= T_IDLE;
            if (count + 1'b1 == limit_q) run_q <= 1'b0;
          end
          default: dd_st <= T_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    pg_start  = (pg_st == T_GO);
    dd_start  = (dd_st == T_GO);
    run_clear = !run_q && start_rise;
    running   = run_q;
  end

endmodule

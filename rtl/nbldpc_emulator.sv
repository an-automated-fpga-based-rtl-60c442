// nbldpc_emulator: complete hardware emulation system for nonbinary LDPC
// codes over GF(q): channel, decoder and error statistics on one chip.
//
// One run emulates `frame_limit` frames of an all-zero codeword:
//   top_controller   IDLE -> RUN{PG, DD}, COUNT, frame limit; PG of the next
//                    frame overlaps DD of the current one
//   prior_generator  PG: two LLRV channels draw AWGN bit LLRs at the chosen
//                    SNR and write the sorted n_m-entry prior LLRV of every
//                    column into one bank of the double-buffered, dual-port prior_memory
//                    while the decoder reads the other bank
//   nb_decoder       DD: iter_limit iterations of row-by-row EMS (mm = 0) or
//                    min-max (mm = 1) decoding with check_node (4 ECNs),
//                    vn_unit, perm_unit and the code LUTs
//   decision         reads the decided symbols and counts wrong symbols/bits
//   error_collector  FE / SE / BE totals, one record per wrong frame
//   error_memory     the records, readable by the host
//
// Interface: run-time parameters start, frame_limit (F), iter_limit (L),
// snr_idx (Eb/N0 = 0.5 dB * snr_idx) and mm; results fe, se, be, frames and
// the error-memory read port. Status: pg_busy, dec_busy, the decoder's
// iteration dec_iter and dec_partner (a posterior used the partner edge's
// c-v message). `running` is high from the Start edge until the
// last frame is counted. The host link of the paper's board is outside.
//
// Defaults are the paper's main configuration: GF(32), Q = 6, n_m = 8, a
// rate-1/2 (2,4)-regular code of 960 bits (N = 192 symbols, M = 96 rows).
module nbldpc_emulator #(
  parameter int unsigned QQ    = 32,
  parameter int unsigned GFB   = 5,
  parameter int unsigned Q     = 6,
  parameter int unsigned NM    = 8,
  parameter int unsigned N     = 192,
  parameter int unsigned M     = 96,
  parameter int unsigned DC    = 4,
  parameter int unsigned LSCN  = 8,
  parameter int unsigned LSVN  = 8,
  parameter int unsigned EDEPTH = 256
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [15:0]               frame_limit,
  input  logic [7:0]                iter_limit,
  input  logic [3:0]                snr_idx,
  input  logic                      mm,
  output logic                      running,
  output logic [15:0]               count,
  output logic [31:0]               fe,
  output logic [31:0]               se,
  output logic [31:0]               be,
  output logic [31:0]               frames,
  input  logic [$clog2(EDEPTH)-1:0] err_raddr,
  output logic [47:0]               err_rdata,
  output logic [31:0]               err_count,
  // status
  output logic                      pg_busy,
  output logic                      dec_busy,
  output logic [7:0]                dec_iter,
  output logic                      dec_partner
);

  localparam int unsigned CW  = $clog2(N);
  localparam int unsigned BEW = $clog2(GFB + 1);

  logic pg_start, pg_done, dd_start, dd_done, run_clear;
  logic pg_bank, dd_bank;
  logic dec_done;

  top_controller #(.FW(16)) u_ctrl (
    .clk, .rst_n, .start, .frame_limit, .pg_start, .pg_bank, .pg_done, .dd_start, .dd_bank,
    .dd_done, .run_clear, .running, .count
  );

  // prior generation
  logic [1:0]                  pw_en;
  logic [1:0][CW-1:0]          pw_vn;
  logic [1:0][$clog2(NM)-1:0]  pw_idx;
  logic [1:0][Q+GFB-1:0]       pw_entry;

  prior_generator #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM), .N(N)) u_pg (
    .clk, .rst_n, .start(pg_start), .snr_idx, .wr_en(pw_en), .wr_vn(pw_vn), .wr_idx(pw_idx),
    .wr_entry(pw_entry), .busy(pg_busy), .done(pg_done)
  );

  logic [CW-1:0]            prior_addr;
  logic [NM-1:0][Q+GFB-1:0] prior_list;

  prior_memory #(.GFB(GFB), .Q(Q), .NM(NM), .N(N)) u_prior (
    .clk, .wr_bank(pg_bank),
    .wa_en(pw_en[0]), .wa_vn(pw_vn[0]), .wa_idx(pw_idx[0]), .wa_entry(pw_entry[0]),
    .wb_en(pw_en[1]), .wb_vn(pw_vn[1]), .wb_idx(pw_idx[1]), .wb_entry(pw_entry[1]),
    .rd_bank(dd_bank), .rd_addr(prior_addr), .rd_list(prior_list)
  );

  // decoder
  logic [CW-1:0]  post_addr;
  logic [GFB-1:0] post_sym;

  nb_decoder #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM), .N(N), .M(M), .DC(DC),
               .LSCN(LSCN), .LSVN(LSVN)) u_dec (
    .clk, .rst_n, .start(dd_start), .iter_limit, .mm, .prior_addr, .prior_list,
    .post_addr, .post_sym, .busy(dec_busy), .done(dec_done), .iter(dec_iter),
    .post_from_partner(dec_partner)
  );

  // decision and error statistics
  logic           sym_valid, sym_err;
  logic [BEW-1:0] bit_errs;
  logic           log_we;
  logic [47:0]    log_data;

  decision #(.N(N), .GFB(GFB)) u_dec_out (
    .clk, .rst_n, .start(dec_done), .post_addr, .post_sym, .sym_valid, .sym_err, .bit_errs,
    .done(dd_done)
  );

  error_collector #(.CW(32), .BEW(BEW)) u_err (
    .clk, .rst_n, .clear(run_clear), .sym_valid, .sym_err, .bit_errs, .frame_end(dd_done),
    .fe, .se, .be, .frames, .log_we, .log_data
  );

  error_memory #(.DEPTH(EDEPTH), .WW(48)) u_errmem (
    .clk, .rst_n, .clear(run_clear), .we(log_we), .wdata(log_data), .raddr(err_raddr),
    .rdata(err_rdata), .count(err_count)
  );

endmodule

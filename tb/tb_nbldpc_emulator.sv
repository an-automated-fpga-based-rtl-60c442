// tb_nbldpc_emulator: end-to-end run of the emulator at its default size
// (GF(32), n_m = 8, Q = 6, 960-bit rate-1/2 (2,4)-regular code).
//   run 1: 2 frames, 10 EMS iterations at 7.5 dB: no errors expected, the
//          prior generation must take T_overhead + (N/2)(q + n_m) cycles;
//   run 2: 2 frames, 3 min-max iterations at 0 dB: every frame in error;
//          the error-memory records must add up to SE and BE;
//   Start is held high after each run: no new run may begin.
// It counts how often each mechanism happened (PG, DD, iteration limit
// reached, both prior-memory ports writing together, forward/backward and
// merge ECN steps, repeated symbols skipped by an ECN, posterior formed with
// the partner's c-v, EMS frames, min-max frames, frames logged with errors,
// prior generation running while the decoder works, a frame decoded from the
// second prior-memory bank) and fails on any that never did.
module tb_nbldpc_emulator;
  logic clk = 0, rst_n = 0, start = 0, mm = 0;
  logic [15:0] frame_limit, count;
  logic [7:0] iter_limit, dec_iter;
  logic [3:0] snr_idx;
  logic running, pg_busy, dec_busy, dec_partner;
  logic [31:0] fe, se, be, frames, err_count;
  logic [7:0] err_raddr;
  logic [47:0] err_rdata;
  int checks = 0, failures = 0;
  longint cyc = 0;
  int pg_runs = 0, dd_runs = 0, iter_limit_hits = 0, dual_port = 0, fb_steps = 0;
  int merge_steps = 0, dup_skips = 0, partner_posts = 0, ems_frames = 0, mm_frames = 0;
  int overlap_cycles = 0, bank1_frames = 0;
  longint pg_t0;
  int pg_len;

  nbldpc_emulator dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc++;
    if (dut.pg_start) pg_t0 = cyc;
    if (rst_n && dut.pg_done) begin
      pg_runs++;
      pg_len = int'(cyc - pg_t0);
    end
    if (rst_n && dut.dd_done) begin
      dd_runs++;
      if (mm) mm_frames++;
      else ems_frames++;
    end
    if (dut.dec_done && dec_iter == iter_limit - 1) iter_limit_hits++;
    if (dut.pw_en == 2'b11) dual_port++;
    if (dut.u_dec.u_cn.e_start[0]) fb_steps++;
    if (dut.u_dec.u_cn.e_start[2]) merge_steps++;
    if (dut.u_dec.u_cn.g_ecn[0].u_ecn.state == dut.u_dec.u_cn.g_ecn[0].u_ecn.S_EXTRACT &&
        dut.u_dec.u_cn.g_ecn[0].u_ecn.any_valid &&
        dut.u_dec.u_cn.g_ecn[0].u_ecn.seen[dut.u_dec.u_cn.g_ecn[0].u_ecn.head_sym]) dup_skips++;
    if (dec_partner) partner_posts++;
    if (pg_busy && dec_busy) overlap_cycles++;
    if (dut.dd_start && dut.dd_bank) bank1_frames++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nf, input int L, input int snr, input bit alg);
    frame_limit = 16'(nf);
    iter_limit = 8'(L);
    snr_idx = 4'(snr);
    mm = alg;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    checks++;
    if (!running) failures++;
    while (running) @(negedge clk);
    checks++;
    if (int'(count) != nf || int'(frames) != nf) failures++;
    repeat (20) @(negedge clk);
    checks++;
    if (running) failures++;       // Start still high: no restart
    start = 0;
    @(negedge clk);
  endtask

  initial begin
    longint tsum_se, tsum_be;
    err_raddr = '0;
    frame_limit = '0; iter_limit = '0; snr_idx = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    run(2, 10, 15, 0);
    $display("run 1: frames %0d fe %0d se %0d be %0d, PG took %0d cycles", frames, fe, se, be, pg_len);
    checks++;
    if (fe != 0 || se != 0 || be != 0 || err_count != 0) failures++;
    checks++;
    if (pg_len != 2 + (192 / 2) * (32 + 8) + 1) failures++;

    run(2, 3, 0, 1);
    $display("run 2: frames %0d fe %0d se %0d be %0d, logged %0d", frames, fe, se, be, err_count);
    checks++;
    if (fe != 2 || err_count != 2) failures++;
    checks++;
    if (be < se || be > 5 * se) failures++;
    tsum_se = 0;
    tsum_be = 0;
    for (int i = 0; i < 2; i++) begin
      err_raddr = 8'(i);
      @(negedge clk);
      @(negedge clk);
      checks++;
      if (err_rdata[47:32] != 16'(i)) failures++;
      tsum_se += 64'(err_rdata[31:16]);
      tsum_be += 64'(err_rdata[15:0]);
    end
    checks++;
    if (tsum_se != 64'(se) || tsum_be != 64'(be)) failures++;

    $display("mechanisms: PG %0d, DD %0d, iteration limit %0d, dual-port writes %0d, F/B steps %0d, merges %0d, ECN repeats skipped %0d, partner posteriors %0d, EMS frames %0d, min-max frames %0d, logged frames %0d",
             pg_runs, dd_runs, iter_limit_hits, dual_port, fb_steps, merge_steps, dup_skips,
             partner_posts, ems_frames, mm_frames, err_count);
    checks++; if (pg_runs == 0) failures++;
    checks++; if (dd_runs == 0) failures++;
    checks++; if (iter_limit_hits == 0) failures++;
    checks++; if (dual_port == 0) failures++;
    checks++; if (fb_steps == 0) failures++;
    checks++; if (merge_steps == 0) failures++;
    checks++; if (dup_skips == 0) failures++;
    checks++; if (partner_posts == 0) failures++;
    checks++; if (ems_frames == 0) failures++;
    checks++; if (mm_frames == 0) failures++;
    checks++; if (err_count == 0) failures++;
    $display("PG/DD overlap cycles %0d, frames decoded from bank 1 %0d", overlap_cycles, bank1_frames);
    checks++; if (overlap_cycles == 0) failures++;
    checks++; if (bank1_frames == 0) failures++;
    $display("total cycles %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_top_controller: models the prior generator and decoder with random
// delays and a model of the two prior-memory banks. Checks: nothing happens
// before a Start edge; exactly frame_limit PG and DD runs per Start; PG only
// writes a bank that holds no undecoded frame; DD decodes the banks in the
// order they were filled and only once filled; at most one PG and one DD at a
// time; PG of the next frame overlaps DD of the current one at least once;
// COUNT increments at every DD end; the controller returns to IDLE, holding
// Start high does not restart it, and a new 0->1 edge starts a new run with
// COUNT cleared.
module tb_top_controller;
  localparam int FW = 16;
  logic clk = 0, rst_n = 0, start = 0, pg_done = 0, dd_done = 0;
  logic [FW-1:0] frame_limit, count;
  logic pg_start, dd_start, run_clear, running, pg_bank, dd_bank;
  int checks = 0, failures = 0;
  int npg = 0, ndd = 0, nclr = 0, overlap = 0;
  bit in_pg = 0, in_dd = 0;
  bit pg_b = 0, dd_b = 0;
  bit bank_full [2];
  bit fill_q [$];               // banks in the order they were filled

  top_controller #(.FW(FW)) dut (.*);
  always #5 clk = ~clk;

  // block models and bank bookkeeping
  always @(posedge clk) if (rst_n) begin
    if (pg_start) begin
      npg++;
      checks++;
      if (in_pg || bank_full[pg_bank]) failures++;
      in_pg = 1;
      pg_b  = pg_bank;
    end
    if (dd_start) begin
      ndd++;
      checks++;
      if (in_dd || fill_q.size() == 0 || !bank_full[dd_bank] || fill_q[0] != dd_bank) failures++;
      in_dd = 1;
      dd_b  = dd_bank;
    end
    if (in_pg && in_dd) overlap++;
    if (run_clear) nclr++;
  end

  initial begin
    forever begin
      @(negedge clk);
      if (pg_done) begin
        bank_full[pg_b] = 1;
        fill_q.push_back(pg_b);
      end
      if (dd_done) begin
        bank_full[dd_b] = 0;
        void'(fill_q.pop_front());
      end
      pg_done = 0;
      dd_done = 0;
      if (in_pg && $urandom_range(0, 4) == 0) begin pg_done = 1; in_pg = 0; end
      if (in_dd && $urandom_range(0, 6) == 0) begin dd_done = 1; in_dd = 0; end
      // the bank must not change while its block runs
      if (in_pg && pg_bank != pg_b) failures++;
      if (in_dd && dd_bank != dd_b) failures++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int limit);
    int pg0, dd0, last_count, frames;
    frames = (limit == 0) ? 1 : limit;
    pg0 = npg; dd0 = ndd;
    frame_limit = FW'(limit);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    checks++;
    if (!running || count != 0) failures++;
    last_count = 0;
    while (running) begin
      @(negedge clk);
      if (int'(count) != last_count) begin
        checks++;
        if (int'(count) != last_count + 1 || ndd - dd0 != int'(count)) failures++;
        last_count = int'(count);
      end
    end
    checks++;
    if (npg - pg0 != frames || ndd - dd0 != frames || int'(count) != frames) failures++;
    @(negedge clk);
    #1;                          // let the bank bookkeeping see the last DD end
    checks++;
    if (fill_q.size() != 0 || in_pg || in_dd) failures++;
    // Start still high: must stay idle
    repeat (30) @(negedge clk);
    checks++;
    if (running || npg - pg0 != frames) failures++;
    start = 0;
    @(negedge clk);
  endtask

  initial begin
    frame_limit = '0;
    bank_full[0] = 0;
    bank_full[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    checks++;
    if (running || npg != 0) failures++;
    run(5);
    run(1);
    run(12);
    run(0);                      // frame limit 0 runs one frame
    checks++;
    if (nclr != 4 || npg != 19) failures++;
    checks++;
    if (overlap == 0) failures++;
    $display("PG/DD overlap cycles %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

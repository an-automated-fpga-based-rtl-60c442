// tb_llrv_channel: runs one channel over 6 variable nodes at two SNRs. For
// every node the bit LLRs drawn by the generators are captured, the costs of
// all 32 symbols are summed here, sorted and normalised, and the n_m written
// entries must carry exactly those costs, each with a symbol whose cost it is.
// Timing: writes of node v start at 2 + v*(q+n_m) + q cycles after start and
// are n_m consecutive cycles; done follows the last write.
module tb_llrv_channel;
  localparam int QQ = 32, GFB = 5, Q = 6, NM = 8, VW = 8, NV = 6;
  logic clk = 0, rst_n = 0, start = 0;
  logic [VW-1:0] n_vn;
  logic [3:0] snr_idx;
  logic wr_en, busy, done;
  logic [VW-1:0] wr_vn;
  logic [2:0] wr_idx;
  logic [Q+GFB-1:0] wr_entry;
  int checks = 0, failures = 0;
  int llr[GFB];
  int cyc, t0;

  llrv_channel #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM), .VW(VW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sym_cost(int a);
    int s;
    s = 1000;   // offset keeps every cost positive for the queue sort
    for (int b = 0; b < GFB; b++) if ((a >> b) & 1) s += llr[b];
    return s;
  endfunction

  task automatic run(input int snr);
    snr_idx = 4'(snr);
    n_vn = VW'(NV);
    @(negedge clk);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    for (int v = 0; v < NV; v++) begin
      int costs[$], ref_sorted[$], minc;
      costs.delete();
      // samples of this node are stable once the feed has begun
      while (!(dut.state == dut.S_FEED)) @(negedge clk);
      llr[0] = int'(dut.g_awgn[0].u_awgn.llr);
      llr[1] = int'(dut.g_awgn[1].u_awgn.llr);
      llr[2] = int'(dut.g_awgn[2].u_awgn.llr);
      llr[3] = int'(dut.g_awgn[3].u_awgn.llr);
      llr[4] = int'(dut.g_awgn[4].u_awgn.llr);
      for (int a = 0; a < QQ; a++) costs.push_back(sym_cost(a));
      ref_sorted = costs;
      ref_sorted.sort();
      minc = ref_sorted[0];
      while (!wr_en) @(negedge clk);
      checks++;
      if (cyc - t0 != 2 + v * (QQ + NM) + QQ) begin
        failures++;
        $display("node %0d writes at %0d", v, cyc - t0);
      end
      for (int k = 0; k < NM; k++) begin
        int expc, gotc, gots;
        expc = ref_sorted[k] - minc;
        if (expc > (1 << Q) - 1) expc = (1 << Q) - 1;
        gotc = int'(wr_entry[Q+GFB-1:GFB]);
        gots = int'(wr_entry[GFB-1:0]);
        checks++;
        if (!wr_en || wr_idx != 3'(k) || wr_vn != VW'(v) || gotc != expc) begin
          failures++;
          if (failures < 6) $display("node %0d entry %0d: got %0d exp %0d (en %0d idx %0d vn %0d)", v, k, gotc, expc, wr_en, wr_idx, wr_vn);
        end
        checks++;
        if (((costs[gots] - minc > (1 << Q) - 1) ? (1 << Q) - 1 : costs[gots] - minc) != gotc) failures++;
        @(negedge clk);
      end
    end
    checks++;
    if (!done) failures++;
  endtask

  initial begin
    cyc = 0;
    snr_idx = '0;
    n_vn = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(4);
    run(12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

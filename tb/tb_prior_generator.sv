// tb_prior_generator: N = 16 nodes. Every (node, entry) of the prior memory
// must be written exactly once, port 0 only for even and port 1 only for odd
// nodes, every node's LLRV must start at cost 0 with non-decreasing costs and
// distinct symbols, and `done` must come T_overhead + (N/2)(q + n_m) cycles
// after start with T_overhead = 2 (+1 for the done register).
module tb_prior_generator;
  localparam int QQ = 32, GFB = 5, Q = 6, NM = 8, N = 16, EW = Q + GFB;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] snr_idx;
  logic [1:0] wr_en;
  logic [1:0][$clog2(N)-1:0] wr_vn;
  logic [1:0][$clog2(NM)-1:0] wr_idx;
  logic [1:0][EW-1:0] wr_entry;
  logic busy, done;
  int checks = 0, failures = 0;
  int wcount[N][NM];
  int cost[N][NM], sym[N][NM];
  int cyc = 0, t0, tdone;

  prior_generator #(.QQ(QQ), .GFB(GFB), .Q(Q), .NM(NM), .N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < 2; c++)
      if (rst_n && wr_en[c]) begin
        wcount[wr_vn[c]][wr_idx[c]]++;
        cost[wr_vn[c]][wr_idx[c]] = int'(wr_entry[c][EW-1:GFB]);
        sym[wr_vn[c]][wr_idx[c]]  = int'(wr_entry[c][GFB-1:0]);
        if (int'(wr_vn[c]) % 2 != c) failures++;
      end
  end

  initial begin
    foreach (wcount[v, k]) wcount[v][k] = 0;
    snr_idx = 4'd6;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    t0 = cyc;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    tdone = cyc - t0;
    checks++;
    if (tdone != 2 + (N / 2) * (QQ + NM) + 1) begin
      failures++;
      $display("done after %0d cycles", tdone);
    end
    for (int v = 0; v < N; v++) begin
      for (int k = 0; k < NM; k++) begin
        checks++;
        if (wcount[v][k] != 1) failures++;
        if (k > 0) begin
          checks++;
          if (cost[v][k] < cost[v][k-1]) failures++;
          for (int j = 0; j < k; j++) if (sym[v][j] == sym[v][k]) failures++;
        end
      end
      checks++;
      if (cost[v][0] != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_ecn: random sorted LLRVs through the elementary check node in EMS and
// min-max mode. Each result must equal the reference model of
// ldpc_tb_model.svh entry by entry, every output symbol's cost must be the
// true minimum over all symbol pairs (exactness for L_S-CN = n_m), and done
// must come exactly 2 + L_S-CN + (candidates taken) cycles after start, i.e.
// 2 + L_S-CN + n_m when no symbol repeats.
module tb_ecn;
  localparam int GFB = 5, Q = 6, NM = 8, LSCN = 8, LSVN = 8;
  `include "ldpc_tb_model.svh"
  logic clk = 0, rst_n = 0, start = 0, mm = 0;
  logic [NM-1:0][Q+GFB-1:0] a_list, b_list, c_list;
  logic busy, done;
  int checks = 0, failures = 0, nodup = 0;

  ecn #(.GFB(GFB), .Q(Q), .NM(NM), .LSCN(LSCN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      llrv_m a, b, r;
      int pops, lat, truemin[int];
      bit exh;
      truemin.delete();
      a = rand_llrv((t % 3 == 0) ? 20 : 6);
      b = rand_llrv((t % 4 == 0) ? 1 : 6);
      mm = (t % 2);
      r = ecn_model(a, b, mm, pops, exh);
      for (int i = 0; i < NM; i++)
        for (int j = 0; j < NM; j++) begin
          int s, c;
          s = a.s[i] ^ b.s[j];
          c = mm ? ((a.c[i] > b.c[j]) ? a.c[i] : b.c[j]) : a.c[i] + b.c[j];
          if (c > cmax_m()) c = cmax_m();
          if (!truemin.exists(s) || c < truemin[s]) truemin[s] = c;
        end
      @(negedge clk);
      a_list = pack_llrv(a);
      b_list = pack_llrv(b);
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (llrv_diff(c_list, r) != 0) begin
        failures++;
        if (failures < 5) $display("t=%0d mismatch", t);
      end
      for (int i = 0; i < NM; i++) begin
        checks++;
        if (!truemin.exists(int'(c_list[i][GFB-1:0])) ||
            truemin[int'(c_list[i][GFB-1:0])] != int'(c_list[i][Q+GFB-1:GFB])) failures++;
      end
      checks++;
      if (lat != 2 + LSCN + pops + (exh ? 1 : 0)) begin
        failures++;
        $display("t=%0d latency %0d expected %0d", t, lat, 2 + LSCN + pops);
      end
      if (pops == NM) begin
        nodup++;
        checks++;
        if (lat != 2 + LSCN + NM) failures++;
      end
    end
    $display("cases without repeated symbols: %0d", nodup);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_check_node: random d_c = 4 sets of v-c LLRVs; the c-v LLRVs must equal a
// software forward-backward recursion (forward, backward, merge) built on the
// ECN reference model, in EMS and in min-max mode. Also checks, with
// d_c = 4, that done comes after two ECN steps: the merges overlap the second
// forward/backward step.
module tb_check_node;
  localparam int GFB = 5, Q = 6, NM = 8, LSCN = 8, LSVN = 8, DC = 4;
  `include "ldpc_tb_model.svh"
  logic clk = 0, rst_n = 0, in_we = 0, start = 0, mm = 0;
  logic [$clog2(DC)-1:0] in_k;
  logic [NM-1:0][Q+GFB-1:0] in_list;
  logic [DC-1:0][NM-1:0][Q+GFB-1:0] out_list;
  logic busy, done;
  int checks = 0, failures = 0;

  check_node #(.GFB(GFB), .Q(Q), .NM(NM), .DC(DC), .LSCN(LSCN)) dut (.*);
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
    for (int t = 0; t < 150; t++) begin
      llrv_m u[DC], f[DC], b[DC], v[DC];
      int pops, lat;
      bit exh;
      mm = t % 2;
      for (int k = 0; k < DC; k++) u[k] = rand_llrv(6);
      f[0] = u[0];
      b[DC-1] = u[DC-1];
      for (int s = 1; s <= DC - 2; s++) f[s] = ecn_model(f[s-1], u[s], mm, pops, exh);
      for (int s = DC - 2; s >= 1; s--) b[s] = ecn_model(b[s+1], u[s], mm, pops, exh);
      v[0] = b[1];
      v[DC-1] = f[DC-2];
      for (int k = 1; k <= DC - 2; k++) v[k] = ecn_model(f[k-1], b[k+1], mm, pops, exh);
      for (int k = 0; k < DC; k++) begin
        @(negedge clk);
        in_we = 1; in_k = 2'(k); in_list = pack_llrv(u[k]);
      end
      @(negedge clk);
      in_we = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      lat = 1;
      while (!done) begin
        @(negedge clk);
        lat++;
      end
      for (int k = 0; k < DC; k++) begin
        checks++;
        if (llrv_diff(out_list[k], v[k]) != 0) begin
          failures++;
          if (failures < 5) $display("t=%0d edge %0d mismatch", t, k);
        end
      end
      // at least two ECN steps of 2 + L + n_m cycles (merges overlap the
      // second forward/backward step), at most with every
      // candidate taken
      checks++;
      if (lat < 2 * (2 + LSCN + NM) || lat > 2 * (3 + LSCN + NM * NM) + 10) failures++;
      if (t == 0) $display("check node latency %0d cycles", lat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
